// tb_rgb2gray -- self-checking test of the RGB to grey converter.
// Drives corner colours and random pixels, with idle cycles in between, and compares
// each output (one clock later) with the BT.601 reference, and the framing flags.
module tb_rgb2gray;
  import vision_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_sof = 0, in_eol = 0;
  logic [23:0] in_rgb = '0;
  logic out_valid, out_sof, out_eol;
  logic [7:0] out_gray;
  int checks = 0, failures = 0;

  rgb2gray dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int rgb, bit sof, bit eol);
    in_valid = 1; in_rgb = 24'(rgb); in_sof = sof; in_eol = eol;
    @(posedge clk); #1;
    in_valid = 0; in_sof = 0; in_eol = 0;
    checks++;
    if (!out_valid || out_sof != sof || out_eol != eol || out_gray != 8'(ref_gray(rgb))) begin
      failures++;
      $display("FAIL rgb=%06h got %0d (v=%0b) want %0d", rgb, out_gray, out_valid, ref_gray(rgb));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    send(24'hFFFFFF, 1, 0);
    send(24'h000000, 0, 0);
    send(24'hFF0000, 0, 0);
    send(24'h00FF00, 0, 0);
    send(24'h0000FF, 0, 1);
    for (int i = 0; i < 2000; i++) begin
      send(int'($urandom & 24'hFFFFFF), ($urandom % 50) == 0, ($urandom % 50) == 0);
      if ($urandom % 4 == 0) begin
        @(posedge clk); #1;
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid on idle cycle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
