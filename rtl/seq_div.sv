// seq_div -- unsigned restoring divider, one quotient bit per clock.
//
// Computes q = floor(dividend / divisor) for a quotient known to fit in QW bits (here:
// a centroid coordinate, which is always smaller than the frame size). `start` loads the
// operands; `done` pulses QW clocks later with the quotient on `q`, which holds until the
// next start. A zero divisor gives an all-ones quotient. Used by the labelling stage to
// turn a component's coordinate sums into its centroid.
module seq_div #(
  parameter int unsigned NW = 36,   // dividend width
  parameter int unsigned DW = 24,   // divisor width
  parameter int unsigned QW = 12    // quotient width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] q
);
  localparam int unsigned RW = (NW > DW + QW) ? NW : DW + QW;
  localparam int unsigned CW = $clog2(QW + 1);

  logic [RW-1:0] rem;
  logic [DW-1:0] dv;
  logic [CW-1:0] bit_i;   // index of the quotient bit decided in this cycle, plus one
  logic [RW-1:0] trial;

  always_comb trial = RW'(dv) << (bit_i - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem   <= '0;
      dv    <= '0;
      bit_i <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      q     <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem   <= RW'(dividend);
        dv    <= divisor;
        bit_i <= CW'(QW);
        busy  <= 1'b1;
        q     <= '0;
      end else if (busy) begin
        if (rem >= trial) begin
          rem <= rem - trial;
          q[bit_i - 1'b1] <= 1'b1;
        end
        bit_i <= bit_i - 1'b1;
        if (bit_i == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
