// vsa_sgn: SGN unit with the VOP output buffer.
//
// Converts an integer fold back to a binary fold and holds it. Each H-bit
// signed element becomes one bit: 1 (bipolar -1) when negative, 0 (bipolar
// +1) otherwise, so a zero sum maps to 0. This is the majority rule that ends
// a bundling. On a clock edge with ld high the converted fold is stored in
// the output buffer `bits`, which drives the memory-write path; otherwise the
// buffer holds its value. Reset clears it.
// Interface: in (W elements of H bits), ld, bits (W bits, registered).
// Timing: `bits` shows the sign of `in` from the cycle after ld.
// Conversion by sign and the output buffer after SGN follow the published
// design; the tie rule and the single-entry buffer are this design's choices.
module vsa_sgn #(
  parameter int unsigned W = vsa_pkg::W_DEF,
  parameter int unsigned H = vsa_pkg::H_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       ld,
  input  logic signed [W-1:0][H-1:0] in,
  output logic [W-1:0]               bits
);
  logic [W-1:0] sgn;
  always_comb begin
    for (int i = 0; i < W; i++) sgn[i] = in[i][H-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  bits <= '0;
    else if (ld) bits <= sgn;
  end
endmodule
