// vsa_mult: binary-to-integer conversion with scalar multiplication.
//
// Turns each bit of a binary fold into a bipolar value (0 -> +1, 1 -> -1)
// and multiplies it by a signed scalar weight, giving an H-bit signed
// integer per element: out[i] = (bit[i] ? -w : +w) with
// w = sat(weight >>> shift). The shift scales a large weight (such as an
// accumulated distance from the scalar datapath) into the H-bit range; w is
// clamped to +/-(2^(H-1)-1). Purely combinational.
// The conversion and scalar multiplication follow the published design; the
// shift-and-clamp scaling is this design's choice.
module vsa_mult #(
  parameter int unsigned W = vsa_pkg::W_DEF,
  parameter int unsigned H = vsa_pkg::H_DEF,
  parameter int unsigned C = vsa_pkg::C_DEF
) (
  input  logic [W-1:0]             bits,
  input  logic signed [C-1:0]      weight,
  input  logic [2:0]               shift,
  output logic signed [W-1:0][H-1:0] out
);
  localparam logic signed [C-1:0] LIM = C'((1 << (H-1)) - 1);

  logic signed [C-1:0] ws;
  logic signed [H-1:0] wq;

  always_comb begin
    ws = weight >>> shift;
    if (ws > LIM)       wq = H'(LIM);
    else if (ws < -LIM) wq = H'(-LIM);
    else                wq = H'(ws);
    for (int i = 0; i < W; i++) out[i] = bits[i] ? -wq : wq;
  end
endmodule
