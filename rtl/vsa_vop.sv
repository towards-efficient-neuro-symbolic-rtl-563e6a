// vsa_vop: vector-symbolic operations (VOP) subsystem.
//
// The chain input Buffer -> BIND -> MULT -> BND (with BND RF) -> SGN ->
// output Buffer builds bound and bundled representations:
//   * BIND works on binary folds taken from the input buffer (XOR binding,
//     cyclic permutation),
//   * MULT turns the BIND result into integers times a scalar weight,
//   * BND adds such integer folds element-wise, parking partial sums in
//     BND RF,
//   * SGN turns the integer fold back to binary into the output buffer,
//     which feeds the vector-symbolic datapath (memory write).
// This computes a(y) (optionally bound, permuted and summed vectors) and the
// weighted sum c(y) = sum_i n_i * y_i of the resonator kernel.
// Timing for one instruction word: buf_ld in cycle t (stage 3) latches the
// datapath into the input buffer; op4 in t+1 (stage 4) updates BIND; op5 in
// t+2 (stage 5) updates BND / BND RF / output buffer. Every register
// resets to zero.
// The unit list and order follow the published VOP diagram; operation codes
// and timing are this design's choices.
module vsa_vop
  import vsa_pkg::*;
#(
  parameter int unsigned W  = W_DEF,
  parameter int unsigned H  = H_DEF,
  parameter int unsigned C  = C_DEF,
  parameter int unsigned B  = B_DEF,
  localparam int unsigned BW = (B > 1) ? $clog2(B) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // stage 3: input buffer
  input  logic                buf_ld,
  input  logic [W-1:0]        bus_in,
  // stage 4: BIND
  input  t4_e                 op4,
  // stage 5: MULT / BND / BND RF / SGN
  input  t5_e                 op5,
  input  logic signed [C-1:0] weight,
  input  logic [2:0]          wshift,
  input  logic [BW-1:0]       bnd_idx,
  // results
  output logic [W-1:0]        bind_acc,
  output logic [W-1:0]        obuf,
  output logic                ovf
);
  logic [W-1:0] ibuf;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ibuf <= '0;
    else if (buf_ld) ibuf <= bus_in;
  end

  vsa_bind #(.W(W)) u_bind (.clk, .rst_n, .op(op4), .buf_in(ibuf), .acc(bind_acc));

  logic signed [W-1:0][H-1:0] m, bnd, rf_rdata, rf_wdata;
  logic                       rf_we;

  vsa_mult #(.W(W), .H(H), .C(C)) u_mult (.bits(bind_acc), .weight, .shift(wshift), .out(m));

  vsa_bnd_rf #(.W(W), .H(H), .B(B)) u_bndrf (
    .clk, .rst_n, .we(rf_we), .idx(bnd_idx), .wdata(rf_wdata), .rdata(rf_rdata)
  );

  vsa_bnd #(.W(W), .H(H)) u_bnd (
    .clk, .rst_n, .op(op5), .m, .rf_rdata, .bnd, .rf_we, .rf_wdata, .ovf
  );

  vsa_sgn #(.W(W), .H(H)) u_sgn (
    .clk, .rst_n, .ld(op5 == T5_SGN), .in(bnd), .bits(obuf)
  );
endmodule
