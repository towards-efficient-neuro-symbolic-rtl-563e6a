// vsa_argmax: nearest-neighbour search over accumulated distances.
//
// Each UPD step receives one accumulated similarity from every tile (the
// DSUM register chosen by the instruction) and keeps the largest value seen
// since the last CLR together with its index. The index is {tag, tile}: the
// tag (from the instruction) names which group of items the DSUM registers
// held, the tile number says where the item lives. This computes
// e(y) = argmax_i d(y_i, q) over all items compared since CLR.
// Ties keep the earlier candidate: within one step the lowest tile wins, and
// a later step must be strictly larger to replace the held maximum.
// Tiles whose act bit is low are ignored. START is CLR followed by UPD.
// Result registers update one cycle after the operation.
// The function is the published one; the tag/tile index and the tie rule
// are this design's choices.
module vsa_argmax
  import vsa_pkg::*;
#(
  parameter int unsigned K    = K_DEF,
  parameter int unsigned C    = C_DEF,
  parameter int unsigned TAGW = 5,
  localparam int unsigned TW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned IXW = TAGW + TW
) (
  input  logic                clk,
  input  logic                rst_n,
  input  t6_e                 op,
  input  logic [K-1:0]        act,
  input  logic [TAGW-1:0]     tag,
  input  logic signed [C-1:0] vals [K],
  output logic signed [C-1:0] best_val,
  output logic [IXW-1:0]      best_idx,
  output logic                valid
);
  logic                step_any;
  logic signed [C-1:0] step_val;
  logic [TW-1:0]       step_tile;
  logic                clr, upd, take;

  always_comb begin
    step_any  = 1'b0;
    step_val  = '0;
    step_tile = '0;
    for (int t = 0; t < K; t++) begin
      if (act[t] && (!step_any || vals[t] > step_val)) begin
        step_any  = 1'b1;
        step_val  = vals[t];
        step_tile = TW'(t);
      end
    end
    clr  = (op == T6_CLR) || (op == T6_START);
    upd  = (op == T6_UPD) || (op == T6_START);
    take = upd && step_any && (clr || !valid || step_val > best_val);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid    <= 1'b0;
      best_val <= '0;
      best_idx <= '0;
    end else begin
      if (clr) valid <= 1'b0;
      if (take) begin
        valid    <= 1'b1;
        best_val <= step_val;
        best_idx <= {tag, step_tile};
      end
    end
  end
endmodule
