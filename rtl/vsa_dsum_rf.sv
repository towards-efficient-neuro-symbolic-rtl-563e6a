// vsa_dsum_rf: distance accumulation registers of one tile.
//
// D signed registers of C bits. A hypervector longer than the datapath is
// processed fold by fold, and each POPCNT result is only a partial
// similarity; the DSUM register of the item being compared adds these
// partial values up: d = sum over folds k of sim_k. Several registers let
// the distances of several items be accumulated in turn.
// Operations (one per cycle, result visible the next cycle):
//   CLR    reg[idx] <= 0           SET  reg[idx] <= sim
//   ACC    reg[idx] <= sat(reg[idx] + sim)      CLRALL  all <= 0
// The sum saturates at the C-bit signed limits; ovf pulses for a cycle when
// a saturation happened. Two asynchronous read ports serve ARGMAX and the
// scalar datapath.
// D and C follow the published configuration; saturation and the operation
// set are this design's choices.
module vsa_dsum_rf
  import vsa_pkg::*;
#(
  parameter int unsigned D  = D_DEF,
  parameter int unsigned C  = C_DEF,
  parameter int unsigned SW = 11,         // width of the incoming similarity
  localparam int unsigned IW = (D > 1) ? $clog2(D) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  t3_e                  op,
  input  logic [IW-1:0]        idx,
  input  logic signed [SW-1:0] sim,
  input  logic [IW-1:0]        ridx_a,
  output logic signed [C-1:0]  rdata_a,
  input  logic [IW-1:0]        ridx_b,
  output logic signed [C-1:0]  rdata_b,
  output logic                 ovf
);
  localparam logic signed [C:0] MAXV = (C+1)'((1 << (C-1)) - 1);
  localparam logic signed [C:0] MINV = -(C+1)'(1 << (C-1));

  logic signed [C-1:0] rf [D];

  function automatic logic signed [C-1:0] sat(input logic signed [C:0] v, output logic o);
    o = 1'b0;
    if (v > MAXV)      begin o = 1'b1; return MAXV[C-1:0]; end
    else if (v < MINV) begin o = 1'b1; return MINV[C-1:0]; end
    return v[C-1:0];
  endfunction

  logic signed [C-1:0] acc_v, set_v;
  logic                acc_o, set_o;

  always_comb begin
    acc_v = sat((C+1)'(rf[idx]) + (C+1)'(sim), acc_o);
    set_v = sat((C+1)'(sim), set_o);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) rf[i] <= '0;
      ovf <= 1'b0;
    end else begin
      ovf <= 1'b0;
      if (en) begin
        unique case (op)
          T3_CLR:    rf[idx] <= '0;
          T3_SET:    begin rf[idx] <= set_v; ovf <= set_o; end
          T3_ACC:    begin rf[idx] <= acc_v; ovf <= acc_o; end
          T3_CLRALL: for (int i = 0; i < D; i++) rf[i] <= '0;
          default:   ;
        endcase
      end
    end
  end

  assign rdata_a = rf[ridx_a];
  assign rdata_b = rf[ridx_b];
endmodule
