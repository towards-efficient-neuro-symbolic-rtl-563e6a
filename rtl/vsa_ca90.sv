// vsa_ca90: cellular automaton rule 90 fold generator.
//
// Rule 90 sets every cell to the XOR of its two neighbours. Applied to a
// random seed fold it yields a further quasi-random fold, so only seed folds
// need to be stored and the remaining folds of a long hypervector are
// regenerated on the fly. The ring is cyclic: cell 0 and cell W-1 are
// neighbours.
//
// The output register CA holds the fold seen by POPCNT and by the
// vector-symbolic datapath. Each cycle op selects its next value:
//   HOLD   keep CA          PASS   CA <= REG (SRAM word, no CA step)
//   GEN    CA <= ca90(REG)  STEP   CA <= ca90(CA)
//   RF     CA <= rf_rdata   RFSTEP CA <= ca90(rf_rdata)
// rf_we/rf_wdata write the new CA value into the CA-90 RF when wr is set.
// Timing: one CA-90 step per cycle, result in CA one cycle after op.
// CA-90 and its XOR/shift realisation follow the published design; the
// source selection and the cyclic boundary are this design's choices.
module vsa_ca90
  import vsa_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,        // tile enabled and op valid
  input  t2_e          op,
  input  logic         wr,        // also write the result to the CA-90 RF
  input  logic [W-1:0] reg_data,  // SRAM output register
  input  logic [W-1:0] rf_rdata,  // CA-90 RF read data
  output logic [W-1:0] ca,        // CA output register
  output logic         rf_we,
  output logic [W-1:0] rf_wdata
);
  function automatic logic [W-1:0] rule90(input logic [W-1:0] x);
    // left and right neighbours on a ring
    return {x[W-2:0], x[W-1]} ^ {x[0], x[W-1:1]};
  endfunction

  logic [W-1:0] nxt;
  logic         upd;

  always_comb begin
    nxt = ca;
    upd = 1'b1;
    unique case (op)
      T2_PASS:   nxt = reg_data;
      T2_GEN:    nxt = rule90(reg_data);
      T2_STEP:   nxt = rule90(ca);
      T2_RF:     nxt = rf_rdata;
      T2_RFSTEP: nxt = rule90(rf_rdata);
      default:   upd = 1'b0;
    endcase
    upd      = upd & en;
    rf_we    = upd & wr;
    rf_wdata = nxt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   ca <= '0;
    else if (upd) ca <= nxt;
  end
endmodule
