// vsa_ctrl: control unit and tile configuration registers.
//
// The control unit takes Instruction Words from the host and moves each one
// down a seven-entry pipeline, one stage per cycle; stage k executes the
// word's Type_k field, so the operations of one word run one after another
// along the dataflow (MEMORY READ, CA-90, POPCNT/DSUM, BIND,
// MULT/BND/SGN, ARGMAX, MEMORY WRITE). Stage outputs of empty slots are
// all-NOP words. Because every stage only consumes what the stage before it
// produced for the same word, consecutive words never stall each other.
//
// Two control methods:
//   MOPC (sopc=0): a new word may enter every cycle, so up to seven stages
//                  work at once;
//   SOPC (sopc=1): a new word enters only after the previous word has left
//                  stages 1-6, so at most one stage is active per cycle
//                  (one word per seven cycles).
// Interface: instr/instr_valid/instr_ready, a valid/ready handshake; a word
// is taken in a cycle with both high. cfg_we loads the tile-enable bits and
// the control-method bit; it must only be used while the pipeline is empty.
// The seven stages, the word format and the two methods follow the published
// design; how SOPC is enforced (issue throttling) and the handshake are this
// design's choices.
// The handshake assertions are disabled while rst_n is low, so rst_n also
// feeds clocked assertion logic next to its use as asynchronous reset; a
// lint tool notes this mix, which has no effect on the synthesized circuit.
module vsa_ctrl
  import vsa_pkg::*;
#(
  parameter int unsigned K = K_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  // configuration registers
  input  logic         cfg_we,
  input  logic [K-1:0] cfg_tile_en,
  input  logic         cfg_sopc,
  output logic [K-1:0] tile_en,
  output logic         sopc,
  // instruction stream
  input  logic         instr_valid,
  input  iword_t       instr,
  output logic         instr_ready,
  // words seen by stages 1..7 (index 0 is stage 1)
  output iword_t       stage [7],
  output logic         busy
);
  iword_t     pipe [7];
  logic [6:0] vld;

  always_comb begin
    instr_ready = sopc ? (vld[5:0] == '0) : 1'b1;
    busy        = |vld;
    for (int s = 0; s < 7; s++) stage[s] = vld[s] ? pipe[s] : IWORD_NOP;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld     <= '0;
      tile_en <= {K{1'b1}};
      sopc    <= 1'b0;
      for (int s = 0; s < 7; s++) pipe[s] <= IWORD_NOP;
    end else begin
      if (cfg_we) begin
        tile_en <= cfg_tile_en;
        sopc    <= cfg_sopc;
      end
      for (int s = 6; s > 0; s--) begin
        pipe[s] <= pipe[s-1];
        vld[s]  <= vld[s-1];
      end
      vld[0]  <= instr_valid && instr_ready;
      pipe[0] <= instr;
    end
  end

  // configuration changes only between programs
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !busy)
    else $error("configuration written while instructions are in flight");
  // SOPC: never two words in flight
  a_sopc_one: assert property (@(posedge clk) disable iff (!rst_n) sopc |-> $onehot0(vld))
    else $error("SOPC with more than one word in flight");
endmodule
