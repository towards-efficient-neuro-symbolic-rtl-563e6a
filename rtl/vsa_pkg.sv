// vsa_pkg: shared constants, instruction-word layout and operation encodings
// of the multi-tile vector-symbolic architecture (VSA) accelerator.
//
// The accelerator runs binary hypervectors folded into W-bit pieces ("folds").
// Every operation is carried by one 76-bit Instruction Word: seven Type fields,
// one per pipeline stage, plus a 57-bit OP_PARAM field. The field names and the
// widths (Type_1 2 b, Type_2 3 b, Type_3 3 b, Type_4 2 b, Type_5 3 b, Type_6 3 b,
// Type_7 3 b, OP_PARAM 57 b) follow the published format. The encoding of each
// Type field, the bit order (Type_1 in the least significant bits) and the way
// OP_PARAM is cut into sub-fields are this design's own choices, because the
// published format leaves them open.
//
// Default sizes are those of the largest published configuration (8 tiles,
// 512-bit bus, 8 registers per register file, 12-bit distances, 8-bit bundling
// counters, 512 KB of local memory, i.e. 1024 words of 512 bits per tile).
package vsa_pkg;

  // ---------------- configuration defaults ----------------
  parameter int unsigned W_DEF     = 512;   // bus width W
  parameter int unsigned K_DEF     = 8;     // number of tiles K
  parameter int unsigned R_DEF     = 8;     // CA-90 RF registers R
  parameter int unsigned B_DEF     = 8;     // BND RF registers B
  parameter int unsigned D_DEF     = 8;     // DSUM registers D
  parameter int unsigned C_DEF     = 12;    // distance bit-width C
  parameter int unsigned H_DEF     = 8;     // BND bit-width H
  parameter int unsigned DEPTH_DEF = 1024;  // words per local SRAM

  // ---------------- instruction word ----------------
  localparam int unsigned OP_PARAM_W = 57;
  localparam int unsigned IW_W       = 76;

  // Type_1: memory read (all enabled tiles, same address)
  typedef enum logic [1:0] {
    T1_NOP  = 2'd0,
    T1_READ = 2'd1,   // REG <= SRAM[rd_addr]
    T1_QRY  = 2'd2    // REG <= SRAM[rd_addr], then QRY <= REG (code 3 is a NOP)
  } t1_e;

  // Type_2: CA-90 and CA-90 RF; the new value is also written to
  // CA-90 RF[ca_idx] when OP_PARAM.ca_wr is set
  typedef enum logic [2:0] {
    T2_HOLD   = 3'd0,
    T2_PASS   = 3'd1, // CA <= REG
    T2_GEN    = 3'd2, // CA <= ca90(REG)
    T2_STEP   = 3'd3, // CA <= ca90(CA)
    T2_RF     = 3'd4, // CA <= RF[ca_idx]
    T2_RFSTEP = 3'd5  // CA <= ca90(RF[ca_idx])
  } t2_e;

  // Type_3: POPCNT and DSUM RF (pc = popcount similarity of QRY and CA)
  typedef enum logic [2:0] {
    T3_NOP    = 3'd0,
    T3_CLR    = 3'd1, // DSUM[ds_idx] <= 0
    T3_SET    = 3'd2, // DSUM[ds_idx] <= pc            (first fold)
    T3_ACC    = 3'd3, // DSUM[ds_idx] <= sat(DSUM + pc) (further folds)
    T3_CLRALL = 3'd4  // all DSUM <= 0
  } t3_e;

  // Type_4: BIND (binary, XOR binding and cyclic permutation)
  typedef enum logic [1:0] {
    T4_NOP  = 2'd0,
    T4_LOAD = 2'd1,   // ACC <= BUF
    T4_XOR  = 2'd2,   // ACC <= ACC ^ BUF
    T4_PERM = 2'd3    // ACC <= rho(ACC)
  } t4_e;

  // Type_5: MULT, BND, BND RF, SGN
  typedef enum logic [2:0] {
    T5_NOP    = 3'd0,
    T5_LOAD   = 3'd1, // BND <= MULT(ACC, weight)
    T5_ACC    = 3'd2, // BND <= sat(BND + MULT(ACC, weight))
    T5_RFLOAD = 3'd3, // BND <= BNDRF[bnd_idx]
    T5_RFACC  = 3'd4, // BND <= sat(BND + BNDRF[bnd_idx])
    T5_STORE  = 3'd5, // BNDRF[bnd_idx] <= BND
    T5_CLR    = 3'd6, // BND <= 0
    T5_SGN    = 3'd7  // OUT buffer <= sgn(BND)
  } t5_e;

  // Type_6: ARGMAX and scalar read-out
  typedef enum logic [2:0] {
    T6_NOP    = 3'd0,
    T6_CLR    = 3'd1, // forget the running maximum
    T6_UPD    = 3'd2, // compare DSUM[ds_idx] of every enabled tile
    T6_START  = 3'd3, // CLR then UPD in one step
    T6_SCALAR = 3'd4  // scalar_out <= DSUM[ds_idx] of tile src_tile
  } t6_e;

  // Type_7: memory write (through the tile write buffer)
  typedef enum logic [2:0] {
    T7_NOP      = 3'd0,
    T7_SGN_ONE  = 3'd1, // SRAM[dst_tile][wr_addr] <= OUT buffer
    T7_SGN_ALL  = 3'd2, // every enabled tile       <= OUT buffer
    T7_BIND_ONE = 3'd3, // SRAM[dst_tile][wr_addr] <= BIND ACC
    T7_BIND_ALL = 3'd4, // every enabled tile       <= BIND ACC
    T7_AM_ONE   = 3'd5  // SRAM[dst_tile][wr_addr] <= {value, index} of ARGMAX
  } t7_e;

  // OP_PARAM sub-fields, 57 bits in all (LSB first as listed from the bottom)
  typedef struct packed {
    logic [4:0]  am_tag;   // [56:52] upper bits of the ARGMAX index
    logic [2:0]  wshift;   // [51:49] arithmetic right shift of the weight
    logic        wsel;     // [48]    0: weight immediate, 1: scalar datapath
    logic [11:0] weight;   // [47:36] signed immediate weight
    logic [2:0]  bnd_idx;  // [35:33] BND RF register
    logic [2:0]  ds_idx;   // [32:30] DSUM register
    logic        ca_wr;    // [29]    also write CA result to CA-90 RF
    logic [2:0]  ca_idx;   // [28:26] CA-90 RF register
    logic [2:0]  dst_tile; // [25:23] tile written by Type_7 *_ONE
    logic [2:0]  src_tile; // [22:20] tile driving the datapath / weight
    logic [9:0]  wr_addr;  // [19:10] SRAM write address
    logic [9:0]  rd_addr;  // [9:0]   SRAM read address
  } op_param_t;

  typedef struct packed {
    op_param_t op;  // [75:19]
    t7_e       t7;  // [18:16]
    t6_e       t6;  // [15:13]
    t5_e       t5;  // [12:10]
    t4_e       t4;  // [9:8]
    t3_e       t3;  // [7:5]
    t2_e       t2;  // [4:2]
    t1_e       t1;  // [1:0]
  } iword_t;

  localparam iword_t IWORD_NOP = '0;

endpackage
