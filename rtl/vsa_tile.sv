// vsa_tile: one tile of the memory/codebook-generation (MCG) and
// distance-computation (DC) subsystems.
//
// A tile keeps its vectors close to the logic that uses them: a fold read
// from the local SRAM lands in REG, may be expanded by CA-90 (with CA-90 RF
// as a cache of generated folds), and is compared against the query in QRY
// by POPCNT, whose partial similarity is summed over folds in DSUM RF. The
// CA output also drives the global vector-symbolic datapath when this tile
// is the selected source. Writes from the datapath enter through the write
// buffer, one cycle before they reach the SRAM. All tiles receive the same
// operations (SIMD); a tile whose enable bit is low ignores the read, CA-90,
// POPCNT/DSUM operations (writes are gated by the caller).
//
// Timing, for one instruction word entering stage 1 in cycle t:
//   t   : Type_1 read issued            -> REG valid in t+1
//   t+1 : Type_2 CA-90 op (uses REG);   qry_ld copies REG into QRY
//   t+2 : Type_3 POPCNT/DSUM op (uses CA and QRY) -> DSUM valid in t+3
// wbuf_we in cycle t writes the SRAM at the end of cycle t+1.
// The block list and their connections follow the published tile diagram;
// the QRY load path (from REG) and the timing are this design's choices.
module vsa_tile
  import vsa_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter int unsigned DEPTH = DEPTH_DEF,
  parameter int unsigned R     = R_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned C     = C_DEF,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned RW   = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned DW   = (D > 1) ? $clog2(D) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  // stage 1
  input  t1_e                 rd_op,
  input  logic [AW-1:0]       rd_addr,
  // stage 2
  input  logic                qry_ld,
  input  t2_e                 ca_op,
  input  logic                ca_wr,
  input  logic [RW-1:0]       ca_idx,
  // stage 3
  input  t3_e                 ds_op,
  input  logic [DW-1:0]       ds_idx,
  // write buffer (from the datapath)
  input  logic                wbuf_we,
  input  logic [AW-1:0]       wbuf_addr,
  input  logic [W-1:0]        wbuf_data,
  // read-out
  output logic [W-1:0]        ca_out,
  input  logic [DW-1:0]       ds_ridx_a,
  output logic signed [C-1:0] ds_rdata_a,
  input  logic [DW-1:0]       ds_ridx_b,
  output logic signed [C-1:0] ds_rdata_b,
  output logic                ovf
);
  localparam int unsigned SW = $clog2(W) + 2;

  // write buffer
  logic          wb_we;
  logic [AW-1:0] wb_addr;
  logic [W-1:0]  wb_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_we   <= 1'b0;
      wb_addr <= '0;
      wb_data <= '0;
    end else begin
      wb_we <= wbuf_we;
      if (wbuf_we) begin
        wb_addr <= wbuf_addr;
        wb_data <= wbuf_data;
      end
    end
  end

  // local SRAM; its output register is REG
  logic [W-1:0] reg_q;
  logic         re;
  assign re = en && (rd_op == T1_READ || rd_op == T1_QRY);

  vsa_sram #(.W(W), .DEPTH(DEPTH)) u_sram (
    .clk, .we(wb_we), .waddr(wb_addr), .wdata(wb_data),
    .re, .raddr(rd_addr), .rdata(reg_q)
  );

  // QRY register
  logic [W-1:0] qry_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              qry_q <= '0;
    else if (en && qry_ld)   qry_q <= reg_q;
  end

  // CA-90 and CA-90 RF
  logic         rf_we;
  logic [W-1:0] rf_wdata, rf_rdata;

  vsa_ca90_rf #(.W(W), .R(R)) u_carf (
    .clk, .rst_n, .we(rf_we), .widx(ca_idx), .wdata(rf_wdata),
    .ridx(ca_idx), .rdata(rf_rdata)
  );

  vsa_ca90 #(.W(W)) u_ca90 (
    .clk, .rst_n, .en, .op(ca_op), .wr(ca_wr), .reg_data(reg_q),
    .rf_rdata, .ca(ca_out), .rf_we, .rf_wdata
  );

  // POPCNT and DSUM RF
  logic signed [SW-1:0] sim;
  vsa_popcnt #(.W(W)) u_pc (.a(qry_q), .b(ca_out), .sim);

  vsa_dsum_rf #(.D(D), .C(C), .SW(SW)) u_dsum (
    .clk, .rst_n, .en, .op(ds_op), .idx(ds_idx), .sim,
    .ridx_a(ds_ridx_a), .rdata_a(ds_rdata_a),
    .ridx_b(ds_ridx_b), .rdata_b(ds_rdata_b), .ovf
  );
endmodule
