// vsa_top: multi-tile vector-symbolic architecture (VSA) accelerator.
//
// K tiles, each with local SRAM, CA-90 fold generator, CA-90 RF, QRY,
// POPCNT and DSUM RF (memory/codebook-generation and distance subsystems),
// share one ARGMAX, one vector-symbolic operations (VOP) subsystem and one
// control unit. Two global datapaths connect them:
//   * the vector-symbolic datapath, W bits wide: the CA output of one tile
//     (src_tile) into the VOP input buffer, and the VOP results (or the
//     ARGMAX result) back into the write buffer of one or all tiles;
//   * the scalar datapath: DSUM values of every tile into ARGMAX, the DSUM
//     value of tile src_tile into MULT as a weight, and out of the chip
//     (scalar_out).
// Each Instruction Word passes through seven stages, one per cycle:
//   1 MEMORY READ  2 CA-90 / CA-90 RF  3 POPCNT / DSUM RF (+ VOP buffer load)
//   4 BIND  5 MULT / BND / BND RF / SGN  6 ARGMAX  7 MEMORY WRITE
// with all enabled tiles doing stages 1-3 in lock step (SIMD).
// A Type_7 write lands in the SRAM at the end of the following cycle; a word
// that reads it back must enter stage 1 at least two cycles after the
// writing word has left stage 7. Ordering between words is otherwise the
// program's business, as there is no hazard detection.
// The host loads codebooks through host_we/host_tile/host_addr/host_data,
// accepted only while no instruction is in flight (host_ready).
// Tile count, bus width and register-file sizes follow the published 8-tile
// configuration; the bus split into two directions, the host port and all
// encodings are this design's choices.
// The handshake assertions are disabled while rst_n is low, so rst_n also
// feeds clocked assertion logic next to its use as asynchronous reset; a
// lint tool notes this mix, which has no effect on the synthesized circuit.
module vsa_top
  import vsa_pkg::*;
#(
  parameter int unsigned W     = W_DEF,
  parameter int unsigned K     = K_DEF,
  parameter int unsigned R     = R_DEF,
  parameter int unsigned B     = B_DEF,
  parameter int unsigned D     = D_DEF,
  parameter int unsigned C     = C_DEF,
  parameter int unsigned H     = H_DEF,
  parameter int unsigned DEPTH = DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned TW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned RW   = (R > 1) ? $clog2(R) : 1,
  localparam int unsigned DW   = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned BW   = (B > 1) ? $clog2(B) : 1,
  localparam int unsigned IXW  = 5 + TW
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration
  input  logic                cfg_we,
  input  logic [K-1:0]        cfg_tile_en,
  input  logic                cfg_sopc,
  // instruction stream
  input  logic                instr_valid,
  input  iword_t              instr,
  output logic                instr_ready,
  // host codebook load
  input  logic                host_we,
  input  logic [TW-1:0]       host_tile,
  input  logic [AW-1:0]       host_addr,
  input  logic [W-1:0]        host_data,
  output logic                host_ready,
  // results
  output logic [W-1:0]        vec_out,
  output logic signed [C-1:0] am_val,
  output logic [IXW-1:0]      am_idx,
  output logic                am_valid,
  output logic signed [C-1:0] scalar_out,
  output logic                scalar_valid,
  output logic                busy,
  output logic                sopc_mode,
  output logic [K-1:0]        dsum_ovf,
  output logic                bnd_ovf
);
  // parameter limits of the fixed OP_PARAM layout
  initial begin
    assert (DEPTH <= 1024 && K <= 8 && R <= 8 && D <= 8 && B <= 8 && C <= 12)
      else $fatal(1, "parameters exceed the Instruction Word fields");
    assert (W >= C + IXW) else $fatal(1, "W too small for the ARGMAX write-back");
  end

  // ---------------- control ----------------
  iword_t       st [7];
  logic [K-1:0] tile_en;

  vsa_ctrl #(.K(K)) u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_tile_en, .cfg_sopc, .tile_en, .sopc(sopc_mode),
    .instr_valid, .instr, .instr_ready, .stage(st), .busy
  );

  function automatic logic [TW-1:0] tsel(input logic [2:0] f);
    return (32'(f) < K) ? TW'(f) : '0;
  endfunction

  // ---------------- tiles ----------------
  logic [W-1:0]        ca_out  [K];
  logic signed [C-1:0] ds_a    [K];
  logic signed [C-1:0] ds_b    [K];
  logic [K-1:0]        wbuf_we;
  logic [W-1:0]        wr_data;
  logic [AW-1:0]       wr_addr;

  for (genvar t = 0; t < K; t++) begin : g_tile
    vsa_tile #(.W(W), .DEPTH(DEPTH), .R(R), .D(D), .C(C)) u_tile (
      .clk, .rst_n, .en(tile_en[t]),
      .rd_op(st[0].t1), .rd_addr(st[0].op.rd_addr[AW-1:0]),
      .qry_ld(st[1].t1 == T1_QRY), .ca_op(st[1].t2), .ca_wr(st[1].op.ca_wr),
      .ca_idx(st[1].op.ca_idx[RW-1:0]),
      .ds_op(st[2].t3), .ds_idx(st[2].op.ds_idx[DW-1:0]),
      .wbuf_we(wbuf_we[t]), .wbuf_addr(wr_addr), .wbuf_data(wr_data),
      .ca_out(ca_out[t]),
      .ds_ridx_a(st[5].op.ds_idx[DW-1:0]), .ds_rdata_a(ds_a[t]),
      .ds_ridx_b(st[4].op.ds_idx[DW-1:0]), .ds_rdata_b(ds_b[t]),
      .ovf(dsum_ovf[t])
    );
  end

  // ---------------- vector-symbolic datapath, tiles -> VOP (stage 3) -------
  logic [W-1:0] bus_to_vop;
  assign bus_to_vop = ca_out[tsel(st[2].op.src_tile)];

  // ---------------- scalar datapath ----------------
  logic signed [C-1:0] weight;
  assign weight = st[4].op.wsel ? ds_b[tsel(st[4].op.src_tile)]
                                : $signed(st[4].op.weight[C-1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scalar_out   <= '0;
      scalar_valid <= 1'b0;
    end else begin
      scalar_valid <= (st[5].t6 == T6_SCALAR);
      if (st[5].t6 == T6_SCALAR) scalar_out <= ds_a[tsel(st[5].op.src_tile)];
    end
  end

  // ---------------- VOP ----------------
  logic [W-1:0] bind_acc;

  vsa_vop #(.W(W), .H(H), .C(C), .B(B)) u_vop (
    .clk, .rst_n,
    .buf_ld(st[2].t4 == T4_LOAD || st[2].t4 == T4_XOR), .bus_in(bus_to_vop),
    .op4(st[3].t4),
    .op5(st[4].t5), .weight, .wshift(st[4].op.wshift), .bnd_idx(st[4].op.bnd_idx[BW-1:0]),
    .bind_acc, .obuf(vec_out), .ovf(bnd_ovf)
  );

  // ---------------- ARGMAX (stage 6) ----------------
  vsa_argmax #(.K(K), .C(C), .TAGW(5)) u_am (
    .clk, .rst_n, .op(st[5].t6), .act(tile_en), .tag(st[5].op.am_tag),
    .vals(ds_a), .best_val(am_val), .best_idx(am_idx), .valid(am_valid)
  );

  // ---------------- vector-symbolic datapath, back to tiles (stage 7) ------
  logic          p_we;
  logic [K-1:0]  p_mask;
  always_comb begin
    p_we    = 1'b1;
    p_mask  = '0;
    wr_data = vec_out;
    unique case (st[6].t7)
      T7_SGN_ONE:  p_mask[tsel(st[6].op.dst_tile)] = 1'b1;
      T7_SGN_ALL:  p_mask = tile_en;
      T7_BIND_ONE: begin p_mask[tsel(st[6].op.dst_tile)] = 1'b1; wr_data = bind_acc; end
      T7_BIND_ALL: begin p_mask = tile_en; wr_data = bind_acc; end
      T7_AM_ONE:   begin
        p_mask[tsel(st[6].op.dst_tile)] = 1'b1;
        wr_data = W'({am_val, am_idx});
      end
      default:     p_we = 1'b0;
    endcase
    wr_addr = st[6].op.wr_addr[AW-1:0];
    wbuf_we = p_mask;
    host_ready = !busy;
    if (!p_we && host_we && host_ready) begin
      wbuf_we              = '0;
      wbuf_we[host_tile]   = 1'b1;
      wr_data              = host_data;
      wr_addr              = host_addr;
    end
  end

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) host_we |-> host_ready)
    else $error("host write while instructions are in flight");
endmodule
