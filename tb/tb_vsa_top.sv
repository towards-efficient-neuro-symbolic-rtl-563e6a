// tb_vsa_top: end-to-end test of the VSA accelerator at reduced size (4 tiles, 128-bit folds, 64-word SRAMs).
//
// Runs one iteration of resonator-network factoring, then a clean-up
// (nearest-neighbour) search, entirely from Instruction Words:
//   1 decode   x = s ^ b_est ^ c_est                (BIND, write to all tiles)
//   2 similarity d(a_i, x) over 2 folds            (QRY, POPCNT, DSUM; the
//     second fold of every a_i is made by CA-90 and cached in CA-90 RF)
//   3 projection a_est = sgn(sum_i d(a_i,x) * a_i)  (scalar datapath weights,
//     MULT, BND, SGN, write to all tiles; fold 2 from CA-90 RF)
//   4 clean-up  argmax_i d(a_i, a_est)              (ARGMAX, scalar read-out,
//     ARGMAX write-back)
// plus a permuted binding x1 ^ rho(x2), a deliberate DSUM saturation, and a
// repeat of step 4 with one tile disabled. The program is first run with
// MOPC (one word per cycle), then with SOPC (one word per seven cycles);
// both must give the same results, and the cycle counts are checked
// exactly (N + 7 and 7(N - 1) + 8 cycles
// for N words, counted from the first word's issue to the first idle cycle). Every result is compared with a
// software model of the same arithmetic (clamped bundling, saturating
// distances). Each mechanism is counted and must occur at least once.
module tb_vsa_top;
  import vsa_pkg::*;
  localparam int W = 128, K = 4, DEPTH = 64, NJ = 2, L = 2;
  localparam int NA = K * NJ, TW = (K > 1) ? $clog2(K) : 1;
  localparam int H = 8, C = 12;
  localparam int RAW = 8;       // words between a memory write and a read of it
  localparam int WSH = 1;       // weight shift of the projection
  localparam int AS = 10, ABH = 11, ACH = 12, AX = 20, AH = 22, AAM = 30, AP = 31;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, cfg_sopc = 0;
  logic [K-1:0] cfg_tile_en = '1;
  logic instr_valid = 0, instr_ready;
  iword_t instr = IWORD_NOP;
  logic host_we = 0, host_ready;
  logic [TW-1:0] host_tile = '0;
  logic [$clog2(DEPTH)-1:0] host_addr = '0;
  logic [W-1:0] host_data = '0;
  logic [W-1:0] vec_out;
  logic signed [C-1:0] am_val, scalar_out;
  logic [5+TW-1:0] am_idx;
  logic am_valid, scalar_valid, busy, sopc_mode, bnd_ovf;
  logic [K-1:0] dsum_ovf;

  vsa_top #(.W(W), .K(K), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_mopc = 0, n_sopc = 0, n_dsum_ovf = 0, n_bnd_ovf = 0, n_ca_gen = 0, n_ca_rf = 0,
      n_perm = 0, n_argmax = 0, n_scalar = 0, n_tile_off = 0, n_bcast = 0, n_wsel = 0;

  always @(posedge clk) begin
    if (|dsum_ovf) n_dsum_ovf++;
    if (bnd_ovf) n_bnd_ovf++;
    if (scalar_valid) n_scalar++;
  end

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- software model ----------------
  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic logic [W-1:0] r90(input logic [W-1:0] x);
    logic [W-1:0] y;
    for (int i = 0; i < W; i++) y[i] = x[(i+W-1)%W] ^ x[(i+1)%W];
    return y;
  endfunction
  function automatic logic [W-1:0] rho(input logic [W-1:0] x);
    logic [W-1:0] y;
    for (int i = 0; i < W; i++) y[(i+1)%W] = x[i];
    return y;
  endfunction
  function automatic int simf(input logic [W-1:0] a, input logic [W-1:0] b);
    int s = 0;
    for (int i = 0; i < W; i++) s += (a[i] == b[i]) ? 1 : -1;
    return s;
  endfunction
  function automatic int satc(input int v);
    return (v > 2047) ? 2047 : ((v < -2048) ? -2048 : v);
  endfunction
  function automatic int clamp(input int v);
    return (v > 127) ? 127 : ((v < -127) ? -127 : v);
  endfunction

  logic [W-1:0] a_seed [NA];
  logic [W-1:0] s_seed, bh_seed, ch_seed;
  logic [W-1:0] x_m [L], ah_m [L];
  int d1 [NA], d2 [NA];

  // ---------------- program builder ----------------
  iword_t prog [$];
  function automatic iword_t nw();
    return IWORD_NOP;
  endfunction
  task automatic nops(input int n);
    repeat (n) prog.push_back(nw());
  endtask

  task automatic run_prog(input bit sopc, input logic [K-1:0] en, output int cycles);
    int n, c;
    @(negedge clk); cfg_we = 1; cfg_sopc = sopc; cfg_tile_en = en;
    @(negedge clk); cfg_we = 0;
    n = prog.size(); c = 0;
    instr_valid = 1; instr = prog.pop_front();
    forever begin
      @(posedge clk); c++;
      if (instr_ready) begin
        if (instr.t2 == T2_GEN || instr.t2 == T2_RFSTEP) n_ca_gen++;
        if (instr.t2 == T2_RF) n_ca_rf++;
        if (instr.t4 == T4_PERM) n_perm++;
        if (instr.t6 == T6_UPD || instr.t6 == T6_START) n_argmax++;
        if (instr.t7 == T7_SGN_ALL || instr.t7 == T7_BIND_ALL) n_bcast++;
        if (instr.op.wsel && instr.t5 != T5_NOP) n_wsel++;
        if (prog.size() == 0) break;
        #1 instr = prog.pop_front();
      end
    end
    #1 instr_valid = 0; instr = IWORD_NOP;
    while (busy) begin @(posedge clk); c++; #1; end
    cycles = c;
    chk(cycles == (sopc ? 7 * (n - 1) : n - 1) + 8, $sformatf("%s cycle count %0d for %0d words",
                                                    sopc ? "SOPC" : "MOPC", cycles, n));
    if (sopc) n_sopc++; else n_mopc++;
  endtask

  // step 2/4: similarity of every a_i with the vector at qaddr (L folds)
  task automatic gen_similarity(input int qaddr, input bit rf_ready);
    for (int k = 0; k < L; k++) begin
      iword_t w;
      w = nw(); w.t1 = T1_QRY; w.op.rd_addr = 10'(qaddr + k); prog.push_back(w);
      for (int j = 0; j < NJ; j++) begin
        w = nw();
        if (k == 0) begin
          w.t1 = T1_READ; w.op.rd_addr = 10'(j); w.t2 = T2_PASS; w.t3 = T3_SET;
        end else if (!rf_ready) begin
          w.t1 = T1_READ; w.op.rd_addr = 10'(j); w.t2 = T2_GEN; w.op.ca_wr = 1'b1; w.t3 = T3_ACC;
        end else begin
          w.t2 = T2_RF; w.t3 = T3_ACC;
        end
        w.op.ca_idx = 3'(j); w.op.ds_idx = 3'(j);
        prog.push_back(w);
      end
    end
  endtask

  task automatic gen_argmax();
    for (int j = 0; j < NJ; j++) begin
      iword_t w;
      w = nw(); w.t6 = (j == 0) ? T6_START : T6_UPD; w.op.ds_idx = 3'(j); w.op.am_tag = 5'(j);
      prog.push_back(w);
    end
  endtask

  task automatic build_program();
    iword_t w;
    // 1: decode, fold by fold
    for (int k = 0; k < L; k++) begin
      int ad [3] = '{AS, ABH, ACH};
      for (int v = 0; v < 3; v++) begin
        w = nw(); w.t1 = T1_READ; w.op.rd_addr = 10'(ad[v]);
        w.t2 = (k == 0) ? T2_PASS : T2_GEN; w.op.src_tile = 3'd0;
        w.t4 = (v == 0) ? T4_LOAD : T4_XOR;
        if (v == 2) begin w.t7 = T7_BIND_ALL; w.op.wr_addr = 10'(AX + k); end
        prog.push_back(w);
      end
      nops(3);                     // BIND result must be written before it is reused
    end
    nops(RAW);                     // the writes must land in SRAM before they are read
    // 2: similarity with x
    gen_similarity(AX, 1'b0);
    // 3: projection, fold by fold
    for (int k = 0; k < L; k++) begin
      for (int j = 0; j < NJ; j++)
        for (int t = 0; t < K; t++) begin
          w = nw();
          if (k == 0) begin w.t1 = T1_READ; w.op.rd_addr = 10'(j); w.t2 = T2_PASS; end
          else begin w.t2 = T2_RF; w.op.ca_idx = 3'(j); end
          w.op.src_tile = 3'(t); w.t4 = T4_LOAD;
          w.t5 = (j == 0 && t == 0) ? T5_LOAD : T5_ACC;
          w.op.wsel = 1'b1; w.op.ds_idx = 3'(j); w.op.wshift = 3'(WSH);
          prog.push_back(w);
        end
      w = nw(); w.t5 = T5_SGN; w.t7 = T7_SGN_ALL; w.op.wr_addr = 10'(AH + k);
      prog.push_back(w);
    end
    nops(RAW);
    // 4: clean-up search, scalar read-out and ARGMAX write-back
    gen_similarity(AH, 1'b1);
    gen_argmax();
    w = nw(); w.t6 = T6_SCALAR; w.op.src_tile = 3'd1; w.op.ds_idx = 3'd1; prog.push_back(w);
    w = nw(); w.t7 = T7_AM_ONE; w.op.dst_tile = 3'd0; w.op.wr_addr = 10'(AAM); prog.push_back(w);
    // permuted binding rho(s) ^ b_est into tile K-1
    w = nw(); w.t1 = T1_READ; w.op.rd_addr = 10'(AS); w.t2 = T2_PASS; w.t4 = T4_LOAD; prog.push_back(w);
    w = nw(); w.t4 = T4_PERM; prog.push_back(w);
    w = nw(); w.t1 = T1_READ; w.op.rd_addr = 10'(ABH); w.t2 = T2_PASS; w.t4 = T4_XOR;
    w.t7 = T7_BIND_ONE; w.op.dst_tile = 3'(K - 1); w.op.wr_addr = 10'(AP); prog.push_back(w);
    // DSUM saturation: x fold 0 against itself, 20 times into DSUM[7]
    w = nw(); w.t1 = T1_QRY; w.op.rd_addr = 10'(AX); prog.push_back(w);
    for (int n = 0; n < 20; n++) begin
      w = nw(); w.t1 = T1_READ; w.op.rd_addr = 10'(AX); w.t2 = T2_PASS;
      w.t3 = (n == 0) ? T3_SET : T3_ACC; w.op.ds_idx = 3'd7; prog.push_back(w);
    end
    nops(1);
    w = nw(); w.t6 = T6_SCALAR; w.op.src_tile = 3'd0; w.op.ds_idx = 3'd7; prog.push_back(w);
  endtask

  task automatic host_load(input int t, input int a, input logic [W-1:0] v);
    @(negedge clk); host_we = 1; host_tile = TW'(t); host_addr = $bits(host_addr)'(a); host_data = v;
    @(negedge clk); host_we = 0;
  endtask

  // read-only view of the local SRAMs
  logic [W-1:0] peek [K];
  int peek_addr = 0;
  for (genvar g = 0; g < K; g++) begin : g_peek
    assign peek[g] = dut.g_tile[g].u_tile.u_sram.mem[peek_addr];
  end
  task automatic memrd(input int t, input int a, output logic [W-1:0] v);
    peek_addr = a; #1 v = peek[t];
  endtask

  // model of the whole program
  int exp_best, exp_val, exp_scalar;
  task automatic model(input logic [K-1:0] en);
    int acc [W];
    logic [W-1:0] f;
    for (int k = 0; k < L; k++) begin
      logic [W-1:0] sk, bk, ck;
      sk = s_seed; bk = bh_seed; ck = ch_seed;
      if (k == 1) begin sk = r90(sk); bk = r90(bk); ck = r90(ck); end
      x_m[k] = sk ^ bk ^ ck;
    end
    for (int i = 0; i < NA; i++) begin
      d1[i] = satc(simf(a_seed[i], x_m[0]) + simf(r90(a_seed[i]), x_m[1]));
    end
    for (int k = 0; k < L; k++) begin
      bit first = 1;
      for (int j = 0; j < NJ; j++)
        for (int t = 0; t < K; t++) begin
          int i, wq;
          i = j * K + t;
          f = (k == 0) ? a_seed[i] : r90(a_seed[i]);
          wq = clamp(d1[i] >>> WSH);
          for (int e = 0; e < W; e++) acc[e] = first ? (f[e] ? -wq : wq) : clamp(acc[e] + (f[e] ? -wq : wq));
          first = 0;
        end
      for (int e = 0; e < W; e++) ah_m[k][e] = acc[e] < 0;
    end
    exp_best = -1; exp_val = 0;
    for (int j = 0; j < NJ; j++)
      for (int t = 0; t < K; t++) begin
        int i;
        i = j * K + t;
        d2[i] = satc(simf(a_seed[i], ah_m[0]) + simf(r90(a_seed[i]), ah_m[1]));
        if (en[t] && (exp_best < 0 || d2[i] > exp_val)) begin exp_best = i; exp_val = d2[i]; end
      end
    exp_scalar = d2[1 * K + 1];
  endtask

  initial begin
    #(2000000); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc_mopc, cyc_sopc, truth;
    repeat (3) @(negedge clk); rst_n = 1;
    // codebook a and the composite s = a_truth ^ b ^ c, estimates noisy
    truth = NA - 3;
    for (int i = 0; i < NA; i++) a_seed[i] = rnd();
    begin
      logic [W-1:0] b, c, noise;
      b = rnd(); c = rnd();
      s_seed = a_seed[truth] ^ b ^ c;
      noise = rnd() & rnd() & rnd();      // about 1/8 of the bits flipped
      bh_seed = b ^ noise; ch_seed = c;
    end
    for (int i = 0; i < NA; i++) host_load(i % K, i / K, a_seed[i]);
    host_load(0, AS, s_seed); host_load(0, ABH, bh_seed); host_load(0, ACH, ch_seed);
    model('1);

    for (int pass = 0; pass < 2; pass++) begin
      build_program();
      run_prog(pass == 1, '1, (pass == 0) ? cyc_mopc : cyc_sopc);
      for (int t = 0; t < K; t++) begin
        logic [W-1:0] v0, v1;
        memrd(t, AX, v0); memrd(t, AX + 1, v1);
        chk(v0 == x_m[0] && v1 == x_m[1], $sformatf("x in tile %0d", t));
        memrd(t, AH, v0); memrd(t, AH + 1, v1);
        chk(v0 == ah_m[0] && v1 == ah_m[1], $sformatf("a_est in tile %0d", t));
      end
      chk(vec_out == ah_m[1], "output buffer");
      chk(am_valid && int'(am_idx) == exp_best && int'(am_val) == exp_val,
          $sformatf("argmax %0d/%0d vs %0d/%0d", am_idx, am_val, exp_best, exp_val));
      chk(exp_best == truth, "factor recovered");
      begin
        logic [W-1:0] v;
        memrd(0, AAM, v);
        chk(v[C+5+TW-1:0] == {C'(exp_val), (5+TW)'(exp_best)}, "ARGMAX write-back");
        memrd(K - 1, AP, v);
        chk(v == (rho(s_seed) ^ bh_seed), "permuted binding");
      end
      chk(int'(scalar_out) == 2047, "saturated distance read-out");
    end
    chk(cyc_sopc > cyc_mopc, "SOPC slower than MOPC");

    // clean-up search again with the tile holding the answer disabled
    begin
      logic [K-1:0] en;
      int c;
      en = '1; en[truth % K] = 1'b0;
      model(en);
      gen_similarity(AH, 1'b1);
      gen_argmax();
      run_prog(1'b0, en, c);
      chk(int'(am_idx) == exp_best && int'(am_val) == exp_val, $sformatf("argmax with a disabled tile %0d/%0d vs %0d/%0d", am_idx, am_val, exp_best, exp_val));
      chk(exp_best % K != truth % K, "disabled tile excluded");
      n_tile_off++;
    end

    chk(n_mopc > 0, "MOPC used");         chk(n_sopc > 0, "SOPC used");
    chk(n_dsum_ovf > 0, "DSUM saturation"); chk(n_bnd_ovf > 0, "BND clamp");
    chk(n_ca_gen > 0, "CA-90 generation"); chk(n_ca_rf > 0, "CA-90 RF reuse");
    chk(n_perm > 0, "permutation");       chk(n_argmax > 0, "ARGMAX");
    chk(n_scalar > 0, "scalar read-out"); chk(n_tile_off > 0, "tile disable");
    chk(n_bcast > 0, "broadcast write");  chk(n_wsel > 0, "scalar-datapath weight");
    $display("mechanisms: mopc=%0d sopc=%0d dsum_ovf=%0d bnd_ovf=%0d ca_gen=%0d ca_rf=%0d perm=%0d argmax=%0d scalar=%0d tile_off=%0d bcast=%0d wsel=%0d",
             n_mopc, n_sopc, n_dsum_ovf, n_bnd_ovf, n_ca_gen, n_ca_rf, n_perm, n_argmax, n_scalar, n_tile_off, n_bcast, n_wsel);
    $display("cycles: MOPC %0d, SOPC %0d", cyc_mopc, cyc_sopc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
