// tb_vsa_workloads: two complete VSA applications run on the accelerator at
// its default size (8 tiles, 512-bit vectors, 1024-word SRAMs), driven only
// by Instruction Words.
//
// 1. Multi-modal classification (MULT-style). The item memory holds 8
//    feature keys and 112 level vectors (120 item vectors). A sample with 8
//    feature values v_f is encoded as the record
//        s = sgn( sum_f  key_f XOR level_{v_f} )        (BIND, MULT, BND, SGN)
//    and 300 training samples are stored. Each of 16 class prototypes is
//    then the bundle (majority) of its class's samples, written into tile
//    c mod 8 at row c div 8. Each of 100 queries is encoded the same way,
//    broadcast to every tile and compared with all 16 prototypes in two
//    ARGMAX steps; the winner is written back with ARGMAX write-back.
// 2. Key-action recall (REACT-style). 15 state keys and 40 action vectors
//    (55 item vectors) live in memory; the actions are spread over the tiles
//    (action a in tile a mod 8, row a div 8). One memory vector bundles all
//    15 key XOR action pairs. Each of 160 recalls unbinds the memory with a
//    key (BIND), broadcasts the result and searches the 40 actions in five
//    ARGMAX steps.
// 3. Tree search (TREE-style). 70 binary trees of depth two hold one of 9
//    items at each of their 4 leaves. A leaf's path is rho(role_d1) XOR
//    role_d2 with two role vectors and the permutation rho, and a tree is
//    the bundle of path XOR item over its leaves. Each of 400 queries
//    unbinds a tree with a path and searches the items; the 16 candidate
//    slots (two ARGMAX steps) hold the 9 items and 7 unused random vectors.
// 4. Factorization (FACT-style). A composite s = a_i XOR b_j of two factors
//    with 8-entry codebooks (one entry per tile) is factored by a resonator
//    network: starting from the superposition of each codebook, each
//    iteration decodes x = s XOR b_est, weighs every a_i by sim(a_i, x) over
//    the scalar datapath and bundles a new a_est, then does the same for b.
//    10 composites are run for 6 iterations each and cleaned up by ARGMAX.
// Every stored vector and every ARGMAX result (index and value) is compared
// with a software model of the same arithmetic, each program's cycle count
// is checked against N + 7 for N words (one word per cycle), and the
// recognition rates are reported and must be high. The item, sample and
// query counts are those of the evaluated workloads where they are given;
// the vector length (one 512-bit fold), the feature/level split, class
// templates, noise and the number of key-action pairs are this testbench's
// own choices. The learning phase of the recall workload is not modelled.
module tb_vsa_workloads;
  import vsa_pkg::*;
  localparam int W = W_DEF, K = K_DEF, DEPTH = DEPTH_DEF, C = C_DEF;
  localparam int TW = $clog2(K), IXW = 5 + TW;
  localparam int RAW = 8;                    // words between a write and a read of it
  // classification
  localparam int NF = 8, NV = 112, NC = 16, NS = 300, NQ = 100;
  localparam int A_KEY = 0, A_LEV = 8, A_SMP = 128, A_PRO = 500, A_QRY = 510, A_RES = 600;
  localparam int T_RES = 1;
  // recall
  localparam int NK = 15, NACT = 40, NR = 160, NSTEP = NACT / K;
  localparam int A_RKEY = 700, A_MEM = 720, A_RQ = 730, A_ACT = 800, T_RRES = 2;
  // tree search
  localparam int NT = 70, NI = 9, NTQ = 400, NP = 4, NIS = 2;
  localparam int A_ROLE = 740, A_IT = 810, A_TREE = 900, A_TQ = 990, T_TRES = 3;
  // factorization
  localparam int NPR = 10, NIT = 6, FSH = 5;
  localparam int A_FA = 1000, A_FB = 1001, A_FS = 1002, A_FX = 1003, A_FAH = 1004, A_FBH = 1005;
  localparam int T_FRES = 4;

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
  logic [IXW-1:0] am_idx;
  logic am_valid, scalar_valid, busy, sopc_mode, bnd_ovf;
  logic [K-1:0] dsum_ovf;

  vsa_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #(2000000); failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- software model ----------------
  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic int simf(input logic [W-1:0] a, input logic [W-1:0] b);
    int s = 0;
    for (int i = 0; i < W; i++) s += (a[i] == b[i]) ? 1 : -1;
    return s;
  endfunction
  // majority of n binary vectors, a tie gives 0; the count of ones per
  // element is passed in
  function automatic logic [W-1:0] maj(input int ones [W], input int n);
    logic [W-1:0] v;
    for (int i = 0; i < W; i++) v[i] = (2 * ones[i] > n);
    return v;
  endfunction

  logic [W-1:0] key [NF], lev [NV];
  int tmpl [NC][NF];
  int svals [NS][NF], qvals [NQ][NF], qcls [NQ];
  logic [W-1:0] smp_m [NS], pro_m [NC], q_m [NQ];
  logic [W-1:0] rkey [NK], act [NACT], mem_m;
  int kact [NK], rk [NR];
  logic [W-1:0] role [2], item [NIS * K], tree_m [NT];
  int leaf [NT][NP], tq_t [NTQ], tq_p [NTQ];
  function automatic logic [W-1:0] rho(input logic [W-1:0] x);
    logic [W-1:0] y;
    for (int i = 0; i < W; i++) y[(i+1)%W] = x[i];
    return y;
  endfunction

  function automatic logic [W-1:0] encode(input int v [NF]);
    int ones [W];
    for (int i = 0; i < W; i++) begin
      ones[i] = 0;
      for (int f = 0; f < NF; f++) ones[i] += int'(key[f][i] ^ lev[v[f]][i]);
    end
    return maj(ones, NF);
  endfunction

  task automatic noisy(input int c, output int v [NF]);
    for (int f = 0; f < NF; f++)
      v[f] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, NV - 1) : tmpl[c][f];
  endtask

  // sequential scan with strict improvement, in the order the hardware uses
  task automatic search(input logic [W-1:0] q, input int nstep, input int base,
                        input bit by_tile, output int bidx, output int bval);
    bval = -100000; bidx = 0;
    for (int s = 0; s < nstep; s++)
      for (int t = 0; t < K; t++) begin
        int v;
        v = by_tile ? simf(q, pro_m[s * K + t]) : simf(q, act[s * K + t]);
        if (v > bval) begin bval = v; bidx = s * K + t; end
      end
  endtask

  logic [W-1:0] fa [K], fb [K];
  // sgn of the clamped running sum of +/-w_i * cb_i in the hardware's order;
  // w_i = 1 for the plain superposition, clamp(d_i >>> FSH) otherwise
  function automatic logic [W-1:0] model_bundle(input logic [W-1:0] cb [K], input int d [K],
                                                 input bit weighted);
    int acc [W];
    logic [W-1:0] r;
    for (int i = 0; i < K; i++) begin
      int wq, t;
      wq = weighted ? (d[i] >>> FSH) : 1;
      wq = (wq > 127) ? 127 : ((wq < -127) ? -127 : wq);
      for (int e = 0; e < W; e++) begin
        t = ((i == 0) ? 0 : acc[e]) + (cb[i][e] ? -wq : wq);
        acc[e] = (t > 127) ? 127 : ((t < -127) ? -127 : t);
      end
    end
    for (int e = 0; e < W; e++) r[e] = (acc[e] < 0);
    return r;
  endfunction

  // ---------------- program builder ----------------
  iword_t prog [$];
  task automatic nops(input int n);
    repeat (n) prog.push_back(IWORD_NOP);
  endtask

  // record encoding of one sample, ending in a SGN write
  task automatic gen_encode(input int v [NF], input t7_e wop, input int dtile, input int waddr);
    iword_t w;
    for (int f = 0; f < NF; f++) begin
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_KEY + f); w.t2 = T2_PASS; w.t4 = T4_LOAD;
      prog.push_back(w);
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_LEV + v[f]); w.t2 = T2_PASS; w.t4 = T4_XOR;
      w.t5 = (f == 0) ? T5_LOAD : T5_ACC; w.op.weight = 12'sd1;
      prog.push_back(w);
    end
    w = IWORD_NOP; w.t5 = T5_SGN; w.t7 = wop; w.op.dst_tile = 3'(dtile); w.op.wr_addr = 10'(waddr);
    prog.push_back(w);
  endtask

  // query already broadcast at qaddr: similarity with row base+s of every
  // tile, ARGMAX over nstep steps, result written to (rtile, raddr)
  task automatic gen_search(input int qaddr, input int base, input int nstep,
                            input int rtile, input int raddr);
    iword_t w;
    w = IWORD_NOP; w.t1 = T1_QRY; w.op.rd_addr = 10'(qaddr); prog.push_back(w);
    for (int s = 0; s < nstep; s++) begin
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(base + s); w.t2 = T2_PASS;
      w.t3 = T3_SET; w.op.ds_idx = 3'(s);
      w.t6 = (s == 0) ? T6_START : T6_UPD; w.op.am_tag = 5'(s);
      if (s == nstep - 1) begin
        w.t7 = T7_AM_ONE; w.op.dst_tile = 3'(rtile); w.op.wr_addr = 10'(raddr);
      end
      prog.push_back(w);
    end
  endtask

  // bundle the codebook row (one entry per tile), weighted by DSUM[0] of
  // each tile or by 1, and broadcast the sign to row dst
  task automatic gen_bundle(input int row, input bit weighted, input int unused, input int dst);
    iword_t w;
    for (int i = 0; i < K; i++) begin
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(row); w.t2 = T2_PASS;
      w.op.src_tile = 3'(i); w.t4 = T4_LOAD;
      w.t5 = (i == 0) ? T5_LOAD : T5_ACC;
      if (weighted) begin w.op.wsel = 1'b1; w.op.ds_idx = 3'd0; w.op.wshift = 3'(FSH); end
      else w.op.weight = 12'sd1;
      prog.push_back(w);
    end
    w = IWORD_NOP; w.t5 = T5_SGN; w.t7 = T7_SGN_ALL; w.op.wr_addr = 10'(dst);
    prog.push_back(w);
  endtask

  // one resonator half-step: x = s ^ other estimate, d_i = sim(cb_i, x),
  // new estimate = sgn(sum_i d_i * cb_i)
  task automatic gen_resonate(input int other, input int cb_row, input int dst);
    iword_t w;
    w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_FS); w.t2 = T2_PASS; w.t4 = T4_LOAD;
    prog.push_back(w);
    w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(other); w.t2 = T2_PASS; w.t4 = T4_XOR;
    w.t7 = T7_BIND_ALL; w.op.wr_addr = 10'(A_FX);
    prog.push_back(w);
    nops(RAW);
    w = IWORD_NOP; w.t1 = T1_QRY; w.op.rd_addr = 10'(A_FX); prog.push_back(w);
    w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(cb_row); w.t2 = T2_PASS;
    w.t3 = T3_SET; w.op.ds_idx = 3'd0;
    prog.push_back(w);
    gen_bundle(cb_row, 1'b1, 0, dst);
    nops(RAW);
  endtask

  task automatic run_prog(input string name);
    int n, c;
    @(negedge clk); cfg_we = 1; cfg_sopc = 1'b0; cfg_tile_en = '1;
    @(negedge clk); cfg_we = 0;
    n = prog.size(); c = 0;
    instr_valid = 1; instr = prog.pop_front();
    forever begin
      @(posedge clk); c++;
      if (instr_ready) begin
        if (prog.size() == 0) break;
        #1 instr = prog.pop_front();
      end
    end
    #1 instr_valid = 0; instr = IWORD_NOP;
    while (busy) begin @(posedge clk); c++; #1; end
    chk(c == n + 7, $sformatf("%s: %0d cycles for %0d words", name, c, n));
    repeat (2) @(posedge clk);              // last write leaves the write buffer
    #1;
    $display("%s: %0d words, %0d cycles", name, n, c);
  endtask

  task automatic host_load(input int t, input int a, input logic [W-1:0] v);
    @(negedge clk);
    while (!host_ready) @(negedge clk);
    host_we = 1; host_tile = TW'(t); host_addr = $bits(host_addr)'(a); host_data = v;
    @(negedge clk); host_we = 0;
  endtask

  logic [W-1:0] peek [K];
  int peek_addr = 0;
  for (genvar g = 0; g < K; g++) begin : g_peek
    assign peek[g] = dut.g_tile[g].u_tile.u_sram.mem[peek_addr];
  end
  task automatic memrd(input int t, input int a, output logic [W-1:0] v);
    peek_addr = a; #1 v = peek[t];
  endtask

  // ---------------- test ----------------
  initial begin
    logic [W-1:0] v;
    int bidx, bval, correct, vv [NF];
    int ones [W];
    repeat (3) @(negedge clk); rst_n = 1;

    // item memories and data sets
    for (int f = 0; f < NF; f++) key[f] = rnd();
    for (int l = 0; l < NV; l++) lev[l] = rnd();
    for (int c = 0; c < NC; c++) for (int f = 0; f < NF; f++) tmpl[c][f] = $urandom_range(0, NV - 1);
    for (int n = 0; n < NS; n++) begin
      noisy(n % NC, vv); svals[n] = vv; smp_m[n] = encode(vv);
    end
    for (int q = 0; q < NQ; q++) begin
      qcls[q] = $urandom_range(0, NC - 1); noisy(qcls[q], vv); qvals[q] = vv; q_m[q] = encode(vv);
    end
    for (int c = 0; c < NC; c++) begin
      int n_c;
      n_c = 0;
      for (int i = 0; i < W; i++) ones[i] = 0;
      for (int n = c; n < NS; n += NC) begin
        n_c++;
        for (int i = 0; i < W; i++) ones[i] += int'(smp_m[n][i]);
      end
      pro_m[c] = maj(ones, n_c);
    end
    for (int k = 0; k < NK; k++) begin rkey[k] = rnd(); kact[k] = $urandom_range(0, NACT - 1); end
    for (int a = 0; a < NACT; a++) act[a] = rnd();
    for (int i = 0; i < W; i++) begin
      ones[i] = 0;
      for (int k = 0; k < NK; k++) ones[i] += int'(rkey[k][i] ^ act[kact[k]][i]);
    end
    mem_m = maj(ones, NK);
    for (int r = 0; r < NR; r++) rk[r] = $urandom_range(0, NK - 1);

    for (int r = 0; r < 2; r++) role[r] = rnd();
    for (int i = 0; i < NIS * K; i++) item[i] = rnd();
    for (int t = 0; t < NT; t++) begin
      for (int pth = 0; pth < NP; pth++) leaf[t][pth] = $urandom_range(0, NI - 1);
      for (int i = 0; i < W; i++) begin
        ones[i] = 0;
        for (int pth = 0; pth < NP; pth++)
          ones[i] += int'(rho(role[pth / 2])[i] ^ role[pth % 2][i] ^ item[leaf[t][pth]][i]);
      end
      tree_m[t] = maj(ones, NP);
    end
    for (int q = 0; q < NTQ; q++) begin tq_t[q] = $urandom_range(0, NT - 1); tq_p[q] = $urandom_range(0, NP - 1); end
    for (int r = 0; r < 2; r++) host_load(0, A_ROLE + r, role[r]);
    for (int i = 0; i < NIS * K; i++) host_load(i % K, A_IT + i / K, item[i]);
    for (int f = 0; f < NF; f++) host_load(0, A_KEY + f, key[f]);
    for (int l = 0; l < NV; l++) host_load(0, A_LEV + l, lev[l]);
    for (int k = 0; k < NK; k++) host_load(0, A_RKEY + k, rkey[k]);
    for (int a = 0; a < NACT; a++) host_load(a % K, A_ACT + a / K, act[a]);

    // ---- classification: encode the training set ----
    for (int n = 0; n < NS; n++) gen_encode(svals[n], T7_SGN_ONE, 0, A_SMP + n);
    run_prog("encode training set");
    for (int n = 0; n < NS; n++) begin
      memrd(0, A_SMP + n, v); chk(v == smp_m[n], $sformatf("sample %0d", n));
    end

    // ---- classification: bundle the prototypes ----
    for (int c = 0; c < NC; c++) begin
      iword_t w;
      for (int n = c; n < NS; n += NC) begin
        w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_SMP + n); w.t2 = T2_PASS; w.t4 = T4_LOAD;
        w.t5 = (n == c) ? T5_LOAD : T5_ACC; w.op.weight = 12'sd1;
        prog.push_back(w);
      end
      w = IWORD_NOP; w.t5 = T5_SGN; w.t7 = T7_SGN_ONE; w.op.dst_tile = 3'(c % K);
      w.op.wr_addr = 10'(A_PRO + c / K);
      prog.push_back(w);
    end
    run_prog("train prototypes");
    for (int c = 0; c < NC; c++) begin
      memrd(c % K, A_PRO + c / K, v); chk(v == pro_m[c], $sformatf("prototype %0d", c));
    end

    // ---- classification: queries ----
    for (int q = 0; q < NQ; q++) begin
      gen_encode(qvals[q], T7_SGN_ALL, 0, A_QRY);
      nops(RAW);
      gen_search(A_QRY, A_PRO, NC / K, T_RES, A_RES + q);
    end
    run_prog("classify queries");
    correct = 0;
    for (int q = 0; q < NQ; q++) begin
      search(q_m[q], NC / K, A_PRO, 1'b1, bidx, bval);
      memrd(T_RES, A_RES + q, v);
      chk(v[IXW-1:0] == IXW'(bidx), $sformatf("query %0d index %0d, expected %0d", q, v[IXW-1:0], bidx));
      chk($signed(v[IXW +: C]) == bval, $sformatf("query %0d similarity", q));
      if (int'(v[IXW-1:0]) == qcls[q]) correct++;
    end
    $display("classification: %0d of %0d queries recognised", correct, NQ);
    chk(correct >= NQ * 8 / 10, "classification rate");

    // ---- recall: build the key-action memory ----
    for (int k = 0; k < NK; k++) begin
      iword_t w;
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_RKEY + k); w.t2 = T2_PASS; w.t4 = T4_LOAD;
      prog.push_back(w);
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_ACT + kact[k] / K); w.t2 = T2_PASS;
      w.op.src_tile = 3'(kact[k] % K); w.t4 = T4_XOR;
      w.t5 = (k == 0) ? T5_LOAD : T5_ACC; w.op.weight = 12'sd1;
      prog.push_back(w);
    end
    begin
      iword_t w;
      w = IWORD_NOP; w.t5 = T5_SGN; w.t7 = T7_SGN_ONE; w.op.dst_tile = 3'd0; w.op.wr_addr = 10'(A_MEM);
      prog.push_back(w);
    end
    run_prog("build key-action memory");
    memrd(0, A_MEM, v); chk(v == mem_m, "key-action memory");

    // ---- recall: unbind and clean up ----
    for (int r = 0; r < NR; r++) begin
      iword_t w;
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_MEM); w.t2 = T2_PASS; w.t4 = T4_LOAD;
      prog.push_back(w);
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_RKEY + rk[r]); w.t2 = T2_PASS; w.t4 = T4_XOR;
      w.t7 = T7_BIND_ALL; w.op.wr_addr = 10'(A_RQ);
      prog.push_back(w);
      nops(RAW);
      gen_search(A_RQ, A_ACT, NSTEP, T_RRES, r);
    end
    run_prog("recall actions");
    correct = 0;
    for (int r = 0; r < NR; r++) begin
      search(mem_m ^ rkey[rk[r]], NSTEP, A_ACT, 1'b0, bidx, bval);
      memrd(T_RRES, r, v);
      chk(v[IXW-1:0] == IXW'(bidx), $sformatf("recall %0d index %0d, expected %0d", r, v[IXW-1:0], bidx));
      chk($signed(v[IXW +: C]) == bval, $sformatf("recall %0d similarity", r));
      if (int'(v[IXW-1:0]) == kact[rk[r]]) correct++;
    end
    $display("recall: %0d of %0d actions recalled", correct, NR);
    chk(correct >= NR * 9 / 10, "recall rate");

    // ---- tree search: encode the trees ----
    for (int t = 0; t < NT; t++) begin
      for (int pth = 0; pth < NP; pth++) begin
        iword_t w;
        w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_ROLE + pth / 2); w.t2 = T2_PASS;
        w.t4 = T4_LOAD;
        prog.push_back(w);
        w = IWORD_NOP; w.t4 = T4_PERM; prog.push_back(w);
        w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_ROLE + pth % 2); w.t2 = T2_PASS;
        w.t4 = T4_XOR;
        prog.push_back(w);
        w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_IT + leaf[t][pth] / K); w.t2 = T2_PASS;
        w.op.src_tile = 3'(leaf[t][pth] % K); w.t4 = T4_XOR;
        w.t5 = (pth == 0) ? T5_LOAD : T5_ACC; w.op.weight = 12'sd1;
        prog.push_back(w);
      end
      begin
        iword_t w;
        w = IWORD_NOP; w.t5 = T5_SGN; w.t7 = T7_SGN_ONE; w.op.dst_tile = 3'd0;
        w.op.wr_addr = 10'(A_TREE + t);
        prog.push_back(w);
      end
    end
    run_prog("encode trees");
    for (int t = 0; t < NT; t++) begin
      memrd(0, A_TREE + t, v); chk(v == tree_m[t], $sformatf("tree %0d", t));
    end

    // ---- tree search: which item sits at a path ----
    for (int q = 0; q < NTQ; q++) begin
      iword_t w;
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_ROLE + tq_p[q] / 2); w.t2 = T2_PASS;
      w.t4 = T4_LOAD;
      prog.push_back(w);
      w = IWORD_NOP; w.t4 = T4_PERM; prog.push_back(w);
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_ROLE + tq_p[q] % 2); w.t2 = T2_PASS;
      w.t4 = T4_XOR;
      prog.push_back(w);
      w = IWORD_NOP; w.t1 = T1_READ; w.op.rd_addr = 10'(A_TREE + tq_t[q]); w.t2 = T2_PASS;
      w.t4 = T4_XOR; w.t7 = T7_BIND_ALL; w.op.wr_addr = 10'(A_TQ);
      prog.push_back(w);
      nops(RAW);
      gen_search(A_TQ, A_IT, NIS, T_TRES, q);
    end
    run_prog("search trees");
    correct = 0;
    for (int q = 0; q < NTQ; q++) begin
      logic [W-1:0] u;
      u = tree_m[tq_t[q]] ^ rho(role[tq_p[q] / 2]) ^ role[tq_p[q] % 2];
      bval = -100000; bidx = 0;
      for (int i = 0; i < NIS * K; i++) if (simf(u, item[i]) > bval) begin bval = simf(u, item[i]); bidx = i; end
      memrd(T_TRES, q, v);
      chk(v[IXW-1:0] == IXW'(bidx), $sformatf("tree query %0d index %0d, expected %0d", q, v[IXW-1:0], bidx));
      chk($signed(v[IXW +: C]) == bval, $sformatf("tree query %0d similarity", q));
      if (int'(v[IXW-1:0]) == leaf[tq_t[q]][tq_p[q]]) correct++;
    end
    $display("tree search: %0d of %0d leaves found", correct, NTQ);
    chk(correct >= NTQ * 9 / 10, "tree search rate");

    // ---- factorization: resonator network over two factors ----
    for (int i = 0; i < K; i++) begin fa[i] = rnd(); fb[i] = rnd(); end
    for (int i = 0; i < K; i++) begin host_load(i, A_FA, fa[i]); host_load(i, A_FB, fb[i]); end
    correct = 0;
    for (int pr = 0; pr < NPR; pr++) begin
      int ti, tj;
      logic [W-1:0] comp, ah, bh;
      ti = $urandom_range(0, K - 1); tj = $urandom_range(0, K - 1);
      comp = fa[ti] ^ fb[tj];
      host_load(0, A_FS, comp);
      // initial estimates: superposition of each codebook
      gen_bundle(A_FA, 1'b0, 0, A_FAH);
      gen_bundle(A_FB, 1'b0, 0, A_FBH);
      nops(RAW);
      ah = model_bundle(fa, '{default: 0}, 1'b0);
      bh = model_bundle(fb, '{default: 0}, 1'b0);
      for (int it = 0; it < NIT; it++) begin
        int da [K], db [K];
        gen_resonate(A_FBH, A_FA, A_FAH);         // a_est from s ^ b_est
        for (int i = 0; i < K; i++) da[i] = simf(fa[i], comp ^ bh);
        ah = model_bundle(fa, da, 1'b1);
        gen_resonate(A_FAH, A_FB, A_FBH);         // b_est from s ^ a_est
        for (int i = 0; i < K; i++) db[i] = simf(fb[i], comp ^ ah);
        bh = model_bundle(fb, db, 1'b1);
      end
      gen_search(A_FAH, A_FA, 1, T_FRES, 2 * pr);
      nops(3);                                  // DSUM[0] is read by ARGMAX before it is reused
      gen_search(A_FBH, A_FB, 1, T_FRES, 2 * pr + 1);
      run_prog($sformatf("factorize %0d", pr));
      memrd(0, A_FAH, v); chk(v == ah, $sformatf("factorize %0d: a estimate", pr));
      memrd(0, A_FBH, v); chk(v == bh, $sformatf("factorize %0d: b estimate", pr));
      begin
        int ia, va, ib, vb;
        ia = 0; va = -100000; ib = 0; vb = -100000;
        for (int i = 0; i < K; i++) begin
          if (simf(ah, fa[i]) > va) begin va = simf(ah, fa[i]); ia = i; end
          if (simf(bh, fb[i]) > vb) begin vb = simf(bh, fb[i]); ib = i; end
        end
        memrd(T_FRES, 2 * pr, v);
        chk(v[IXW-1:0] == IXW'(ia) && $signed(v[IXW +: C]) == va, $sformatf("factorize %0d: a search", pr));
        memrd(T_FRES, 2 * pr + 1, v);
        chk(v[IXW-1:0] == IXW'(ib) && $signed(v[IXW +: C]) == vb, $sformatf("factorize %0d: b search", pr));
        if (ia == ti && ib == tj) correct++;
      end
    end
    $display("factorization: %0d of %0d composites factored", correct, NPR);
    chk(correct >= NPR * 9 / 10, "factorization rate");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
