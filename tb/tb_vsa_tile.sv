// tb_vsa_tile: loads random folds through the write buffer, then runs
// read / CA-90 / POPCNT-DSUM sequences with the stage timing of the
// pipeline and compares CA output, CA-90 RF use and accumulated
// similarities with a software model. Also checks that a disabled tile
// ignores operations.
module tb_vsa_tile;
  import vsa_pkg::*;
  localparam int W = 512, DEPTH = 1024, R = 8, D = 8, C = 12;
  logic clk = 0, rst_n = 0, en = 1;
  t1_e rd_op = T1_NOP; logic [9:0] rd_addr = '0;
  logic qry_ld = 0; t2_e ca_op = T2_HOLD; logic ca_wr = 0; logic [2:0] ca_idx = '0;
  t3_e ds_op = T3_NOP; logic [2:0] ds_idx = '0;
  logic wbuf_we = 0; logic [9:0] wbuf_addr = '0; logic [W-1:0] wbuf_data = '0;
  logic [W-1:0] ca_out;
  logic [2:0] ds_ridx_a = '0, ds_ridx_b = '0;
  logic signed [C-1:0] ds_rdata_a, ds_rdata_b;
  logic ovf;
  logic [W-1:0] mem [16];
  int checks = 0, failures = 0;

  vsa_tile #(.W(W), .DEPTH(DEPTH), .R(R), .D(D), .C(C)) dut (.*);
  always #5 clk = ~clk;

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
  function automatic int simf(input logic [W-1:0] a, input logic [W-1:0] b);
    int s = 0;
    for (int i = 0; i < W; i++) s += (a[i] == b[i]) ? 1 : -1;
    return s;
  endfunction
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  // one word: read addr, CA op, DSUM op (non-overlapped)
  task automatic word(input t1_e o1, input int a, input t2_e o2, input bit wr, input int ci,
                      input t3_e o3, input int di);
    @(negedge clk); rd_op = o1; rd_addr = 10'(a);
    @(negedge clk); rd_op = T1_NOP; qry_ld = (o1 == T1_QRY); ca_op = o2; ca_wr = wr; ca_idx = 3'(ci);
    @(negedge clk); qry_ld = 0; ca_op = T2_HOLD; ca_wr = 0; ds_op = o3; ds_idx = 3'(di);
    @(negedge clk); ds_op = T3_NOP;
  endtask

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] q, exp, g;
    int acc;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < 16; a++) begin
      mem[a] = rnd();
      @(negedge clk); wbuf_we = 1; wbuf_addr = 10'(a + 100); wbuf_data = mem[a];
    end
    @(negedge clk); wbuf_we = 0;
    @(negedge clk);
    // query = item 0
    word(T1_QRY, 100, T2_HOLD, 0, 0, T3_NOP, 0);
    q = mem[0];
    // SET/compare each stored item on its own DSUM register
    for (int a = 0; a < 8; a++) begin
      word(T1_READ, 100 + a, T2_PASS, 0, 0, T3_SET, a);
      chk(ca_out == mem[a], "PASS");
    end
    for (int a = 0; a < 8; a++) begin
      ds_ridx_a = 3'(a); ds_ridx_b = 3'(7 - a); #1;
      chk(int'(ds_rdata_a) == simf(q, mem[a]), $sformatf("sim %0d", a));
      chk(int'(ds_rdata_b) == simf(q, mem[7-a]), "port b");
    end
    // item 0 against itself gives W
    ds_ridx_a = 0; #1 chk(int'(ds_rdata_a) == W, "self similarity");
    // folded vector: seed mem[5], folds = seed, r90(seed), r90^2(seed); query the same
    g = mem[5];
    word(T1_QRY, 105, T2_PASS, 0, 0, T3_SET, 2);   // fold 0 vs fold 0 of query
    acc = W;
    word(T1_NOP, 0, T2_STEP, 1, 3, T3_NOP, 0);     // CA <= r90(CA), cached in RF[3]
    g = r90(g);
    chk(ca_out == g, "STEP");
    word(T1_NOP, 0, T2_RF, 0, 3, T3_NOP, 0);
    chk(ca_out == g, "RF read back");
    word(T1_READ, 105, T2_GEN, 0, 0, T3_ACC, 2);
    chk(ca_out == r90(mem[5]), "GEN");
    acc += simf(mem[5], r90(mem[5]));
    word(T1_NOP, 0, T2_RFSTEP, 0, 3, T3_ACC, 2);
    chk(ca_out == r90(g), "RFSTEP");
    acc += simf(mem[5], r90(g));
    ds_ridx_a = 2; #1 chk(int'(ds_rdata_a) == acc, "accumulated folds");
    // disabled tile: nothing changes
    exp = ca_out;
    en = 0;
    word(T1_READ, 101, T2_PASS, 1, 4, T3_CLRALL, 0);
    chk(ca_out == exp, "disabled CA");
    ds_ridx_a = 2; #1 chk(int'(ds_rdata_a) == acc, "disabled DSUM");
    en = 1;
    word(T1_NOP, 0, T2_HOLD, 0, 0, T3_CLR, 2);
    ds_ridx_a = 2; #1 chk(ds_rdata_a == 0, "CLR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
