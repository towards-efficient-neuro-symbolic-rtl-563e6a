// tb_vsa_vop: drives the VOP chain with the pipeline's stage timing and
// checks (a) binding of three vectors passed straight to the output buffer
// with weight 1, (b) a weighted bundle sum_i n_i * x_i with BND RF parking,
// against a majority/sign model, (c) counter clamping, and (d) 400 random
// words (random BIND and stage-5 operations, weights, shifts and BND RF
// registers) against an element-by-element model of the whole chain, with
// the BIND register and the output buffer compared after every word.
module tb_vsa_vop;
  import vsa_pkg::*;
  localparam int W = 512, H = 8, C = 12, B = 8;
  logic clk = 0, rst_n = 0, buf_ld = 0;
  logic [W-1:0] bus_in = '0;
  t4_e op4 = T4_NOP; t5_e op5 = T5_NOP;
  logic signed [C-1:0] weight = '0; logic [2:0] wshift = '0; logic [2:0] bnd_idx = '0;
  logic [W-1:0] bind_acc, obuf;
  logic ovf;
  int checks = 0, failures = 0, novf = 0;

  vsa_vop #(.W(W), .H(H), .C(C), .B(B)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (ovf) novf++;

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  // one word: buffer load, BIND op, stage-5 op (non-overlapped)
  task automatic word(input logic [W-1:0] v, input t4_e o4, input t5_e o5, input int w, input int bi);
    @(negedge clk); buf_ld = (o4 == T4_LOAD || o4 == T4_XOR); bus_in = v;
    @(negedge clk); buf_ld = 0; op4 = o4;
    @(negedge clk); op4 = T4_NOP; op5 = o5; weight = C'(w); bnd_idx = 3'(bi);
    @(negedge clk); op5 = T5_NOP;
  endtask

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] x [5];
    int n [5];
    int s [W];
    logic [W-1:0] exp;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 5; i++) x[i] = rnd();
    // (a) x0 ^ x1 ^ x2 through MULT(1) -> BND -> SGN
    word(x[0], T4_LOAD, T5_NOP, 0, 0);
    word(x[1], T4_XOR, T5_NOP, 0, 0);
    word(x[2], T4_XOR, T5_LOAD, 1, 0);
    word('0, T4_NOP, T5_SGN, 0, 0);
    chk(bind_acc == (x[0] ^ x[1] ^ x[2]), "bind chain");
    chk(obuf == (x[0] ^ x[1] ^ x[2]), "sign of weight-1 load");
    // (b) weighted bundle of five vectors, the first two parked in BND RF[6]
    n = '{3, -2, 5, 1, 4};
    for (int e = 0; e < W; e++) s[e] = 0;
    word(x[0], T4_LOAD, T5_NOP, 0, 0); word('0, T4_NOP, T5_LOAD, n[0], 0);
    word(x[1], T4_LOAD, T5_NOP, 0, 0); word('0, T4_NOP, T5_ACC, n[1], 0);
    word('0, T4_NOP, T5_STORE, 0, 6);  word('0, T4_NOP, T5_CLR, 0, 0);
    for (int i = 2; i < 5; i++) begin
      word(x[i], T4_LOAD, T5_NOP, 0, 0); word('0, T4_NOP, T5_ACC, n[i], 0);
    end
    word('0, T4_NOP, T5_RFACC, 0, 6);
    word('0, T4_NOP, T5_SGN, 0, 0);
    for (int i = 0; i < 5; i++)
      for (int e = 0; e < W; e++) s[e] += x[i][e] ? -n[i] : n[i];
    for (int e = 0; e < W; e++) exp[e] = (s[e] < 0);
    chk(obuf == exp, "weighted bundle sign");
    // RFLOAD brings back the parked partial sum
    word('0, T4_NOP, T5_RFLOAD, 0, 6); word('0, T4_NOP, T5_SGN, 0, 0);
    for (int e = 0; e < W; e++) exp[e] = ((x[0][e] ? -3 : 3) + (x[1][e] ? 2 : -2)) < 0;
    chk(obuf == exp, "parked partial sum");
    // (c) clamp: add weight 100 three times
    word(x[3], T4_LOAD, T5_LOAD, 0, 0);
    word('0, T4_NOP, T5_LOAD, 100, 0);
    word('0, T4_NOP, T5_ACC, 100, 0);
    word('0, T4_NOP, T5_ACC, 100, 0);
    word('0, T4_NOP, T5_SGN, 0, 0);
    chk(obuf == x[3], "clamped sum keeps its sign");
    chk(novf > 0, "clamp flagged");
    // weight from a shifted large value: 1000 >>> 3 = 125
    wshift = 3;
    word('0, T4_NOP, T5_LOAD, -1000, 0);
    word('0, T4_NOP, T5_SGN, 0, 0);
    chk(obuf == ~x[3], "negative shifted weight flips the vector");
    // (d) random words against a model of buffer, BIND, MULT, BND, BND RF, SGN
    begin
      logic [W-1:0] mb, ma, mo;
      int mbnd [W];
      int mrf [B][W];
      mb = '0; ma = bind_acc; mo = obuf;
      // bring BND and BND RF to a known state
      word('0, T4_NOP, T5_CLR, 0, 0);
      for (int r = 0; r < B; r++) word('0, T4_NOP, T5_STORE, 0, r);
      for (int e = 0; e < W; e++) begin
        mbnd[e] = 0;
        for (int r = 0; r < B; r++) mrf[r][e] = 0;
      end
      mb = '0;
      for (int k = 0; k < 400; k++) begin
        logic [W-1:0] v;
        t4_e o4; t5_e o5;
        int wv, sh, bi, ws, wq;
        v = rnd(); o4 = t4_e'($urandom_range(0, 3)); o5 = t5_e'($urandom_range(0, 7));
        wv = $urandom_range(0, 4095) - 2048; sh = $urandom_range(0, 7); bi = $urandom_range(0, B - 1);
        if (k % 50 == 0) begin
          for (int e = 0; e < W; e++) mbnd[e] = 0;
          o5 = T5_CLR;
        end
        wshift = 3'(sh);
        word(v, o4, o5, wv, bi);
        // model
        if (o4 == T4_LOAD || o4 == T4_XOR) mb = v;
        case (o4)
          T4_LOAD: ma = mb;
          T4_XOR:  ma = ma ^ mb;
          T4_PERM: begin
            logic [W-1:0] y;
            for (int e = 0; e < W; e++) y[(e + 1) % W] = ma[e];
            ma = y;
          end
          default: ;
        endcase
        ws = wv >>> sh;
        wq = (ws > 127) ? 127 : ((ws < -127) ? -127 : ws);
        for (int e = 0; e < W; e++) begin
          int me, t;
          me = ma[e] ? -wq : wq;
          case (o5)
            T5_LOAD:   mbnd[e] = me;
            T5_ACC:    begin t = mbnd[e] + me; mbnd[e] = (t > 127) ? 127 : ((t < -127) ? -127 : t); end
            T5_RFLOAD: mbnd[e] = mrf[bi][e];
            T5_RFACC:  begin t = mbnd[e] + mrf[bi][e]; mbnd[e] = (t > 127) ? 127 : ((t < -127) ? -127 : t); end
            T5_STORE:  mrf[bi][e] = mbnd[e];
            T5_CLR:    mbnd[e] = 0;
            T5_SGN:    mo[e] = (mbnd[e] < 0);
            default: ;
          endcase
        end
        chk(bind_acc == ma, $sformatf("random word %0d: BIND", k));
        chk(obuf == mo, $sformatf("random word %0d: output buffer", k));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
