// tb_vsa_ca90: checks the CA-90 unit against a bit-level rule-90 model
// (new[i] = old[i-1] xor old[i+1] on a ring) for every operation, the hold
// behaviour, the enable gate and the RF write strobe.
module tb_vsa_ca90;
  import vsa_pkg::*;
  localparam int W = 512;
  logic clk = 0, rst_n = 0, en = 0, wr = 0;
  t2_e op = T2_HOLD;
  logic [W-1:0] reg_data = '0, rf_rdata = '0, ca, rf_wdata;
  logic rf_we;
  int checks = 0, failures = 0;

  vsa_ca90 #(.W(W)) dut (.*);
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
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] exp;
    repeat (2) @(negedge clk); rst_n = 1; en = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      reg_data = rnd(); rf_rdata = rnd(); op = t2_e'($urandom_range(0, 7)); wr = 1'($urandom);
      case (op)
        T2_PASS:   exp = reg_data;
        T2_GEN:    exp = r90(reg_data);
        T2_STEP:   exp = r90(ca);
        T2_RF:     exp = rf_rdata;
        T2_RFSTEP: exp = r90(rf_rdata);
        default:   exp = ca;
      endcase
      #1 chk(rf_we == (wr && op inside {T2_PASS, T2_GEN, T2_STEP, T2_RF, T2_RFSTEP}), "rf_we");
      if (rf_we) chk(rf_wdata == exp, "rf_wdata");
      @(negedge clk); op = T2_HOLD; chk(ca == exp, $sformatf("op %0d", n));
    end
    // a known pattern: a single 1 spreads to its two neighbours
    @(negedge clk); op = T2_PASS; reg_data = '0; reg_data[0] = 1'b1;
    @(negedge clk); op = T2_STEP;
    @(negedge clk); op = T2_HOLD;
    exp = '0; exp[1] = 1'b1; exp[W-1] = 1'b1;
    chk(ca == exp, "single-seed step");
    // disabled: no change
    en = 0; op = T2_GEN; reg_data = rnd();
    @(negedge clk); chk(ca == exp, "disabled hold");
    #1 chk(!rf_we, "disabled rf_we");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
