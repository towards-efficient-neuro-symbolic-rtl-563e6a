// tb_vsa_bind: checks LOAD, XOR and PERM against a model and builds
// x1 ^ rho(x2) ^ rho(rho(x3)) from the documented operation sequence.
module tb_vsa_bind;
  import vsa_pkg::*;
  localparam int W = 512;
  logic clk = 0, rst_n = 0;
  t4_e op = T4_NOP;
  logic [W-1:0] buf_in = '0, acc;
  int checks = 0, failures = 0;

  vsa_bind #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction
  function automatic logic [W-1:0] rho(input logic [W-1:0] x);
    logic [W-1:0] y;
    for (int i = 0; i < W; i++) y[(i+1)%W] = x[i];
    return y;
  endfunction
  task automatic step(input t4_e o, input logic [W-1:0] v);
    @(negedge clk); op = o; buf_in = v;
    @(negedge clk); op = T4_NOP;
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] m, x1, x2, x3;
    repeat (2) @(negedge clk); rst_n = 1;
    m = '0;
    for (int n = 0; n < 60; n++) begin
      t4_e o; logic [W-1:0] v;
      o = t4_e'($urandom_range(0, 3)); v = rnd();
      case (o)
        T4_LOAD: m = v;
        T4_XOR:  m = m ^ v;
        T4_PERM: m = rho(m);
        default: ;
      endcase
      step(o, v);
      checks++; if (acc !== m) begin failures++; $display("FAIL op %0d", o); end
    end
    x1 = rnd(); x2 = rnd(); x3 = rnd();
    step(T4_LOAD, x3); step(T4_PERM, '0); step(T4_XOR, x2); step(T4_PERM, '0); step(T4_XOR, x1);
    checks++; if (acc !== (x1 ^ rho(x2) ^ rho(rho(x3)))) begin failures++; $display("FAIL chain"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
