// tb_vsa_dsum_rf: drives random CLR/SET/ACC/CLRALL operations with random
// similarities and compares every register with a saturating model; also
// checks the overflow pulse at the 12-bit limits.
module tb_vsa_dsum_rf;
  import vsa_pkg::*;
  localparam int D = 8, C = 12, SW = 11;
  logic clk = 0, rst_n = 0, en = 0;
  t3_e op = T3_NOP;
  logic [2:0] idx = '0, ridx_a = '0, ridx_b = '0;
  logic signed [SW-1:0] sim = '0;
  logic signed [C-1:0] rdata_a, rdata_b;
  logic ovf;
  int model [D];
  int checks = 0, failures = 0, novf = 0;

  vsa_dsum_rf #(.D(D), .C(C), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  function automatic int sat(input int v, output bit o);
    o = 0;
    if (v > 2047) begin o = 1; return 2047; end
    if (v < -2048) begin o = 1; return -2048; end
    return v;
  endfunction

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit o, eo;
    for (int i = 0; i < D; i++) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1; en = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      op = t3_e'($urandom_range(0, 5));
      if (n % 50 == 0) op = T3_CLRALL;
      idx = 3'($urandom); sim = SW'($urandom_range(0, 1024) - 512);
      eo = 0;
      case (op)
        T3_CLR:    model[idx] = 0;
        T3_SET:    model[idx] = sat(int'(sim), eo);
        T3_ACC:    model[idx] = sat(model[idx] + int'(sim), eo);
        T3_CLRALL: for (int i = 0; i < D; i++) model[i] = 0;
        default: ;
      endcase
      @(negedge clk); op = T3_NOP;
      checks++; if (ovf != eo) begin failures++; $display("FAIL ovf"); end
      if (ovf) novf++;
      for (int i = 0; i < D; i++) begin
        ridx_a = 3'(i); ridx_b = 3'(D-1-i); #1;
        checks++;
        if (int'(rdata_a) != model[i] || int'(rdata_b) != model[D-1-i]) begin
          failures++; $display("FAIL reg %0d: %0d vs %0d", i, rdata_a, model[i]);
        end
      end
    end
    // disabled: no change
    en = 0; op = T3_CLRALL; @(negedge clk); op = T3_NOP; ridx_a = 0; #1;
    checks++; if (int'(rdata_a) != model[0]) failures++;
    // force overflow: accumulate +512 five times
    en = 1;
    @(negedge clk); op = T3_SET; idx = 0; sim = 512;
    repeat (4) begin @(negedge clk); op = T3_ACC; end
    @(negedge clk); op = T3_NOP; ridx_a = 0; #1;
    checks++; if (int'(rdata_a) != 2047) failures++;
    checks++; if (novf == 0 && !ovf) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
