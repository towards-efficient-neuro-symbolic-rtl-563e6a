// tb_vsa_argmax: feeds random candidate sets with random tile masks and
// tags and compares the held maximum and its {tag, tile} index with a
// model; checks tie rules and CLR.
module tb_vsa_argmax;
  import vsa_pkg::*;
  localparam int K = 8, C = 12;
  logic clk = 0, rst_n = 0;
  t6_e op = T6_NOP;
  logic [K-1:0] act = '1;
  logic [4:0] tag = '0;
  logic signed [C-1:0] vals [K];
  logic signed [C-1:0] best_val;
  logic [7:0] best_idx;
  logic valid;
  int checks = 0, failures = 0;

  vsa_argmax #(.K(K), .C(C), .TAGW(5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #300000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int mv, mi; bit mvalid;
    for (int t = 0; t < K; t++) vals[t] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    mvalid = 0; mv = 0; mi = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      op = (n % 10 == 0) ? T6_START : ((n % 37 == 5) ? T6_CLR : T6_UPD);
      act = K'($urandom); tag = 5'($urandom);
      for (int t = 0; t < K; t++) vals[t] = C'($urandom_range(0, 60) - 30);
      if (op == T6_CLR || op == T6_START) mvalid = 0;
      if (op == T6_UPD || op == T6_START)
        for (int t = 0; t < K; t++)
          if (act[t] && (!mvalid || int'(vals[t]) > mv)) begin
            mvalid = 1; mv = int'(vals[t]); mi = int'({tag, 3'(t)});
          end
      @(negedge clk); op = T6_NOP;
      checks++;
      if (valid != mvalid || (mvalid && (int'(best_val) != mv || int'(best_idx) != mi))) begin
        failures++; $display("FAIL step %0d: %0d/%0d vs %0d/%0d", n, best_val, best_idx, mv, mi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
