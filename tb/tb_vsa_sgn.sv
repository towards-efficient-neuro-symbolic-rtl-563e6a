// tb_vsa_sgn: checks the SGN unit and its output buffer.
//
// Random integer folds (with forced zero and extreme elements) are applied.
// After a cycle with ld high, every negative element must read 1 and every
// zero or positive element 0. After a cycle with ld low, the buffer must
// still hold the previous fold. After reset it must be zero. The expected
// bits are computed in the testbench from the sign of each element.
module tb_vsa_sgn;
  localparam int W = 512, H = 8;
  logic clk = 0, rst_n = 0, ld = 0;
  logic signed [W-1:0][H-1:0] in = '0;
  logic [W-1:0] bits, expv;
  int checks = 0, failures = 0;

  vsa_sgn #(.W(W), .H(H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cmp(input logic [W-1:0] e);
    for (int i = 0; i < W; i++) begin
      checks++;
      if (bits[i] != e[i]) failures++;
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    cmp('0);                                  // reset value
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      for (int i = 0; i < W; i++) in[i] = H'($urandom_range(0, 255));
      in[3] = '0; in[4] = H'(8'h80); in[5] = H'(8'h7f); in[6] = H'(8'hff);
      for (int i = 0; i < W; i++) expv[i] = (int'($signed(in[i])) < 0);
      ld = 1; @(negedge clk); ld = 0;
      cmp(expv);
      in = ~in;                               // buffer must not follow
      @(negedge clk);
      cmp(expv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
