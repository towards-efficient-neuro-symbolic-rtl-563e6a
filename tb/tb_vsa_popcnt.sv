// tb_vsa_popcnt: checks the similarity (#equal bits - #different bits)
// against a bit-counting model for random, identical, complementary and
// one-bit-apart folds.
module tb_vsa_popcnt;
  localparam int W = 512;
  logic [W-1:0] a, b;
  logic signed [11:0] sim;
  int checks = 0, failures = 0;

  vsa_popcnt #(.W(W)) dut (.*);

  task automatic chk(input int exp, input string what);
    #1 checks++;
    if (int'(sim) != exp) begin failures++; $display("FAIL %s: %0d vs %0d", what, sim, exp); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 50; n++) begin
      int eq;
      for (int j = 0; j < W/32; j++) begin a[j*32 +: 32] = $urandom; b[j*32 +: 32] = $urandom; end
      eq = 0;
      for (int i = 0; i < W; i++) eq += (a[i] == b[i]) ? 1 : 0;
      chk(eq - (W - eq), "random");
    end
    b = a;  chk(W, "identical");
    b = ~a; chk(-W, "complement");
    b = a; b[77] = ~b[77]; chk(W - 2, "one bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
