// tb_vsa_bnd_rf: random writes of integer folds and read-back of every
// register against a model array.
module tb_vsa_bnd_rf;
  localparam int W = 512, H = 8, B = 8;
  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0] idx = '0;
  logic signed [W-1:0][H-1:0] wdata = '0, rdata;
  logic [W*H-1:0] model [B];
  int checks = 0, failures = 0;

  vsa_bnd_rf #(.W(W), .H(H), .B(B)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < B; i++) model[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      we = 1'($urandom); idx = 3'($urandom);
      for (int j = 0; j < W*H/32; j++) wdata[j*4 +: 4] = $urandom;
      if (we) model[idx] = wdata;
      @(negedge clk); we = 0;
      for (int i = 0; i < B; i++) begin
        idx = 3'(i); #1 checks++;
        if (rdata !== model[i]) begin failures++; $display("FAIL reg %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
