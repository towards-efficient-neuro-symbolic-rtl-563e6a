// tb_vsa_ca90_rf: writes random folds to random registers of the CA-90 RF
// and reads every register back against a model array.
module tb_vsa_ca90_rf;
  localparam int W = 512, R = 8;
  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0] widx = '0, ridx = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [R];
  int checks = 0, failures = 0;

  vsa_ca90_rf #(.W(W), .R(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < R; i++) model[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < R; i++) begin
      ridx = 3'(i); #1 checks++; if (rdata !== '0) failures++;
    end
    for (int n = 0; n < 60; n++) begin
      @(negedge clk);
      we = 1'($urandom); widx = 3'($urandom);
      for (int j = 0; j < W/32; j++) wdata[j*32 +: 32] = $urandom;
      if (we) model[widx] = wdata;
      @(negedge clk); we = 0;
      for (int i = 0; i < R; i++) begin
        ridx = 3'(i); #1 checks++;
        if (rdata !== model[i]) begin failures++; $display("FAIL reg %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
