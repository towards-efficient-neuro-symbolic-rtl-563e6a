// tb_vsa_sram: checks the local SRAM against an associative-array model:
// random writes and reads, one-cycle read latency, read data held between
// reads, and old data returned for a same-cycle read and write.
module tb_vsa_sram;
  localparam int W = 512, DEPTH = 1024, AW = 10;
  logic clk = 0, we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] model [int];

  vsa_sram #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [W-1:0] rnd();
    logic [W-1:0] v;
    for (int i = 0; i < W/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic chk(input logic [W-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // fill 64 random addresses
    for (int n = 0; n < 64; n++) begin
      @(negedge clk); we = 1; waddr = AW'($urandom); wdata = rnd();
      model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (model[a]) begin
      @(negedge clk); re = 1; raddr = AW'(a);
      @(negedge clk); re = 0; chk(model[a], "read");
      @(negedge clk); chk(model[a], "hold");
    end
    // same-cycle read and write to one address returns the old word
    begin
      int a; logic [W-1:0] old;
      a = 5; old = rnd();
      @(negedge clk); we = 1; waddr = AW'(a); wdata = old;
      @(negedge clk); wdata = rnd(); re = 1; raddr = AW'(a);
      @(negedge clk); we = 0; re = 0; chk(old, "read during write");
      re = 1; @(negedge clk); re = 0; chk(wdata, "read after write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
