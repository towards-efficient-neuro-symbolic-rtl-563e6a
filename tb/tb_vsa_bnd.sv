// tb_vsa_bnd: drives every BND operation with random MULT and RF inputs and
// compares the counters with a clamping model; checks the RF write strobe
// and the overflow pulse.
module tb_vsa_bnd;
  import vsa_pkg::*;
  localparam int W = 512, H = 8;
  logic clk = 0, rst_n = 0;
  t5_e op = T5_NOP;
  logic signed [W-1:0][H-1:0] m = '0, rf_rdata = '0, bnd, rf_wdata;
  logic rf_we, ovf;
  int model [W];
  int checks = 0, failures = 0, novf = 0;

  vsa_bnd #(.W(W), .H(H)) dut (.*);
  always #5 clk = ~clk;

  function automatic int clamp(input int v, inout bit o);
    if (v > 127) begin o = 1; return 127; end
    if (v < -127) begin o = 1; return -127; end
    return v;
  endfunction

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < W; i++) model[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 120; n++) begin
      bit eo; int span;
      @(negedge clk);
      op = t5_e'($urandom_range(0, 7));
      span = (n % 3 == 0) ? 127 : 20;
      for (int i = 0; i < W; i++) begin
        m[i] = H'($urandom_range(0, 2*span) - span);
        rf_rdata[i] = H'($urandom_range(0, 2*span) - span);
      end
      #1 checks++;
      if (rf_we != (op == T5_STORE) || (rf_we && rf_wdata !== bnd)) begin failures++; $display("FAIL store"); end
      eo = 0;
      for (int i = 0; i < W; i++)
        case (op)
          T5_LOAD:   model[i] = int'($signed(m[i]));
          T5_ACC:    model[i] = clamp(model[i] + int'($signed(m[i])), eo);
          T5_RFLOAD: model[i] = int'($signed(rf_rdata[i]));
          T5_RFACC:  model[i] = clamp(model[i] + int'($signed(rf_rdata[i])), eo);
          T5_CLR:    model[i] = 0;
          default: ;
        endcase
      @(negedge clk); op = T5_NOP;
      checks++; if (ovf != eo) begin failures++; $display("FAIL ovf"); end
      if (ovf) novf++;
      for (int i = 0; i < W; i++) begin
        checks++;
        if (int'($signed(bnd[i])) != model[i]) begin failures++; end
      end
    end
    checks++; if (novf == 0) begin failures++; $display("FAIL no clamp seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
