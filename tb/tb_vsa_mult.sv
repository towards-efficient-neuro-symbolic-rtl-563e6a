// tb_vsa_mult: checks the bipolar times scalar conversion, including the
// shift and the clamp to +/-127, against an integer model.
module tb_vsa_mult;
  localparam int W = 512, H = 8, C = 12;
  logic [W-1:0] bits;
  logic signed [C-1:0] weight;
  logic [2:0] shift;
  logic signed [W-1:0][H-1:0] out;
  int checks = 0, failures = 0;

  vsa_mult #(.W(W), .H(H), .C(C)) dut (.*);

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int ws_list [6] = '{1, -1, 5, 600, -2047, 0};
    for (int n = 0; n < 30; n++) begin
      int w, q;
      for (int j = 0; j < W/32; j++) bits[j*32 +: 32] = $urandom;
      w = (n < 6) ? ws_list[n] : $urandom_range(0, 4095) - 2048;
      weight = C'(w); shift = 3'($urandom_range(0, 7));
      if (n < 6) shift = 0;
      q = w >>> int'(shift);
      if (q > 127) q = 127;
      if (q < -127) q = -127;
      #1;
      for (int i = 0; i < W; i++) begin
        checks++;
        if (int'($signed(out[i])) != (bits[i] ? -q : q)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
