// tb_vsa_ctrl: streams numbered Instruction Words and checks that each one
// appears at stage k exactly k-1 cycles after it was accepted, that empty
// slots read as NOP words, that MOPC accepts one word per cycle while SOPC
// accepts one word per seven cycles with never two in flight, and that the
// tile-enable register loads.
module tb_vsa_ctrl;
  import vsa_pkg::*;
  localparam int K = 8;
  logic clk = 0, rst_n = 0, cfg_we = 0, cfg_sopc = 0, instr_valid = 0;
  logic [K-1:0] cfg_tile_en = '1, tile_en;
  logic sopc, instr_ready, busy;
  iword_t instr = IWORD_NOP;
  iword_t stage [7];
  int checks = 0, failures = 0;
  int cyc = 0;
  int acc_cyc [int];   // accept cycle of word id

  vsa_ctrl #(.K(K)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // monitor: a word id lives in rd_addr; check its stage position
  always @(negedge clk) if (rst_n) begin
    int act;
    act = 0;
    for (int s = 0; s < 7; s++) begin
      if (stage[s] != IWORD_NOP) begin
        int id;
        act++;
        id = int'(stage[s].op.rd_addr);
        checks++;
        if (!acc_cyc.exists(id) || cyc - acc_cyc[id] != s + 1) begin
          failures++; $display("FAIL word %0d at stage %0d", id, s + 1);
        end
      end
    end
    if (sopc) begin checks++; if (act > 1) begin failures++; $display("FAIL SOPC overlap"); end end
  end

  always @(posedge clk) begin
    if (instr_valid && instr_ready) acc_cyc[int'(instr.op.rd_addr)] = cyc;
    cyc++;
  end

  task automatic run(input int first, input int n, output int cycles);
    int c0, id;
    id = first;
    @(negedge clk);
    c0 = cyc;
    instr_valid = 1;
    instr = IWORD_NOP; instr.t1 = T1_READ; instr.t7 = T7_SGN_ONE; instr.op.rd_addr = 10'(id);
    while (id < first + n) begin
      @(posedge clk);
      if (instr_ready) id++;
      @(negedge clk);
      instr.op.rd_addr = 10'(id);
    end
    instr_valid = 0;
    cycles = cyc - c0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int c;
    repeat (2) @(negedge clk); rst_n = 1;
    chk(tile_en == '1 && !sopc, "reset configuration");
    chk(!busy, "idle");
    // MOPC: 20 words in 20 cycles
    run(1, 20, c);
    chk(c == 20, $sformatf("MOPC rate, %0d cycles", c));
    // switch to SOPC, disable tiles 1 and 6
    @(negedge clk); cfg_we = 1; cfg_sopc = 1; cfg_tile_en = 8'b1011_1101;
    @(negedge clk); cfg_we = 0;
    chk(sopc && tile_en == 8'b1011_1101, "configuration loaded");
    run(100, 6, c);
    chk(c == 5 * 7 + 1, $sformatf("SOPC rate, %0d cycles", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
