// vsa_bnd: bundling unit (element-wise integer addition).
//
// The register BND holds W signed H-bit counters. Operations:
//   LOAD   BND <= m              ACC   BND <= sat(BND + m)
//   RFLOAD BND <= rf             RFACC BND <= sat(BND + rf)
//   STORE  rf  <= BND (rf_we)    CLR   BND <= 0
// where m is the MULT output and rf the BND RF read data. Sums clamp to
// +/-(2^(H-1)-1) (symmetric, so the sign of a clamped sum is kept); ovf
// pulses one cycle after an operation that clamped any element. One
// operation per cycle, result the next cycle.
// Element-wise addition with a feedback path and a register-file path follows
// the published design; the clamp is this design's choice.
module vsa_bnd
  import vsa_pkg::*;
#(
  parameter int unsigned W = W_DEF,
  parameter int unsigned H = H_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  t5_e                        op,
  input  logic signed [W-1:0][H-1:0] m,
  input  logic signed [W-1:0][H-1:0] rf_rdata,
  output logic signed [W-1:0][H-1:0] bnd,
  output logic                       rf_we,
  output logic signed [W-1:0][H-1:0] rf_wdata,
  output logic                       ovf
);
  localparam logic signed [H:0] LIM = (H+1)'((1 << (H-1)) - 1);

  logic signed [W-1:0][H-1:0] addend, sum;
  logic                       clip;

  always_comb begin
    addend = (op == T5_RFACC) ? rf_rdata : m;
    clip   = 1'b0;
    for (int i = 0; i < W; i++) begin
      logic signed [H:0] s;
      s = (H+1)'(signed'(bnd[i])) + (H+1)'(signed'(addend[i]));
      if (s > LIM)       begin sum[i] = H'(LIM);  clip = 1'b1; end
      else if (s < -LIM) begin sum[i] = H'(-LIM); clip = 1'b1; end
      else                     sum[i] = H'(s);
    end
    rf_we    = (op == T5_STORE);
    rf_wdata = bnd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bnd <= '0;
      ovf <= 1'b0;
    end else begin
      ovf <= 1'b0;
      unique case (op)
        T5_LOAD:   bnd <= m;
        T5_ACC:    begin bnd <= sum; ovf <= clip; end
        T5_RFLOAD: bnd <= rf_rdata;
        T5_RFACC:  begin bnd <= sum; ovf <= clip; end
        T5_CLR:    bnd <= '0;
        default:   ;
      endcase
    end
  end
endmodule
