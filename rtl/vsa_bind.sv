// vsa_bind: binary binding unit with its accumulating register.
//
// Binding of binary hypervectors is element-wise XOR (multiplication of
// bipolar values). The register ACC collects a chain of bindings:
//   LOAD ACC <= BUF      XOR ACC <= ACC ^ BUF      PERM ACC <= rho(ACC)
// rho is a cyclic rotation by one element (element i moves to i+1).
// Since rho distributes over XOR, x1 ^ rho(x2) ^ rho(rho(x3)) is built by
// LOAD x3, PERM, XOR x2, PERM, XOR x1. One operation per cycle, result in
// ACC the next cycle. ACC resets to zero.
// XOR binding with a feedback register follows the published design; placing
// the permutation here and its direction are this design's choices.
module vsa_bind
  import vsa_pkg::*;
#(
  parameter int unsigned W = W_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  t4_e          op,
  input  logic [W-1:0] buf_in,
  output logic [W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else begin
      unique case (op)
        T4_LOAD: acc <= buf_in;
        T4_XOR:  acc <= acc ^ buf_in;
        T4_PERM: acc <= {acc[W-2:0], acc[W-1]};
        default: ;
      endcase
    end
  end
endmodule
