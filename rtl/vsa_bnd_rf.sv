// vsa_bnd_rf: register file for integer (bundled) folds.
//
// B registers, each W elements of H signed bits. BND parks a partial
// superposition here and picks it up later for continued bundling.
// Asynchronous read (rdata follows idx), synchronous write, reset to zero.
// B follows the published configuration; the port arrangement is this
// design's choice.
module vsa_bnd_rf #(
  parameter int unsigned W  = vsa_pkg::W_DEF,
  parameter int unsigned H  = vsa_pkg::H_DEF,
  parameter int unsigned B  = vsa_pkg::B_DEF,
  localparam int unsigned IW = (B > 1) ? $clog2(B) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we,
  input  logic [IW-1:0]              idx,
  input  logic signed [W-1:0][H-1:0] wdata,
  output logic signed [W-1:0][H-1:0] rdata
);
  logic [W-1:0][H-1:0] rf [B];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < B; i++) rf[i] <= '0;
    end else if (we) begin
      rf[idx] <= wdata;
    end
  end

  assign rdata = rf[idx];
endmodule
