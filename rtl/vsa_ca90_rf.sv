// vsa_ca90_rf: register file for folds produced by CA-90.
//
// R registers of W bits. A fold generated once is kept here and read back
// later instead of being regenerated, which saves CA-90 activity. One
// asynchronous read port (rdata follows ridx in the same cycle) and one
// synchronous write port. Registers reset to zero.
// R follows the published configuration; the port arrangement is this
// design's choice.
module vsa_ca90_rf #(
  parameter int unsigned W  = vsa_pkg::W_DEF,
  parameter int unsigned R  = vsa_pkg::R_DEF,
  localparam int unsigned IW = (R > 1) ? $clog2(R) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [IW-1:0] widx,
  input  logic [W-1:0]  wdata,
  input  logic [IW-1:0] ridx,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] rf [R];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < R; i++) rf[i] <= '0;
    end else if (we) begin
      rf[widx] <= wdata;
    end
  end

  assign rdata = rf[ridx];
endmodule
