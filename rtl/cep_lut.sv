// cep_lut: table of the EP variance parameter C_EP(v_x^e).
//
// C_EP(v) = g(v) / (v - g(v)), where g is the asymptotic a posteriori MSE of
// the constellation as a function of the equalizer output variance v. Using it
// makes the EP feedback variance independent of the individual observations:
// v_x^d = v_x^e C_EP and x^d = mu + C_EP (mu - x^e). The table is addressed
// by the 8-bit v_x^e itself, so it has 256 entries of 8 bits (u2.6).
//
// The entries depend on the constellation and are computed offline, so the
// table is a RAM written through a host port (wr_*) rather than a ROM with
// fixed contents; this is a design choice. Reads are synchronous: rd_data
// holds C_EP(rd_addr) from the clock edge at which rd_en is high, as in a
// block RAM, and keeps its value while rd_en is low. Write and read are
// independent ports; a read of the entry being written returns the old value.
module cep_lut #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 8
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
