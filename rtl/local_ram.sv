// Local RAM of the co-processor.
//
// The controller stores here the inputs the host sends for a function and the
// outputs it collects from the FPGA, before they are handed on (to the data
// input module, or back to the host). Only the controller has a port on it.
// Synchronous single-port array, sized by this design (the paper gives no size).
//
// Timing: one access per cycle. A read with en=1, we=0 returns mem[addr] on
// rdata one cycle later; rdata holds while en=0. A write does not change rdata.
module local_ram #(
  parameter int AW = agile_pkg::RAM_AW,
  parameter int DW = agile_pkg::DATA_W
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [DW-1:0] wdata,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (en && we) mem[addr] <= wdata;
    if (en && !we) rdata <= mem[addr];
  end
endmodule
