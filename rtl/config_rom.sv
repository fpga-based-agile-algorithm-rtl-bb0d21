// Configuration ROM of the co-processor.
//
// Holds the compressed partial bit-streams of all functions and, from the
// other end of the address space, one record per function (start address,
// compressed size, input/output size, frame count; layout in agile_pkg). The
// host downloads both through the controller, which is the only block with a
// port on this memory, as in the paper. Physically this is a rewritable
// non-volatile part (the paper calls it a ROM although the host writes it);
// here it is a synchronous single-port array.
//
// Timing: one access per cycle. A read with en=1, we=0 returns mem[addr] on
// rdata one cycle later; rdata holds its value while en=0, so a reader may
// stall without re-reading. A write does not change rdata.
module config_rom #(
  parameter int AW = agile_pkg::ROM_AW,
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
