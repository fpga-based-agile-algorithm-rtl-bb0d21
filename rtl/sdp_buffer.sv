// Simple dual-port buffer used for the input and output buffers of the common
// I/O wrapper: one write port and one read port on the same clock. The
// buffers themselves appear in the paper's block diagram; their depth and this
// port arrangement are this design's choice.
//
// Timing: a write with we=1 lands at the clock edge; a read with re=1 returns
// mem[raddr] on rdata one cycle later, and rdata holds while re=0. A read of
// the address being written in the same cycle returns the old word.
module sdp_buffer #(
  parameter int AW = agile_pkg::BUF_AW,
  parameter int DW = agile_pkg::DATA_W
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
