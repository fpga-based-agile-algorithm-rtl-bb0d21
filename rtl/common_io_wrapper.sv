// Common I/O wrapper: the static part of the FPGA that every swapped-in
// function talks through.
//
// It holds one input buffer and one output buffer shared by all functions
// (the "common buffers"). The data input module fills the input buffer and
// then starts a function by number; the wrapper latches that number, raises
// that function's f_start for one cycle and, until the function pulses its
// f_done, gives it sole use of the buffers: its read address drives the input
// buffer and its write port drives the output buffer. f_done sets fn_done,
// which tells the output collection module the results are ready; the next
// fn_start clears it. Functions in other frames are not disturbed.
//
// The wrapper, its buffers and its position between the co-processor's data
// modules and the functions follow the paper's block diagram; the paper does
// not describe its insides, so the one-function-at-a-time arbitration and the
// port encoding are this design's own.
//
// Timing: the function reads the input buffer with one cycle of latency
// (address in cycle t, f_in_data in t+1); output writes land at the clock edge.
module common_io_wrapper #(
  parameter int NUM_FUNCS = agile_pkg::NUM_FUNCS,
  parameter int BUF_AW    = agile_pkg::BUF_AW,
  parameter int DW        = agile_pkg::DATA_W,
  localparam int FW = $clog2(NUM_FUNCS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // data input module side
  input  logic              ib_we,
  input  logic [BUF_AW-1:0] ib_addr,
  input  logic [DW-1:0]     ib_wdata,
  input  logic              fn_start,
  input  logic [FW-1:0]     fn_sel,
  // output collection module side
  input  logic              ob_re,
  input  logic [BUF_AW-1:0] ob_addr,
  output logic [DW-1:0]     ob_rdata,
  output logic              fn_done,
  // function side
  output logic [NUM_FUNCS-1:0] f_start,
  input  logic [NUM_FUNCS-1:0] f_done,
  input  logic [BUF_AW-1:0]    f_in_addr  [NUM_FUNCS],
  output logic [DW-1:0]        f_in_data,
  input  logic [NUM_FUNCS-1:0] f_out_we,
  input  logic [BUF_AW-1:0]    f_out_addr [NUM_FUNCS],
  input  logic [DW-1:0]        f_out_data [NUM_FUNCS],
  output logic                 running
);
  logic [FW-1:0] sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel     <= '0;
      running <= 1'b0;
      fn_done <= 1'b0;
      f_start <= '0;
    end else begin
      f_start <= '0;
      if (fn_start) begin
        sel          <= fn_sel;
        running      <= 1'b1;
        fn_done      <= 1'b0;
        f_start[fn_sel] <= 1'b1;
      end else if (running && f_done[sel]) begin
        running <= 1'b0;
        fn_done <= 1'b1;
      end
    end
  end

  sdp_buffer #(.AW(BUF_AW), .DW(DW)) u_input_buffer (
    .clk   (clk),
    .we    (ib_we),
    .waddr (ib_addr),
    .wdata (ib_wdata),
    .re    (running),
    .raddr (f_in_addr[sel]),
    .rdata (f_in_data)
  );

  sdp_buffer #(.AW(BUF_AW), .DW(DW)) u_output_buffer (
    .clk   (clk),
    .we    (running && f_out_we[sel]),
    .waddr (f_out_addr[sel]),
    .wdata (f_out_data[sel]),
    .re    (ob_re),
    .raddr (ob_addr),
    .rdata (ob_rdata)
  );
endmodule
