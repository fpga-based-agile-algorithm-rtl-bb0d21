// Agile algorithm-on-demand co-processor: top level.
//
// A host sends commands over PCI; the co-processor keeps a bank of functions as
// compressed partial bit-streams, places a requested function into free (or
// freed) frames of a partially reconfigurable FPGA only when it is not already
// there, and runs it on data staged in a local RAM. This module wires the
// blocks of the paper's block diagram together:
//   agile_controller          - the microcontroller, as a state machine
//   config_rom                - bit-streams and function records
//   local_ram                 - function inputs and outputs
//   frame_manager             - free frame list, replacement table, LRU policy
//   configuration_module      - decompression, frame-by-frame configuration
//   data_input_module         - inputs into the FPGA's input buffers, start
//   output_collection_module  - results out of the FPGA's output buffers
//   common_io_wrapper         - the shared buffers on the FPGA
// Parts the paper takes from elsewhere are outside: the PCI core (its command
// and response bus are the host_* ports), the FPGA's configuration logic (the
// cfg_* ports, one frame word per transfer) and the functions themselves
// (f_* ports, one set per function number, towards the wrapper).
//
// Timing: see the blocks. An EXEC that hits takes about in+out cycles plus some
// twenty cycles of handshakes beyond the function's own run time; a miss adds
// one cycle per decoded configuration word, token header and run payload word,
// and one cycle per eviction.
module agile_coprocessor #(
  parameter int ROM_AW      = agile_pkg::ROM_AW,
  parameter int RAM_AW      = agile_pkg::RAM_AW,
  parameter int DW          = agile_pkg::DATA_W,
  parameter int NUM_FUNCS   = agile_pkg::NUM_FUNCS,
  parameter int NUM_FRAMES  = agile_pkg::NUM_FRAMES,
  parameter int FRAME_WORDS = agile_pkg::FRAME_WORDS,
  parameter int BUF_AW      = agile_pkg::BUF_AW,
  parameter int TS_W        = agile_pkg::TS_W,
  localparam int FW  = $clog2(NUM_FUNCS),
  localparam int NW  = $clog2(NUM_FRAMES + 1),
  localparam int FRW = $clog2(NUM_FRAMES),
  localparam int OW  = $clog2(FRAME_WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host command bus (behind the PCI core)
  input  logic                  host_cmd_valid,
  output logic                  host_cmd_ready,
  input  agile_pkg::host_cmd_t  host_cmd,
  output logic                  host_resp_valid,
  output agile_pkg::host_resp_t host_resp,
  // FPGA configuration port
  output logic                  cfg_valid,
  input  logic                  cfg_ready,
  output logic [FRW-1:0]        cfg_frame,
  output logic [OW-1:0]         cfg_offset,
  output logic [DW-1:0]         cfg_data,
  output logic                  cfg_last,
  // functions on the FPGA
  output logic [NUM_FUNCS-1:0]  f_start,
  input  logic [NUM_FUNCS-1:0]  f_done,
  input  logic [BUF_AW-1:0]     f_in_addr  [NUM_FUNCS],
  output logic [DW-1:0]         f_in_data,
  input  logic [NUM_FUNCS-1:0]  f_out_we,
  input  logic [BUF_AW-1:0]     f_out_addr [NUM_FUNCS],
  input  logic [DW-1:0]         f_out_data [NUM_FUNCS],
  // frame status, for observation
  output logic [NUM_FRAMES-1:0] free_frames,
  output logic                  evict,
  output logic [FW-1:0]         evict_func
);
  // ROM / RAM
  logic              rom_en, rom_we, ram_en, ram_we;
  logic [ROM_AW-1:0] rom_addr;
  logic [RAM_AW-1:0] ram_addr;
  logic [DW-1:0]     rom_wdata, rom_rdata, ram_wdata, ram_rdata;
  // frame manager
  logic                  fm_req, fm_rel, fm_busy, fm_done, fm_hit, fm_err;
  logic [FW-1:0]         fm_func;
  logic [NW-1:0]         fm_nframes;
  logic [NUM_FRAMES-1:0] fm_mask;
  // configuration module
  logic                  cm_start, cm_valid, cm_ready, cm_done, cm_err, cm_busy;
  logic [NUM_FRAMES-1:0] cm_mask;
  logic [15:0]           cm_words;
  logic [DW-1:0]         cm_data;
  // data input module
  logic              di_start, di_valid, di_ready, di_done, di_err, di_busy;
  logic [15:0]       di_nwords;
  logic [FW-1:0]     di_func;
  logic [DW-1:0]     di_data;
  logic              ib_we, fn_start;
  logic [BUF_AW-1:0] ib_addr;
  logic [DW-1:0]     ib_wdata;
  logic [FW-1:0]     fn_sel;
  // output collection module
  logic              oc_start, oc_valid, oc_ready, oc_done, oc_busy;
  logic [15:0]       oc_nwords;
  logic [DW-1:0]     oc_data;
  logic              ob_re, fn_done, fn_running;
  logic [BUF_AW-1:0] ob_addr;
  logic [DW-1:0]     ob_rdata;

  agile_controller #(
    .ROM_AW(ROM_AW), .RAM_AW(RAM_AW), .DW(DW), .NUM_FUNCS(NUM_FUNCS),
    .NUM_FRAMES(NUM_FRAMES), .BUF_AW(BUF_AW)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid(host_cmd_valid), .cmd_ready(host_cmd_ready), .cmd(host_cmd),
    .resp_valid(host_resp_valid), .resp(host_resp),
    .rom_en, .rom_we, .rom_addr, .rom_wdata, .rom_rdata,
    .ram_en, .ram_we, .ram_addr, .ram_wdata, .ram_rdata,
    .fm_req, .fm_func, .fm_nframes, .fm_rel, .fm_done, .fm_hit, .fm_err, .fm_mask,
    .cm_start, .cm_mask, .cm_words, .cm_valid, .cm_data, .cm_ready, .cm_done, .cm_err,
    .di_start, .di_nwords, .di_func, .di_valid, .di_data, .di_ready, .di_done,
    .oc_start, .oc_nwords, .oc_valid, .oc_data, .oc_ready, .oc_done
  );

  config_rom #(.AW(ROM_AW), .DW(DW)) u_rom (
    .clk, .en(rom_en), .we(rom_we), .addr(rom_addr), .wdata(rom_wdata), .rdata(rom_rdata)
  );

  local_ram #(.AW(RAM_AW), .DW(DW)) u_ram (
    .clk, .en(ram_en), .we(ram_we), .addr(ram_addr), .wdata(ram_wdata), .rdata(ram_rdata)
  );

  frame_manager #(.NUM_FRAMES(NUM_FRAMES), .NUM_FUNCS(NUM_FUNCS), .TS_W(TS_W)) u_fm (
    .clk, .rst_n,
    .req_valid(fm_req), .req_func(fm_func), .req_nframes(fm_nframes),
    .rel_valid(fm_rel), .rel_func(fm_func),
    .busy(fm_busy), .done(fm_done), .hit(fm_hit), .err(fm_err), .mask(fm_mask),
    .evict, .evict_func, .free_mask(free_frames)
  );

  configuration_module #(.NUM_FRAMES(NUM_FRAMES), .FRAME_WORDS(FRAME_WORDS), .DW(DW)) u_cfg (
    .clk, .rst_n,
    .start(cm_start), .frame_mask(cm_mask), .comp_words(cm_words),
    .s_valid(cm_valid), .s_data(cm_data), .s_ready(cm_ready),
    .cfg_valid, .cfg_ready, .cfg_frame, .cfg_offset, .cfg_data, .cfg_last,
    .busy(cm_busy), .done(cm_done), .err(cm_err)
  );

  data_input_module #(.BUF_AW(BUF_AW), .DW(DW), .NUM_FUNCS(NUM_FUNCS)) u_din (
    .clk, .rst_n,
    .start(di_start), .nwords(di_nwords), .func(di_func),
    .s_valid(di_valid), .s_data(di_data), .s_ready(di_ready),
    .ib_we, .ib_addr, .ib_wdata, .fn_start, .fn_sel,
    .busy(di_busy), .done(di_done), .err(di_err)
  );

  output_collection_module #(.BUF_AW(BUF_AW), .DW(DW)) u_ocm (
    .clk, .rst_n,
    .start(oc_start), .nwords(oc_nwords), .fn_done,
    .ob_re, .ob_addr, .ob_rdata,
    .m_valid(oc_valid), .m_data(oc_data), .m_ready(oc_ready),
    .busy(oc_busy), .done(oc_done)
  );

  common_io_wrapper #(.NUM_FUNCS(NUM_FUNCS), .BUF_AW(BUF_AW), .DW(DW)) u_wrap (
    .clk, .rst_n,
    .ib_we, .ib_addr, .ib_wdata, .fn_start, .fn_sel,
    .ob_re, .ob_addr, .ob_rdata, .fn_done,
    .f_start, .f_done, .f_in_addr, .f_in_data, .f_out_we, .f_out_addr, .f_out_data,
    .running(fn_running)
  );
endmodule
