// Shared types and default sizes of the algorithm-on-demand co-processor.
//
// The co-processor keeps a bank of hardware functions as compressed partial
// configuration bit-streams in a ROM and swaps them into frames of a partially
// reconfigurable FPGA when the host asks for one. This package holds the
// numbers every block agrees on (bus width, memory depths, frame geometry),
// the host command and response formats, the layout of a function record in
// the ROM and the token format of the compressed bit-stream.
//
// The architecture (ROM with bit-streams at one end and records at the other,
// frames, free frame list, time-stamped replacement table) follows the paper.
// Every size here is this design's own choice: the source gives no numbers.
package agile_pkg;

  // Width of every data path (PCI-side command bus, ROM, RAM, buffers).
  localparam int DATA_W      = 32;
  // ROM: 4096 words; bit-streams grow up from word 0, records down from the top.
  localparam int ROM_AW      = 12;
  // Local RAM: 4096 words.
  localparam int RAM_AW      = 12;
  // Number of function records (and function ports on the I/O wrapper).
  localparam int NUM_FUNCS   = 8;
  // Reconfigurable frames on the FPGA and configuration words per frame.
  localparam int NUM_FRAMES  = 16;
  localparam int FRAME_WORDS = 16;
  // Input and output buffers in the common I/O wrapper: 256 words each.
  localparam int BUF_AW      = 8;
  // Width of the replacement-table time stamps.
  localparam int TS_W        = 32;

  // Record layout: REC_WORDS words per function, record f at
  // ROM_DEPTH - (f+1)*REC_WORDS .. ROM_DEPTH - f*REC_WORDS - 1.
  //   word 0 : start address of the compressed bit-stream
  //   word 1 : compressed size in words (0 = no function stored)
  //   word 2 : [31:16] output words, [15:0] input words
  //   word 3 : number of frames the function occupies
  localparam int REC_WORDS = 4;

  // Compressed bit-stream tokens. A header word is followed by its payload:
  //   bit 31 = 1 : run     - one payload word, repeated COUNT times
  //   bit 31 = 0 : literal - COUNT payload words copied as they are
  // COUNT is bits 15:0; a token with COUNT = 0 carries no payload.
  localparam int TOK_RUN_BIT = 31;
  localparam int TOK_CNT_W   = 16;

  typedef enum logic [2:0] {
    CMD_ROM_WR = 3'd0,   // ROM[addr] <= data (download bit-streams / records)
    CMD_ROM_RD = 3'd1,   // respond with ROM[addr]
    CMD_RAM_WR = 3'd2,   // RAM[addr] <= data (function inputs)
    CMD_RAM_RD = 3'd3,   // respond with RAM[addr] (function outputs)
    CMD_EXEC   = 3'd4    // run function 'func': inputs at RAM[addr], outputs to RAM[data]
  } cmd_op_e;

  typedef enum logic [2:0] {
    ST_OK        = 3'd0,
    ST_NO_RECORD = 3'd1, // record of the function is empty
    ST_NO_FRAMES = 3'd2, // function needs 0 frames or more than the FPGA has
    ST_CFG_ERR   = 3'd3, // bit-stream does not decompress to whole frames
    ST_SIZE_ERR  = 3'd4, // input or output size exceeds the buffers
    ST_BAD_CMD   = 3'd5
  } status_e;

  typedef struct packed {
    cmd_op_e              op;
    logic [7:0]           func;
    logic [15:0]          addr;
    logic [DATA_W-1:0]    data;
  } host_cmd_t;

  typedef struct packed {
    status_e              status;
    logic [DATA_W-1:0]    data;   // read data, or for EXEC: bit 0 = function was already resident
  } host_resp_t;

endpackage
