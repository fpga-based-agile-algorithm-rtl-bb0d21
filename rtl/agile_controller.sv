// Controller of the co-processor: carries out the host's commands.
//
// In the paper this is a PCI microcontroller running a small operating system.
// Its duties are given, its program is not, so here the same duties are done
// by a hard-wired state machine:
//   ROM_WR / ROM_RD  download (or read back) bit-streams and records;
//   RAM_WR / RAM_RD  place function inputs in the local RAM, read outputs back;
//   EXEC f, in, out  run function f on the inputs at RAM[in..], results to RAM[out..]:
//     1. read f's record (4 words) from the top end of the ROM;
//     2. ask the frame manager for frames; on a hit skip to 4;
//     3. on a miss stream the compressed bit-stream from the ROM into the
//        configuration module, which writes the granted frames;
//     4. stream the inputs from the RAM into the data input module, which
//        fills the input buffers and starts f;
//     5. take the results from the output collection module into the RAM;
//     6. respond (data bit 0 = function was already resident).
// Errors (empty record, sizes beyond the buffers, impossible frame count,
// bit-stream not filling its frames) end the command with a status code; a
// failed configuration releases the frames it was given.
//
// Interface: one command at a time; cmd is taken when cmd_valid && cmd_ready,
// and resp_valid pulses for one cycle with the response. The ROM and RAM are
// synchronous single-port memories with one cycle of read latency whose read
// data holds while not enabled; the controller uses that register as the
// valid word of its read streams, so the streams move one word per cycle.
module agile_controller #(
  parameter int ROM_AW      = agile_pkg::ROM_AW,
  parameter int RAM_AW      = agile_pkg::RAM_AW,
  parameter int DW          = agile_pkg::DATA_W,
  parameter int NUM_FUNCS   = agile_pkg::NUM_FUNCS,
  parameter int NUM_FRAMES  = agile_pkg::NUM_FRAMES,
  parameter int BUF_AW      = agile_pkg::BUF_AW,
  localparam int FW = $clog2(NUM_FUNCS),
  localparam int NW = $clog2(NUM_FRAMES + 1),
  localparam int RW = agile_pkg::REC_WORDS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host (behind the PCI core)
  input  logic                  cmd_valid,
  output logic                  cmd_ready,
  input  agile_pkg::host_cmd_t  cmd,
  output logic                  resp_valid,
  output agile_pkg::host_resp_t resp,
  // ROM
  output logic                  rom_en,
  output logic                  rom_we,
  output logic [ROM_AW-1:0]     rom_addr,
  output logic [DW-1:0]         rom_wdata,
  input  logic [DW-1:0]         rom_rdata,
  // local RAM
  output logic                  ram_en,
  output logic                  ram_we,
  output logic [RAM_AW-1:0]     ram_addr,
  output logic [DW-1:0]         ram_wdata,
  input  logic [DW-1:0]         ram_rdata,
  // frame manager
  output logic                  fm_req,
  output logic [FW-1:0]         fm_func,
  output logic [NW-1:0]         fm_nframes,
  output logic                  fm_rel,
  input  logic                  fm_done,
  input  logic                  fm_hit,
  input  logic                  fm_err,
  input  logic [NUM_FRAMES-1:0] fm_mask,
  // configuration module
  output logic                  cm_start,
  output logic [NUM_FRAMES-1:0] cm_mask,
  output logic [15:0]           cm_words,
  output logic                  cm_valid,
  output logic [DW-1:0]         cm_data,
  input  logic                  cm_ready,
  input  logic                  cm_done,
  input  logic                  cm_err,
  // data input module
  output logic                  di_start,
  output logic [15:0]           di_nwords,
  output logic [FW-1:0]         di_func,
  output logic                  di_valid,
  output logic [DW-1:0]         di_data,
  input  logic                  di_ready,
  input  logic                  di_done,
  // output collection module
  output logic                  oc_start,
  output logic [15:0]           oc_nwords,
  input  logic                  oc_valid,
  input  logic [DW-1:0]         oc_data,
  output logic                  oc_ready,
  input  logic                  oc_done
);
  import agile_pkg::*;

  typedef enum logic [3:0] {
    S_IDLE, S_ROM_RD, S_RAM_RD, S_REC, S_REC_CHK, S_FM_WAIT,
    S_CFG, S_DIN, S_DOUT, S_RESP
  } state_e;
  state_e state;

  host_cmd_t        cur;
  logic [DW-1:0]    rec [RW];
  logic [2:0]       rec_issued, rec_got;
  logic [15:0]      issued;      // stream words read from ROM / RAM
  logic [15:0]      out_cnt;     // results written to RAM
  logic             rvalid;      // memory read register holds an unconsumed word
  logic             hit;
  status_e          status;
  logic [DW-1:0]    rd_word;

  // Record fields
  logic [15:0] rec_start, rec_size, rec_in, rec_out, rec_frames;
  assign rec_start  = rec[0][15:0];
  assign rec_size   = rec[1][15:0];
  assign rec_in     = rec[2][15:0];
  assign rec_out    = rec[2][31:16];
  assign rec_frames = rec[3][15:0];

  logic [ROM_AW-1:0] rec_base;
  assign rec_base = ROM_AW'((2**ROM_AW) - (int'(cur.func) + 1) * RW);

  assign cmd_ready  = (state == S_IDLE);
  assign fm_func    = FW'(cur.func);
  assign fm_nframes = (rec_frames > 16'(NUM_FRAMES)) ? '0 : NW'(rec_frames);
  assign cm_words   = rec_size;
  assign di_nwords  = rec_in;
  assign di_func    = FW'(cur.func);
  assign oc_nwords  = rec_out;
  assign oc_ready   = (state == S_DOUT);

  // Read streams: the memory's read register is the stream's data register.
  logic cfg_rd, din_rd;
  assign cfg_rd   = (state == S_CFG) && (issued != rec_size) && (!rvalid || cm_ready);
  assign din_rd   = (state == S_DIN) && (issued != rec_in)   && (!rvalid || di_ready);
  assign cm_valid = (state == S_CFG) && rvalid;
  assign cm_data  = rom_rdata;
  assign di_valid = (state == S_DIN) && rvalid;
  assign di_data  = ram_rdata;

  // ROM port
  always_comb begin
    rom_en    = 1'b0;
    rom_we    = 1'b0;
    rom_addr  = cur.addr[ROM_AW-1:0];
    rom_wdata = cmd.data;
    if (state == S_IDLE && cmd_valid && cmd.op inside {CMD_ROM_WR, CMD_ROM_RD}) begin
      rom_en   = 1'b1;
      rom_we   = (cmd.op == CMD_ROM_WR);
      rom_addr = cmd.addr[ROM_AW-1:0];
    end else if (state == S_REC && rec_issued != 3'(RW)) begin
      rom_en   = 1'b1;
      rom_addr = rec_base + ROM_AW'(rec_issued);
    end else if (cfg_rd) begin
      rom_en   = 1'b1;
      rom_addr = ROM_AW'(rec_start + issued);
    end
  end

  // RAM port
  always_comb begin
    ram_en    = 1'b0;
    ram_we    = 1'b0;
    ram_addr  = cur.addr[RAM_AW-1:0];
    ram_wdata = oc_data;
    if (state == S_IDLE && cmd_valid && cmd.op inside {CMD_RAM_WR, CMD_RAM_RD}) begin
      ram_en    = 1'b1;
      ram_we    = (cmd.op == CMD_RAM_WR);
      ram_addr  = cmd.addr[RAM_AW-1:0];
      ram_wdata = cmd.data;
    end else if (din_rd) begin
      ram_en   = 1'b1;
      ram_addr = RAM_AW'(cur.addr + issued);
    end else if (state == S_DOUT && oc_valid) begin
      ram_en   = 1'b1;
      ram_we   = 1'b1;
      ram_addr = RAM_AW'(cur.data[15:0] + out_cnt);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur        <= '0;
      rec_issued <= '0;
      rec_got    <= '0;
      issued     <= '0;
      out_cnt    <= '0;
      rvalid     <= 1'b0;
      hit        <= 1'b0;
      status     <= ST_OK;
      rd_word    <= '0;
      resp_valid <= 1'b0;
      resp       <= '0;
      fm_req     <= 1'b0;
      fm_rel     <= 1'b0;
      cm_start   <= 1'b0;
      cm_mask    <= '0;
      di_start   <= 1'b0;
      oc_start   <= 1'b0;
      for (int i = 0; i < RW; i++) rec[i] <= '0;
    end else begin
      resp_valid <= 1'b0;
      fm_req     <= 1'b0;
      fm_rel     <= 1'b0;
      cm_start   <= 1'b0;
      di_start   <= 1'b0;
      oc_start   <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cur     <= cmd;
          status  <= ST_OK;
          rd_word <= '0;
          hit     <= 1'b0;
          unique case (cmd.op)
            CMD_ROM_WR, CMD_RAM_WR: state <= S_RESP;
            CMD_ROM_RD: state <= S_ROM_RD;
            CMD_RAM_RD: state <= S_RAM_RD;
            CMD_EXEC: begin
              rec_issued <= '0;
              rec_got    <= '0;
              rvalid     <= 1'b0;
              if (cmd.func >= 8'(NUM_FUNCS)) begin
                status <= ST_NO_RECORD;
                state  <= S_RESP;
              end else state <= S_REC;
            end
            default: begin
              status <= ST_BAD_CMD;
              state  <= S_RESP;
            end
          endcase
        end
        S_ROM_RD: begin rd_word <= rom_rdata; state <= S_RESP; end
        S_RAM_RD: begin rd_word <= ram_rdata; state <= S_RESP; end
        S_REC: begin
          if (rom_en) rec_issued <= rec_issued + 1'b1;
          rvalid <= rom_en;
          if (rvalid) begin
            rec[rec_got[1:0]] <= rom_rdata;
            rec_got      <= rec_got + 1'b1;
            if (rec_got == 3'(RW - 1)) state <= S_REC_CHK;
          end
        end
        S_REC_CHK: begin
          rvalid <= 1'b0;
          if (rec_size == '0) begin
            status <= ST_NO_RECORD;
            state  <= S_RESP;
          end else if (rec_in > 16'(2**BUF_AW) || rec_out > 16'(2**BUF_AW)) begin
            status <= ST_SIZE_ERR;
            state  <= S_RESP;
          end else begin
            fm_req <= 1'b1;
            state  <= S_FM_WAIT;
          end
        end
        S_FM_WAIT: if (fm_done) begin
          issued <= '0;
          rvalid <= 1'b0;
          hit    <= fm_hit;
          if (fm_err) begin
            status <= ST_NO_FRAMES;
            state  <= S_RESP;
          end else if (fm_hit) begin
            di_start <= 1'b1;
            state    <= S_DIN;
          end else begin
            cm_mask  <= fm_mask;
            cm_start <= 1'b1;
            state    <= S_CFG;
          end
        end
        S_CFG: begin
          if (cfg_rd) issued <= issued + 1'b1;
          rvalid <= cfg_rd || (rvalid && !cm_ready);
          if (cm_done) begin
            issued <= '0;
            rvalid <= 1'b0;
            if (cm_err) begin
              status <= ST_CFG_ERR;
              fm_rel <= 1'b1;
              state  <= S_RESP;
            end else begin
              di_start <= 1'b1;
              state    <= S_DIN;
            end
          end
        end
        S_DIN: begin
          if (din_rd) issued <= issued + 1'b1;
          rvalid <= din_rd || (rvalid && !di_ready);
          if (di_done) begin
            out_cnt  <= '0;
            oc_start <= 1'b1;
            state    <= S_DOUT;
          end
        end
        S_DOUT: begin
          if (oc_valid) out_cnt <= out_cnt + 1'b1;
          if (oc_done) state <= S_RESP;
        end
        S_RESP: begin
          resp_valid  <= 1'b1;
          resp.status <= status;
          resp.data   <= (cur.op == CMD_EXEC) ? DW'(hit) : rd_word;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // One command at a time: a taken command blocks the next until it is answered.
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && cmd_ready |=> !cmd_ready);
endmodule
