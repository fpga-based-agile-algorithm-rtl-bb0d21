// Configuration module: decompresses a function's partial bit-stream and
// writes it into the FPGA frame by frame.
//
// The controller streams the compressed words of one function out of the ROM
// (s_valid/s_ready). The module decodes them and emits plain configuration
// words on the FPGA configuration bus, one window at a time: a window is one
// frame of FRAME_WORDS words, sent to the next frame of frame_mask (lowest
// frame number first) with the word offset inside the frame, cfg_last marking
// the window's final word.
//
// Compression: the paper says the stream is compressed and decompressed window
// by window but gives no scheme, so this design uses the simplest one that
// suits configuration data (long runs of equal words): run-length tokens,
// format in agile_pkg. A run header is followed by one word repeated COUNT
// times, a literal header by COUNT words copied through.
//
// Interface: start (one cycle, while busy=0) loads frame_mask and comp_words,
// the number of compressed words to consume. done pulses once all of them have
// been consumed and emitted; err is then set if the output did not fill exactly
// the frames of frame_mask (words beyond the last frame are dropped) or if the
// stream ended inside a token.
// Timing: a literal word passes combinationally from s_* to cfg_* (one word per
// cycle); a run emits one word per cycle; each header costs one cycle.
module configuration_module #(
  parameter int NUM_FRAMES  = agile_pkg::NUM_FRAMES,
  parameter int FRAME_WORDS = agile_pkg::FRAME_WORDS,
  parameter int DW          = agile_pkg::DATA_W,
  localparam int FRW = $clog2(NUM_FRAMES),
  localparam int OW  = $clog2(FRAME_WORDS),
  localparam int CW  = agile_pkg::TOK_CNT_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [NUM_FRAMES-1:0] frame_mask,
  input  logic [CW-1:0]         comp_words,
  input  logic                  s_valid,
  input  logic [DW-1:0]         s_data,
  output logic                  s_ready,
  output logic                  cfg_valid,
  input  logic                  cfg_ready,
  output logic [FRW-1:0]        cfg_frame,
  output logic [OW-1:0]         cfg_offset,
  output logic [DW-1:0]         cfg_data,
  output logic                  cfg_last,
  output logic                  busy,
  output logic                  done,
  output logic                  err
);
  typedef enum logic [2:0] {S_IDLE, S_HDR, S_LIT, S_RUNW, S_RUN, S_FIN} state_e;
  state_e state;

  logic [NUM_FRAMES-1:0] frames_left;
  logic [CW-1:0]         remaining;   // compressed words still to consume
  logic [CW-1:0]         cnt;         // words left in the current token
  logic [DW-1:0]         run_word;
  logic [OW-1:0]         offset;
  logic                  bad;

  // Current window: lowest frame still to be written.
  logic [FRW-1:0] cur_frame;
  always_comb begin
    cur_frame = '0;
    for (int i = NUM_FRAMES - 1; i >= 0; i--)
      if (frames_left[i]) cur_frame = FRW'(i);
  end

  logic ovf, avail, produce;
  assign ovf     = (frames_left == '0);
  assign avail   = (state == S_RUN) || (state == S_LIT && s_valid && remaining != '0);
  assign produce = avail && (ovf || cfg_ready);

  assign cfg_valid  = avail && !ovf;
  assign cfg_data   = (state == S_RUN) ? run_word : s_data;
  assign cfg_frame  = cur_frame;
  assign cfg_offset = offset;
  assign cfg_last   = (offset == OW'(FRAME_WORDS - 1));
  assign busy       = (state != S_IDLE);

  always_comb begin
    unique case (state)
      S_HDR, S_RUNW: s_ready = (remaining != '0);
      S_LIT:         s_ready = (remaining != '0) && (ovf || cfg_ready);
      default:       s_ready = 1'b0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      frames_left <= '0;
      remaining   <= '0;
      cnt         <= '0;
      run_word    <= '0;
      offset      <= '0;
      bad         <= 1'b0;
      done        <= 1'b0;
      err         <= 1'b0;
    end else begin
      done <= 1'b0;
      if (produce) begin
        if (ovf) bad <= 1'b1;
        else if (cfg_last) begin
          offset      <= '0;
          frames_left <= frames_left & ~(NUM_FRAMES'(1) << cur_frame);
        end else offset <= offset + 1'b1;
      end
      unique case (state)
        S_IDLE: if (start) begin
          frames_left <= frame_mask;
          remaining   <= comp_words;
          offset      <= '0;
          bad         <= 1'b0;
          state       <= S_HDR;
        end
        S_HDR: begin
          if (remaining == '0) state <= S_FIN;
          else if (s_valid) begin
            remaining <= remaining - 1'b1;
            cnt       <= s_data[CW-1:0];
            if (s_data[CW-1:0] != '0)
              state <= s_data[agile_pkg::TOK_RUN_BIT] ? S_RUNW : S_LIT;
          end
        end
        S_RUNW: begin
          if (remaining == '0) begin bad <= 1'b1; state <= S_FIN; end
          else if (s_valid) begin
            remaining <= remaining - 1'b1;
            run_word  <= s_data;
            state     <= S_RUN;
          end
        end
        S_LIT: begin
          if (remaining == '0) begin bad <= 1'b1; state <= S_FIN; end
          else if (produce) begin
            remaining <= remaining - 1'b1;
            cnt       <= cnt - 1'b1;
            if (cnt == CW'(1)) state <= S_HDR;
          end
        end
        S_RUN: if (produce) begin
          cnt <= cnt - 1'b1;
          if (cnt == CW'(1)) state <= S_HDR;
        end
        S_FIN: begin
          done  <= 1'b1;
          err   <= bad || (frames_left != '0) || (offset != '0);
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The configuration bus holds its word until the FPGA takes it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   cfg_valid && !cfg_ready && state == S_RUN |=> cfg_valid && $stable(cfg_data));
endmodule
