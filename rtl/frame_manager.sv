// Frame manager: free frame list, frame replacement table and replacement policy.
//
// The reconfigurable area of the FPGA is divided into NUM_FRAMES frames. A
// function placed on the FPGA occupies some of them. For each request
// (function f, needing n frames) the manager answers in a few cycles:
//   * f already resident  -> hit: its time stamp is refreshed, its frames returned;
//   * enough free frames  -> the n lowest-numbered free frames are given to f;
//   * otherwise           -> the resident function with the oldest time stamp
//                            is evicted (its frames go back to the free list),
//                            one per cycle, until n frames are free.
// The free frame list is kept as a bit per frame, the frame replacement table
// as the owning function of every frame plus one time stamp per function.
// The time stamp is a request counter (the "moment" of the last access).
//
// The policy (a free frame list, and the oldest time stamp choosing the frames
// to replace) follows the paper; the encodings, the lowest-free-first
// allocation and the timing are this design's choices. A release request frees
// a function's frames, used when its configuration failed.
//
// Interface: req_valid is taken when busy=0; done pulses for one cycle with
// hit/err/mask valid. evict pulses for every function thrown out, with
// evict_func. rel_valid is taken when busy=0 and req_valid=0.
// Timing: hit or free allocation: done two cycles after req_valid; each
// eviction adds one cycle.
module frame_manager #(
  parameter int NUM_FRAMES = agile_pkg::NUM_FRAMES,
  parameter int NUM_FUNCS  = agile_pkg::NUM_FUNCS,
  parameter int TS_W       = agile_pkg::TS_W,
  localparam int FW = $clog2(NUM_FUNCS),
  localparam int NW = $clog2(NUM_FRAMES + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  req_valid,
  input  logic [FW-1:0]         req_func,
  input  logic [NW-1:0]         req_nframes,
  input  logic                  rel_valid,
  input  logic [FW-1:0]         rel_func,
  output logic                  busy,
  output logic                  done,
  output logic                  hit,
  output logic                  err,
  output logic [NUM_FRAMES-1:0] mask,
  output logic                  evict,
  output logic [FW-1:0]         evict_func,
  output logic [NUM_FRAMES-1:0] free_mask
);
  typedef enum logic [1:0] {S_IDLE, S_CHECK} state_e;
  state_e state;

  logic [NUM_FRAMES-1:0] used;
  logic [FW-1:0]         owner [NUM_FRAMES];
  logic [NUM_FUNCS-1:0]  resident;
  logic [TS_W-1:0]       ts [NUM_FUNCS];
  logic [TS_W-1:0]       now;
  logic [FW-1:0]         cur_func;
  logic [NW-1:0]         cur_n;

  assign free_mask = ~used;
  assign busy      = (state != S_IDLE);

  // Frames owned by the requested function, free count, first cur_n free frames.
  logic [NUM_FRAMES-1:0] owned_mask, alloc_mask;
  logic [NW-1:0]         free_cnt;
  always_comb begin
    logic [NW-1:0] taken;
    owned_mask = '0;
    alloc_mask = '0;
    free_cnt   = '0;
    taken      = '0;
    for (int i = 0; i < NUM_FRAMES; i++) begin
      owned_mask[i] = used[i] && (owner[i] == cur_func);
      if (!used[i]) begin
        free_cnt = free_cnt + 1'b1;
        if (taken < cur_n) begin
          alloc_mask[i] = 1'b1;
          taken = taken + 1'b1;
        end
      end
    end
  end

  // Least recently used resident function (oldest time stamp).
  logic [FW-1:0] victim;
  always_comb begin
    logic            found;
    logic [TS_W-1:0] oldest;
    victim = '0;
    found  = 1'b0;
    oldest = '0;
    for (int f = 0; f < NUM_FUNCS; f++) begin
      if (resident[f] && (!found || ts[f] < oldest)) begin
        found  = 1'b1;
        oldest = ts[f];
        victim = FW'(f);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      used       <= '0;
      resident   <= '0;
      now        <= '0;
      cur_func   <= '0;
      cur_n      <= '0;
      done       <= 1'b0;
      hit        <= 1'b0;
      err        <= 1'b0;
      mask       <= '0;
      evict      <= 1'b0;
      evict_func <= '0;
      for (int i = 0; i < NUM_FRAMES; i++) owner[i] <= '0;
      for (int f = 0; f < NUM_FUNCS; f++)  ts[f]    <= '0;
    end else begin
      done  <= 1'b0;
      evict <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (req_valid) begin
            cur_func <= req_func;
            cur_n    <= req_nframes;
            now      <= now + 1'b1;
            state    <= S_CHECK;
          end else if (rel_valid) begin
            for (int i = 0; i < NUM_FRAMES; i++)
              if (used[i] && owner[i] == rel_func) used[i] <= 1'b0;
            resident[rel_func] <= 1'b0;
          end
        end
        S_CHECK: begin
          if (cur_n == '0 || cur_n > NW'(NUM_FRAMES)) begin
            done <= 1'b1; err <= 1'b1; hit <= 1'b0; mask <= '0;
            state <= S_IDLE;
          end else if (resident[cur_func]) begin
            ts[cur_func] <= now;
            done <= 1'b1; err <= 1'b0; hit <= 1'b1; mask <= owned_mask;
            state <= S_IDLE;
          end else if (free_cnt >= cur_n) begin
            for (int i = 0; i < NUM_FRAMES; i++)
              if (alloc_mask[i]) begin
                used[i]  <= 1'b1;
                owner[i] <= cur_func;
              end
            resident[cur_func] <= 1'b1;
            ts[cur_func]       <= now;
            done <= 1'b1; err <= 1'b0; hit <= 1'b0; mask <= alloc_mask;
            state <= S_IDLE;
          end else begin
            for (int i = 0; i < NUM_FRAMES; i++)
              if (used[i] && owner[i] == victim) used[i] <= 1'b0;
            resident[victim] <= 1'b0;
            evict      <= 1'b1;
            evict_func <= victim;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A function's frames are never handed out while they are in use.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (state == S_CHECK && free_cnt >= cur_n && !resident[cur_func] && cur_n != '0
                    && cur_n <= NW'(NUM_FRAMES)) |-> ((alloc_mask & used) == '0));
endmodule
