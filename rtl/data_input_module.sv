// Data input module: moves a function's inputs into the FPGA's input buffers
// and starts the function.
//
// The controller streams the input words out of the local RAM (s_valid /
// s_ready). Each word is written to the input buffer of the common I/O wrapper
// over the fixed-width input bus, with its word address on the address lines
// and a write strobe on the control lines. After the last of nwords words the
// module raises fn_start for one cycle with fn_sel naming the function; this
// start and select are the rest of the control lines. As in the paper, a
// transfer is a whole number of bus-width words, the count coming from the
// function's record. The handshake and strobe encoding are this design's own.
//
// Interface: start (while busy=0) loads nwords and func; err (with done) is set
// and nothing is written when nwords exceeds the buffer.
// Timing: one word per cycle while s_valid is high; fn_start and done pulse in
// the cycle after the last word is written.
module data_input_module #(
  parameter int BUF_AW    = agile_pkg::BUF_AW,
  parameter int DW        = agile_pkg::DATA_W,
  parameter int NUM_FUNCS = agile_pkg::NUM_FUNCS,
  localparam int FW = $clog2(NUM_FUNCS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       nwords,
  input  logic [FW-1:0]     func,
  input  logic              s_valid,
  input  logic [DW-1:0]     s_data,
  output logic              s_ready,
  // to the input buffers of the common I/O wrapper
  output logic              ib_we,
  output logic [BUF_AW-1:0] ib_addr,
  output logic [DW-1:0]     ib_wdata,
  output logic              fn_start,
  output logic [FW-1:0]     fn_sel,
  output logic              busy,
  output logic              done,
  output logic              err
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_GO} state_e;
  state_e state;

  logic [15:0]       count;
  logic [BUF_AW-1:0] idx;

  assign s_ready  = (state == S_LOAD);
  assign ib_we    = (state == S_LOAD) && s_valid;
  assign ib_addr  = idx;
  assign ib_wdata = s_data;
  assign busy     = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      count    <= '0;
      idx      <= '0;
      fn_start <= 1'b0;
      fn_sel   <= '0;
      done     <= 1'b0;
      err      <= 1'b0;
    end else begin
      fn_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          idx    <= '0;
          count  <= nwords;
          fn_sel <= func;
          if (nwords > 16'(2**BUF_AW)) begin
            done <= 1'b1;
            err  <= 1'b1;
          end else begin
            err   <= 1'b0;
            state <= (nwords == '0) ? S_GO : S_LOAD;
          end
        end
        S_LOAD: if (s_valid) begin
          idx   <= idx + 1'b1;
          count <= count - 1'b1;
          if (count == 16'd1) state <= S_GO;
        end
        S_GO: begin
          fn_start <= 1'b1;
          done     <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
