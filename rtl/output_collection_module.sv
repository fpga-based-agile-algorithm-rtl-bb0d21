// Output collection module: fetches a function's results from the FPGA's
// output buffers once the function reports that it has finished.
//
// After start it waits for the wrapper's fn_done control line, then reads
// nwords words from the output buffer (address lines ob_addr, read strobe
// ob_re, fixed-width output bus ob_rdata with one cycle of latency) and hands
// them to the controller as a stream (m_valid / m_ready), which stores them in
// the local RAM. The count comes from the function's record, as in the paper;
// the handshake and the strobe encoding are this design's own.
//
// Timing: the buffer's read register doubles as the output register, so with
// m_ready high the first word is on m_data two cycles after fn_done is seen
// and one word follows per cycle;
// a new read is issued only when the word on m_data is being taken, so a stall
// never loses a word. done pulses with the last word taken.
module output_collection_module #(
  parameter int BUF_AW = agile_pkg::BUF_AW,
  parameter int DW     = agile_pkg::DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       nwords,
  // from the output buffers of the common I/O wrapper
  input  logic              fn_done,
  output logic              ob_re,
  output logic [BUF_AW-1:0] ob_addr,
  input  logic [DW-1:0]     ob_rdata,
  // to the controller
  output logic              m_valid,
  output logic [DW-1:0]     m_data,
  input  logic              m_ready,
  output logic              busy,
  output logic              done
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_READ} state_e;
  state_e state;

  logic [15:0] total, issued, taken;
  logic        rvalid;

  assign ob_re   = (state == S_READ) && (issued != total) && (!rvalid || m_ready);
  assign ob_addr = issued[BUF_AW-1:0];
  assign m_valid = rvalid;
  assign m_data  = ob_rdata;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      total  <= '0;
      issued <= '0;
      taken  <= '0;
      rvalid <= 1'b0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      rvalid <= ob_re || (rvalid && !m_ready);
      unique case (state)
        S_IDLE: if (start) begin
          total  <= (nwords > 16'(2**BUF_AW)) ? 16'(2**BUF_AW) : nwords;
          issued <= '0;
          taken  <= '0;
          state  <= S_WAIT;
        end
        S_WAIT: if (fn_done) begin
          if (total == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else state <= S_READ;
        end
        S_READ: begin
          if (ob_re) issued <= issued + 1'b1;
          if (rvalid && m_ready) begin
            taken <= taken + 1'b1;
            if (taken == total - 1'b1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A word offered to the controller stays until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   m_valid && !m_ready |=> m_valid && $stable(m_data));
endmodule
