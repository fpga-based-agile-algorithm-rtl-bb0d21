// Behavioural model of one function placed in the FPGA's reconfigurable frames
// (the real functions are whatever algorithms the user compiles; this one only
// has to use the wrapper's ports the way they would).
// On start it reads n_in words from the input buffer (address out, data back
// one cycle later), then writes n_out results to the output buffer, one per
// cycle, and pulses done. Result j is
//     in[j mod n_in] * (ID + 3) + (ID << 16) + j      (n_in > 0)
//     ID * 1000 + j                                    (n_in = 0)
// which the testbenches recompute on their own. LAT idle cycles are inserted
// between reading and writing to stand for the algorithm's run time.
module function_model #(
  parameter int ID  = 0,
  parameter int AW  = 8,
  parameter int DW  = 32,
  parameter int LAT = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  int            n_in,
  input  int            n_out,
  output logic [AW-1:0] in_addr,
  input  logic [DW-1:0] in_data,
  output logic          out_we,
  output logic [AW-1:0] out_addr,
  output logic [DW-1:0] out_data,
  output logic          done,
  output int            runs
);
  logic [DW-1:0] inw [2**AW];

  initial begin
    in_addr = '0; out_we = 0; out_addr = '0; out_data = '0; done = 0; runs = 0;
    forever begin
      @(posedge clk);
      if (rst_n && start) begin
        int ni, no;
        ni = n_in; no = n_out;
        for (int i = 0; i < ni; i++) begin
          @(negedge clk); in_addr = AW'(i);
          @(negedge clk); inw[i] = in_data;   // addressed at this edge, data after it
          in_addr = AW'(i + 1);
        end
        repeat (LAT) @(negedge clk);
        for (int j = 0; j < no; j++) begin
          @(negedge clk);
          out_we   = 1;
          out_addr = AW'(j);
          out_data = (ni > 0) ? inw[j % ni] * DW'(ID + 3) + DW'(ID << 16) + DW'(j)
                              : DW'(ID * 1000 + j);
        end
        @(negedge clk); out_we = 0; done = 1; runs++;
        @(negedge clk); done = 0;
      end
    end
  end
endmodule
