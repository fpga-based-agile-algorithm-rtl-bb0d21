// Self-checking testbench for output_collection_module. The testbench plays
// the output buffer (a reference array read with one cycle of latency) and the
// function's done line. It checks that nothing is read before done, that the
// words arrive in order and complete under random stalls, that a stalled word
// is never lost, the one-word-per-cycle rate with no stalls, and a zero-length
// transfer.
module tb_output_collection_module;
  localparam int BUF_AW = 8, DW = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, fn_done, ob_re, m_valid, m_ready, busy, done;
  logic [15:0] nwords;
  logic [BUF_AW-1:0] ob_addr;
  logic [DW-1:0] ob_rdata, m_data;

  output_collection_module #(.BUF_AW(BUF_AW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  logic [DW-1:0] obuf [2**BUF_AW];
  always_ff @(posedge clk) if (ob_re) ob_rdata <= obuf[ob_addr];

  int checks = 0, failures = 0, stalls = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xfer(input int n, input bit full, input int delay);
    int got = 0, cyc = 0, first = -1;
    bit bad = 0, early = 0;
    for (int i = 0; i < 2**BUF_AW; i++) obuf[i] = $urandom;
    @(negedge clk);
    fn_done = 0; start = 1; nwords = 16'(n);
    @(negedge clk);
    start = 0;
    for (int d = 0; d < delay; d++) begin
      m_ready = 1; #1;
      if (ob_re || m_valid) early = 1;
      @(negedge clk);
    end
    fn_done = 1;
    while (!done && cyc < 5000) begin
      m_ready = full || ($urandom % 3 != 0);
      #1;
      if (m_valid && !m_ready) stalls++;
      if (m_valid && m_ready) begin
        if (got >= n || m_data != obuf[got]) bad = 1;
        got++;
      end
      @(negedge clk);
      cyc++;
    end
    m_ready = 0;
    check(!early, "no read before the function is done");
    check(done, "done");
    check(!bad, "words in order");
    check(got == n, $sformatf("got %0d of %0d", got, n));
    if (full && n > 0) check(cyc == n + 2, $sformatf("cycles %0d for %0d words", cyc, n));
  endtask

  initial begin
    start = 0; fn_done = 0; m_ready = 0; nwords = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    xfer(20, 1, 5);
    xfer(0, 1, 2);
    xfer(2**BUF_AW, 1, 0);
    for (int t = 0; t < 40; t++) xfer(1 + $urandom % 50, 1'($urandom % 2), $urandom % 4);
    check(stalls > 0, "stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
