// Self-checking testbench for data_input_module. Random-length transfers are
// streamed in with random gaps; the testbench records every buffer write and
// checks address, data and count, that fn_start pulses exactly once with the
// right function number after the last word, the one-word-per-cycle rate at
// full speed, a zero-length transfer and the rejection of an oversize one.
module tb_data_input_module;
  localparam int BUF_AW = 8, DW = 32, NUM_FUNCS = 8, FW = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, s_valid, s_ready, ib_we, fn_start, busy, done, err;
  logic [15:0] nwords;
  logic [FW-1:0] func, fn_sel;
  logic [DW-1:0] s_data, ib_wdata;
  logic [BUF_AW-1:0] ib_addr;

  data_input_module #(.BUF_AW(BUF_AW), .DW(DW), .NUM_FUNCS(NUM_FUNCS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [DW-1:0] buf_ref [2**BUF_AW];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic xfer(input int n, input int f, input bit full, input bit exp_err);
    logic [DW-1:0] words [$];
    int si = 0, writes = 0, starts = 0, cyc = 0;
    bit bad = 0;
    for (int i = 0; i < n; i++) words.push_back($urandom);
    @(negedge clk);
    start = 1; nwords = 16'(n); func = FW'(f);
    @(negedge clk);
    start = 0;
    while (!done && cyc < 5000) begin
      s_valid = (si < n) && (full || $urandom % 3 != 0);
      s_data  = (si < n) ? words[si] : '0;
      #1;
      if (ib_we) begin
        if (int'(ib_addr) != writes || ib_wdata != words[writes]) bad = 1;
        writes++;
      end
      if (s_valid && s_ready) si++;
      @(negedge clk);
      cyc++;
      if (fn_start) begin starts++; check(fn_sel == FW'(f), "fn_sel"); end
    end
    check(done, "done");
    check(err == exp_err, "err");
    check(!bad, "buffer writes in order with the streamed data");
    check(writes == (exp_err ? 0 : n), $sformatf("writes %0d of %0d", writes, n));
    check(starts == (exp_err ? 0 : 1) && (exp_err || fn_start), "one fn_start with done");
    if (full && !exp_err) check(cyc == n + 1, $sformatf("cycles %0d for %0d words", cyc, n));
  endtask

  initial begin
    start = 0; s_valid = 0; s_data = '0; nwords = '0; func = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    xfer(17, 3, 1, 0);
    xfer(0, 5, 1, 0);
    xfer(2**BUF_AW, 7, 1, 0);
    xfer(2**BUF_AW + 1, 1, 1, 1);
    for (int t = 0; t < 40; t++) xfer(1 + $urandom % 60, $urandom % NUM_FUNCS, 1'($urandom % 2), 0);
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
