// Self-checking testbench for configuration_module. The testbench makes random
// frame contents, compresses them with its own run-length encoder (runs and
// literals, some crossing frame boundaries) and streams the tokens in with
// random gaps while the configuration bus is stalled at random. Every word
// leaving on the bus is checked for frame number (the set bits of the frame
// mask, lowest first), offset, data and end-of-window flag. A full-rate pass
// checks the cycle count (one cycle per header, per run payload and per output
// word, plus three), and two broken streams (one word short of the frames, one
// window too long) must end with err.
module tb_configuration_module;
  localparam int NUM_FRAMES  = 16;
  localparam int FRAME_WORDS = 16;
  localparam int DW = 32;
  localparam int FRW = $clog2(NUM_FRAMES);
  localparam int OW  = $clog2(FRAME_WORDS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start, s_valid, s_ready, cfg_valid, cfg_ready, cfg_last, busy, done, err;
  logic [NUM_FRAMES-1:0] frame_mask;
  logic [15:0] comp_words;
  logic [DW-1:0] s_data, cfg_data;
  logic [FRW-1:0] cfg_frame;
  logic [OW-1:0] cfg_offset;

  configuration_module #(.NUM_FRAMES(NUM_FRAMES), .FRAME_WORDS(FRAME_WORDS), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_run = 0, n_lit = 0, n_stall = 0;
  logic [DW-1:0] comp [$];
  logic [DW-1:0] plain [$];
  int n_hdr, n_runs;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Run-length encode 'plain' into 'comp'.
  task automatic encode();
    int i = 0;
    comp = {}; n_hdr = 0; n_runs = 0;
    while (i < plain.size()) begin
      int j = i;
      while (j < plain.size() && plain[j] == plain[i] && j - i < 40) j++;
      if (j - i >= 3) begin
        comp.push_back(32'h8000_0000 | (j - i));
        comp.push_back(plain[i]);
        n_hdr++; n_runs++; n_run++;
        i = j;
      end else begin
        int k = i;
        while (k < plain.size() && k - i < 7 &&
               !(k + 2 < plain.size() && plain[k] == plain[k+1] && plain[k] == plain[k+2])) k++;
        if (k == i) k = i + 1;
        comp.push_back(32'(k - i));
        for (int m = i; m < k; m++) comp.push_back(plain[m]);
        n_hdr++; n_lit++;
        i = k;
      end
    end
    // an empty token is legal and ignored
    comp.push_front(32'h0);
    n_hdr++;
  endtask

  task automatic make_plain(input int nwords);
    plain = {};
    while (plain.size() < nwords) begin
      logic [DW-1:0] w;
      int len;
      w = $urandom;
      if ($urandom % 2 != 0) begin
        len = 1 + $urandom % 30;
        for (int k = 0; k < len && plain.size() < nwords; k++) plain.push_back(w);
      end else begin
        len = 1 + $urandom % 6;
        for (int k = 0; k < len && plain.size() < nwords; k++) plain.push_back($urandom);
      end
    end
  endtask

  // Send 'comp' into the module, expecting 'plain' on the frames of mask.
  task automatic run(input logic [NUM_FRAMES-1:0] mask, input bit full_rate,
                     input bit exp_err, output int cycles);
    int si = 0, oi = 0, fr [$];
    for (int i = 0; i < NUM_FRAMES; i++) if (mask[i]) fr.push_back(i);
    @(negedge clk);
    start = 1; frame_mask = mask; comp_words = 16'(comp.size());
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done && cycles < 20000) begin
      s_valid   = (si < comp.size()) && (full_rate || $urandom % 4 != 0);
      s_data    = (si < comp.size()) ? comp[si] : '0;
      cfg_ready = full_rate || ($urandom % 3 != 0);
      #1;
      if (cfg_valid && !cfg_ready) n_stall++;
      if (cfg_valid && cfg_ready) begin
        if (oi < plain.size() && oi / FRAME_WORDS < fr.size()) begin
          check(cfg_frame == FRW'(fr[oi / FRAME_WORDS]), $sformatf("frame %0d word %0d", cfg_frame, oi));
          check(cfg_offset == OW'(oi % FRAME_WORDS), "offset");
          check(cfg_data == plain[oi], $sformatf("data word %0d", oi));
          check(cfg_last == (oi % FRAME_WORDS == FRAME_WORDS - 1), "last");
        end else check(0, "word beyond the frames put on the bus");
        oi++;
      end
      if (s_valid && s_ready) si++;
      @(negedge clk);
      cycles++;
    end
    s_valid = 0;
    check(done, "done");
    check(err == exp_err, $sformatf("err=%0d expected %0d", err, exp_err));
    check(si == comp.size(), "all compressed words consumed");
    if (!exp_err) check(oi == plain.size(), "all words sent");
  endtask

  initial begin
    int cyc;
    logic [NUM_FRAMES-1:0] m;
    start = 0; s_valid = 0; s_data = '0; cfg_ready = 1; frame_mask = '0; comp_words = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // full-rate pass: cycle count
    m = 16'b0000_0000_0110_1001;
    make_plain(4 * FRAME_WORDS); encode();
    run(m, 1, 0, cyc);
    check(cyc == 3 + n_hdr + n_runs + plain.size(),
          $sformatf("cycles %0d expected %0d", cyc, 3 + n_hdr + n_runs + plain.size()));
    // random passes with stalls
    for (int t = 0; t < 30; t++) begin
      int k;
      m = NUM_FRAMES'($urandom);
      if (m == '0) m = 1;
      k = $countones(m);
      make_plain(k * FRAME_WORDS); encode();
      run(m, 0, 0, cyc);
    end
    // too short: last word missing
    m = 16'h0300;
    make_plain(2 * FRAME_WORDS - 1); encode();
    run(m, 0, 1, cyc);
    // too long: one window more than the frames
    m = 16'h8000;
    make_plain(2 * FRAME_WORDS); plain[FRAME_WORDS] = plain[FRAME_WORDS] ^ 1; encode();
    run(m, 0, 1, cyc);
    check(n_run > 0 && n_lit > 0 && n_stall > 0, "runs, literals and stalls seen");
    $display("runs=%0d literals=%0d stalls=%0d", n_run, n_lit, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
