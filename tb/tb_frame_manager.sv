// Self-checking testbench for frame_manager. A reference model in the
// testbench (per-frame owner, per-function residency and last-access time)
// replays every request: hits, allocations from the free frame list,
// evictions of the least recently used function, releases and illegal frame
// counts. Each answer is checked for hit/err, the frame mask, the functions
// evicted (in order) and the latency: done two cycles after the request plus
// one cycle per eviction.
module tb_frame_manager;
  localparam int NUM_FRAMES = 16;
  localparam int NUM_FUNCS  = 8;
  localparam int FW = $clog2(NUM_FUNCS);
  localparam int NW = $clog2(NUM_FRAMES + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, rel_valid;
  logic [FW-1:0] req_func, rel_func, evict_func;
  logic [NW-1:0] req_nframes;
  logic busy, done, hit, err, evict;
  logic [NUM_FRAMES-1:0] mask, free_mask;

  frame_manager #(.NUM_FRAMES(NUM_FRAMES), .NUM_FUNCS(NUM_FUNCS), .TS_W(32)) dut (.*);

  always #5 clk = ~clk;

  // reference model
  int  m_owner [NUM_FRAMES];   // -1 = free
  bit  m_res   [NUM_FUNCS];
  int  m_ts    [NUM_FUNCS];
  int  m_now;
  int  need    [NUM_FUNCS];

  int checks = 0, failures = 0;
  int n_hit = 0, n_alloc = 0, n_evict = 0, n_err = 0, n_rel = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic request(input int f, input int n);
    int exp_ev [$];
    int got_ev [$];
    logic [NUM_FRAMES-1:0] exp_mask;
    bit exp_hit, exp_err;
    int cyc, nfree, taken;
    // model
    m_now++;
    exp_mask = '0; exp_hit = 0; exp_err = 0;
    if (n == 0 || n > NUM_FRAMES) exp_err = 1;
    else if (m_res[f]) begin
      exp_hit = 1; m_ts[f] = m_now;
      for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == f) exp_mask[i] = 1;
    end else begin
      forever begin
        int v, best;
        nfree = 0;
        for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] < 0) nfree++;
        if (nfree >= n) break;
        v = -1; best = 0;
        for (int g = 0; g < NUM_FUNCS; g++)
          if (m_res[g] && (v < 0 || m_ts[g] < best)) begin v = g; best = m_ts[g]; end
        exp_ev.push_back(v);
        m_res[v] = 0;
        for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == v) m_owner[i] = -1;
      end
      taken = 0;
      for (int i = 0; i < NUM_FRAMES; i++)
        if (m_owner[i] < 0 && taken < n) begin m_owner[i] = f; exp_mask[i] = 1; taken++; end
      m_res[f] = 1; m_ts[f] = m_now;
    end
    // drive
    @(negedge clk);
    req_valid = 1; req_func = FW'(f); req_nframes = NW'(n);
    @(negedge clk);
    req_valid = 0;
    cyc = 1;
    while (!done && cyc < 100) begin
      if (evict) got_ev.push_back(int'(evict_func));
      @(negedge clk); cyc++;
    end
    if (evict) got_ev.push_back(int'(evict_func));
    check(done, "done seen");
    check(cyc == 2 + exp_ev.size(), $sformatf("latency %0d expected %0d", cyc, 2 + exp_ev.size()));
    check(err == exp_err, "err");
    check(hit == exp_hit, $sformatf("hit f=%0d", f));
    check(exp_err || mask == exp_mask, $sformatf("mask %h expected %h", mask, exp_mask));
    check(got_ev == exp_ev, "evicted functions");
    if (exp_err) n_err++; else if (exp_hit) n_hit++; else n_alloc++;
    n_evict += exp_ev.size();
  endtask

  task automatic release_func(input int f);
    logic [NUM_FRAMES-1:0] exp_free;
    @(negedge clk);
    rel_valid = 1; rel_func = FW'(f);
    @(negedge clk);
    rel_valid = 0;
    m_res[f] = 0;
    for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == f) m_owner[i] = -1;
    for (int i = 0; i < NUM_FRAMES; i++) exp_free[i] = (m_owner[i] < 0);
    check(free_mask == exp_free, "free mask after release");
    n_rel++;
  endtask

  initial begin
    req_valid = 0; rel_valid = 0; req_func = '0; rel_func = '0; req_nframes = '0;
    for (int i = 0; i < NUM_FRAMES; i++) m_owner[i] = -1;
    for (int g = 0; g < NUM_FUNCS; g++) begin m_res[g] = 0; m_ts[g] = 0; need[g] = 1 + (g * 3) % 9; end
    m_now = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(free_mask == '1, "all frames free after reset");
    // directed: fill, hit, evict LRU
    request(0, 4); request(1, 4); request(2, 4); request(3, 4);
    request(0, 4);            // hit, makes 1 the oldest
    request(4, 4);            // evicts 1
    request(5, 8);            // evicts 2 and 3
    request(6, 0);            // illegal
    request(6, 17);           // illegal
    release_func(5);
    // random
    for (int k = 0; k < 300; k++) begin
      int f;
      f = $urandom % NUM_FUNCS;
      if ($urandom % 25 == 0) release_func(f);
      else request(f, need[f]);
    end
    check(n_hit > 0 && n_alloc > 0 && n_evict > 0 && n_err > 0 && n_rel > 0, "all cases seen");
    $display("hits=%0d allocations=%0d evictions=%0d errors=%0d releases=%0d",
             n_hit, n_alloc, n_evict, n_err, n_rel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
