// End-to-end testbench of the co-processor at its default sizes.
//
// The testbench is the host and the FPGA around the design:
//  * as host it downloads, over the command bus, a compressed bit-stream and a
//    record for each of seven functions (bit-streams from ROM word 0 upward,
//    records from the top down), writes inputs into the local RAM, issues
//    EXEC commands and reads the results back;
//  * as the FPGA's configuration logic it stores every configuration word by
//    frame and offset, stalling the bus at random, and remembers which
//    function's stream wrote each frame;
//  * eight function models sit on the wrapper's function ports.
// A reference model of the frame manager (owner per frame, LRU time stamps)
// predicts for each EXEC whether it hits, which frames it gets and which
// functions are evicted. Checks: the response status and hit bit, the frames
// written and their contents against the uncompressed bit-stream, that a
// function is only ever started while all its frames hold its configuration,
// every result word against the function formula, and the error responses
// (empty record, buffer overflow, too many frames). Each mechanism - miss with
// configuration, hit, eviction, run and literal tokens, configuration-bus
// stall, each error - is counted and must occur at least once.
module tb_agile_coprocessor;
  import agile_pkg::*;
  localparam int NF = NUM_FUNCS;
  localparam int FRW = $clog2(NUM_FRAMES);
  localparam int OW  = $clog2(FRAME_WORDS);
  localparam int FW  = $clog2(NUM_FUNCS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic host_cmd_valid, host_cmd_ready, host_resp_valid;
  host_cmd_t  host_cmd;
  host_resp_t host_resp;
  logic cfg_valid, cfg_ready, cfg_last;
  logic [FRW-1:0] cfg_frame;
  logic [OW-1:0] cfg_offset;
  logic [DATA_W-1:0] cfg_data;
  logic [NF-1:0] f_start, f_done, f_out_we;
  logic [BUF_AW-1:0] f_in_addr [NF];
  logic [BUF_AW-1:0] f_out_addr [NF];
  logic [DATA_W-1:0] f_out_data [NF];
  logic [DATA_W-1:0] f_in_data;
  logic [NUM_FRAMES-1:0] free_frames;
  logic evict;
  logic [FW-1:0] evict_func;

  agile_coprocessor dut (.*);

  always #5 clk = ~clk;

  // ---------------- function table (sizes chosen by this test) -----------
  int fr_need [NF] = '{3, 5, 4, 6, 2, 7, 20, 0};   // 6: too many frames, 7: no record
  int n_in    [NF] = '{8, 16, 1, 40, 0, 256, 4, 0};
  int n_out   [NF] = '{8, 4, 20, 40, 5, 256, 4, 0};
  int runs    [NF];

  for (genvar g = 0; g < NF; g++) begin : g_fn
    function_model #(.ID(g), .AW(BUF_AW), .DW(DATA_W), .LAT(1 + g)) u_fn (
      .clk, .rst_n, .start(f_start[g]), .n_in(n_in[g]), .n_out(n_out[g]),
      .in_addr(f_in_addr[g]), .in_data(f_in_data),
      .out_we(f_out_we[g]), .out_addr(f_out_addr[g]), .out_data(f_out_data[g]),
      .done(f_done[g]), .runs(runs[g])
    );
  end

  int checks = 0, failures = 0;
  int n_miss = 0, n_hit = 0, n_evict = 0, n_run_tok = 0, n_lit_tok = 0, n_stall = 0;
  int n_err_rec = 0, n_err_size = 0, n_err_frames = 0, n_err_cfg = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- FPGA configuration port model ------------------------
  logic [DATA_W-1:0] frame_mem [NUM_FRAMES][FRAME_WORDS];
  int                frame_fn  [NUM_FRAMES];   // function whose stream last wrote it
  int                cur_exec_fn = -1;
  bit                stall_cfg = 0;

  always @(negedge clk) cfg_ready = !(stall_cfg && ($urandom % 3 == 0));
  always @(posedge clk) begin
    if (cfg_valid && !cfg_ready) n_stall++;
    if (cfg_valid && cfg_ready) begin
      frame_mem[cfg_frame][cfg_offset] <= cfg_data;
      frame_fn[cfg_frame] <= cur_exec_fn;
    end
  end

  // uncompressed bit-streams
  logic [DATA_W-1:0] plain [NF][$];

  // reference frame manager state (see model_request)
  int m_owner [NUM_FRAMES];
  bit m_res [NF];
  int m_ts [NF];
  int m_now = 0;

  function automatic bit configured(int f);
    int cnt = 0;
    for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == f && frame_fn[i] == f) cnt++;
    return cnt == fr_need[f];
  endfunction

  // a function may only start while its frames hold its configuration
  always @(posedge clk)
    for (int g = 0; g < NF; g++)
      if (rst_n && f_start[g]) check(configured(g), $sformatf("function %0d configured at start", g));

  // ---------------- host side ---------------------------------------------
  task automatic host(input cmd_op_e op, input int func, input int addr, input int data,
                      output host_resp_t r);
    int cyc = 0;
    @(negedge clk);
    host_cmd_valid = 1;
    host_cmd = '{op: op, func: 8'(func), addr: 16'(addr), data: DATA_W'(data)};
    #1;
    while (!host_cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_cmd_valid = 0;
    while (!host_resp_valid && cyc < 100000) begin @(negedge clk); cyc++; end
    r = host_resp;
    check(host_resp_valid, "response");
  endtask

  // run-length encoder (format in agile_pkg)
  function automatic void encode(input logic [DATA_W-1:0] p [$], ref logic [DATA_W-1:0] c [$]);
    int i = 0;
    c = {};
    while (i < p.size()) begin
      int j = i;
      while (j < p.size() && p[j] == p[i] && j - i < 100) j++;
      if (j - i >= 3) begin
        c.push_back(32'h8000_0000 | (j - i)); c.push_back(p[i]); i = j; n_run_tok++;
      end else begin
        int k = i;
        while (k < p.size() && k - i < 9 &&
               !(k + 2 < p.size() && p[k] == p[k+1] && p[k] == p[k+2])) k++;
        if (k == i) k = i + 1;
        c.push_back(32'(k - i));
        for (int m = i; m < k; m++) c.push_back(p[m]);
        i = k; n_lit_tok++;
      end
    end
  endfunction

  // ---------------- reference frame manager --------------------------------

  task automatic model_request(input int f, output bit hit, output logic [NUM_FRAMES-1:0] mask,
                               output int ev [$]);
    int taken, nfree;
    m_now++;
    mask = '0; ev = {};
    hit = m_res[f];
    if (hit) begin
      m_ts[f] = m_now;
      for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == f) mask[i] = 1;
      return;
    end
    forever begin
      int v = -1, best = 0;
      nfree = 0;
      for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] < 0) nfree++;
      if (nfree >= fr_need[f]) break;
      for (int g = 0; g < NF; g++) if (m_res[g] && (v < 0 || m_ts[g] < best)) begin v = g; best = m_ts[g]; end
      ev.push_back(v); m_res[v] = 0;
      for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == v) m_owner[i] = -1;
    end
    taken = 0;
    for (int i = 0; i < NUM_FRAMES; i++)
      if (m_owner[i] < 0 && taken < fr_need[f]) begin m_owner[i] = f; mask[i] = 1; taken++; end
    m_res[f] = 1; m_ts[f] = m_now;
  endtask

  int got_ev [$];
  always @(posedge clk) if (evict) got_ev.push_back(int'(evict_func));

  task automatic exec(input int f);
    host_resp_t r;
    logic [DATA_W-1:0] inw [$];
    bit exp_hit;
    logic [NUM_FRAMES-1:0] exp_mask;
    int exp_ev [$];
    int in_base, out_base, fi;
    in_base = 16 * ($urandom % 8);
    out_base = 2048 + 16 * ($urandom % 8);
    for (int i = 0; i < n_in[f]; i++) begin
      inw.push_back($urandom);
      host(CMD_RAM_WR, 0, in_base + i, int'(inw[i]), r);
    end
    model_request(f, exp_hit, exp_mask, exp_ev);
    got_ev = {};
    cur_exec_fn = f;
    host(CMD_EXEC, f, in_base, out_base, r);
    cur_exec_fn = -1;
    check(r.status == ST_OK, $sformatf("exec f%0d status %0d", f, r.status));
    check(r.data[0] == exp_hit, $sformatf("exec f%0d hit %0d expected %0d", f, r.data[0], exp_hit));
    check(got_ev == exp_ev, $sformatf("exec f%0d evictions", f));
    if (exp_hit) n_hit++; else n_miss++;
    n_evict += exp_ev.size();
    // frames hold f's configuration, windows in ascending frame order
    fi = 0;
    for (int i = 0; i < NUM_FRAMES; i++)
      if (exp_mask[i]) begin
        bit ok = (frame_fn[i] == f);
        for (int o = 0; o < FRAME_WORDS; o++)
          if (frame_mem[i][o] != plain[f][fi * FRAME_WORDS + o]) ok = 0;
        check(ok, $sformatf("frame %0d holds window %0d of f%0d", i, fi, f));
        fi++;
      end
    check(fi == fr_need[f], "frame count");
    // results
    for (int j = 0; j < n_out[f]; j++) begin
      logic [DATA_W-1:0] exp;
      exp = (n_in[f] > 0) ? inw[j % n_in[f]] * DATA_W'(f + 3) + DATA_W'(f << 16) + DATA_W'(j)
                          : DATA_W'(f * 1000 + j);
      host(CMD_RAM_RD, 0, out_base + j, 0, r);
      check(r.status == ST_OK && r.data == exp,
            $sformatf("f%0d result %0d: %h expected %h", f, j, r.data, exp));
    end
  endtask

  initial begin
    host_resp_t r;
    int addr;
    host_cmd_valid = 0; host_cmd = '0; cfg_ready = 1;
    for (int i = 0; i < NUM_FRAMES; i++) begin m_owner[i] = -1; frame_fn[i] = -1; end
    for (int g = 0; g < NF; g++) begin m_res[g] = 0; m_ts[g] = 0; end
    repeat (4) @(negedge clk);
    rst_n = 1;

    // download bit-streams and records
    addr = 0;
    for (int f = 0; f < NF - 1; f++) begin
      logic [DATA_W-1:0] comp [$];
      int rb, nw;
      nw = (fr_need[f] <= NUM_FRAMES ? fr_need[f] : 1) * FRAME_WORDS;
      while (plain[f].size() < nw) begin
        logic [DATA_W-1:0] w;
        int len;
        w = $urandom;
        len = ($urandom % 2 != 0) ? 1 + $urandom % 40 : 1;
        for (int k = 0; k < len && plain[f].size() < nw; k++)
          plain[f].push_back(len > 1 ? w : DATA_W'($urandom));
      end
      encode(plain[f], comp);
      for (int i = 0; i < comp.size(); i++) host(CMD_ROM_WR, 0, addr + i, int'(comp[i]), r);
      rb = (1 << ROM_AW) - (f + 1) * REC_WORDS;
      host(CMD_ROM_WR, 0, rb + 0, addr, r);
      host(CMD_ROM_WR, 0, rb + 1, comp.size(), r);
      host(CMD_ROM_WR, 0, rb + 2, (n_out[f] << 16) | n_in[f], r);
      host(CMD_ROM_WR, 0, rb + 3, fr_need[f], r);
      addr += comp.size();
    end
    // record 7 left empty
    for (int i = 0; i < REC_WORDS; i++)
      host(CMD_ROM_WR, 0, (1 << ROM_AW) - NF * REC_WORDS + i, 0, r);
    host(CMD_ROM_RD, 0, (1 << ROM_AW) - REC_WORDS + 3, 0, r);
    check(r.status == ST_OK && r.data == DATA_W'(fr_need[0]), "ROM read back");

    // directed sequence, then random
    exec(0); exec(1); exec(2);           // misses, 12 frames used
    exec(0);                             // hit
    stall_cfg = 1;
    exec(3);                             // needs 6, 4 free: evicts LRU (1)
    exec(5);                             // needs 7: evicts 2, 0 ...
    exec(4); exec(3);
    for (int t = 0; t < 40; t++) exec($urandom % 6);

    // errors
    host(CMD_EXEC, 7, 0, 0, r);
    check(r.status == ST_NO_RECORD, "empty record refused"); n_err_rec++;
    host(CMD_EXEC, 6, 0, 0, r);
    check(r.status == ST_NO_FRAMES, "more frames than the FPGA has refused"); n_err_frames++;
    // oversize input: rewrite record 4's input size
    host(CMD_ROM_WR, 0, (1 << ROM_AW) - 5 * REC_WORDS + 2, (n_out[4] << 16) | 300, r);
    host(CMD_EXEC, 4, 0, 0, r);
    check(r.status == ST_SIZE_ERR, "oversize transfer refused"); n_err_size++;
    host(CMD_ROM_WR, 0, (1 << ROM_AW) - 5 * REC_WORDS + 2, (n_out[4] << 16) | n_in[4], r);
    exec(4);
    // bit-stream shorter than its frames: record 7 points at function 0's
    // stream (3 frames) but claims 4; the frames granted must be given back
    begin
      bit h;
      logic [NUM_FRAMES-1:0] m, exp_free;
      int ev [$];
      for (int i = 0; i < REC_WORDS; i++) begin
        host(CMD_ROM_RD, 0, (1 << ROM_AW) - REC_WORDS + i, 0, r);
        host(CMD_ROM_WR, 0, (1 << ROM_AW) - NF * REC_WORDS + i, i == 3 ? 4 : int'(r.data), r);
      end
      fr_need[7] = 4;
      model_request(7, h, m, ev);
      got_ev = {};
      host(CMD_EXEC, 7, 0, 0, r);
      check(r.status == ST_CFG_ERR, "bit-stream that does not fill its frames refused"); n_err_cfg++;
      check(got_ev == ev, "evictions before the failed configuration");
      m_res[7] = 0;
      for (int i = 0; i < NUM_FRAMES; i++) if (m_owner[i] == 7) m_owner[i] = -1;
      for (int i = 0; i < NUM_FRAMES; i++) exp_free[i] = (m_owner[i] < 0);
      check(free_frames == exp_free, "frames of the failed configuration released");
    end
    exec(1); exec(4);

    $display("misses=%0d hits=%0d evictions=%0d run_tokens=%0d literal_tokens=%0d cfg_stalls=%0d",
             n_miss, n_hit, n_evict, n_run_tok, n_lit_tok, n_stall);
    $display("errors: no_record=%0d no_frames=%0d size=%0d config=%0d",
             n_err_rec, n_err_frames, n_err_size, n_err_cfg);
    check(n_miss > 0, "miss with configuration happened");
    check(n_hit > 0, "hit happened");
    check(n_evict > 0, "eviction happened");
    check(n_run_tok > 0 && n_lit_tok > 0, "run and literal tokens used");
    check(n_stall > 0, "configuration bus stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
