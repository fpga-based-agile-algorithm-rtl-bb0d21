// Self-checking testbench for agile_controller. The ROM and the local RAM are
// the design's own memories; the frame manager, configuration module, data
// input module and output collection module are played by the testbench,
// which scripts their answers (hit or miss, frame mask, configuration error)
// and stalls their streams at random. For each EXEC it checks the words the
// controller hands on: the compressed stream taken from the ROM at the
// record's start address and size, the inputs taken from the RAM, the frame
// count and mask passed along, the results written back into the RAM, that
// a hit skips configuration, that a failed configuration releases the frames,
// and the response. ROM/RAM reads and writes by the host and the error paths
// (empty record, oversize transfer, frame manager refusal) are checked too.
module tb_agile_controller;
  import agile_pkg::*;
  localparam int ROM_AW = 10, RAM_AW = 10, DW = 32, NF = 8, NFR = 16, BUF_AW = 8;
  localparam int FW = 3, NW = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, resp_valid;
  host_cmd_t cmd;
  host_resp_t resp;
  logic rom_en, rom_we, ram_en, ram_we;
  logic [ROM_AW-1:0] rom_addr;
  logic [RAM_AW-1:0] ram_addr;
  logic [DW-1:0] rom_wdata, rom_rdata, ram_wdata, ram_rdata;
  logic fm_req, fm_rel, fm_done, fm_hit, fm_err;
  logic [FW-1:0] fm_func;
  logic [NW-1:0] fm_nframes;
  logic [NFR-1:0] fm_mask, cm_mask;
  logic cm_start, cm_valid, cm_ready, cm_done, cm_err;
  logic [15:0] cm_words, di_nwords, oc_nwords;
  logic [DW-1:0] cm_data, di_data, oc_data;
  logic di_start, di_valid, di_ready, di_done;
  logic [FW-1:0] di_func;
  logic oc_start, oc_valid, oc_ready, oc_done;

  agile_controller #(.ROM_AW(ROM_AW), .RAM_AW(RAM_AW), .DW(DW), .NUM_FUNCS(NF),
                     .NUM_FRAMES(NFR), .BUF_AW(BUF_AW)) dut (.*);
  config_rom #(.AW(ROM_AW), .DW(DW)) u_rom (.clk, .en(rom_en), .we(rom_we), .addr(rom_addr),
                                            .wdata(rom_wdata), .rdata(rom_rdata));
  local_ram #(.AW(RAM_AW), .DW(DW)) u_ram (.clk, .en(ram_en), .we(ram_we), .addr(ram_addr),
                                           .wdata(ram_wdata), .rdata(ram_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- scripted neighbours -----------------------------------
  bit             sc_hit, sc_fm_err, sc_cm_err;
  logic [NFR-1:0] sc_mask;
  logic [DW-1:0]  sc_out [$];
  logic [DW-1:0]  got_cfg [$];
  logic [DW-1:0]  got_in [$];
  int             got_nframes, n_fm_req, n_cm_start, n_rel;
  logic [NFR-1:0] got_mask;
  int             got_di_func;

  // frame manager: answers 1..4 cycles after a request
  initial begin
    fm_done = 0; fm_hit = 0; fm_err = 0; fm_mask = '0;
    forever begin
      @(posedge clk);
      if (rst_n && fm_req) begin
        n_fm_req++;
        got_nframes = int'(fm_nframes);
        repeat ($urandom % 4) @(negedge clk);
        @(negedge clk);
        fm_done = 1; fm_hit = sc_hit; fm_err = sc_fm_err; fm_mask = sc_mask;
        @(negedge clk);
        fm_done = 0; fm_mask = NFR'($urandom);
      end
    end
  end
  always @(posedge clk) if (fm_rel) n_rel++;

  // configuration module: takes cm_words words with random stalls
  initial begin
    cm_ready = 0; cm_done = 0; cm_err = 0;
    forever begin
      @(posedge clk);
      if (rst_n && cm_start) begin
        int n;
        n = int'(cm_words);
        n_cm_start++;
        got_mask = cm_mask;
        while (got_cfg.size() < n) begin
          @(negedge clk);
          cm_ready = ($urandom % 3 != 0);
          #1;
          if (cm_valid && cm_ready) got_cfg.push_back(cm_data);
        end
        @(negedge clk);
        cm_ready = 0; cm_done = 1; cm_err = sc_cm_err;
        @(negedge clk);
        cm_done = 0;
      end
    end
  end

  // data input module
  initial begin
    di_ready = 0; di_done = 0;
    forever begin
      @(posedge clk);
      if (rst_n && di_start) begin
        int n;
        n = int'(di_nwords);
        got_di_func = int'(di_func);
        while (got_in.size() < n) begin
          @(negedge clk);
          di_ready = ($urandom % 3 != 0);
          #1;
          if (di_valid && di_ready) got_in.push_back(di_data);
        end
        @(negedge clk);
        di_ready = 0; di_done = 1;
        @(negedge clk);
        di_done = 0;
      end
    end
  end

  // output collection module
  initial begin
    oc_valid = 0; oc_done = 0; oc_data = '0;
    forever begin
      @(posedge clk);
      if (rst_n && oc_start) begin
        int n, k;
        n = int'(oc_nwords);
        k = 0;
        while (k < n) begin
          @(negedge clk);
          oc_valid = ($urandom % 2 == 0);
          oc_data = sc_out[k];
          #1;
          if (oc_valid && oc_ready) k++;
        end
        @(negedge clk);
        oc_valid = 0; oc_done = 1;
        @(negedge clk);
        oc_done = 0;
      end
    end
  end

  // ---------------- host ----------------------------------------------------
  task automatic host(input cmd_op_e op, input int func, input int addr, input int data,
                      output host_resp_t r);
    int cyc = 0;
    @(negedge clk);
    cmd_valid = 1;
    cmd = '{op: op, func: 8'(func), addr: 16'(addr), data: DW'(data)};
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cmd_valid = 0;
    while (!resp_valid && cyc < 20000) begin @(negedge clk); cyc++; end
    check(resp_valid, "response");
    r = resp;
  endtask

  logic [DW-1:0] rom_ref [2**ROM_AW];

  task automatic rom_wr(input int a, input logic [DW-1:0] d);
    host_resp_t r;
    host(CMD_ROM_WR, 0, a, int'(d), r);
    rom_ref[a] = d;
  endtask

  task automatic set_record(input int f, input int start, input int size, input int nin,
                            input int nout, input int nfr);
    int b;
    b = 2**ROM_AW - (f + 1) * REC_WORDS;
    rom_wr(b, DW'(start)); rom_wr(b + 1, DW'(size));
    rom_wr(b + 2, DW'((nout << 16) | nin)); rom_wr(b + 3, DW'(nfr));
  endtask

  task automatic exec(input int f, input int start, input int size, input int nin, input int nout,
                      input int nfr, input bit hit, input bit fm_e, input bit cm_e,
                      input status_e exp_st);
    host_resp_t r;
    logic [DW-1:0] inw [$];
    int in_base, out_base, req0, cms0, rel0;
    in_base = $urandom % 200;
    out_base = 512 + $urandom % 200;
    for (int i = 0; i < nin; i++) begin
      inw.push_back($urandom);
      host(CMD_RAM_WR, 0, in_base + i, int'(inw[i]), r);
    end
    sc_out = {};
    for (int j = 0; j < nout; j++) sc_out.push_back($urandom);
    sc_hit = hit; sc_fm_err = fm_e; sc_cm_err = cm_e; sc_mask = NFR'($urandom);
    got_cfg = {}; got_in = {};
    req0 = n_fm_req; cms0 = n_cm_start; rel0 = n_rel;
    host(CMD_EXEC, f, in_base, out_base, r);
    check(r.status == exp_st, $sformatf("exec f%0d status %0d expected %0d", f, r.status, exp_st));
    if (exp_st == ST_OK) check(r.data == DW'(hit), "hit bit");
    if (exp_st inside {ST_NO_RECORD, ST_SIZE_ERR}) begin
      check(n_fm_req == req0, "no frame request for a refused record");
      return;
    end
    check(n_fm_req == req0 + 1 && got_nframes == (nfr > NFR ? 0 : nfr), "one frame request, frame count");
    if (fm_e) begin check(n_cm_start == cms0, "no configuration after refusal"); return; end
    if (hit) check(n_cm_start == cms0 && got_cfg.size() == 0, "hit skips configuration");
    else begin
      bit ok = (got_cfg.size() == size) && (got_mask == sc_mask);
      for (int i = 0; i < got_cfg.size(); i++) if (got_cfg[i] != rom_ref[start + i]) ok = 0;
      check(ok, $sformatf("f%0d compressed stream from ROM and mask", f));
    end
    if (cm_e) begin check(n_rel == rel0 + 1, "frames released after failed configuration"); return; end
    check(n_rel == rel0, "no release");
    check(got_in == inw && got_di_func == f, "inputs from RAM to the data input module");
    for (int j = 0; j < nout; j++) begin
      host(CMD_RAM_RD, 0, out_base + j, 0, r);
      check(r.data == sc_out[j], $sformatf("result %0d stored in RAM", j));
    end
  endtask

  initial begin
    host_resp_t r;
    cmd_valid = 0; cmd = '0;
    n_fm_req = 0; n_cm_start = 0; n_rel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // bit-stream area
    for (int a = 0; a < 300; a++) rom_wr(a, $urandom);
    host(CMD_ROM_RD, 0, 123, 0, r);
    check(r.status == ST_OK && r.data == rom_ref[123], "ROM read");
    for (int f = 0; f < NF; f++) set_record(f, 0, 0, 0, 0, 0);
    set_record(0, 0,  40, 8, 8, 3);
    set_record(1, 40, 90, 16, 4, 5);
    set_record(2, 130, 1, 0, 3, 1);
    set_record(3, 131, 100, 256, 256, 16);
    set_record(4, 10, 5, 300, 1, 1);       // oversize input
    set_record(5, 10, 5, 1, 1, 17);        // too many frames
    exec(0, 0, 40, 8, 8, 3, 0, 0, 0, ST_OK);
    exec(0, 0, 40, 8, 8, 3, 1, 0, 0, ST_OK);
    exec(1, 40, 90, 16, 4, 5, 0, 0, 0, ST_OK);
    exec(2, 130, 1, 0, 3, 1, 0, 0, 0, ST_OK);
    exec(3, 131, 100, 256, 256, 16, 0, 0, 0, ST_OK);
    exec(1, 40, 90, 16, 4, 5, 0, 0, 1, ST_CFG_ERR);
    exec(5, 10, 5, 1, 1, 17, 0, 1, 0, ST_NO_FRAMES);
    exec(4, 10, 5, 300, 1, 1, 0, 0, 0, ST_SIZE_ERR);
    exec(6, 0, 0, 0, 0, 0, 0, 0, 0, ST_NO_RECORD);
    host(CMD_EXEC, 9, 0, 0, r);
    check(r.status == ST_NO_RECORD, "function number beyond the table");
    for (int t = 0; t < 20; t++) begin
      automatic int f = $urandom % 3;
      case (f)
        0: exec(0, 0, 40, 8, 8, 3, 1'($urandom % 2), 0, 0, ST_OK);
        1: exec(1, 40, 90, 16, 4, 5, 1'($urandom % 2), 0, 0, ST_OK);
        default: exec(2, 130, 1, 0, 3, 1, 1'($urandom % 2), 0, 0, ST_OK);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
