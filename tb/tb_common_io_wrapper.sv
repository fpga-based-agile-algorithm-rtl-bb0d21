// Self-checking testbench for common_io_wrapper with four function models.
// For each run the testbench writes inputs through the data-input side, starts
// a function by number, waits for fn_done and reads the results through the
// output-collection side, comparing them with the function formula (see
// function_model). It also checks that only the selected function is started,
// that fn_done drops on the next start and that the buffers are shared: every
// function sees the same input buffer and writes the same output buffer.
module tb_common_io_wrapper;
  localparam int NF = 4, BUF_AW = 8, DW = 32, FW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ib_we, fn_start, ob_re, fn_done, running;
  logic [BUF_AW-1:0] ib_addr, ob_addr;
  logic [DW-1:0] ib_wdata, ob_rdata, f_in_data;
  logic [FW-1:0] fn_sel;
  logic [NF-1:0] f_start, f_done, f_out_we;
  logic [BUF_AW-1:0] f_in_addr [NF];
  logic [BUF_AW-1:0] f_out_addr [NF];
  logic [DW-1:0] f_out_data [NF];
  int n_in [NF];
  int n_out [NF];
  int runs [NF];

  common_io_wrapper #(.NUM_FUNCS(NF), .BUF_AW(BUF_AW), .DW(DW)) dut (.*);

  for (genvar g = 0; g < NF; g++) begin : g_fn
    function_model #(.ID(g), .AW(BUF_AW), .DW(DW), .LAT(g)) u_fn (
      .clk, .rst_n, .start(f_start[g]), .n_in(n_in[g]), .n_out(n_out[g]),
      .in_addr(f_in_addr[g]), .in_data(f_in_data),
      .out_we(f_out_we[g]), .out_addr(f_out_addr[g]), .out_data(f_out_data[g]),
      .done(f_done[g]), .runs(runs[g])
    );
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0, wrong_start = 0;
  always @(posedge clk) if (rst_n && $countones(f_start) > 1) wrong_start++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int f, input int ni, input int no);
    logic [DW-1:0] inw [$];
    int cyc = 0, r0;
    n_in[f] = ni; n_out[f] = no;
    r0 = runs[f];
    for (int i = 0; i < ni; i++) begin
      inw.push_back($urandom);
      @(negedge clk); ib_we = 1; ib_addr = BUF_AW'(i); ib_wdata = inw[i];
    end
    @(negedge clk); ib_we = 0;
    fn_start = 1; fn_sel = FW'(f);
    @(negedge clk); fn_start = 0;
    check(f_start == NF'(1) << f, "only the selected function started");
    check(!fn_done, "fn_done cleared by start");
    while (!fn_done && cyc < 5000) begin @(negedge clk); cyc++; end
    check(fn_done && runs[f] == r0 + 1, $sformatf("function %0d ran", f));
    for (int j = 0; j < no; j++) begin
      logic [DW-1:0] exp;
      exp = (ni > 0) ? inw[j % ni] * DW'(f + 3) + DW'(f << 16) + DW'(j) : DW'(f * 1000 + j);
      ob_re = 1; ob_addr = BUF_AW'(j);
      @(negedge clk);
      ob_re = 0;
      check(ob_rdata == exp, $sformatf("f%0d result %0d: %h expected %h", f, j, ob_rdata, exp));
    end
  endtask

  initial begin
    ib_we = 0; fn_start = 0; ob_re = 0; ib_addr = '0; ob_addr = '0; ib_wdata = '0; fn_sel = '0;
    for (int g = 0; g < NF; g++) begin n_in[g] = 0; n_out[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 8, 8);
    run(1, 4, 12);
    run(2, 0, 3);
    run(3, 2**BUF_AW, 2**BUF_AW);
    for (int t = 0; t < 20; t++) run($urandom % NF, 1 + $urandom % 40, 1 + $urandom % 40);
    check(wrong_start == 0, "never more than one start");
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
