// Self-checking testbench for config_rom: writes random words to random addresses,
// reads them back and checks the one-cycle read latency, that the read data
// holds while the memory is not enabled and that a write leaves it unchanged.
// Expected values come from a reference array kept by the testbench.
module tb_config_rom;
  localparam int AW = 6;
  localparam int DW = 32;
  logic          clk = 1'b0;
  logic          en, we;
  logic [AW-1:0] addr;
  logic [DW-1:0] wdata, rdata;
  logic [DW-1:0] ref_mem [2**AW];
  int checks = 0, failures = 0;

  config_rom #(.AW(AW), .DW(DW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [DW-1:0] got, input logic [DW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    en = 0; we = 0; addr = '0; wdata = '0;
    // fill every word
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clk);
      en = 1; we = 1; addr = AW'(a); wdata = $urandom; ref_mem[a] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    // random reads and writes
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      addr = AW'($urandom);
      en = 1;
      we = ($urandom % 3 == 0);
      wdata = $urandom;
      if (we) begin
        logic [DW-1:0] prev_rd;
        prev_rd = rdata;
        ref_mem[addr] = wdata;
        @(negedge clk);
        check(rdata, prev_rd, "rdata unchanged by write");
      end else begin
        logic [DW-1:0] exp;
        exp = ref_mem[addr];
        @(negedge clk);
        check(rdata, exp, "read data");
        en = 0;
        addr = AW'($urandom);
        repeat (2) @(negedge clk);
        check(rdata, exp, "read data held");
      end
      en = 0; we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
