// tb_tpi_sram_bank: self-checking test of one 2048 x 18 1W1R TPI bank.
// Random writes and reads against a reference array; checks the one-cycle
// read latency, that rdata holds while re is low, and read-before-write when
// the same word is read and written in one cycle.
module tb_tpi_sram_bank;
  localparam int WORDS = 2048, WIDTH = 18;
  logic clk = 0, we = 0, re = 0;
  logic [10:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  tpi_sram_bank dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [WIDTH-1:0] exp, string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    logic [WIDTH-1:0] exp;
    // fill every word
    for (int a = 0; a < WORDS; a++) begin
      ref_mem[a] = WIDTH'($urandom);
      @(negedge clk); we = 1; waddr = 11'(a); wdata = ref_mem[a];
    end
    @(negedge clk); we = 0;
    // random reads and writes
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      re = ($urandom % 3) != 0;
      we = ($urandom % 2) == 0;
      raddr = 11'($urandom);
      waddr = ($urandom % 8 == 0) ? raddr : 11'($urandom);
      wdata = WIDTH'($urandom);
      exp = re ? ref_mem[raddr] : rdata;     // read-before-write, hold when idle
      if (we) ref_mem[waddr] = wdata;
      @(negedge clk);
      we = 0; re = 0;
      check(exp, "read");
      // hold: one idle cycle keeps the last data
      @(negedge clk);
      check(exp, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
