// tb_tpi_memory: self-checking test of the two-sided, banked TPI memory at
// its full 346 x 260 size. Checks the self-clearing after reset (ready low for
// exactly 2048 cycles, every word reads back as zero), then random writes and
// two reads per cycle (one even and one odd column) against a reference image,
// including pixels in the first and last bank and the one-cycle read latency.
module tb_tpi_memory;
  import mlpf_pkg::*;

  logic clk = 0, rst_n = 0;
  tpi_if bus ();
  int checks = 0, failures = 0;
  int unsigned ref_img [int];     // key y*512+x -> {ts, pol}

  tpi_memory dut (.clk, .rst_n, .bus(bus.slave));

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic int unsigned ref_get(int x, int y);
    int key = y * 512 + x;
    return ref_img.exists(key) ? ref_img[key] : 0;
  endfunction

  task automatic idle();
    bus.read_vld[0] = 0; bus.read_vld[1] = 0; bus.write_vld = 0;
  endtask

  int rx [2], ry [2];
  bit rv [2];

  initial begin
    int clr_cycles;
    idle();
    bus.read_addr[0] = '0; bus.read_addr[1] = '0;
    bus.write_addr = '0; bus.write_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    clr_cycles = 0;
    while (!bus.ready && clr_cycles < 5000) begin @(negedge clk); clr_cycles++; end
    chk(clr_cycles == 2048, $sformatf("clearing took %0d cycles", clr_cycles));

    for (int n = 0; n < 30000; n++) begin
      // choose reads
      for (int s = 0; s < 2; s++) begin
        int x;
        case ($urandom % 4)
          0: x = 2 * int'($urandom % 173) + s;
          1: x = s;                        // first column of this side
          2: x = 344 + s;                  // last column
          default: x = 2 * int'($urandom % 20) + s + 150;
        endcase
        rx[s] = x;
        ry[s] = ($urandom % 4 == 0) ? 259 : int'($urandom % 260);
        if (n % 7 == 0) ry[s] = 0;
        rv[s] = ($urandom % 4) != 0;
        bus.read_vld[s] = rv[s];
        bus.read_addr[s].xh = (XW-1)'(rx[s] >> 1);
        bus.read_addr[s].y  = YW'(ry[s]);
      end
      // expected read data sampled before this cycle's write
      begin
        int unsigned e0, e1;
        e0 = ref_get(rx[0], ry[0]);
        e1 = ref_get(rx[1], ry[1]);
        // write somewhere, often onto a pixel being read
        bus.write_vld = ($urandom % 2) == 0;
        if ($urandom % 3 == 0) begin
          int s = $urandom % 2;
          bus.write_addr.x = XW'(rx[s]); bus.write_addr.y = YW'(ry[s]);
        end else begin
          bus.write_addr.x = XW'($urandom % 346); bus.write_addr.y = YW'($urandom % 260);
        end
        bus.write_data = tpi_word_t'($urandom);
        if (bus.write_vld)
          ref_img[int'(bus.write_addr.y) * 512 + int'(bus.write_addr.x)] = 32'(bus.write_data);
        @(negedge clk);
        idle();
        if (rv[0]) chk(32'(bus.read_data[0]) == e0, $sformatf("port 0 (%0d,%0d) got %h exp %h", rx[0], ry[0], bus.read_data[0], e0));
        if (rv[1]) chk(32'(bus.read_data[1]) == e1, $sformatf("port 1 (%0d,%0d) got %h exp %h", rx[1], ry[1], bus.read_data[1], e1));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
