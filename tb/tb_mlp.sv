// tb_mlp: self-checking test of the quantized 98-10-1 perceptron.
// Feeds input vectors of three kinds (realistic ages/polarities, dense
// full-scale vectors that drive the hidden accumulators into saturation, and
// all-zero vectors), compares each prediction with the integer reference
// model, and checks the 3-cycle latency and the ready handshake.
module tb_mlp;
  import mlpf_pkg::*;
  import tb_mlpf_ref_pkg::*;

  logic    clk = 0, rst_n = 0;
  mlp_in_t in_data;
  logic    data_vld, ready, pred_vld;
  acc_t    pred;
  int checks = 0, failures = 0;
  int n_pos = 0, n_neg = 0, n_sat = 0;

  mlp dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int v [N_IN];
    int exp, lat;
    w1_t w1; b1_t b1; w2_t w2;
    w1 = default_w1(); b1 = default_b1(); w2 = default_w2();
    data_vld = 0; in_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int kind;
      kind = n % 3;
      for (int i = 0; i < N_IN; i++) begin
        case (kind)
          0: if (i < NPIX) v[i] = ($urandom % 3 == 0) ? int'($urandom % 16) : 0;
             else          v[i] = ($urandom % 3 == 0) ? ((($urandom % 2) != 0) ? 15 : -16) : 0;
          1: v[i] = (n % 2) ? 15 : int'($urandom % 32) - 16;
          default: v[i] = 0;
        endcase
        in_data[i] = act_t'(v[i]);
      end
      exp = mlp_ref(v, w1, b1, w2, DEFAULT_B2);
      if (exp > 0) n_pos++; else n_neg++;
      @(negedge clk);
      chk(ready == 1'b1, "ready before hand-over");
      data_vld = 1;
      @(negedge clk);
      data_vld = 0;
      lat = 1;
      while (!pred_vld && lat < 10) begin
        chk(ready == 1'b0, "ready low while busy");
        @(negedge clk);
        lat++;
      end
      chk(lat == 3, $sformatf("latency %0d", lat));
      chk(pred == acc_t'(exp), $sformatf("prediction got %0d exp %0d", pred, exp));
      if (exp == 32767 || exp == -32768) n_sat++;
    end
    $display("positive=%0d non-positive=%0d saturated=%0d", n_pos, n_neg, n_sat);
    chk(n_pos > 0 && n_neg > 0, "both signs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
