// tb_mlpf_top: end-to-end test of the MLPF at its full default size (346 x 260
// sensor, 7x7 patch, 10 hidden units, default weights).
//
// The stimulus mixes a moving edge (events with recent neighbours, mostly
// signal) with uniformly scattered noise events, arriving on random cycles
// with no regard for the filter being busy. A cycle-accurate reference
// predicts, for every cycle, evt_ready (low during the 2048-cycle TPI clear
// and for 33 cycles after each accepted event), and the outputs: a classified
// event leaves 33 cycles after acceptance if the reference perceptron output
// reaches t_mlpf; an event arriving while busy is passed through unfiltered
// in bypass mode and blocked otherwise. (A busy event never meets a signal
// output: the filter is ready again in the cycle it decides.)
// The age window, the threshold and the bypass mode are switched during the
// run, and for 4000 cycles an event arrives on every cycle, which must give
// exactly one classified event per 33 cycles (25 M events/s at 833 MHz). Each mechanism is counted and must happen at least once.
module tb_mlpf_top;
  import mlpf_pkg::*;
  import tb_mlpf_ref_pkg::*;

  localparam int LATENCY = 33;
  localparam int CYCLES  = 200000;
  // saturation phase: an event on every cycle, to measure the peak rate
  localparam int SAT_FROM = 30000, SAT_TO = 34000;

  logic clk = 0, rst_n = 0;
  dvs_event_t evt_in, evt_out;
  logic evt_in_vld, ts_vld, bypass_mode;
  logic [TS_US_W-1:0] ts_us;
  logic [3:0] tau_log2;
  acc_t t_mlpf;
  logic evt_out_vld, evt_out_filtered, evt_ready, busy, cls_signal, cls_noise, byp_lost;

  mlpf_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_accept = 0, n_signal = 0, n_noise = 0, n_bypass = 0, n_block = 0, n_collide = 0;
  int n_clear_busy = 0, n_tau_switch = 0, n_mode_switch = 0, n_thr_switch = 0, n_edge = 0;
  int n_sat_accept = 0;
  int n_sig_src_pass = 0, n_sig_src = 0, n_noise_src_pass = 0, n_noise_src = 0;

  initial begin
    repeat (CYCLES + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at cycle %0t", what, $time / 10); end
  endtask

  mlpf_model model;

  initial begin
    w1_t w1; b1_t b1; w2_t w2;
    int cycle, free_at, due, edge_x, edge_dir;
    int unsigned t_us, t_ms_last;
    bit pend_sig, pend_src_signal;
    dvs_event_t pend_ev;

    w1 = default_w1(); b1 = default_b1(); w2 = default_w2();
    model = new();
    evt_in_vld = 0; evt_in = '0; ts_vld = 0; ts_us = '0;
    tau_log2 = 4'd6; t_mlpf = '0; bypass_mode = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    free_at = 2048; due = -1; pend_sig = 0; pend_ev = '0; pend_src_signal = 0;
    t_us = 1000; t_ms_last = 0;
    edge_x = 20; edge_dir = 1;

    for (cycle = 0; cycle < CYCLES; cycle++) begin
      bit present, exp_ready, sig_now, src_signal;
      int x, y, pol;
      // ---- configuration changes ----
      if (cycle % 7000 == 3500) begin bypass_mode = !bypass_mode; n_mode_switch++; end
      if (cycle % 11000 == 10999) begin
        tau_log2 = (tau_log2 == 4'd6) ? 4'd8 : (tau_log2 == 4'd8) ? 4'd3 : 4'd6;
        n_tau_switch++;
      end
      if (cycle % 13000 == 12999) begin
        t_mlpf = (t_mlpf == 0) ? acc_t'(16'sd400) : acc_t'(16'sd0);
        n_thr_switch++;
      end
      // ---- time and timestamp updates ----
      t_us += $urandom % 40;
      ts_vld = ($urandom % 4 == 0);
      ts_us  = t_us;
      if (ts_vld) t_ms_last = (t_us >> 10) & 32'hFFFF;
      // ---- event ----
      present = ($urandom % 16 == 0) || (cycle >= SAT_FROM && cycle < SAT_TO);
      src_signal = ($urandom % 2 == 0);
      if (src_signal) begin
        if ($urandom % 150 == 0) begin
          edge_x += edge_dir;
          if (edge_x >= 345 || edge_x <= 0) edge_dir = -edge_dir;
        end
        x = edge_x; y = 100 + int'($urandom % 20); pol = 1;
        if (cycle % 9000 > 8000) y = 250 + int'($urandom % 10);   // along the border
      end else begin
        x = $urandom % 346; y = $urandom % 260; pol = $urandom % 2;
      end
      evt_in = '{x: XW'(x), y: YW'(y), pol: 1'(pol)};
      evt_in_vld = present;
      exp_ready = (cycle >= free_at);
      sig_now = (due == cycle) && pend_sig;
      #1;
      // ---- checks of this cycle ----
      chk(evt_ready == exp_ready, $sformatf("evt_ready=%0b expected %0b", evt_ready, exp_ready));
      chk(cls_signal == sig_now, "cls_signal");
      chk(cls_noise == ((due == cycle) && !pend_sig), "cls_noise");
      if (sig_now) begin
        chk(evt_out_vld && evt_out_filtered && evt_out == pend_ev, "signal event out");
        n_signal++;
        if (pend_src_signal) n_sig_src_pass++; else n_noise_src_pass++;
      end else if (present && !exp_ready && bypass_mode) begin
        chk(evt_out_vld && !evt_out_filtered && evt_out == evt_in, "bypassed event out");
        n_bypass++;
      end else begin
        chk(!evt_out_vld, "no output");
      end
      if (due == cycle && !pend_sig) n_noise++;
      chk(byp_lost == (present && !exp_ready && (sig_now || !bypass_mode)), "byp_lost");
      if (present && !exp_ready && !bypass_mode && !sig_now) n_block++;
      if (present && !exp_ready && sig_now) n_collide++;
      if (present && !exp_ready && cycle < 2048) n_clear_busy++;
      // ---- acceptance: reference classification ----
      if (present && exp_ready) begin
        int v [N_IN];
        int p;
        int unsigned te;
        te = ts_vld ? ((t_us >> 10) & 32'hFFFF) : t_ms_last;
        model.features(x, y, pol, te, int'(tau_log2), v);
        p = mlp_ref(v, w1, b1, w2, DEFAULT_B2);
        model.store(x, y, pol, te);
        pend_sig = (p >= int'(t_mlpf));
        pend_ev = evt_in;
        pend_src_signal = src_signal;
        if (src_signal) n_sig_src++; else n_noise_src++;
        if (x < 3 || x > 342 || y < 3 || y > 256) n_edge++;
        due = cycle + LATENCY;
        free_at = cycle + LATENCY;
        n_accept++;
        if (cycle >= SAT_FROM && cycle < SAT_TO) n_sat_accept++;
      end
      @(negedge clk);
    end
    evt_in_vld = 0;
    $display("accepted=%0d signal=%0d noise=%0d bypassed=%0d blocked=%0d collisions=%0d",
             n_accept, n_signal, n_noise, n_bypass, n_block, n_collide);
    $display("busy-during-clear=%0d tau-switches=%0d mode-switches=%0d threshold-switches=%0d border=%0d",
             n_clear_busy, n_tau_switch, n_mode_switch, n_thr_switch, n_edge);
    $display("edge events passed %0d of %0d, scattered events passed %0d of %0d",
             n_sig_src_pass, n_sig_src, n_noise_src_pass, n_noise_src);
    // peak rate: one event per LATENCY cycles (25 M events/s at 833 MHz)
    $display("saturation: %0d events classified in %0d cycles", n_sat_accept, SAT_TO - SAT_FROM);
    chk(n_sat_accept >= (SAT_TO - SAT_FROM) / LATENCY && n_sat_accept <= (SAT_TO - SAT_FROM) / LATENCY + 1,
        "peak rate of one event per 33 cycles");
    chk(n_signal > 0, "signal decision happened");
    chk(n_noise > 0, "noise decision happened");
    chk(n_bypass > 0, "bypass happened");
    chk(n_block > 0, "block happened");
    chk(n_collide == 0, "no busy event can meet a signal output (ready in the decision cycle)");
    chk(n_clear_busy > 0, "event during TPI clear happened");
    chk(n_tau_switch > 0 && n_mode_switch > 0 && n_thr_switch > 0, "configuration switches happened");
    chk(n_edge > 0, "border patch happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
