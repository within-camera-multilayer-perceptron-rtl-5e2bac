// tb_e2mlp: self-checking test of the event-to-MLP-input unit together with
// the full-size TPI memory. Events are drawn in clusters (so neighbours are
// recent), along the sensor borders and in the corners, with the age window
// swept over its whole range (1 to 256 ms) and with both ways of delivering
// the timestamp (with the event, or earlier and latched). The testbench plays
// the MLP: it answers with mlp_pred_vld three cycles after taking the vector,
// and sometimes holds mlp_ready low. Checked for each event: the 98-element
// vector against the reference model, the 30-cycle latency from acceptance to
// mlp_data_vld, cur_event, and that the next event is accepted exactly when
// the prediction comes back.
module tb_e2mlp;
  import mlpf_pkg::*;
  import tb_mlpf_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  dvs_event_t evt_in, cur_event;
  logic evt_in_vld, evt_ready, ts_vld, mlp_data_vld, mlp_ready, mlp_pred_vld, busy;
  logic [TS_US_W-1:0] ts_us;
  logic [3:0] tau_log2;
  mlp_in_t mlp_input_data;
  tpi_if tpi ();
  int checks = 0, failures = 0;
  int n_edge = 0, n_recent = 0, n_stall = 0, n_latched = 0;

  e2mlp dut (.clk, .rst_n, .evt_in, .evt_in_vld, .evt_ready, .ts_us, .ts_vld, .tau_log2,
             .tpi(tpi.master), .mlp_input_data, .mlp_data_vld, .mlp_ready, .mlp_pred_vld,
             .cur_event, .busy);
  tpi_memory mem (.clk, .rst_n, .bus(tpi.slave));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  mlpf_model model;

  initial begin
    int unsigned t_us;
    int cx, cy;
    model = new();
    evt_in_vld = 0; evt_in = '0; ts_vld = 0; ts_us = '0; tau_log2 = 4'd6;
    mlp_ready = 1; mlp_pred_vld = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!evt_ready) @(negedge clk);
    t_us = 5000;
    cx = 100; cy = 100;
    for (int n = 0; n < 2500; n++) begin
      int x, y, pol, v [N_IN], lat, hold;
      int unsigned te;
      // event position
      case ($urandom % 6)
        0: begin x = $urandom % 346; y = $urandom % 260; end
        1: begin x = ($urandom % 2) ? int'($urandom % 3) : 343 + int'($urandom % 3);
                 y = $urandom % 260; end
        2: begin x = $urandom % 346;
                 y = ($urandom % 2) ? int'($urandom % 3) : 257 + int'($urandom % 3); end
        default: begin
          if ($urandom % 50 == 0) begin cx = $urandom % 346; cy = $urandom % 260; end
          x = cx + int'($urandom % 7) - 3; y = cy + int'($urandom % 7) - 3;
          if (x < 0) x = 0; if (x > 345) x = 345;
          if (y < 0) y = 0; if (y > 259) y = 259;
        end
      endcase
      if (x < 3 || x > 342 || y < 3 || y > 256) n_edge++;
      pol = $urandom % 2;
      if (n % 200 == 0) tau_log2 = 4'($urandom % 9);
      t_us += ($urandom % 8 == 0) ? ($urandom % 300000) : ($urandom % 3000);
      te = (t_us >> 10) & 32'hFFFF;
      model.features(x, y, pol, te, int'(tau_log2), v);
      for (int i = 0; i < NPIX; i++) if (v[i] != 0) begin n_recent++; break; end
      // timestamp: with the event, or one cycle earlier and latched
      if ($urandom % 3 == 0) begin
        n_latched++;
        @(negedge clk); mlp_pred_vld = 0; ts_us = t_us; ts_vld = 1;
        @(negedge clk); ts_vld = 0; ts_us = $urandom;
      end else begin
        ts_us = t_us; ts_vld = 1;
      end
      evt_in = '{x: XW'(x), y: YW'(y), pol: 1'(pol)};
      evt_in_vld = 1;
      chk(evt_ready == 1'b1, "ready for a new event");
      @(negedge clk);
      evt_in_vld = 0; ts_vld = 0; mlp_pred_vld = 0;
      hold = ($urandom % 4 == 0) ? 1 + int'($urandom % 3) : 0;
      lat = 1;
      while (!mlp_data_vld && lat < 60) begin
        chk(evt_ready == 1'b0 && busy, "busy while reading");
        if (lat == 30 - 1 && hold > 0) mlp_ready = 0;
        @(negedge clk); lat++;
      end
      if (hold > 0) begin
        n_stall++;
        repeat (hold) begin chk(mlp_data_vld, "vector held while MLP not ready"); @(negedge clk); lat++; end
        mlp_ready = 1;
      end
      chk(lat == 30 + hold, $sformatf("E2MLP latency %0d", lat));
      chk(cur_event == evt_in, "cur_event");
      for (int i = 0; i < N_IN; i++)
        chk(int'(mlp_input_data[i]) == v[i],
            $sformatf("event %0d (%0d,%0d) tau=%0d elem %0d got %0d exp %0d", n, x, y, tau_log2, i, mlp_input_data[i], v[i]));
      model.store(x, y, pol, te);
      // play the MLP: prediction valid three cycles later
      @(negedge clk);
      chk(!mlp_data_vld, "vector handed over once");
      @(negedge clk);
      chk(evt_ready == 1'b0, "still busy until the prediction");
      mlp_pred_vld = 1;
      #1 chk(evt_ready == 1'b1, "ready in the prediction cycle");
    end
    @(negedge clk); mlp_pred_vld = 0;
    $display("edge=%0d with-recent-neighbours=%0d stalls=%0d latched-ts=%0d", n_edge, n_recent, n_stall, n_latched);
    chk(n_edge > 0 && n_recent > 0 && n_stall > 0 && n_latched > 0, "all cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
