// tb_mlpf_threshold: exhaustive-style test of the signal/noise decision and of
// the bypass/block handling of events that arrive while the filter is busy.
module tb_mlpf_threshold;
  import mlpf_pkg::*;
  acc_t pred, t_mlpf;
  logic pred_vld, byp_vld, bypass_mode;
  dvs_event_t cls_event, byp_event, evt_out;
  logic evt_out_vld, evt_out_filtered, cls_signal, cls_noise, byp_lost;
  int checks = 0, failures = 0;

  mlpf_threshold dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic got, logic exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: pred=%0d t=%0d pv=%0b bv=%0b bm=%0b got %0b exp %0b",
               what, pred, t_mlpf, pred_vld, byp_vld, bypass_mode, got, exp);
    end
  endtask

  initial begin
    for (int n = 0; n < 5000; n++) begin
      logic sig, out_vld, filt, lost;
      dvs_event_t exp_ev;
      pred        = acc_t'($urandom);
      t_mlpf      = ($urandom % 4 == 0) ? pred : acc_t'($urandom);
      if ($urandom % 8 == 0) t_mlpf = pred + 1;
      pred_vld    = 1'($urandom);
      byp_vld     = 1'($urandom);
      bypass_mode = 1'($urandom);
      cls_event   = dvs_event_t'($urandom);
      byp_event   = dvs_event_t'($urandom);
      #1;
      sig     = pred_vld && ($signed(pred) >= $signed(t_mlpf));
      out_vld = sig || (byp_vld && bypass_mode);
      filt    = sig;
      lost    = byp_vld && (sig || !bypass_mode);
      exp_ev  = sig ? cls_event : byp_event;
      chk(cls_signal, sig, "cls_signal");
      chk(cls_noise, pred_vld && !sig, "cls_noise");
      chk(evt_out_vld, out_vld, "evt_out_vld");
      chk(byp_lost, lost, "byp_lost");
      if (out_vld) begin
        chk(evt_out_filtered, filt, "filtered");
        chk(evt_out == exp_ev, 1'b1, "evt_out");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
