// mlpf_threshold: signal/noise decision and event output of the MLPF.
//
// When the MLP prediction is valid, the event that was classified is sent out
// if the prediction is at least the threshold T_MLPF (signal) and dropped
// otherwise (noise). Both are 16-bit signed numbers in the same fixed-point
// format, so raising T_MLPF trades signal retention for noise rejection.
//
// Events that arrive while the filter is busy with an earlier one are either
// blocked (dropped, bypass_mode = 0) or bypassed (sent out unfiltered,
// bypass_mode = 1). A classified signal event has priority over a bypassed
// event in the same cycle; the bypassed one is then lost and byp_lost pulses.
//
// Purely combinational: the output appears in the cycle pred_vld (or byp_vld)
// is high, so the decision adds no cycle to the 3-cycle MLP latency.
// The comparison (>=) and the bypass collision rule are this design's choices;
// the threshold itself and the bypass/block option follow the filter's
// description.
module mlpf_threshold
  import mlpf_pkg::*;
(
  input  acc_t       pred,
  input  logic       pred_vld,
  input  acc_t       t_mlpf,
  input  dvs_event_t cls_event,      // event the prediction belongs to
  input  dvs_event_t byp_event,      // event that arrived while busy
  input  logic       byp_vld,
  input  logic       bypass_mode,
  output dvs_event_t evt_out,
  output logic       evt_out_vld,
  output logic       evt_out_filtered,   // 1: passed the classifier, 0: bypassed
  output logic       cls_signal,         // pulse: classified as signal
  output logic       cls_noise,          // pulse: classified as noise
  output logic       byp_lost            // pulse: busy event dropped
);

  logic is_signal;
  assign is_signal  = (pred >= t_mlpf);
  assign cls_signal = pred_vld && is_signal;
  assign cls_noise  = pred_vld && !is_signal;

  always_comb begin
    evt_out          = cls_event;
    evt_out_vld      = 1'b0;
    evt_out_filtered = 1'b0;
    byp_lost         = 1'b0;
    if (cls_signal) begin
      evt_out_vld      = 1'b1;
      evt_out_filtered = 1'b1;
      byp_lost         = byp_vld;
    end else if (byp_vld) begin
      if (bypass_mode) begin
        evt_out     = byp_event;
        evt_out_vld = 1'b1;
      end else begin
        byp_lost = 1'b1;
      end
    end
  end

endmodule
