// mlpf_top: in-camera multilayer-perceptron DVS denoising filter (MLPF).
//
// Each DVS event is classified as signal or noise from the recent history of
// its 7x7 neighbourhood. The blocks are wired as in the filter's block
// diagram:
//   e2mlp          reads the neighbourhood from the TPI two pixels per cycle,
//                  forms the 98 ages and polarities, writes the event back
//   tpi_memory     timestamp+polarity image, 2 x 22 banks of 2048 x 18 bits
//   mlp            98-10-1 quantized perceptron, 3-cycle latency
//   mlpf_threshold compares the prediction with t_mlpf and emits signal events
//
// Interface: evt_in/evt_in_vld carry the event address (x, y, polarity) from
// the sensor, ts_us/ts_vld the microsecond timestamp (the filter keeps the
// latest one). There is no back-pressure: an event that arrives while the
// filter is busy (evt_ready low) is blocked or, with bypass_mode = 1, passed
// out unfiltered. tau_log2 sets the age window (2^tau_log2 ms, 0..8) and
// t_mlpf the decision threshold. evt_out/evt_out_vld are the output events;
// evt_out_filtered tells a classified event from a bypassed one.
//
// Timing: an event accepted in cycle 0 is written into the MLP input in cycle
// 30 and decided in cycle 33, when it appears on evt_out if it is signal. The
// next event can be accepted in cycle 33, so the filter classifies one event
// every 33 cycles. After reset the TPI clears itself for 2048 cycles
// (evt_ready low).
module mlpf_top
  import mlpf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // sensor side
  input  dvs_event_t         evt_in,
  input  logic               evt_in_vld,
  input  logic [TS_US_W-1:0] ts_us,
  input  logic               ts_vld,
  // configuration
  input  logic [3:0]         tau_log2,
  input  acc_t               t_mlpf,
  input  logic               bypass_mode,
  // output side
  output dvs_event_t         evt_out,
  output logic               evt_out_vld,
  output logic               evt_out_filtered,
  // status
  output logic               evt_ready,
  output logic               busy,
  output logic               cls_signal,
  output logic               cls_noise,
  output logic               byp_lost
);

  tpi_if tpi ();

  mlp_in_t    mlp_input_data;
  logic       mlp_data_vld, mlp_ready, mlp_pred_vld;
  acc_t       mlp_prediction;
  dvs_event_t cur_event;

  e2mlp u_e2mlp (
    .clk            (clk),
    .rst_n          (rst_n),
    .evt_in         (evt_in),
    .evt_in_vld     (evt_in_vld),
    .evt_ready      (evt_ready),
    .ts_us          (ts_us),
    .ts_vld         (ts_vld),
    .tau_log2       (tau_log2),
    .tpi            (tpi.master),
    .mlp_input_data (mlp_input_data),
    .mlp_data_vld   (mlp_data_vld),
    .mlp_ready      (mlp_ready),
    .mlp_pred_vld   (mlp_pred_vld),
    .cur_event      (cur_event),
    .busy           (busy)
  );

  tpi_memory u_tpi (
    .clk   (clk),
    .rst_n (rst_n),
    .bus   (tpi.slave)
  );

  mlp u_mlp (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_data  (mlp_input_data),
    .data_vld (mlp_data_vld),
    .ready    (mlp_ready),
    .pred     (mlp_prediction),
    .pred_vld (mlp_pred_vld)
  );

  mlpf_threshold u_thr (
    .pred             (mlp_prediction),
    .pred_vld         (mlp_pred_vld),
    .t_mlpf           (t_mlpf),
    .cls_event        (cur_event),
    .byp_event        (evt_in),
    .byp_vld          (evt_in_vld && !evt_ready),
    .bypass_mode      (bypass_mode),
    .evt_out          (evt_out),
    .evt_out_vld      (evt_out_vld),
    .evt_out_filtered (evt_out_filtered),
    .cls_signal       (cls_signal),
    .cls_noise        (cls_noise),
    .byp_lost         (byp_lost)
  );

endmodule
