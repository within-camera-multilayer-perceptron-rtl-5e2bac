// e2mlp: events-to-MLP-input unit of the MLPF.
//
// For each accepted DVS event it builds the 98-element input vector of the
// perceptron from the 7x7 neighbourhood of the event in the timestamp+polarity
// image (TPI), then writes the event into the TPI:
//   element i      (i = 0..48): age a of patch pixel i
//   element 49 + i            : polarity p of patch pixel i
// with patch pixel i = (dy+3)*7 + (dx+3). For a neighbour whose stored event is
// younger than the age window tau = 2^tau_log2 ms, the age is
//   a = 15 - (dt >> (tau_log2-4))   (units of 1/16; dt << (4-tau_log2) if tau < 16 ms)
// where dt = t_e - t_NNb in ms, so a falls linearly from 15/16 to 0 across the
// window; older, never-written or off-sensor pixels give a = 0 and p = 0.
// p is +1 (saturated to +15/16) for ON and -1 for OFF. The centre polarity is
// that of the event being classified. The ms timestamp is the microsecond
// timestamp shifted right by 10 bits; dt is taken modulo 2^16.
//
// Reading follows the two-pixels-per-cycle ASIC organisation: the TPI is split
// into even and odd columns (tpi_memory), and each cycle reads one pixel from
// each side. A patch row has 4 pixels of one parity and 3 of the other, so the
// 49 pixels take 7 rows x 4 cycles = 28 read cycles.
//
// Timing (one event in flight): event accepted in cycle 0 (evt_in_vld and
// evt_ready), reads in cycles 1..28, last data in cycle 29, mlp_data_vld and the
// TPI write in cycle 30 (the 30-cycle E2MLP latency of the ASIC). The unit
// then waits for mlp_pred_vld, the end of the classification, and accepts the
// next event in that same cycle, so one event is classified every 33 cycles.
// evt_ready is low while busy or while the TPI clears itself after reset.
// The split by column parity, the read order, the edge handling and the wait
// for the prediction are this design's choices; the age function, input
// layout, timestamp format and latency follow the filter's description.
module e2mlp
  import mlpf_pkg::*;
#(
  parameter int unsigned W = SENSOR_W,
  parameter int unsigned H = SENSOR_H
) (
  input  logic               clk,
  input  logic               rst_n,
  // events from the sensor
  input  dvs_event_t         evt_in,
  input  logic               evt_in_vld,
  output logic               evt_ready,
  input  logic [TS_US_W-1:0] ts_us,
  input  logic               ts_vld,
  input  logic [3:0]         tau_log2,      // age window 2^tau_log2 ms, 0..8
  // TPI memory
  tpi_if.master              tpi,
  // MLP
  output mlp_in_t            mlp_input_data,
  output logic               mlp_data_vld,
  input  logic               mlp_ready,
  input  logic               mlp_pred_vld,
  // event being classified, stable from acceptance to mlp_pred_vld
  output dvs_event_t         cur_event,
  output logic               busy
);

  typedef enum logic [2:0] {S_IDLE, S_READ, S_DRAIN, S_OUT, S_WAIT} state_e;

  localparam int unsigned CYC_PER_ROW = (PATCH + 1) / 2;        // 4
  localparam int unsigned READ_CYCLES = PATCH * CYC_PER_ROW;   // 28

  state_e          state;
  logic [4:0]      cnt;          // read cycle 0..27
  dvs_event_t      ev_q;
  logic [TS_W-1:0] te_q;
  logic [TS_W-1:0] ts_now;       // latest timestamp seen with ts_vld
  mlp_in_t         act_q;

  // tag of the read issued last cycle, per port
  logic            tag_vld [2];
  logic            tag_inr [2];
  logic [5:0]      tag_pix [2];

  logic [3:0] tau_k;
  assign tau_k = (tau_log2 > 4'd8) ? 4'd8 : tau_log2;

  logic [TS_W-1:0] ts_evt;
  assign ts_evt = ts_vld ? ts_us[TS_SHIFT +: TS_W] : ts_now;

  logic accept;
  assign evt_ready = tpi.ready && (state == S_IDLE || (state == S_WAIT && mlp_pred_vld));
  assign accept    = evt_in_vld && evt_ready;
  assign busy      = (state != S_IDLE);
  assign cur_event = ev_q;
  assign mlp_input_data = act_q;
  assign mlp_data_vld   = (state == S_OUT);

  // ---------------- read address generation ----------------
  logic [2:0] row;     // patch row 0..6
  logic [1:0] k;       // pair within the row 0..3
  assign row = 3'(cnt >> 2);
  assign k   = cnt[1:0];

  logic        rd_vld   [2];
  logic        rd_inr   [2];
  logic [5:0]  rd_pix   [2];
  logic        rd_exist [2];
  int          col      [2];
  int          rowy;
  logic        p_maj;

  always_comb begin
    p_maj = ~ev_q.x[0];          // parity of column x-3
    rowy  = int'(ev_q.y) + int'(row) - int'(RADIUS);
    for (int s = 0; s < 2; s++) begin
      // majority (4 pixels: dx = -3,-1,1,3) on port p_maj, minority (dx = -2,0,2) on the other
      if (1'(s) == p_maj) begin
        col[s]      = int'(ev_q.x) - 3 + 2 * int'(k);
        rd_pix[s]   = 6'(int'(row) * PATCH + 2 * int'(k));
        rd_exist[s] = 1'b1;
      end else begin
        col[s]      = int'(ev_q.x) - 2 + 2 * int'(k);
        rd_pix[s]   = 6'(int'(row) * PATCH + 2 * int'(k) + 1);
        rd_exist[s] = (k != 2'd3);
      end
      rd_inr[s] = rd_exist[s] && col[s] >= 0 && col[s] < int'(W) && rowy >= 0 && rowy < int'(H);
      rd_vld[s] = (state == S_READ) && rd_inr[s];
      tpi.read_vld[s]     = rd_vld[s];
      tpi.read_addr[s].xh = (XW-1)'(col[s] >>> 1);
      tpi.read_addr[s].y  = YW'(rowy);
    end
  end

  // ---------------- TPI write (cycle 30) ----------------
  always_comb begin
    tpi.write_vld       = (state == S_OUT) && mlp_ready;
    tpi.write_addr.x    = ev_q.x;
    tpi.write_addr.y    = ev_q.y;
    tpi.write_data.ts   = te_q;
    tpi.write_data.pol  = ev_q.pol ? POL_ON : POL_OFF;
  end

  // ---------------- age and polarity of one neighbour ----------------
  function automatic act_t age_of(input tpi_word_t w, input logic [TS_W-1:0] te,
                                  input logic [3:0] kk);
    logic [TS_W-1:0] dt;
    logic [3:0]      q;
    dt = te - w.ts;
    if (w.pol == POL_NONE || dt >= (TS_W'(1) << kk)) return '0;
    q = 4'((kk >= 4'd4) ? (dt >> (kk - 4'd4)) : (dt << (4'd4 - kk)));
    return act_t'(5'd15 - {1'b0, q});
  endfunction

  function automatic act_t pol_of(input tpi_word_t w, input logic [TS_W-1:0] te,
                                  input logic [3:0] kk);
    logic [TS_W-1:0] dt;
    dt = te - w.ts;
    if (w.pol == POL_NONE || dt >= (TS_W'(1) << kk)) return '0;
    return (w.pol == POL_ON) ? ACT_POS_ONE : ACT_NEG_ONE;
  endfunction

  // ---------------- control and data capture ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cnt    <= '0;
      ev_q   <= '0;
      te_q   <= '0;
      ts_now <= '0;
      act_q  <= '0;
      for (int s = 0; s < 2; s++) begin
        tag_vld[s] <= 1'b0;
        tag_inr[s] <= 1'b0;
        tag_pix[s] <= '0;
      end
    end else begin
      if (ts_vld) ts_now <= ts_us[TS_SHIFT +: TS_W];

      // read tags: the data of this cycle's reads arrive next cycle
      for (int s = 0; s < 2; s++) begin
        tag_vld[s] <= (state == S_READ) && rd_exist[s];
        tag_inr[s] <= rd_inr[s];
        tag_pix[s] <= rd_pix[s];
      end

      // returned data -> age and polarity (data gating: only slots being filled change)
      for (int s = 0; s < 2; s++) begin
        if (tag_vld[s]) begin
          if (tag_inr[s]) begin
            act_q[tag_pix[s]]        <= age_of(tpi.read_data[s], te_q, tau_k);
            act_q[7'(NPIX) + 7'(tag_pix[s])] <= pol_of(tpi.read_data[s], te_q, tau_k);
          end else begin
            act_q[tag_pix[s]]        <= '0;
            act_q[7'(NPIX) + 7'(tag_pix[s])] <= '0;
          end
          if (tag_pix[s] == 6'(NPIX / 2))
            act_q[7'(NPIX) + 7'(tag_pix[s])] <= ev_q.pol ? ACT_POS_ONE : ACT_NEG_ONE;
        end
      end

      unique case (state)
        S_IDLE: ;
        S_READ: begin
          cnt <= cnt + 1'b1;
          if (cnt == 5'(READ_CYCLES - 1)) state <= S_DRAIN;
        end
        S_DRAIN: state <= S_OUT;
        S_OUT:   if (mlp_ready) state <= S_WAIT;
        S_WAIT:  if (mlp_pred_vld) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase

      if (accept) begin
        ev_q  <= evt_in;
        te_q  <= ts_evt;
        cnt   <= '0;
        state <= S_READ;
      end
    end
  end

  // an event must not be accepted outside the image
  assert property (@(posedge clk) disable iff (!rst_n)
                   accept |-> (evt_in.x < XW'(W) && evt_in.y < YW'(H)))
    else $error("event outside the sensor");
  // the MLP input vector is handed over only once per event
  assert property (@(posedge clk) disable iff (!rst_n)
                   (mlp_data_vld && mlp_ready) |=> !mlp_data_vld)
    else $error("mlp_data_vld held after handshake");

endmodule
