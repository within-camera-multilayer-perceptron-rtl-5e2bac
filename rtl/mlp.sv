// mlp: the quantized multilayer perceptron of the MLPF.
//
// 98 inputs -> 10 ReLU hidden units -> 1 linear output, all weights fixed at
// elaboration time (parameters), so zero weights cost no logic. Arithmetic:
//   hidden:  acc_j = sum_i x_i * W1[j][i] + B1[j]      (x, W1, B1: 5-bit, 4 fraction bits)
//            acc_j is saturated to a 16-bit signed accumulator with 10 fraction bits,
//            h_j = ReLU quantized to 4-bit unsigned fraction: clamp(floor(acc_j*16), 0, 15)
//   output:  y = sum_j h_j * W2[j] + B2, saturated to 16 bits, 10 fraction bits
// The output is the value the sigmoid would have been applied to; the sigmoid is
// left out because only its comparison with a threshold is needed.
//
// Timing: data_vld with ready=1 hands over the input vector (cycle n). The
// vector is registered at that edge (data gating: the input register loads
// only then), the hidden units are registered at the end of cycle n+1, the
// output at the end of n+2, and pred_vld is high for one cycle in cycle n+3:
// a latency of 3 cycles. The unit holds one vector at a time; ready is low from
// the hand-over until the cycle pred_vld is high, and the same adders and
// registers serve every event.
// Formats, layer sizes and latency follow the filter's specification; the
// rounding (truncation) and saturation choices are this design's. The default
// weights are placeholders (see mlpf_pkg).
module mlp
  import mlpf_pkg::*;
#(
  parameter w1_t  W1 = default_w1(),
  parameter b1_t  B1 = default_b1(),
  parameter w2_t  W2 = default_w2(),
  parameter wgt_t B2 = DEFAULT_B2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  mlp_in_t in_data,
  input  logic    data_vld,
  output logic    ready,
  output acc_t    pred,
  output logic    pred_vld
);

  typedef enum logic [1:0] {M_IDLE, M_HID, M_OUT, M_VLD} mstate_e;
  mstate_e st;

  mlp_in_t               x_q;
  hid_t    [N_HID-1:0]   h_q;
  acc_t                  pred_q;

  // sum with 8 fraction bits -> 16-bit accumulator with 10 fraction bits, saturated
  function automatic acc_t to_acc(input int signed s8);
    int signed s10;
    s10 = s8 * 4;
    if (s10 >  32767) return acc_t'(16'sd32767);
    if (s10 < -32768) return acc_t'(-16'sd32768);
    return acc_t'(s10);
  endfunction

  function automatic hid_t relu4(input acc_t a);
    acc_t q;
    if (a < 0) return '0;
    q = a >>> (ACC_FRAC - HID_W);
    return (q > 15) ? hid_t'(15) : hid_t'(q);
  endfunction

  // ---------------- hidden layer ----------------
  hid_t [N_HID-1:0] h_d;
  always_comb begin
    for (int j = 0; j < int'(N_HID); j++) begin
      int signed s;
      s = int'(B1[j]) * 16;
      for (int i = 0; i < int'(N_IN); i++)
        if (W1[j][i] != 0) s += int'(x_q[i]) * int'(W1[j][i]);
      h_d[j] = relu4(to_acc(s));
    end
  end

  // ---------------- output layer ----------------
  acc_t y_d;
  always_comb begin
    int signed s;
    s = int'(B2) * 16;
    for (int j = 0; j < int'(N_HID); j++)
      s += int'({1'b0, h_q[j]}) * int'(W2[j]);
    y_d = to_acc(s);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= M_IDLE;
      x_q    <= '0;
      h_q    <= '0;
      pred_q <= '0;
    end else begin
      unique case (st)
        M_HID: begin h_q <= h_d;    st <= M_OUT; end
        M_OUT: begin pred_q <= y_d; st <= M_VLD; end
        default: st <= M_IDLE;
      endcase
      if (data_vld && ready) begin
        x_q <= in_data;
        st  <= M_HID;
      end
    end
  end

  assign ready    = (st == M_IDLE) || (st == M_VLD);
  assign pred     = pred_q;
  assign pred_vld = (st == M_VLD);

endmodule
