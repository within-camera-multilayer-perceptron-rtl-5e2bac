// mlpf_pkg: types, sizes and default network constants shared by the MLPF
// (multilayer-perceptron DVS denoising filter) blocks.
//
// Sizes follow the hardware specification of the filter: a 346x260 DVS,
// a 7x7 input patch, 10 hidden units, an 18-bit timestamp+polarity image (TPI)
// word made of a 16-bit millisecond timestamp and a 2-bit polarity, and
// 2048-word SRAM banks. Fixed-point formats:
//   input unit   5-bit signed, 4 fraction bits (age 0..15/16, polarity -1/0/+15/16)
//   weight/bias  5-bit signed, 4 fraction bits
//   hidden unit  4-bit unsigned fraction (ReLU output)
//   accumulator  16-bit signed, 6 integer bits (10 fraction bits)
//   output       16-bit signed, same format as the accumulator; compared with T_MLPF
//
// The trained weights of the published network are not listed in the source
// description, so the default weights below are a hand-made placeholder with the
// same shape and about the same sparsity (see default_w1). They make the filter
// pass events that have recent neighbours and block isolated ones, which is
// what the trained filter does, but they are not the trained network.
package mlpf_pkg;

  // ---- sensor and patch geometry ----
  localparam int unsigned SENSOR_W   = 346;
  localparam int unsigned SENSOR_H   = 260;
  localparam int unsigned XW         = 9;    // x address bits (346 < 512)
  localparam int unsigned YW         = 9;    // y address bits (260 < 512)
  localparam int unsigned PATCH      = 7;    // s_MLPF
  localparam int unsigned RADIUS     = 3;    // (PATCH-1)/2
  localparam int unsigned NPIX       = PATCH * PATCH;   // 49
  localparam int unsigned N_IN       = 2 * NPIX;        // 98
  localparam int unsigned N_HID      = 10;              // N_MLPF

  // ---- TPI word ----
  localparam int unsigned TS_W       = 16;   // ms timestamp bits
  localparam int unsigned TS_US_W    = 32;   // incoming microsecond timestamp bits
  localparam int unsigned TS_SHIFT   = 10;   // us -> ms by right shift
  localparam int unsigned TPI_W      = TS_W + 2;
  localparam int unsigned BANK_WORDS = 2048;
  localparam int unsigned BANK_AW    = 11;

  // stored 2-bit polarity code
  typedef enum logic [1:0] {
    POL_NONE = 2'b00,   // no event stored yet (memory cleared)
    POL_ON   = 2'b01,
    POL_OFF  = 2'b10
  } tpi_pol_e;

  typedef struct packed {
    logic [TS_W-1:0] ts;    // ms timestamp of the latest event at the pixel
    tpi_pol_e        pol;
  } tpi_word_t;

  // DVS event address as delivered by the sensor (AER)
  typedef struct packed {
    logic [XW-1:0] x;
    logic [YW-1:0] y;
    logic          pol;     // 1 = ON, 0 = OFF
  } dvs_event_t;

  // ---- fixed-point types ----
  localparam int unsigned ACT_W  = 5;   // input unit, 4 fraction + sign
  localparam int unsigned WGT_W  = 5;   // weight and bias, 4 fraction + sign
  localparam int unsigned HID_W  = 4;   // hidden activation, unsigned 4 fraction
  localparam int unsigned ACC_W  = 16;  // accumulator and output
  localparam int unsigned ACC_FRAC = 10;

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [WGT_W-1:0] wgt_t;
  typedef logic        [HID_W-1:0] hid_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // input vector: element 0..48 are ages, 49..97 polarities, pixel index
  // (dy+3)*7 + (dx+3)
  typedef act_t [N_IN-1:0]            mlp_in_t;
  typedef wgt_t [N_HID-1:0][N_IN-1:0] w1_t;
  typedef wgt_t [N_HID-1:0]           b1_t;
  typedef wgt_t [N_HID-1:0]           w2_t;

  localparam act_t ACT_POS_ONE = 5'sd15;   // +1 saturates to 15/16
  localparam act_t ACT_NEG_ONE = -5'sd16;  // -1 is exact

  // Chebyshev distance of patch pixel p from the centre
  function automatic int unsigned ring(input int unsigned p);
    int dx, dy;
    dx = int'(p % PATCH) - int'(RADIUS);
    dy = int'(p / PATCH) - int'(RADIUS);
    if (dx < 0) dx = -dx;
    if (dy < 0) dy = -dy;
    return (dx > dy) ? dx : dy;
  endfunction

  // Placeholder first-layer weights (units of 1/16).
  //  units 0..3: recent-neighbour detectors on the age channel, each on a
  //              different radius band;
  //  units 4..5: ON / OFF polarity agreement around the centre;
  //  units 6..7: overall and near-ring activity on the age channel;
  //  units 8..9: strong ON / OFF agreement in the inner 5x5.
  // 292 of the 980 first-layer weights are non-zero (30%).
  function automatic w1_t default_w1();
    w1_t w;
    for (int j = 0; j < int'(N_HID); j++)
      for (int i = 0; i < int'(N_IN); i++) begin
        int unsigned p, d;
        bit age_ch;
        age_ch = (i < int'(NPIX));
        p = age_ch ? i : i - NPIX;
        d = ring(p);
        w[j][i] = '0;
        case (j)
          0: if (age_ch && d == 1)             w[j][i] = 5'sd6;
          1: if (age_ch && d == 2)             w[j][i] = 5'sd4;
          2: if (age_ch && d >= 1 && d <= 2)   w[j][i] = 5'sd3;
          3: if (age_ch && d >= 2)             w[j][i] = 5'sd2;
          4: if (!age_ch)                      w[j][i] = 5'sd4;
          5: if (!age_ch)                      w[j][i] = -5'sd4;
          6: if (age_ch)                       w[j][i] = 5'sd1;
          7: if (age_ch && d <= 1)             w[j][i] = 5'sd5;
          8: if (!age_ch && d <= 2)            w[j][i] = 5'sd7;
          default: if (!age_ch && d <= 2)      w[j][i] = -5'sd7;
        endcase
      end
    return w;
  endfunction

  function automatic b1_t default_b1();
    b1_t b;
    for (int j = 0; j < int'(N_HID); j++) b[j] = -5'sd8;   // -0.5
    return b;
  endfunction

  function automatic w2_t default_w2();
    w2_t w;
    for (int j = 0; j < int'(N_HID); j++) w[j] = (j < 4) ? 5'sd12 : 5'sd6;
    return w;
  endfunction

  localparam wgt_t DEFAULT_B2 = -5'sd4;     // -0.25

endpackage
