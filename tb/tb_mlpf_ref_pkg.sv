// tb_mlpf_ref_pkg: reference model of the MLPF used by the testbenches.
//
// Written independently of the RTL from the filter's definition: a plain
// two-dimensional timestamp+polarity image, the age formula
// a = 15 - floor(16 * dt / tau) written with a division, the patch loop over (dx, dy), and the perceptron
// evaluated with integer arithmetic in units of 1/256, saturated and truncated
// as the fixed-point formats require.
package tb_mlpf_ref_pkg;
  import mlpf_pkg::*;

  typedef struct {
    int unsigned ts;    // ms, 16 bits
    int          pol;   // 0 none, +1 ON, -1 OFF
  } ref_pix_t;

  class mlpf_model;
    ref_pix_t img [SENSOR_W][SENSOR_H];
    int w, h;

    function new(int ww = SENSOR_W, int hh = SENSOR_H);
      w = ww; h = hh;
      for (int x = 0; x < SENSOR_W; x++)
        for (int y = 0; y < SENSOR_H; y++) begin
          img[x][y].ts  = 0;
          img[x][y].pol = 0;
        end
    endfunction

    // input vector for an event at (x, y, pol) with ms timestamp te
    function void features(int x, int y, int pol, int unsigned te, int tau_log2,
                           output int v [N_IN]);
      int unsigned tau;
      tau = 1 << tau_log2;
      for (int dy = -3; dy <= 3; dy++)
        for (int dx = -3; dx <= 3; dx++) begin
          int i, xx, yy;
          int unsigned dt;
          i  = (dy + 3) * 7 + (dx + 3);
          xx = x + dx; yy = y + dy;
          v[i] = 0; v[NPIX + i] = 0;
          if (xx >= 0 && xx < w && yy >= 0 && yy < h && img[xx][yy].pol != 0) begin
            dt = (te - img[xx][yy].ts) & 32'hFFFF;
            if (dt < tau) begin
              int a;
              a = 15 - (16 * dt) / tau;
              v[i] = a;
              v[NPIX + i] = (img[xx][yy].pol > 0) ? 15 : -16;
            end
          end
          if (dx == 0 && dy == 0) v[NPIX + i] = (pol != 0) ? 15 : -16;
        end
    endfunction

    function void store(int x, int y, int pol, int unsigned te);
      img[x][y].ts  = te & 32'hFFFF;
      img[x][y].pol = (pol != 0) ? 1 : -1;
    endfunction
  endclass

  function automatic int sat16(int v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // perceptron output in units of 1/1024 (the 16-bit output format)
  function automatic int mlp_ref(input int v [N_IN], w1_t w1, b1_t b1, w2_t w2, wgt_t b2);
    int hsum, osum, acc, hq;
    osum = int'(b2) * 16;           // units of 1/256
    for (int j = 0; j < N_HID; j++) begin
      hsum = int'(b1[j]) * 16;
      for (int i = 0; i < N_IN; i++) hsum += v[i] * int'(w1[j][i]);
      acc = sat16(hsum * 4);        // units of 1/1024
      hq = (acc < 0) ? 0 : acc / 64;
      if (hq > 15) hq = 15;
      osum += hq * int'(w2[j]);
    end
    return sat16(osum * 4);
  endfunction

endpackage
