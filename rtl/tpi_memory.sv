// tpi_memory: the timestamp+polarity image (TPI) of the MLPF.
//
// Holds, for every pixel of the W x H sensor, the 16-bit millisecond timestamp
// and the 2-bit polarity of the latest event at that pixel (18-bit word).
// The ASIC version of the filter reads two TPI pixels per cycle from two
// 1W1R SRAMs built of 2048-word banks. This design splits the image by column
// parity: side 0 holds the even columns and side 1 the odd ones, so a 7-pixel
// row of the patch always has 4 pixels in one side and 3 in the other and both
// sides are busy on most cycles. Within a side, pixel (x, y) is word
// y*(W/2) + x/2; its upper bits select one of NBANK banks and the low 11 bits the
// word in the bank. At the default size each side is 44,980 words, i.e. 22 banks,
// 44 banks in all (the filter description counts W*H/2048 = 44 banks).
//
// Interface (tpi_if, slave side): read port p reads side p, the data arrive the
// cycle after read_vld. The write port writes one word into the side given by
// x[0]. After reset the memory clears itself, all banks in parallel, one word
// per cycle (BANK_WORDS cycles), holding ready low meanwhile; a cleared word
// has polarity POL_NONE, which the E2MLP reads as "no event". The clearing is
// this design's own choice (the source does not say how the TPI starts).
module tpi_memory
  import mlpf_pkg::*;
#(
  parameter int unsigned W          = SENSOR_W,
  parameter int unsigned H          = SENSOR_H,
  parameter int unsigned BANK_WORDS_P = BANK_WORDS
) (
  input  logic clk,
  input  logic rst_n,
  tpi_if.slave bus
);

  localparam int unsigned HALF_W = (W + 1) / 2;
  localparam int unsigned SIDE_WORDS = HALF_W * H;
  localparam int unsigned NBANK = (SIDE_WORDS + BANK_WORDS_P - 1) / BANK_WORDS_P;
  localparam int unsigned BAW = $clog2(BANK_WORDS_P);
  localparam int unsigned IDXW = $clog2(SIDE_WORDS + 1) > BAW + 1 ? $clog2(SIDE_WORDS + 1) : BAW + 1;
  localparam int unsigned BSW = IDXW - BAW;   // bank-select bits

  // ---------------- clearing after reset ----------------
  logic           clearing;
  logic [BAW-1:0] clr_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == BAW'(BANK_WORDS_P - 1)) clearing <= 1'b0;
    end
  end

  assign bus.ready = !clearing;

  // ---------------- address decoding ----------------
  function automatic logic [IDXW-1:0] word_index(input logic [YW-1:0] y,
                                                 input logic [XW-2:0] xh);
    return IDXW'(y) * IDXW'(HALF_W) + IDXW'(xh);
  endfunction

  logic [IDXW-1:0] ridx [2];
  logic [IDXW-1:0] widx;
  logic            wside;
  logic [BSW-1:0]  rbank_q [2];

  always_comb begin
    for (int s = 0; s < 2; s++) ridx[s] = word_index(bus.read_addr[s].y, bus.read_addr[s].xh);
    widx  = word_index(bus.write_addr.y, bus.write_addr.x[XW-1:1]);
    wside = bus.write_addr.x[0];
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < 2; s++)
      if (bus.read_vld[s]) rbank_q[s] <= ridx[s][IDXW-1:BAW];
  end

  // ---------------- banks ----------------
  logic [TPI_W-1:0] bank_rdata [2][NBANK];

  for (genvar s = 0; s < 2; s++) begin : g_side
    for (genvar b = 0; b < int'(NBANK); b++) begin : g_bank
      logic           we, re;
      logic [BAW-1:0] waddr;
      logic [TPI_W-1:0] wdata;
      always_comb begin
        if (clearing) begin
          we    = 1'b1;
          waddr = clr_addr;
          wdata = '0;
        end else begin
          we    = bus.write_vld && (wside == 1'(s)) && (widx[IDXW-1:BAW] == BSW'(b));
          waddr = widx[BAW-1:0];
          wdata = bus.write_data;
        end
        re = !clearing && bus.read_vld[s] && (ridx[s][IDXW-1:BAW] == BSW'(b));
      end
      tpi_sram_bank #(.WORDS(BANK_WORDS_P), .WIDTH(TPI_W)) u_bank (
        .clk   (clk),
        .we    (we),
        .waddr (waddr),
        .wdata (wdata),
        .re    (re),
        .raddr (ridx[s][BAW-1:0]),
        .rdata (bank_rdata[s][b])
      );
    end
  end

  always_comb begin
    for (int s = 0; s < 2; s++) bus.read_data[s] = tpi_word_t'(bank_rdata[s][rbank_q[s]]);
  end

  // ---------------- access rules ----------------
  // no access while clearing; addresses inside the image
  assert property (@(posedge clk) disable iff (!rst_n)
                   clearing |-> !(bus.read_vld[0] || bus.read_vld[1] || bus.write_vld))
    else $error("TPI accessed while clearing");
  assert property (@(posedge clk) disable iff (!rst_n)
                   bus.write_vld |-> (bus.write_addr.x < XW'(W) && bus.write_addr.y < YW'(H)))
    else $error("TPI write outside the image");
  for (genvar s = 0; s < 2; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     bus.read_vld[s] |-> ({bus.read_addr[s].xh, 1'(s)} < XW'(W) &&
                                          bus.read_addr[s].y < YW'(H)))
      else $error("TPI read outside the image on port %0d", s);
  end

endmodule
