// subband_scan: address generator for the scalable layer order of one GOF buffer. It is
// used by the encoder to cut the sub-bands into CS input vectors and by the decoder to put
// reconstructed vectors back into their sub-bands (the "sub-band formation" step).
//
// Order: first the base layer (LL quadrant of slot 0 at level LEVELS), then the
// high-frequency sub-bands of level LEVELS, LEVELS-1, ..., 1. At level l, with
// F = GOF >> (l-1) slots, slots 0..F/2-1 (temporal L frames) contribute their three
// spatial high-pass quadrants HL, LH, HH, and slots F/2..F-1 (temporal H frames) all four
// quadrants; each quadrant is (W >> l) x (H >> l). A sub-band is read column by column,
// top to bottom, so that N / (H >> l) consecutive columns form one input vector of N
// coefficients. One address is presented per clock while `adv` is high; `valid` falls
// and `done` rises once every position has been consumed. `level` tells which level
// (and so which enhancement layer, EL = LEVELS + 1 - level) the current address is in.
// The order of layers, the colours of sub-bands per level and the column-wise vector
// formation with N = 2^n * H / 2^l follow the framework; the order of slots and quadrants
// inside a level is a choice of this design.
module subband_scan #(
  parameter int unsigned W      = 1920,
  parameter int unsigned H      = 1080,
  parameter int unsigned GOF    = 8,
  parameter int unsigned LEVELS = 3,
  parameter int unsigned NVEC   = 2160,
  localparam int unsigned AW    = $clog2(GOF * W * H),
  localparam int unsigned LW    = $clog2(((W > H) ? W : H) + 1),
  localparam int unsigned NW    = $clog2(NVEC + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          adv,
  output logic          valid,
  output logic          done,
  output logic [AW-1:0] addr,
  output logic          is_bl,
  output logic          vec_first,
  output logic          vec_last,
  output logic [3:0]    level      // DWT level of the current position (LEVELS for the base layer)
);
  localparam int unsigned FW  = $clog2(GOF + 1);
  localparam int unsigned LVW = $clog2(LEVELS + 2);

  // Every level's sub-band height must divide N and its width must hold whole vectors.
  for (genvar l = 1; l <= LEVELS; l++) begin : g_chk
    if (NVEC % (H >> l) != 0 || (W >> l) % (NVEC / (H >> l)) != 0)
      $error("subband_scan: N=%0d does not tile level %0d sub-bands", NVEC, l);
  end

  logic           act, bl;
  logic [LVW-1:0] lv;      // level, 1-based
  logic [FW-1:0]  f;
  logic [1:0]     q;
  logic [LW-1:0]  c, r;
  logic [NW-1:0]  v;       // position inside the current vector

  logic [LW-1:0] ws, hs;
  logic [FW-1:0] fl, fh;
  assign ws = LW'(W >> lv);
  assign hs = LW'(H >> lv);
  assign fl = FW'(GOF >> (lv - LVW'(1)));
  assign fh = fl >> 1;

  always_comb begin
    logic [LW-1:0] x0, y0;
    x0   = q[0] ? ws : '0;
    y0   = q[1] ? hs : '0;
    addr = AW'(f) * AW'(W * H) + AW'(y0 + r) * AW'(W) + AW'(x0 + c);
  end
  assign valid     = act;
  assign is_bl     = bl;
  assign level     = 4'(lv);
  assign vec_first = act && !bl && (v == '0);
  assign vec_last  = act && !bl && (v == NW'(NVEC - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act <= 1'b0; bl <= 1'b0; lv <= LVW'(LEVELS); f <= '0; q <= '0;
      c <= '0; r <= '0; v <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        act <= 1'b1; bl <= 1'b1; lv <= LVW'(LEVELS); f <= '0; q <= 2'd0;
        c <= '0; r <= '0; v <= '0;
      end else if (act && adv) begin
        v <= (v == NW'(NVEC - 1) || bl) ? '0 : v + NW'(1);
        if (r != hs - LW'(1)) r <= r + LW'(1);
        else begin
          r <= '0;
          if (c != ws - LW'(1)) c <= c + LW'(1);
          else begin
            c <= '0;
            // Sub-band finished: next quadrant, slot or level.
            if (bl) begin
              bl <= 1'b0; f <= '0; q <= 2'd1;
            end else if (q != 2'd3) q <= q + 2'd1;
            else if (f != fl - FW'(1)) begin
              f <= f + FW'(1);
              q <= (f + FW'(1) < fh) ? 2'd1 : 2'd0;
            end else if (lv != LVW'(1)) begin
              lv <= lv - LVW'(1); f <= '0; q <= 2'd1;
            end else begin
              act <= 1'b0; done <= 1'b1;
            end
          end
        end
      end
    end
  end
endmodule
