// dwt3d: three-dimensional wavelet engine with its group-of-frames (GOF) buffer. In
// forward mode it turns GOF frames of pixels into the 3-D wavelet sub-bands in place; in
// inverse mode it turns the sub-bands back into frames.
//
// Forward, for level l = 1..LEVELS, on the top-left (W>>(l-1)) x (H>>(l-1)) region of
// the first F = GOF>>(l-1) frame slots (the L frames of the previous level):
//   1. one level of 2-D 9/7 DWT on each slot, rows then columns, through dwt97_line,
//      leaving the usual LL | HL / LH | HH quadrant layout;
//   2. one temporal Haar level on each pixel of the region: frames (2p, 2p+1) give the
//      L frame in slot p and the H frame in slot F/2 + p.
// So after level 3 with GOF = 8: slot 0 holds the L frame whose LL quadrant is the base
// layer, and the high-frequency sub-bands are where the scalable layers expect them.
// Inverse undoes the levels from LEVELS down to 1: temporal first, then columns, then
// rows. The buffer is one word array; while the engine is idle the ext_* port reads it
// combinationally and writes it on the clock edge. Address = slot*W*H + row*W + column.
// Timing: each line of length L costs L load + 1 start + (3L+1) lifting + L store clocks;
// each temporal pixel costs 2F clocks. start is honoured only when idle; done pulses
// once at the end.
// The structure (2-D spatial then temporal, three levels, L frames decomposed further,
// GOF of 8) follows the framework and its temporal decomposition scheme; the
// in-place buffer, the line-by-line schedule and the ordering of slots are this design's.
module dwt3d
  import svc_pkg::*;
#(
  parameter int unsigned W      = 1920,
  parameter int unsigned H      = 1080,
  parameter int unsigned GOF    = 8,
  parameter int unsigned LEVELS = 3,
  localparam int unsigned DEPTH  = GOF * W * H,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          inverse,
  output logic          busy,
  output logic          done,
  input  logic          ext_we,
  input  logic [AW-1:0] ext_addr,
  input  coef_t         ext_wdata,
  output coef_t         ext_rdata
);
  localparam int unsigned LMAX = (W > H) ? W : H;
  localparam int unsigned LW   = $clog2(LMAX + 1);
  localparam int unsigned FW   = $clog2(GOF + 1);
  localparam int unsigned LVW  = $clog2(LEVELS + 1);

  typedef enum logic [1:0] {SG_ROWS, SG_COLS, SG_TEMP} stage_e;
  typedef enum logic [2:0] {PH_IDLE, PH_LOAD, PH_RUN, PH_WAIT, PH_STORE,
                            PH_TRD, PH_TWR, PH_NEXT} phase_e;

  coef_t mem [DEPTH];

  phase_e         ph;
  stage_e         sg;
  logic           inv_q;
  logic [LVW-1:0] lvl;        // 0-based level
  logic [FW-1:0]  f;          // frame slot (spatial stages)
  logic [LW-1:0]  ln;         // row or column index (spatial) / row (temporal)
  logic [LW-1:0]  px;         // column (temporal)
  logic [LW-1:0]  k;          // element within line / slot within pixel

  logic [LW-1:0] wl, hl, len, nlines;
  logic [FW-1:0] fl, fh;
  assign wl = LW'(W >> lvl);
  assign hl = LW'(H >> lvl);
  assign fl = FW'(GOF >> lvl);
  assign fh = fl >> 1;
  assign len    = (sg == SG_ROWS) ? wl : hl;
  assign nlines = (sg == SG_ROWS) ? hl : wl;

  // Address of element k of the current line, or of slot k at the current pixel.
  logic [AW-1:0] caddr;
  always_comb begin
    if (sg == SG_TEMP)
      caddr = AW'(k) * AW'(W * H) + AW'(ln) * AW'(W) + AW'(px);
    else if (sg == SG_ROWS)
      caddr = AW'(f) * AW'(W * H) + AW'(ln) * AW'(W) + AW'(k);
    else
      caddr = AW'(f) * AW'(W * H) + AW'(k) * AW'(W) + AW'(ln);
  end
  coef_t crdata;
  assign crdata    = mem[caddr];
  assign ext_rdata = mem[ext_addr];

  // Line engine.
  logic  le_start, le_busy, le_done, le_wr;
  coef_t le_rdata;
  dwt97_line #(.LMAX(LMAX)) u_line (
    .clk, .rst_n, .len, .inverse(inv_q),
    .wr_en(le_wr), .wr_idx(k), .wr_data(crdata),
    .rd_idx(k), .rd_data(le_rdata),
    .start(le_start), .busy(le_busy), .done(le_done)
  );
  assign le_wr    = (ph == PH_LOAD);
  assign le_start = (ph == PH_RUN);

  // Temporal pixel buffer and Haar step.
  coef_t tbuf [GOF];
  coef_t ha, hb, hoa, hob, tout;
  logic [FW-1:0] pp;
  always_comb begin
    if (!inv_q) begin
      pp = (FW'(k) < fh) ? FW'(k) : FW'(k) - fh;
      ha = tbuf[pp << 1];
      hb = tbuf[(pp << 1) + FW'(1)];
      tout = (FW'(k) < fh) ? hoa : hob;
    end else begin
      pp = FW'(k) >> 1;
      ha = tbuf[pp];
      hb = tbuf[fh + pp];
      tout = k[0] ? hob : hoa;
    end
  end
  haar_lift u_haar (.inverse(inv_q), .in_a(ha), .in_b(hb), .out_a(hoa), .out_b(hob));

  // Memory write port.
  always_ff @(posedge clk) begin
    if (ph == PH_IDLE) begin
      if (ext_we) mem[ext_addr] <= ext_wdata;
    end else if (ph == PH_STORE) begin
      mem[caddr] <= le_rdata;
    end else if (ph == PH_TWR) begin
      mem[caddr] <= tout;
    end
  end

  always_ff @(posedge clk) begin
    if (ph == PH_TRD) tbuf[k[FW-1:0]] <= crdata;
  end

  assign busy = (ph != PH_IDLE);

  // Stage order: forward ROWS, COLS, TEMP per level (levels ascending);
  // inverse TEMP, COLS, ROWS per level (levels descending).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph    <= PH_IDLE;
      sg    <= SG_ROWS;
      inv_q <= 1'b0;
      lvl   <= '0;
      f     <= '0;
      ln    <= '0;
      px    <= '0;
      k     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (ph)
        PH_IDLE: if (start) begin
          inv_q <= inverse;
          lvl   <= inverse ? LVW'(LEVELS - 1) : '0;
          sg    <= inverse ? SG_TEMP : SG_ROWS;
          ph    <= inverse ? PH_TRD : PH_LOAD;
          f <= '0;  ln <= '0;  px <= '0;  k <= '0;
        end
        PH_LOAD:  if (k == len - LW'(1)) begin k <= '0; ph <= PH_RUN; end
                  else k <= k + LW'(1);
        PH_RUN:   ph <= PH_WAIT;
        PH_WAIT:  if (le_done) ph <= PH_STORE;
        PH_STORE: if (k == len - LW'(1)) begin
                    k <= '0;
                    if (ln == nlines - LW'(1)) begin
                      ln <= '0;
                      if (f == fl - FW'(1)) begin f <= '0; ph <= PH_NEXT; end
                      else begin f <= f + FW'(1); ph <= PH_LOAD; end
                    end else begin
                      ln <= ln + LW'(1);
                      ph <= PH_LOAD;
                    end
                  end else k <= k + LW'(1);
        PH_TRD:   if (FW'(k) == fl - FW'(1)) begin k <= '0; ph <= PH_TWR; end
                  else k <= k + LW'(1);
        PH_TWR:   if (FW'(k) == fl - FW'(1)) begin
                    k <= '0;
                    ph <= PH_TRD;
                    if (px == wl - LW'(1)) begin
                      px <= '0;
                      if (ln == hl - LW'(1)) begin ln <= '0; ph <= PH_NEXT; end
                      else ln <= ln + LW'(1);
                    end else px <= px + LW'(1);
                  end else k <= k + LW'(1);
        PH_NEXT: begin
          if (!inv_q) begin
            unique case (sg)
              SG_ROWS: begin sg <= SG_COLS; ph <= PH_LOAD; end
              SG_COLS: begin sg <= SG_TEMP; ph <= PH_TRD; end
              default: if (lvl == LVW'(LEVELS - 1)) begin ph <= PH_IDLE; done <= 1'b1; end
                       else begin lvl <= lvl + LVW'(1); sg <= SG_ROWS; ph <= PH_LOAD; end
            endcase
          end else begin
            unique case (sg)
              SG_TEMP: begin sg <= SG_COLS; ph <= PH_LOAD; end
              SG_COLS: begin sg <= SG_ROWS; ph <= PH_LOAD; end
              default: if (lvl == '0) begin ph <= PH_IDLE; done <= 1'b1; end
                       else begin lvl <= lvl - LVW'(1); sg <= SG_TEMP; ph <= PH_TRD; end
            endcase
          end
        end
        default: ph <= PH_IDLE;
      endcase
    end
  end

  a_ext_idle: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !ext_we);
endmodule
