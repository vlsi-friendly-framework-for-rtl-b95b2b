// dwt97_line: one level of the 1-D CDF 9/7 wavelet transform by lifting, forward or
// inverse, on one row or column held in a line buffer.
//
// The caller writes LEN samples (wr_en/wr_idx/wr_data), pulses start with `inverse`
// chosen, waits for done, then reads LEN results by index (rd_idx -> rd_data,
// combinational). Forward: input in natural order, output in Mallat order (LEN/2 low-pass
// samples, then LEN/2 high-pass). Inverse: input in Mallat order, output in natural order.
// The four lifting steps (alpha, beta, gamma, delta) each visit the odd or even samples,
// one sample per clock, with whole-sample symmetric extension at both ends; a final pass
// scales low-pass by Kz and high-pass by 1/Kz. done rises 3*LEN + 1 clock edges after
// the edge that samples start (4 * LEN/2 lifting updates, LEN scalings, 1 to flag).
// The use of 9/7 lifting for the spatial transform follows the framework; the lifting
// constants (those of the standard CDF 9/7 factorisation), their 14-bit fixed-point
// rounding, the scaling convention and the serial one-update-per-clock schedule are
// choices of this design. LEN must be even and at least 2.
module dwt97_line
  import svc_pkg::*;
#(
  parameter int unsigned LMAX = 1920,
  localparam int unsigned LW = $clog2(LMAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [LW-1:0] len,
  input  logic          inverse,
  input  logic          wr_en,
  input  logic [LW-1:0] wr_idx,
  input  coef_t         wr_data,
  input  logic [LW-1:0] rd_idx,
  output coef_t         rd_data,
  input  logic          start,
  output logic          busy,
  output logic          done
);
  // Lifting constants in Q14.
  localparam int signed C_ALPHA = -25987;  // -1.586134342
  localparam int signed C_BETA  = -868;    // -0.052980118
  localparam int signed C_GAMMA = 14466;   //  0.882911075
  localparam int signed C_DELTA = 7266;    //  0.443506852
  localparam int signed C_KZ    = 18835;   //  1.149604398
  localparam int signed C_KINV  = 14252;   //  1/1.149604398

  typedef enum logic [2:0] {ST_IDLE, ST_A, ST_B, ST_C, ST_D, ST_SCALE} st_e;

  coef_t         x [LMAX];
  st_e           st;
  logic          inv_q;
  logic [LW-1:0] i;
  logic [LW-1:0] half;
  assign half = len >> 1;

  function automatic coef_t qmul(input int signed c, input logic signed [COEF_W:0] v);
    logic signed [COEF_W+18:0] p;
    p = 51'(v) * 51'(c);
    p = p + 51'(8192);
    return coef_t'(p >>> 14);
  endfunction

  // Neighbours of sample i with symmetric extension.
  coef_t xl, xr, xi;
  logic [LW-1:0] il, ir;
  always_comb begin
    il = (i == '0) ? LW'(1) : i - LW'(1);
    ir = (i + LW'(1) >= len) ? len - LW'(2) : i + LW'(1);
    xl = x[il];
    xr = x[ir];
    xi = x[i];
  end

  int signed cstep;
  always_comb begin
    unique case (st)
      ST_A:    cstep = C_ALPHA;
      ST_B:    cstep = C_BETA;
      ST_C:    cstep = C_GAMMA;
      ST_D:    cstep = C_DELTA;
      default: cstep = 0;
    endcase
  end

  coef_t upd;
  always_comb begin
    upd = qmul(cstep, (COEF_W+1)'(xl) + (COEF_W+1)'(xr));
    if (st == ST_SCALE)
      upd = qmul((i[0] ^ inv_q) ? C_KINV : C_KZ, (COEF_W+1)'(xi));
    else if (inv_q)
      upd = xi - upd;
    else
      upd = xi + upd;
  end

  // Write position for loading: inverse input is in Mallat order.
  logic [LW-1:0] wpos;
  always_comb begin
    if (inverse && wr_idx >= half) wpos = ((wr_idx - half) << 1) + LW'(1);
    else if (inverse)              wpos = wr_idx << 1;
    else                           wpos = wr_idx;
  end

  always_comb begin
    if (!inv_q && rd_idx >= half) rd_data = x[((rd_idx - half) << 1) + LW'(1)];
    else if (!inv_q)              rd_data = x[rd_idx << 1];
    else                          rd_data = x[rd_idx];
  end

  assign busy = (st != ST_IDLE);

  // Step after the current one finishes, and the parity it starts on.
  function automatic st_e next_st(input st_e s, input logic inv);
    if (!inv)
      unique case (s)
        ST_A: return ST_B;  ST_B: return ST_C;  ST_C: return ST_D;
        ST_D: return ST_SCALE;  default: return ST_IDLE;
      endcase
    else
      unique case (s)
        ST_SCALE: return ST_D;  ST_D: return ST_C;  ST_C: return ST_B;
        ST_B: return ST_A;  default: return ST_IDLE;
      endcase
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && st == ST_IDLE) x[wpos] <= wr_data;
    else if (st != ST_IDLE)     x[i] <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= ST_IDLE;
      inv_q <= 1'b0;
      i     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st == ST_IDLE) begin
        if (start) begin
          inv_q <= inverse;
          st    <= inverse ? ST_SCALE : ST_A;
          i     <= inverse ? LW'(0) : LW'(1);
        end
      end else begin
        logic [LW-1:0] step;
        logic          last;
        st_e           ns;
        step = (st == ST_SCALE) ? LW'(1) : LW'(2);
        last = (i + step >= len);
        if (last) begin
          ns = next_st(st, inv_q);
          st <= ns;
          i  <= (ns == ST_A || ns == ST_C) ? LW'(1) : LW'(0);
          if (ns == ST_IDLE) done <= 1'b1;
        end else begin
          i <= i + step;
        end
      end
    end
  end

  a_len_even: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (len[0] == 1'b0 && len >= LW'(2) && len <= LW'(LMAX)));
endmodule
