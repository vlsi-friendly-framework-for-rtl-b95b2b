// eamp: Enhanced Approximate Message Passing reconstruction of one sparse input vector
// s (N coefficients) from its M measurements y = Phi_j * s, given the codebook index j
// and the l0-norm K sent by the encoder.
//
// Start: s = 0, z = y. Then ITER iterations; iteration i (1-based) does
//   gamma = s + mu * Phi_j^T z                      (back-projection, BP;
//                                                    mu = 1/M in AMP, see below in IHT)
//   i <  ITER/4 (AMP):  delta = M-th largest |gamma|;  s = soft(gamma, delta);
//                       z = y - Phi_j s + z * #{|gamma| > delta} / M
//   i >= ITER/4 (IHT):  s = gamma with all but the K largest |gamma| set to 0;
//                       z = y - Phi_j s
// Hardware schedule, one accumulation per clock, state by state:
//   BP   N columns x M rows      gamma[c] accumulated over z, scaled by 1/M
//   SEL  32 bit-planes x N       radix selection of the target-th largest |gamma|
//                                (target = M in AMP, K in IHT): bit by bit from the MSB,
//                                keep a 1 if at least `target` magnitudes reach the prefix
//   CGT  N                       count of |gamma| > delta
//   SHR  N                       shrinkage (AMP) or keep-K (IHT; ties at delta kept in
//                                column order, like a stable descending sort)
//   RES  M rows x N columns      new residual z
// so one iteration takes about 2*M*N + 34*N clocks. y is loaded through y_we/y_idx before
// start; the result is read through s_idx -> s_data (combinational) after done.
// The iteration (AMP until the first quarter of the iterations, then IHT with the known
// K, ITER = 400, threshold at the M-th largest magnitude, Onsager term) is the
// framework's algorithm. Its "z/n" in the Onsager term is read as z/M. The algorithm as
// published has no step size; here the back-projection is scaled by 1/M in the AMP
// iterations (unit-norm columns) and by 1/(sqrt(M)+sqrt(N))^2 in the IHT iterations (so
// the gradient step cannot diverge), both from reciprocal tables with RS fractional
// bits. The radix selection in place of a sort, the serial schedule and the fixed-point
// widths are also choices of this design.
module eamp
  import svc_pkg::*;
#(
  parameter int unsigned NVEC = 2160,
  parameter int unsigned MDIV = 1,
  parameter int unsigned ITER = 400,
  parameter int unsigned RS   = 24,
  localparam int unsigned NW   = $clog2(NVEC + 1),
  localparam int unsigned MCAP = (M_MAX + MDIV - 1) / MDIV
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          y_we,
  input  logic [11:0]   y_idx,
  input  coef_t         y_data,
  input  logic          start,
  input  logic [3:0]    j,
  input  logic [15:0]   k,
  output logic          busy,
  output logic          done,
  output logic          iht_phase,   // high while the IHT iterations run
  input  logic [NW-1:0] s_idx,
  output coef_t         s_data
);
  // Step sizes per codebook index in Q(RS): 1/M for the AMP iterations (columns of the
  // +-1 matrix normalised to unit norm) and 1/(sqrt(M)+sqrt(N))^2 for the IHT iterations
  // (the usual bound on the squared norm of a random +-1 matrix, which keeps IHT stable).
  typedef int unsigned recip_t [NIDX];
  function automatic longint isqrt(input longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction
  function automatic recip_t gen_recip(input bit iht);
    recip_t t;
    for (int i = 0; i < NIDX; i++) begin
      longint mm = longint'(m_of_j(4'(i), MDIV));
      longint dd = iht ? mm + NVEC + 2 * isqrt(mm * NVEC) : mm;
      t[i] = (mm == 0) ? 0 : 32'(((longint'(1) <<< RS) + dd / 2) / dd);
    end
    return t;
  endfunction
  localparam recip_t RECIP_AMP = gen_recip(1'b0);
  localparam recip_t RECIP_IHT = gen_recip(1'b1);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_BP, S_SEL, S_CGT, S_SHR, S_FAC, S_RES} st_e;
  st_e st;

  coef_t y [MCAP];
  coef_t z [MCAP];
  coef_t s [NVEC];
  coef_t g [NVEC];

  logic [3:0]    jq;
  logic [11:0]   m;
  logic [15:0]   kq;
  logic [15:0]   it;
  logic          amp;
  logic [NW-1:0] c;
  logic [11:0]   r;
  logic [5:0]    b;
  logic signed [47:0] acc;
  logic [31:0]   prefix;        // selection result / threshold delta
  logic [NW:0]   cnt;           // selection and ">" counts
  logic [NW:0]   cnt_gt, eqk;
  logic [NW:0]   target;
  logic [63:0]   fac;           // Onsager factor #{|gamma|>delta} / M in Q(RS)
  logic [31:0]   recip;
  logic          neg;

  assign recip     = amp ? RECIP_AMP[jq] : RECIP_IHT[jq];
  assign busy      = (st != S_IDLE);
  assign iht_phase = busy && !amp;
  assign s_data    = s[s_idx];

  bernoulli_codebook #(.LANES(1)) u_cb (.j(jq), .row(16'(r)), .col(16'(c)), .neg);

  // Magnitude of gamma[c].
  logic [31:0] gmag;
  coef_t       gc;
  assign gc   = g[c];
  assign gmag = gc[31] ? 32'(-gc) : 32'(gc);

  // Accumulators including the current term.
  logic signed [47:0] acc_bp, acc_res;
  assign acc_bp  = neg ? acc - 48'(z[r]) : acc + 48'(z[r]);
  assign acc_res = neg ? acc - 48'(s[c]) : acc + 48'(s[c]);

  // Back-projected value for column c.
  coef_t gnew;
  always_comb begin
    logic signed [79:0] p;
    p    = 80'(acc_bp) * $signed({48'd0, recip});
    gnew = s[c] + coef_t'(p >>> RS);
  end

  // New residual for row r.
  coef_t znew;
  always_comb begin
    logic signed [95:0] p;
    p    = 96'(z[r]) * $signed({32'd0, fac});
    znew = y[r] - coef_t'(acc_res) + coef_t'(p >>> RS);
  end

  // Shrinkage / keep-K result for column c.
  coef_t snew;
  always_comb begin
    logic [31:0] d;
    d = gmag - prefix;
    if (amp) snew = (gmag > prefix) ? (gc[31] ? -coef_t'(d) : coef_t'(d)) : '0;
    else if (gmag > prefix || (gmag == prefix && eqk < target - cnt_gt)) snew = gc;
    else snew = '0;
  end

  always_ff @(posedge clk) begin
    if (st == S_IDLE && y_we) y[y_idx] <= y_data;
    if (st == S_INIT) begin
      if (32'(c) < 32'(NVEC)) s[c] <= '0;
      if (32'(c) < 32'(m))    z[c[11:0]] <= y[c[11:0]];
    end
    if (st == S_BP && r == m - 12'd1) g[c] <= gnew;
    if (st == S_SHR) s[c] <= snew;
    if (st == S_RES && 32'(c) == 32'(NVEC - 1)) z[r] <= znew;
  end

  localparam int unsigned INIT_LEN = (NVEC > MCAP) ? NVEC : MCAP;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; jq <= '0; m <= '0; kq <= '0; it <= '0; amp <= 1'b1;
      c <= '0; r <= '0; b <= '0; acc <= '0; prefix <= '0; cnt <= '0; cnt_gt <= '0;
      eqk <= '0; target <= '0; fac <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          jq <= j; kq <= k; m <= 12'(m_of_j(j, MDIV));
          c <= '0; it <= 16'd1; amp <= (ITER / 4 > 1);
          st <= S_INIT;
        end
        S_INIT: if (32'(c) == 32'(INIT_LEN - 1)) begin
          c <= '0; r <= '0; acc <= '0; st <= S_BP;
        end else c <= c + NW'(1);
        S_BP: if (r == m - 12'd1) begin
          r <= '0; acc <= '0;
          if (32'(c) == 32'(NVEC - 1)) begin
            c <= '0; b <= 6'd31; prefix <= '0; cnt <= '0; st <= S_SEL;
            target <= amp ? ((32'(m) < 32'(NVEC)) ? (NW+1)'(m) : (NW+1)'(NVEC))
                          : ((32'(kq) < 32'(NVEC)) ? (NW+1)'(kq) : (NW+1)'(NVEC));
          end else c <= c + NW'(1);
        end else begin
          acc <= acc_bp; r <= r + 12'd1;
        end
        S_SEL: begin
          logic [31:0] cand;
          logic [NW:0] cn;
          cand = prefix | (32'd1 << b);
          cn   = cnt + ((gmag >= cand) ? (NW+1)'(1) : '0);
          if (32'(c) == 32'(NVEC - 1)) begin
            c <= '0; cnt <= '0;
            if (cn >= target) prefix <= cand;
            if (b == '0) st <= S_CGT;
            else b <= b - 6'd1;
          end else begin
            c <= c + NW'(1); cnt <= cn;
          end
        end
        S_CGT: begin
          logic [NW:0] cn;
          cn = cnt + ((gmag > prefix) ? (NW+1)'(1) : '0);
          if (32'(c) == 32'(NVEC - 1)) begin
            c <= '0; cnt_gt <= cn; eqk <= '0; st <= S_SHR;
          end else begin
            c <= c + NW'(1); cnt <= cn;
          end
        end
        S_SHR: begin
          if (!amp && gmag == prefix && eqk < target - cnt_gt) eqk <= eqk + (NW+1)'(1);
          if (32'(c) == 32'(NVEC - 1)) begin c <= '0; st <= S_FAC; end
          else c <= c + NW'(1);
        end
        S_FAC: begin
          fac <= amp ? 64'(cnt_gt) * 64'(recip) : 64'd0;
          c <= '0; r <= '0; acc <= '0; st <= S_RES;
        end
        S_RES: if (32'(c) == 32'(NVEC - 1)) begin
          c <= '0; acc <= '0;
          if (r == m - 12'd1) begin
            r <= '0;
            if (32'(it) == 32'(ITER)) begin st <= S_IDLE; done <= 1'b1; end
            else begin
              it  <= it + 16'd1;
              amp <= (32'(it) + 1 < 32'(ITER / 4));
              st  <= S_BP;
            end
          end else r <= r + 12'd1;
        end else begin
          acc <= acc_res; c <= c + NW'(1);
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (st == S_IDLE && j != 4'd0));
endmodule
