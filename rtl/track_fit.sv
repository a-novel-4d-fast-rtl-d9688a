// track_fit: track fit unit for one grid column COL (x-_j). It finds the local maxima
// of the retina response W_ij(t0) in its column and computes the track parameters by
// Gaussian interpolation of the weights next to each maximum.
//
// Scan: after start, the unit steps sel over rows 0..N-1, one per cycle. One cycle later
// it receives, through its fan-in, the three weights of cell (i, j), W(t0) of rows i-1
// and i+1, and, from the neighbouring columns' fan-ins (all units scan in lock step),
// W(t0) of cells (i, j-1) and (i, j+1). Cells outside the grid count as 0. Cell (i, j) is
// a local maximum when W_ij(t0) >= THRESHOLD and
//   W_ij > W_i-1,j,  W_ij >= W_i+1,j,  W_ij > W_i,j-1,  W_ij >= W_i,j+1
// (strict on one side so that a plateau of two equal cells gives one track). Maxima go
// into a small FIFO (FIFO_DEPTH); a maximum that finds the FIFO full is dropped and
// counted in ovf_cnt.
//
// Fit: for each maximum, with L = log2 in fixed point (leading-one position plus a
// 64-entry mantissa table, LOG_FW fraction bits; weights of 0 are taken as 1),
//   a = L(W_prev) - L(W_c),  b = L(W_next) - L(W_c),  r = (a - b) / (a + b)
//   param = centre + (granularity / 2) * r
// along x+ (rows), x- (columns) and t (t0-dT, t0+dT). This is the paper's Gaussian
// interpolation; the ratio of two logarithms does not depend on their base. If a + b >= 0
// (no curvature) r is 0. The three ratios use three dividers (ratio_div) in parallel.
//
// Thresholds, tie rules, edge handling, the FIFO and the fixed-point formats are this
// design's choices; the paper defines the maximum and the interpolation formulas.
//
// Interface: start pulse; idle is high when the scan is over and every maximum has left
// on the track output (valid/hold). Timing: the scan takes N + 1 cycles; each maximum
// then needs 1 (log) + 13 (divide) + 1 (output) cycles. The col field of out_data is
// the constant COL, so those four output bits never change.
module track_fit
  import retina_pkg::*;
#(
  parameter int COL        = 0,
  parameter int N          = N_XP,
  parameter int THRESHOLD  = 3 * 255 * 255,   // about three hits fully matched
  parameter int FIFO_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic [$clog2(N)-1:0] sel,
  input  w3_t                  w_c,
  input  w_t                   w_dn,
  input  w_t                   w_up,
  input  w_t                   w_left,
  input  w_t                   w_right,
  output track_t               out_data,
  output logic                 out_valid,
  input  logic                 out_hold,
  output logic                 idle,
  output logic [7:0]           ovf_cnt
);

  localparam int RW = $clog2(N);
  localparam int IW = LOG_W + 2;

  typedef struct packed {
    logic [RW-1:0] row;
    w_t w0, wdn, wup, wl, wr, wtm, wtp;
  } cand_t;

  typedef logic [63:0][LOG_FW-1:0] frac_rom_t;
  function automatic frac_rom_t build_frac();
    frac_rom_t r;
    for (int m = 0; m < 64; m++) r[m] = log2_frac_entry(m);
    return r;
  endfunction
  localparam frac_rom_t FRAC = build_frac();

  function automatic logic [LOG_W-1:0] log2fx(w_t w);
    logic [4:0]       p;
    logic [ACC_W-1:0] nrm;
    p = '0;
    for (int b = 0; b < ACC_W; b++) if (w[b]) p = 5'(b);
    nrm = w << (ACC_W - 1 - int'(p));
    return {p, FRAC[nrm[ACC_W-2 -: 6]]};
  endfunction

  // ---------------- scan ----------------
  logic          scanning, rv;
  logic [RW-1:0] row_d;
  logic          is_max;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scanning <= 1'b0; sel <= '0; rv <= 1'b0; row_d <= '0;
    end else begin
      rv    <= scanning;
      row_d <= sel;
      if (start) begin
        scanning <= 1'b1;
        sel      <= '0;
      end else if (scanning) begin
        if (int'(sel) == N - 1) scanning <= 1'b0;
        else sel <= sel + 1'b1;
      end
    end
  end

  assign is_max = rv && (w_c[1] >= w_t'(THRESHOLD)) &&
                  (w_c[1] > w_dn) && (w_c[1] >= w_up) &&
                  (w_c[1] > w_left) && (w_c[1] >= w_right);

  // ---------------- candidate FIFO ----------------
  cand_t [FIFO_DEPTH-1:0]      fifo;
  logic [$clog2(FIFO_DEPTH):0] cnt;
  logic [$clog2(FIFO_DEPTH)-1:0] wp, rp;
  logic                        push, pop;
  cand_t                       cin;

  assign cin  = '{row: row_d, w0: w_c[1], wdn: w_dn, wup: w_up, wl: w_left, wr: w_right,
                  wtm: w_c[0], wtp: w_c[2]};
  assign push = is_max && (int'(cnt) < FIFO_DEPTH);

  // ---------------- fit ----------------
  typedef enum logic [1:0] {F_IDLE, F_LOG, F_DIV, F_OUT} fstate_e;
  fstate_e st;
  cand_t   cand;
  logic signed [IW-1:0] num_p, den_p, num_m, den_m, num_t, den_t;
  logic                 div_start;
  logic signed [RATIO_FW+2:0] r_p, r_m, r_t;
  logic                 d_p, d_m, d_t;

  assign pop = (st == F_IDLE) && (cnt != '0);

  function automatic logic signed [IW-1:0] lg(w_t w);
    return $signed({2'b00, log2fx(w)});
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fifo <= '0; cnt <= '0; wp <= '0; rp <= '0; ovf_cnt <= '0;
      st <= F_IDLE; cand <= '0; div_start <= 1'b0;
      num_p <= '0; den_p <= '0; num_m <= '0; den_m <= '0; num_t <= '0; den_t <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      // FIFO
      if (push) begin
        fifo[wp] <= cin;
        wp       <= wp + 1'b1;
      end
      if (is_max && !push && ovf_cnt != '1) ovf_cnt <= ovf_cnt + 1'b1;
      if (pop) begin
        cand <= fifo[rp];
        rp   <= rp + 1'b1;
      end
      cnt <= cnt + ($bits(cnt))'(push) - ($bits(cnt))'(pop);

      if (out_valid && !out_hold) out_valid <= 1'b0;
      div_start <= 1'b0;
      unique case (st)
        F_IDLE: if (pop) st <= F_LOG;
        F_LOG: begin
          logic signed [IW-1:0] c, a, b;
          c = lg(cand.w0);
          a = lg(cand.wdn) - c;  b = lg(cand.wup) - c;
          num_p <= a - b;  den_p <= ((a + b) < 0) ? (a + b) : '0;
          a = lg(cand.wl) - c;   b = lg(cand.wr) - c;
          num_m <= a - b;  den_m <= ((a + b) < 0) ? (a + b) : '0;
          a = lg(cand.wtm) - c;  b = lg(cand.wtp) - c;
          num_t <= a - b;  den_t <= ((a + b) < 0) ? (a + b) : '0;
          div_start <= 1'b1;
          st        <= F_DIV;
        end
        F_DIV: if (d_p) st <= F_OUT;
        F_OUT: if (!out_valid || !out_hold) begin
          out_valid     <= 1'b1;
          out_data.col  <= COL_W'(COL);
          out_data.row  <= ROW_W'(cand.row);
          out_data.xp   <= x_t'(xp_of_row(int'(cand.row)) + ((DX_U / 2) * int'(r_p) + (1 << (RATIO_FW - 1))) / (1 << RATIO_FW));
          out_data.xm   <= x_t'(xm_of_col(COL) + ((DX_U / 2) * int'(r_m) + (1 << (RATIO_FW - 1))) / (1 << RATIO_FW));
          out_data.t    <= t_t'(((DT_PS / 2) * int'(r_t) + (1 << (RATIO_FW - 1))) / (1 << RATIO_FW));
          out_data.w    <= cand.w0;
          st            <= F_IDLE;
        end
        default: st <= F_IDLE;
      endcase
    end
  end

  ratio_div #(.IW(IW)) u_div_p (.clk, .rst_n, .start(div_start), .num(num_p), .den(den_p), .r(r_p), .done(d_p));
  ratio_div #(.IW(IW)) u_div_m (.clk, .rst_n, .start(div_start), .num(num_m), .den(den_m), .r(r_m), .done(d_m));
  ratio_div #(.IW(IW)) u_div_t (.clk, .rst_n, .start(div_start), .num(num_t), .den(den_t), .r(r_t), .done(d_t));

  assign idle = !scanning && !rv && (cnt == '0) && (st == F_IDLE) && !out_valid && !start;

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_hold |=> out_valid && $stable(out_data));
  a_div_lockstep: assert property (@(posedge clk) disable iff (!rst_n) d_p == d_m && d_p == d_t);

endmodule
