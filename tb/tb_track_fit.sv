// tb_track_fit: a track fit unit scans a column whose weights, and those of its two
// neighbour columns, follow 3D Gaussians around known fractional positions in
// (x+, x-, t). The testbench plays the fan-ins (registered answer to sel). For a Gaussian
// the Gaussian interpolation is exact, so the interpolated x+, x- and t must match the
// generated peak positions up to the fixed-point rounding. A second scan with more
// maxima than the unit can queue must count the dropped ones, and a third with weights
// below threshold must give no track.
module tb_track_fit;
  import retina_pkg::*;
  localparam int COL = 7, N = 32;
  logic clk = 0, rst_n = 0;
  logic start, idle, out_valid, out_hold;
  logic [4:0] sel;
  w3_t  w_c;
  w_t   w_dn, w_up, w_left, w_right;
  track_t out_data;
  logic [7:0] ovf_cnt;
  int checks = 0, failures = 0;
  track_fit #(.COL(COL)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weights of columns COL-1, COL, COL+1 (index 0..2), rows, hypotheses
  longint W [3][N][3];

  // fan-in model: registered answer to sel
  always @(posedge clk) begin
    w_c     <= {24'(W[1][sel][2]), 24'(W[1][sel][1]), 24'(W[1][sel][0])};
    w_dn    <= (sel == 0) ? '0 : 24'(W[1][sel-1][1]);
    w_up    <= (sel == N - 1) ? '0 : 24'(W[1][sel+1][1]);
    w_left  <= 24'(W[0][sel][1]);
    w_right <= 24'(W[2][sel][1]);
  end

  real pk_i [$], pk_j [$], pk_h [$];
  task automatic fill(real amp, real si, real sj, real sh);
    for (int c = 0; c < 3; c++) for (int i = 0; i < N; i++) for (int h = 0; h < 3; h++) begin
      real v;
      v = 0.0;
      foreach (pk_i[p])
        v += amp * $exp(-((i - pk_i[p]) ** 2) / (2.0 * si * si) - ((c - 1 - pk_j[p]) ** 2) / (2.0 * sj * sj)
                        - ((h - 1 - pk_h[p]) ** 2) / (2.0 * sh * sh));
      W[c][i][h] = longint'(v);
    end
  endtask

  function automatic real absr(real r); return (r < 0.0) ? -r : r; endfunction

  track_t got [$];
  initial begin
    out_hold = 0;
    forever begin
      @(negedge clk);
      out_hold = ($urandom_range(0, 2) == 0);
      #1 if (out_valid && !out_hold) got.push_back(out_data);
    end
  end

  task automatic run_scan();
    got.delete();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // two well separated tracks
    pk_i = '{8.3, 21.6}; pk_j = '{0.2, -0.35}; pk_h = '{-0.4, 0.25};
    fill(400000.0, 1.2, 1.0, 1.1);
    run_scan();
    checks++;
    if (got.size() != 2) begin failures++; $display("FAIL %0d tracks, want 2", got.size()); end
    foreach (got[n]) begin
      int p;
      real exp_xp, exp_xm, exp_t;
      p = (got[n].row < 15) ? 0 : 1;
      exp_xp = real'(((2 * $rtoi(pk_i[p] + 0.5) - 31) * 330) / 2) + 330.0 * (pk_i[p] - $rtoi(pk_i[p] + 0.5));
      exp_xm = real'(((2 * COL - 15) * 330) / 2) + 330.0 * pk_j[p];
      exp_t  = 400.0 * pk_h[p];
      $display("track row %0d col %0d: x+ %0d (%0.1f) x- %0d (%0.1f) t %0d (%0.1f)", got[n].row, got[n].col,
               int'(got[n].xp), exp_xp, int'(got[n].xm), exp_xm, int'(got[n].t), exp_t);
      checks++;
      if (got[n].row != 5'($rtoi(pk_i[p] + 0.5)) || got[n].col != 4'(COL)) begin failures++; $display("FAIL cell"); end
      checks++;
      if (absr(real'(got[n].xp) - exp_xp) > 6.0 || absr(real'(got[n].xm) - exp_xm) > 6.0 ||
          absr(real'(got[n].t) - exp_t) > 6.0) begin failures++; $display("FAIL interpolation"); end
    end
    // more maxima than the queue holds
    pk_i = '{1.0, 4.0, 7.0, 10.0, 13.0, 16.0, 19.0, 22.0, 25.0, 28.0};
    pk_j = '{0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0, 0.0};
    pk_h = pk_j;
    fill(400000.0, 0.6, 1.0, 1.0);
    run_scan();
    $display("dense column: %0d tracks, %0d dropped", got.size(), ovf_cnt);
    checks++;
    if (ovf_cnt == 0 || got.size() + int'(ovf_cnt) != 10) begin failures++; $display("FAIL overflow count"); end
    // below threshold
    pk_i = '{12.0}; pk_j = '{0.0}; pk_h = '{0.0};
    fill(150000.0, 1.0, 1.0, 1.0);
    run_scan();
    checks++;
    if (got.size() != 0) begin failures++; $display("FAIL track below threshold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
