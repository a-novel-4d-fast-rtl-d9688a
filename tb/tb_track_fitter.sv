// tb_track_fitter: plays the 512 engines. For each event it sets a Gaussian weight map
// over the whole grid with one or two peaks at known fractional cells, raises every
// result flag, and expects one track per peak with the right cell and interpolated
// parameters, then a w_ack that releases the engines. Peaks are placed on column
// boundaries too, so that the neighbour-column weights are needed.
module tb_track_fitter;
  import retina_pkg::*;
  localparam int NC = 16, NR = 32;
  logic clk = 0, rst_n = 0;
  w3_t  [NC-1:0][NR-1:0] w_in;
  logic [NC-1:0][NR-1:0] w_full;
  logic w_ack, out_valid, out_hold;
  track_t out_data;
  logic [15:0] n_events;
  logic [NC-1:0][7:0] ovf_cnt;
  int checks = 0, failures = 0;
  track_fitter dut (.*);
  always #5 clk = ~clk;
  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(real r); return (r < 0.0) ? -r : r; endfunction

  track_t got [$];
  int n_ack = 0;
  initial begin
    out_hold = 0;
    forever begin
      @(negedge clk);
      out_hold = ($urandom_range(0, 3) == 0);
      #1 if (out_valid && !out_hold) got.push_back(out_data);
    end
  end
  always @(posedge clk) if (w_ack) n_ack++;

  initial begin
    real pi [2], pj [2], ph [2];
    int  np;
    w_in = '0; w_full = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 6; e++) begin
      np = (e % 2) + 1;
      for (int p = 0; p < np; p++) begin
        pi[p] = real'($urandom_range(3 + 14 * p, 14 + 14 * p)) + real'($urandom_range(0, 80)) / 100.0 - 0.4;
        pj[p] = real'($urandom_range(2, 13)) + ((e == 2) ? 0.48 : real'($urandom_range(0, 80)) / 100.0 - 0.4);
        ph[p] = real'($urandom_range(0, 100)) / 100.0 - 0.5;
      end
      for (int j = 0; j < NC; j++) for (int i = 0; i < NR; i++) for (int h = 0; h < 3; h++) begin
        real v;
        v = 0.0;
        for (int p = 0; p < np; p++)
          v += 450000.0 * $exp(-((i - pi[p]) ** 2) / 2.0 - ((j - pj[p]) ** 2) / 2.0 - ((h - 1 - ph[p]) ** 2) / 2.0);
        w_in[j][i][h] = 24'($rtoi(v));
      end
      got.delete();
      @(negedge clk);
      w_full = '1;
      while (!w_ack) @(negedge clk);
      w_full = '0;
      @(negedge clk);
      checks++;
      if (got.size() != np || int'(n_events) != e + 1) begin
        failures++; $display("FAIL event %0d: %0d tracks want %0d, n_events %0d", e, got.size(), np, n_events);
      end
      foreach (got[n]) begin
        int  p;
        real exp_xp, exp_xm;
        p = (np == 2 && got[n].row >= 16) ? 1 : 0;
        exp_xp = real'(165 * (2 * $rtoi(pi[p] + 0.5) - 31)) + 330.0 * (pi[p] - $rtoi(pi[p] + 0.5));
        exp_xm = real'(165 * (2 * $rtoi(pj[p] + 0.5) - 15)) + 330.0 * (pj[p] - $rtoi(pj[p] + 0.5));
        checks++;
        if (got[n].row != 5'($rtoi(pi[p] + 0.5)) || got[n].col != 4'($rtoi(pj[p] + 0.5)) ||
            absr(real'(got[n].xp) - exp_xp) > 8.0 || absr(real'(got[n].xm) - exp_xm) > 8.0 ||
            absr(real'(got[n].t) - 400.0 * ph[p]) > 8.0) begin
          failures++;
          $display("FAIL event %0d track (%0d,%0d) x+ %0d/%0.0f x- %0d/%0.0f t %0d/%0.0f", e, got[n].row, got[n].col,
                   int'(got[n].xp), exp_xp, int'(got[n].xm), exp_xm, int'(got[n].t), 400.0 * ph[p]);
        end
      end
    end
    checks++;
    if (n_ack != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
