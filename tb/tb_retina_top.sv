// tb_retina_top: end-to-end test of the whole track finder at its default size
// (8 layers, 512 engines, 16 track fit units).
//
// Events with one straight track, generated from the track line and the time of flight
// at the speed of light, are turned into fired strips (one or two per layer, 180 um
// pitch, 10 ps-scale time jitter). Some events also carry noise strips at 1 % or 5 %
// occupancy, uniformly spread in position and over +-5 ns in time, and hits outside
// every receptive field. Strip words are offered with random gaps, the track output is
// randomly held. The first events are sent one at a time to measure the latency; the
// rest are sent back to back so that events overlap in the pipeline.
//
// Checks: every event gives a track whose cell is the generated one (or a neighbour,
// for noisy events) and whose interpolated x+, x-, t are close to the generated values;
// the latency of an isolated event is below 100 cycles; and each mechanism of the
// design happened at least once: engine hold reaching the strip inputs, a multi-strip
// cluster, a hit dropped by the switch, the end-of-event barrier, hits accumulated while
// the previous result was still being fitted, and a held track output.
module tb_retina_top;
  import retina_pkg::*;
  import tb_model_pkg::*;

  localparam int N_EV = 12;

  logic clk = 0, rst_n = 0;
  strip_t [N_LAYERS-1:0] strip_data;
  logic   [N_LAYERS-1:0] strip_valid, strip_hold;
  track_t track_data;
  logic   track_valid, track_hold;
  logic [15:0] n_events;
  logic [N_XM-1:0][7:0] ovf_cnt;

  retina_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired at cycle %0d, events fitted %0d", cyc, n_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- event generation ----------------
  strip_t q [N_LAYERS][$];
  real    ev_xp [N_EV], ev_xm [N_EV], ev_t [N_EV];
  int     ev_i [N_EV], ev_j [N_EV], ev_noise [N_EV];

  function automatic int strip_of(real x);
    return $rtoi($floor((x + 9216.0) / 18.0));
  endfunction

  task automatic make_event(int e, int noise_pct);
    int   s, ts, nn, ns;
    real  x, sl;
    int   strips [$];
    int   times  [$];
    int   seen   [int];
    ev_i[e] = $urandom_range(4, 27);
    ev_j[e] = $urandom_range(3, 12);
    ev_xp[e] = real'(m_xp(ev_i[e])) + real'($urandom_range(0, 200)) - 100.0;
    ev_xm[e] = real'(m_xm(ev_j[e])) + real'($urandom_range(0, 200)) - 100.0;
    ev_t[e]  = real'($urandom_range(0, 300)) - 150.0;
    ev_noise[e] = noise_pct;
    sl = ev_xm[e] * 0.01 / ZM;
    for (int k = 0; k < N_LAYERS; k++) begin
      strips.delete(); times.delete(); seen.delete();
      x  = m_rx_real(ev_xp[e], ev_xm[e], k);
      s  = strip_of(x);
      ts = rnd(ev_t[e] + (ZF + DZ * k) / C * $sqrt(1.0 + sl * sl)) + $signed($urandom_range(0, 20)) - 10;
      strips.push_back(s); times.push_back(ts); seen[s] = 1;
      if ($urandom_range(0, 3) == 0) begin           // charge shared with the nearer neighbour
        int s2;
        s2 = (x + 9216.0 - 18.0 * s > 9.0) ? s + 1 : s - 1;
        strips.push_back(s2); times.push_back(ts + 3); seen[s2] = 1;
      end
      nn = (N_STRIPS * noise_pct) / 100;
      for (int n = 0; n < nn; n++) begin
        ns = $urandom_range(0, N_STRIPS - 1);
        if (ns > s - 4 && ns < s + 4) continue;
        if (seen.exists(ns)) continue;
        seen[ns] = 1;
        strips.push_back(ns); times.push_back($signed($urandom_range(0, 10000)) - 5000);
      end
      if (e % 3 == 1) begin                          // a hit no engine can see
        ns = (s > 400) ? 2 : 1020;
        if (!seen.exists(ns)) begin strips.push_back(ns); times.push_back(0); seen[ns] = 1; end
      end
      // emit in increasing strip order
      while (strips.size() > 0) begin
        int best;
        best = 0;
        for (int n = 1; n < strips.size(); n++) if (strips[n] < strips[best]) best = n;
        q[k].push_back('{eoe: 1'b0, strip: STRIP_W'(strips[best]), t: T_W'(times[best])});
        strips.delete(best); times.delete(best);
      end
      q[k].push_back('{eoe: 1'b1, strip: '0, t: '0});
    end
  endtask

  // ---------------- strip drivers ----------------
  logic [N_LAYERS-1:0] go;
  longint last_eoe_cyc;
  for (genvar k = 0; k < N_LAYERS; k++) begin : g_drv
    initial begin
      strip_valid[k] = 1'b0;
      strip_data[k]  = '0;
      go[k] = 1'b0;
      forever begin
        @(negedge clk);
        if (go[k]) begin
          if (strip_data[k].eoe) last_eoe_cyc = cyc;
          void'(q[k].pop_front());
          strip_valid[k] = 1'b0;
        end
        // a held word stays; otherwise the next one is offered with random gaps
        if (!strip_valid[k] && q[k].size() > 0 && $urandom_range(0, 7) != 0) begin
          strip_valid[k] = 1'b1;
          strip_data[k]  = q[k][0];
        end
        #1 go[k] = strip_valid[k] && !strip_hold[k];
      end
    end
  end

  // ---------------- track collector ----------------
  track_t got [N_EV][$];
  longint first_track_cyc [N_EV];
  initial begin
    track_hold = 1'b0;
    for (int e = 0; e < N_EV; e++) first_track_cyc[e] = -1;
    forever begin
      @(negedge clk);
      track_hold = ($urandom_range(0, 3) == 0);
      #1;
      // the word moves at the next rising edge
      if (track_valid && !track_hold && n_events < N_EV) begin
        got[n_events].push_back(track_data);
        if (first_track_cyc[n_events] < 0) first_track_cyc[n_events] = cyc + 1;
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int n_strip_hold = 0, n_multi_cluster = 0, n_drop = 0, n_eoe_wait = 0, n_overlap = 0, n_track_hold = 0;
  always @(negedge clk) if (rst_n) begin
    if (|(strip_valid & strip_hold)) n_strip_hold++;
    for (int k = 0; k < 4; k++)
      if (dut.u_switch.ir_valid[k] && !dut.u_switch.ir_data[k].eoe && dut.u_switch.ir_pend[k] == '0)
        n_drop++;
    if (|dut.u_switch.ir_eoe && !dut.u_switch.eoe_go) n_eoe_wait++;
    for (int j = 0; j < N_XM; j++)
      if (dut.sw_valid[j] && !dut.sw_data[j].eoe && dut.w_full[j][0] && !dut.sw_hold[j]) n_overlap++;
    if (track_valid && track_hold) n_track_hold++;
  end

  for (genvar k = 0; k < N_LAYERS; k++) begin : g_cl_cnt
    always @(negedge clk)
      if (rst_n && dut.g_layer[k].u_cluster.emit_cl &&
          dut.g_layer[k].u_cluster.first_q != dut.g_layer[k].u_cluster.last_q) n_multi_cluster++;
  end

  // ---------------- stimulus and checks ----------------
  initial begin
    real sxp, sxm, st;
    int  nclean;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // isolated clean events: latency
    for (int e = 0; e < 3; e++) begin
      make_event(e, 0);
      wait (n_events == e + 1);
      check(first_track_cyc[e] >= 0 && first_track_cyc[e] - last_eoe_cyc < 100,
            $sformatf("event %0d latency %0d cycles", e, first_track_cyc[e] - last_eoe_cyc));
      $display("event %0d: latency from last end-of-event word to track %0d cycles", e,
               first_track_cyc[e] - last_eoe_cyc);
    end
    // back-to-back events, some noisy
    for (int e = 3; e < N_EV; e++) make_event(e, (e % 4 == 0) ? 5 : (e % 4 == 2) ? 1 : 0);
    wait (n_events == N_EV);
    repeat (5) @(posedge clk);

    sxp = 0; sxm = 0; st = 0; nclean = 0;
    for (int e = 0; e < N_EV; e++) begin
      int best;
      real dxp, dxm, dt;
      best = -1;
      for (int n = 0; n < got[e].size(); n++)
        if (best < 0 || got[e][n].w > got[e][best].w) best = n;
      check(best >= 0, $sformatf("event %0d gives a track", e));
      if (best < 0) continue;
      dxp = real'(got[e][best].xp) - ev_xp[e];
      dxm = real'(got[e][best].xm) - ev_xm[e];
      dt  = real'(got[e][best].t) - ev_t[e];
      $display("event %0d noise %0d%%: %0d tracks, best cell (%0d,%0d) want (%0d,%0d), dx+ %0.0f dx- %0.0f um, dt %0.1f ps",
               e, ev_noise[e], got[e].size(), got[e][best].row, got[e][best].col, ev_i[e], ev_j[e],
               dxp * 10.0, dxm * 10.0, dt);
      if (ev_noise[e] == 0) begin
        check(got[e].size() == 1, $sformatf("event %0d: exactly one track", e));
        check(dxp < 60 && dxp > -60, $sformatf("event %0d x+ error %0.0f", e, dxp));
        check(dxm < 60 && dxm > -60, $sformatf("event %0d x- error %0.0f", e, dxm));
        check(dt < 60 && dt > -60, $sformatf("event %0d t error %0.1f", e, dt));
        sxp += dxp * dxp; sxm += dxm * dxm; st += dt * dt; nclean++;
      end else begin
        check(dxp < 165 && dxp > -165 && dxm < 165 && dxm > -165 && dt < 200 && dt > -200,
              $sformatf("event %0d (noisy): best track near the generated one", e));
      end
    end
    if (nclean > 0)
      $display("clean events: rms error x+ %0.0f um, x- %0.0f um, t %0.1f ps", 10.0 * $sqrt(sxp / nclean),
               10.0 * $sqrt(sxm / nclean), $sqrt(st / nclean));
    $display("mechanisms: strip hold %0d, multi-strip clusters %0d, switch drops %0d, eoe barrier waits %0d, overlapped accumulation %0d, track output held %0d",
             n_strip_hold, n_multi_cluster, n_drop, n_eoe_wait, n_overlap, n_track_hold);
    check(n_strip_hold > 0, "engine hold reached the strip inputs");
    check(n_multi_cluster > 0, "a multi-strip cluster was formed");
    check(n_drop > 0, "the switch dropped an unroutable hit");
    check(n_eoe_wait > 0, "the end-of-event barrier waited");
    check(n_overlap > 0, "hits accumulated while the previous event was fitted");
    check(n_track_hold > 0, "track output was held");
    check(ovf_cnt == '0, "no track candidate lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
