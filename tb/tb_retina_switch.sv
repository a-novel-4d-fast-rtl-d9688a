// tb_retina_switch: four inputs send random hits (any layer, any x) and end-of-event
// words; the 16 outputs are held at random. For every hit the set of groups that must
// receive it is worked out from the receptor geometry (any receptor of the column
// within 2 sigma of the 5.12 mm bin of the hit); each output must deliver exactly those
// hits of each event, every input's hits in order, and then one end-of-event word.
module tb_retina_switch;
  import retina_pkg::*;
  import tb_model_pkg::*;
  localparam int NI = 4, NO = 16, N_EV = 12;
  logic clk = 0, rst_n = 0;
  hit_t [NI-1:0] in_data;
  logic [NI-1:0] in_valid, in_hold;
  hit_t [NO-1:0] out_data;
  logic [NO-1:0] out_valid, out_hold;
  int checks = 0, failures = 0, n_drop = 0, n_multi = 0;
  retina_switch dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NO-1:0] want_mask(int k, int x);
    logic [NO-1:0] m;
    int lo, hi, b0;
    b0 = ((x + 32768) / 512) * 512 - 32768;
    for (int j = 0; j < NO; j++) begin
      lo = 1 << 30; hi = -(1 << 30);
      for (int i = 0; i < 32; i++) begin
        int r;
        r = m_rx(m_xp(i), m_xm(j), k);
        if (r < lo) lo = r;
        if (r > hi) hi = r;
      end
      m[j] = (b0 + 511 >= lo - 440) && (b0 <= hi + 440);
    end
    return m;
  endfunction

  hit_t q [NI][$];
  int   exp_cnt [NO][N_EV];
  // expected[o] : per event, per input, queue of ids
  int   expq [NO][NI][$];
  int   ev_of_id [int];

  // hit t = unique id (input * 4096 + n), x random, layer random
  initial begin
    for (int p = 0; p < NI; p++) begin
      int n;
      n = 0;
      for (int e = 0; e < N_EV; e++) begin
        int nh;
        nh = $urandom_range(0, 10);
        for (int h = 0; h < nh; h++) begin
          int k, x, id;
          logic [NO-1:0] m;
          k  = $urandom_range(0, 7);
          x  = ($urandom_range(0, 9) == 0) ? $signed($urandom_range(0, 65535)) - 32768
                                           : $signed($urandom_range(0, 18000)) - 9000;
          id = p * 4096 + n; n++;
          m  = want_mask(k, x);
          if (m == '0) n_drop++;
          if ($countones(m) > 1) n_multi++;
          for (int o = 0; o < NO; o++) if (m[o]) expq[o][p].push_back(id);
          ev_of_id[id] = e;
          q[p].push_back('{eoe: 1'b0, layer: 3'(k), x: 16'(x), t: 16'(id)});
        end
        q[p].push_back('{eoe: 1'b1, layer: '0, x: '0, t: 16'(e)});
      end
    end
  end

  logic [NI-1:0] go;
  for (genvar p = 0; p < NI; p++) begin : g_drv
    initial begin
      in_valid[p] = 1'b0; in_data[p] = '0; go[p] = 1'b0;
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        if (go[p]) begin void'(q[p].pop_front()); in_valid[p] = 1'b0; end
        if (!in_valid[p] && q[p].size() > 0 && $urandom_range(0, 2) != 0) begin
          in_valid[p] = 1'b1; in_data[p] = q[p][0];
        end
        #1 go[p] = in_valid[p] && !in_hold[p];
      end
    end
  end

  int ev_o [NO];
  int n_done;
  initial begin
    out_hold = '0; n_done = 0;
    for (int o = 0; o < NO; o++) ev_o[o] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      for (int o = 0; o < NO; o++) out_hold[o] = ($urandom_range(0, 3) == 0);
      #1;
      for (int o = 0; o < NO; o++) begin
        if (out_valid[o] && !out_hold[o]) begin
          checks++;
          if (out_data[o].eoe) begin
            // all hits of this event for this output must have arrived
            for (int p = 0; p < NI; p++)
              if (expq[o][p].size() > 0 && ev_of_id[expq[o][p][0]] == ev_o[o]) begin
                failures++; $display("FAIL output %0d event %0d: hit %0d missing", o, ev_o[o], expq[o][p][0]);
              end
            ev_o[o]++;
            if (ev_o[o] == N_EV) n_done++;
          end else begin
            int id, p;
            id = int'(out_data[o].t);
            p  = id / 4096;
            if (p >= NI || expq[o][p].size() == 0 || expq[o][p][0] != id || ev_of_id[id] != ev_o[o]) begin
              failures++; $display("FAIL output %0d: unexpected hit %0d", o, id);
            end else void'(expq[o][p].pop_front());
          end
        end
      end
      if (n_done == NO) begin
        checks++; if (n_drop == 0 || n_multi == 0) failures++;
        $display("hits dropped %0d, hits copied to several groups %0d", n_drop, n_multi);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
