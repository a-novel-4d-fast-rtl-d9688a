// tb_layer_mux: two hit streams with random gaps and event lengths are merged under a
// randomly held output. Each event must come out with all hits of both inputs, each
// input's hits in their original order, followed by exactly one end-of-event word.
module tb_layer_mux;
  import retina_pkg::*;
  localparam int N_EV = 30;
  logic clk = 0, rst_n = 0;
  hit_t [1:0] in_data;
  logic [1:0] in_valid, in_hold;
  hit_t out_data;
  logic out_valid, out_hold;
  int checks = 0, failures = 0, n_both = 0;
  layer_mux dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  hit_t q [2][$];
  int   n_in_ev [2][N_EV];
  logic [1:0] go;

  // hit t carries a sequence number per input, layer carries the input
  initial begin
    for (int p = 0; p < 2; p++) begin
      int id;
      id = 0;
      for (int e = 0; e < N_EV; e++) begin
        n_in_ev[p][e] = $urandom_range(0, 6);
        for (int n = 0; n < n_in_ev[p][e]; n++) begin
          q[p].push_back('{eoe: 1'b0, layer: 3'(p), x: 16'(e), t: 16'(id)});
          id++;
        end
        q[p].push_back('{eoe: 1'b1, layer: 3'(p), x: '0, t: '0});
      end
    end
  end

  for (genvar p = 0; p < 2; p++) begin : g_drv
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

  always @(negedge clk) if (&in_valid && !in_data[0].eoe && !in_data[1].eoe) n_both++;

  initial begin
    int ev, next_id [2], cnt [2];
    ev = 0; next_id = '{0, 0}; cnt = '{0, 0};
    out_hold = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      out_hold = ($urandom_range(0, 3) == 0);
      #1;
      if (out_valid && !out_hold) begin
        checks++;
        if (out_data.eoe) begin
          if (cnt[0] != n_in_ev[0][ev] || cnt[1] != n_in_ev[1][ev]) begin
            failures++; $display("FAIL event %0d: %0d+%0d hits, want %0d+%0d", ev, cnt[0], cnt[1],
                                 n_in_ev[0][ev], n_in_ev[1][ev]);
          end
          cnt = '{0, 0};
          ev++;
          if (ev == N_EV) begin
            checks++; if (n_both == 0) failures++;
            $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
            $finish;
          end
        end else begin
          int p;
          p = int'(out_data.layer);
          if (p > 1 || int'(out_data.t) != next_id[p] || int'(out_data.x) != ev) begin
            failures++; $display("FAIL hit from %0d id %0d event %0d, want id %0d event %0d", p,
                                 out_data.t, out_data.x, next_id[p], ev);
          end
          if (p <= 1) begin next_id[p] = int'(out_data.t) + 1; cnt[p]++; end
        end
      end
    end
  end
endmodule
