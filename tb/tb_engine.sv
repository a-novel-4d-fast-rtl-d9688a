// tb_engine: drives one engine (grid cell 10, 5) with hits near and far from its
// receptors, and checks the three accumulated weights against the reference model,
// the 3-cycle hold after every word, the result latency and the w_full/w_ack protocol.
module tb_engine;
  import retina_pkg::*;
  import tb_model_pkg::*;

  localparam int ROW = 10, COL = 5;
  logic clk = 0, rst_n = 0;
  hit_t in_data;
  logic in_valid, hold, w_full, w_ack;
  w3_t  w_out;
  int   checks = 0, failures = 0, cyc = 0;

  engine #(.ROW(ROW), .COL(COL)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // send one word: wait for hold low, strobe, then count the hold cycles
  task automatic send(hit_t h, output int hold_cycles);
    in_data <= h;
    @(negedge clk);
    while (hold) @(negedge clk);
    in_valid <= 1'b1;
    @(posedge clk);
    in_valid <= 1'b0;
    hold_cycles = 0;
    #1;
    while (hold && !h.eoe) begin hold_cycles++; @(posedge clk); #1; end
  endtask

  longint exp_w [3];
  int     xp, xm;

  task automatic run_event(int nhits, int mode);
    hit_t h;
    int   hc, k, x, t, lat;
    for (int q = 0; q < 3; q++) exp_w[q] = 0;
    for (int n = 0; n < nhits; n++) begin
      k = $urandom_range(0, 7);
      case (mode)
        0: x = m_rx(xp, xm, k) + $signed($urandom_range(0, 400)) - 200;      // inside 2 sigma
        1: x = m_rx(xp, xm, k) + $signed($urandom_range(0, 1200)) - 600;     // around the edge
        default: x = $signed($urandom_range(0, 20000)) - 10000;               // anywhere
      endcase
      t = m_te(xm, k) + $signed($urandom_range(0, 1600)) - 800;
      h = '{eoe: 1'b0, layer: 3'(k), x: 16'(x), t: 16'(t)};
      for (int q = 0; q < 3; q++) exp_w[q] += m_w(ROW, COL, k, x, t, q);
      send(h, hc);
      check(hc == 3, $sformatf("hold lasted %0d cycles, want 3", hc));
    end
    for (int q = 0; q < 3; q++) if (exp_w[q] > 24'hffffff) exp_w[q] = 24'hffffff;
    h = '0; h.eoe = 1'b1;
    send(h, hc);
    lat = 0;
    while (!w_full) begin @(posedge clk); #1; lat++; end
    check(lat <= 15, $sformatf("result latency %0d cycles", lat));
    for (int q = 0; q < 3; q++)
      check(w_out[q] == 24'(exp_w[q]), $sformatf("W[%0d] = %0d, want %0d", q, w_out[q], exp_w[q]));
  endtask

  initial begin
    int hc;
    hit_t h;
    in_valid = 0; in_data = '0; w_ack = 0;
    xp = m_xp(ROW); xm = m_xm(COL);
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check(!hold && !w_full, "idle after reset");
    for (int e = 0; e < 12; e++) begin
      run_event($urandom_range(1, 12), e % 3);
      // next event's hits are accepted while the result waits; its eoe is held
      h = '{eoe: 1'b0, layer: 3'd2, x: 16'(m_rx(xp, xm, 2)), t: 16'(m_te(xm, 2))};
      send(h, hc);
      h = '0; h.eoe = 1'b1;
      in_data <= h;
      repeat (6) @(posedge clk);
      #1 check(hold, "eoe held while result unread");
      check(w_out[1] == 24'(exp_w[1]), "result kept until ack");
      in_data <= '0;
      w_ack <= 1'b1; @(posedge clk); w_ack <= 1'b0;
      #1 check(!w_full, "ack clears w_full");
      // finish that event: one exact hit gives 255*255 at t0
      send(h, hc);
      while (!w_full) @(posedge clk);
      #1 check(w_out[1] == 24'(m_w(ROW, COL, 2, m_rx(xp, xm, 2), m_te(xm, 2), 1)), "carried hit weight");
      w_ack <= 1'b1; @(posedge clk); w_ack <= 1'b0;
    end
    // saturation: many exact hits
    h = '{eoe: 1'b0, layer: 3'd0, x: 16'(m_rx(xp, xm, 0)), t: 16'(m_te(xm, 0))};
    for (int n = 0; n < 300; n++) send(h, hc);
    h = '0; h.eoe = 1'b1; send(h, hc);
    while (!w_full) @(posedge clk);
    #1 check(w_out[1] == 24'hffffff, "accumulator saturates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
