// tb_engine_group: sends events of hits to one engine group (column 9) and compares
// the three weights of all 32 engines with the reference model; checks that the group
// takes one hit every four cycles and that w_ack releases every engine.
module tb_engine_group;
  import retina_pkg::*;
  import tb_model_pkg::*;
  localparam int COL = 9, N = 32;
  logic clk = 0, rst_n = 0;
  hit_t in_data;
  logic in_valid, in_hold, w_ack;
  w3_t  [N-1:0] w_out;
  logic [N-1:0] w_full;
  int checks = 0, failures = 0;
  longint cyc = 0;
  engine_group #(.COL(COL), .N(N)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint expw [N][3];

  task automatic send(hit_t h);
    in_data = h; in_valid = 1;
    #1;
    while (in_hold) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    longint c0;
    in_valid = 0; in_data = '0; w_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int e = 0; e < 4; e++) begin
      int nh;
      nh = 8 + e * 4;
      for (int r = 0; r < N; r++) for (int h = 0; h < 3; h++) expw[r][h] = 0;
      c0 = cyc;
      for (int n = 0; n < nh; n++) begin
        int k, x, t, i0;
        k  = n % 8;
        i0 = $urandom_range(0, N - 1);
        x  = m_rx(m_xp(i0), m_xm(COL), k) + $signed($urandom_range(0, 600)) - 300;
        t  = m_te(m_xm(COL), k) + $signed($urandom_range(0, 1000)) - 500;
        for (int r = 0; r < N; r++) for (int h = 0; h < 3; h++) expw[r][h] += m_w(r, COL, k, x, t, h);
        send('{eoe: 1'b0, layer: 3'(k), x: 16'(x), t: 16'(t)});
      end
      checks++;
      // back-to-back hits: one accepted every 4 cycles (the fan-out register buffers one)
      if (cyc - c0 < 4 * (nh - 2) || cyc - c0 > 4 * nh) begin
        failures++; $display("FAIL %0d hits took %0d cycles", nh, cyc - c0);
      end
      send('{eoe: 1'b1, layer: '0, x: '0, t: '0});
      while (!(&w_full)) @(negedge clk);
      for (int r = 0; r < N; r++) begin
        checks++;
        for (int h = 0; h < 3; h++) if (expw[r][h] > 24'hffffff) expw[r][h] = 24'hffffff;
        if (w_out[r][0] != 24'(expw[r][0]) || w_out[r][1] != 24'(expw[r][1]) || w_out[r][2] != 24'(expw[r][2])) begin
          failures++; $display("FAIL event %0d engine %0d: %0d want %0d", e, r, w_out[r][1], expw[r][1]);
        end
      end
      w_ack = 1; @(negedge clk); w_ack = 0;
      checks++;
      if (w_full != '0) begin failures++; $display("FAIL ack"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
