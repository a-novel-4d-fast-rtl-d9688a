// tb_cluster_unit: random events of fired strips (isolated strips and runs of adjacent
// strips) are sent with random gaps and a randomly held output; every cluster must come
// out in order with the centre position and earliest time of its run and the layer
// number, and each event must end with one end-of-event word.
module tb_cluster_unit;
  import retina_pkg::*;
  localparam int LAYER = 5;
  localparam int N_EV = 20;
  logic clk = 0, rst_n = 0;
  strip_t in_data;
  logic   in_valid, in_hold;
  hit_t   out_data;
  logic   out_valid, out_hold;
  int checks = 0, failures = 0, n_multi = 0;
  cluster_unit #(.LAYER(LAYER)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  strip_t sq [$];
  hit_t   eq [$];
  logic   go;

  task automatic make_event();
    int s, len, tmin, t;
    s = $urandom_range(0, 20);
    while (s < N_STRIPS - 8) begin
      len = ($urandom_range(0, 2) == 0) ? $urandom_range(2, 4) : 1;
      if (len > 1) n_multi++;
      tmin = 32767;
      for (int n = 0; n < len; n++) begin
        t = $signed($urandom_range(0, 4000)) - 2000;
        if (t < tmin) tmin = t;
        sq.push_back('{eoe: 1'b0, strip: STRIP_W'(s + n), t: T_W'(t)});
      end
      // centre of strips s .. s+len-1, 180 um pitch, plane centred on 0
      eq.push_back('{eoe: 1'b0, layer: 3'(LAYER), x: 16'(9 * (2 * s + len - 1) + 9 - 9216), t: 16'(tmin)});
      s += len + 1 + $urandom_range(0, 150);
    end
    sq.push_back('{eoe: 1'b1, strip: '0, t: '0});
    eq.push_back('{eoe: 1'b1, layer: 3'(LAYER), x: '0, t: '0});
  endtask

  initial begin
    in_valid = 0; in_data = '0; go = 0;
    for (int e = 0; e < N_EV; e++) make_event();
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      if (go) begin void'(sq.pop_front()); in_valid = 0; end
      // a held word stays; otherwise the next one is offered with random gaps
      if (!in_valid && sq.size() > 0 && $urandom_range(0, 3) != 0) begin in_valid = 1; in_data = sq[0]; end
      #1 go = in_valid && !in_hold;
    end
  end

  initial begin
    int nev;
    out_hold = 0; nev = 0;
    forever begin
      @(negedge clk);
      out_hold = ($urandom_range(0, 2) == 0);
      #1;
      if (out_valid && !out_hold) begin
        checks++;
        if (eq.size() == 0 || out_data != eq[0]) begin
          failures++;
          $display("FAIL got %0d %0d %0d want %0d %0d %0d", out_data.eoe, int'(out_data.x), int'(out_data.t), eq[0].eoe, int'(eq[0].x), int'(eq[0].t));
        end
        if (eq.size() > 0) void'(eq.pop_front());
        if (out_data.eoe) nev++;
        if (nev == N_EV) begin
          checks++;
          if (n_multi == 0 || eq.size() != 0) failures++;
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
