// tb_fan_out: words are sent to a fan-out whose 32 engine holds are driven at random,
// independently of each other. Every word must reach the engines exactly once and in
// order, and only in a cycle in which no engine holds; the input must be held while the
// register is full and some engine holds.
module tb_fan_out;
  import retina_pkg::*;
  localparam int N = 32, N_W = 300;
  logic clk = 0, rst_n = 0;
  hit_t in_data, out_data;
  logic in_valid, in_hold, out_valid;
  logic [N-1:0] eng_hold;
  int checks = 0, failures = 0, n_stall = 0;
  fan_out #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic go;
  int   sent;
  initial begin
    in_valid = 0; in_data = '0; go = 0; sent = 0;
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (go) begin sent++; in_valid = 0; end
      if (!in_valid && sent < N_W && $urandom_range(0, 3) != 0) begin
        in_valid = 1;
        in_data = '{eoe: 1'b0, layer: 3'(sent % 8), x: 16'(sent), t: 16'(3 * sent)};
      end
      #1 go = in_valid && !in_hold;
    end
  end

  initial begin
    int got;
    got = 0; eng_hold = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      for (int r = 0; r < N; r++) eng_hold[r] = ($urandom_range(0, 15) == 0);
      #1;
      if (out_valid) begin
        checks++;
        if (|eng_hold || int'(out_data.x) != got || int'(out_data.t) != 3 * got) begin
          failures++; $display("FAIL delivered %0d, want %0d", out_data.x, got);
        end
        got++;
      end
      if (dut.full_q && |eng_hold) begin
        n_stall++;
        checks++;
        if (!in_hold) begin failures++; $display("FAIL input not held"); end
      end
      if (got == N_W) begin
        checks++; if (n_stall == 0) failures++;
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
