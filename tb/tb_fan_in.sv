// tb_fan_in: random weights for 32 engines; for every row selected the fan-in must give,
// one cycle later, that row's three weights and the t0 weights of the rows above and
// below (0 at the edges); ready must follow the AND of the result flags.
module tb_fan_in;
  import retina_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0;
  w3_t  [N-1:0] w_in;
  logic [N-1:0] w_full;
  logic [4:0]   sel;
  w3_t  w_c;
  w_t   w_dn, w_up;
  logic ready;
  int checks = 0, failures = 0;
  fan_in #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int s;
    w_full = '0; sel = '0;
    for (int r = 0; r < N; r++) for (int h = 0; h < 3; h++) w_in[r][h] = 24'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      s = (it < N) ? it : $urandom_range(0, N - 1);
      sel = 5'(s);
      w_full = (it % 7 == 0) ? '1 : N'($urandom);
      #1;
      checks++;
      if (ready != &w_full) begin failures++; $display("FAIL ready"); end
      @(posedge clk); #1;
      checks++;
      if (w_c != w_in[s] || w_dn != ((s == 0) ? 24'd0 : w_in[s-1][1]) ||
          w_up != ((s == N - 1) ? 24'd0 : w_in[s+1][1])) begin
        failures++; $display("FAIL row %0d", s);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
