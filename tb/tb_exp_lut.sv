// tb_exp_lut: reads every entry of the shared exponential ROM and compares it with the
// Gaussian responses of the reference model (space half cut at 2 sigma), and checks the
// one-cycle read latency.
module tb_exp_lut;
  import retina_pkg::*;
  import tb_model_pkg::*;
  logic clk = 0;
  logic is_time;
  logic [EXP_AW-1:0] n;
  logic [E_W-1:0] q;
  int checks = 0, failures = 0;
  exp_lut dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int want;
    logic [7:0] a8;
    for (int a = 0; a < 256; a++) begin
      a8 = 8'(a);
      @(negedge clk);
      is_time = a8[7]; n = a8[6:0];
      @(posedge clk); #1;
      want = a8[7] ? m_et(int'(a8[6:0]) * 16) : m_es(int'(a8[6:0]) * 4);
      checks++;
      if (q != 8'(want)) begin failures++; $display("FAIL entry %0d: %0d want %0d", a, q, want); end
    end
    // the ROM must change its output only on the clock edge
    @(negedge clk); is_time = 1'b0; n = '0;
    #1; checks++; if (q == 8'd255) begin failures++; $display("FAIL output not registered"); end
    @(posedge clk); #1; checks++; if (q != 8'd255) begin failures++; $display("FAIL full response at 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
