// tb_track_merge: 16 sources offer tracks at random while the output is held at random;
// every track must come out exactly once, each source's tracks in order, and a source
// offering continuously must not starve the others.
module tb_track_merge;
  import retina_pkg::*;
  localparam int N = 16, PER = 20;
  logic clk = 0, rst_n = 0;
  track_t [N-1:0] in_data;
  logic   [N-1:0] in_valid, in_hold;
  track_t out_data;
  logic   out_valid, out_hold;
  int checks = 0, failures = 0;
  track_merge #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent [N], recv [N];
  logic [N-1:0] go;
  for (genvar s = 0; s < N; s++) begin : g_src
    initial begin
      in_valid[s] = 0; in_data[s] = '0; go[s] = 0; sent[s] = 0;
      @(posedge rst_n);
      forever begin
        @(negedge clk);
        if (go[s]) begin sent[s]++; in_valid[s] = 0; end
        if (!in_valid[s] && sent[s] < PER && (s == 0 || $urandom_range(0, 3) == 0)) begin
          in_valid[s] = 1;
          in_data[s] = '0;
          in_data[s].col = 4'(s);
          in_data[s].w   = 24'(sent[s]);
        end
        #1 go[s] = in_valid[s] && !in_hold[s];
      end
    end
  end

  initial begin
    int total;
    total = 0; out_hold = 0;
    for (int s = 0; s < N; s++) recv[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      out_hold = ($urandom_range(0, 3) == 0);
      #1;
      if (out_valid && !out_hold) begin
        int s;
        s = int'(out_data.col);
        checks++;
        if (int'(out_data.w) != recv[s]) begin failures++; $display("FAIL source %0d track %0d want %0d", s, out_data.w, recv[s]); end
        recv[s]++;
        total++;
        if (total == N * PER) begin
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
