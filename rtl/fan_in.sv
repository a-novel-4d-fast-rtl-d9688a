// fan_in: collects the weights of the N engines of one group for its track fit unit.
//
// The track fit unit scans the rows of its column one per cycle with sel. One cycle
// later fan_in presents, registered, the three weights of engine sel and the t0 weights
// of its row neighbours sel-1 and sel+1 (0 beyond the grid edge). ready is high when all
// engines of the group hold an event result. The paper only names a fan-in between each
// engine group and its track fit unit; the row-scan multiplexer is this design's choice.
module fan_in
  import retina_pkg::*;
#(
  parameter int N = N_XP
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  w3_t  [N-1:0]         w_in,
  input  logic [N-1:0]         w_full,
  input  logic [$clog2(N)-1:0] sel,
  output w3_t                  w_c,     // weights of row sel (t0-dT, t0, t0+dT)
  output w_t                   w_dn,    // W(t0) of row sel-1
  output w_t                   w_up,    // W(t0) of row sel+1
  output logic                 ready
);

  assign ready = &w_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_c  <= '0;
      w_dn <= '0;
      w_up <= '0;
    end else begin
      w_c  <= w_in[sel];
      w_dn <= (sel == '0) ? '0 : w_in[sel - 1'b1][1];
      w_up <= (int'(sel) == N - 1) ? '0 : w_in[sel + 1'b1][1];
    end
  end

endmodule
