// track_merge: collects the tracks of the track fit units into the single track output
// of the board. A round-robin arbiter takes one track per cycle from the units that
// offer one; the output is registered and honours out_hold. The paper shows one track
// output for the 16 track fit units; the arbiter is this design's choice.
module track_merge
  import retina_pkg::*;
#(
  parameter int N = N_XM
) (
  input  logic             clk,
  input  logic             rst_n,
  input  track_t [N-1:0]   in_data,
  input  logic   [N-1:0]   in_valid,
  output logic   [N-1:0]   in_hold,
  output track_t           out_data,
  output logic             out_valid,
  input  logic             out_hold
);

  localparam int IW = $clog2(N);

  logic          out_free, any;
  logic [IW-1:0] rr_q, win;

  assign out_free = !out_valid || !out_hold;

  // lowest index at or after rr_q that has a track
  always_comb begin
    any = 1'b0;
    win = '0;
    for (int n = N - 1; n >= 0; n--) begin
      if (in_valid[(int'(rr_q) + n) % N]) begin
        any = 1'b1;
        win = IW'((int'(rr_q) + n) % N);
      end
    end
  end

  always_comb begin
    in_hold = in_valid;
    if (out_free && any) in_hold[win] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      rr_q      <= '0;
    end else begin
      if (out_free) out_valid <= 1'b0;
      if (out_free && any) begin
        out_valid <= 1'b1;
        out_data  <= in_data[win];
        rr_q      <= IW'((int'(win) + 1) % N);
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_hold |=> out_valid && $stable(out_data));

endmodule
