// layer_mux: merges the hit streams of two layers into one input of the switch.
//
// Hits from the two inputs are forwarded one per cycle, alternating (round robin) when
// both have a hit waiting. End-of-event words act as a barrier: an input that presents
// eoe waits until the other input presents eoe too; then a single eoe is forwarded and
// both are consumed, so no hit of the next event can overtake the end of the current one.
// The architecture shows a MUX after each pair of cluster units; its arbitration and the
// event barrier are this design's choices.
//
// Interface: valid/hold streams, registered output, one cycle latency.
module layer_mux
  import retina_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  hit_t [1:0] in_data,
  input  logic [1:0] in_valid,
  output logic [1:0] in_hold,
  output hit_t       out_data,
  output logic       out_valid,
  input  logic       out_hold
);

  logic       out_free, prio_q, both_eoe;
  logic [1:0] want, grant;

  assign out_free = !out_valid || !out_hold;
  assign want[0]  = in_valid[0] && !in_data[0].eoe;
  assign want[1]  = in_valid[1] && !in_data[1].eoe;
  assign both_eoe = in_valid[0] && in_valid[1] && in_data[0].eoe && in_data[1].eoe;

  always_comb begin
    grant = '0;
    if (out_free) begin
      if (both_eoe)                     grant = 2'b11;
      else if (want[0] && want[1])      grant = prio_q ? 2'b10 : 2'b01;
      else if (want[0])                 grant = 2'b01;
      else if (want[1])                 grant = 2'b10;
    end
  end

  assign in_hold = in_valid & ~grant;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      prio_q    <= 1'b0;
    end else begin
      if (out_free) out_valid <= 1'b0;
      if (grant != 2'b00) begin
        out_valid <= 1'b1;
        out_data  <= grant[0] ? in_data[0] : in_data[1];
        if (grant != 2'b11) prio_q <= grant[0];
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_hold |=> out_valid && $stable(out_data));

endmodule
