// fan_out: broadcasts the hits of one switch output to the N engines of a group.
//
// One register stage drives all engines of the group (in an FPGA this is where the
// high-fanout net is retimed). The word is delivered to the engines as a one-cycle
// strobe, out_valid = word present and no engine holds, so that all engines of the group
// take the same word in the same cycle. The engines' holds are ORed and returned
// upstream: while any engine holds, the register keeps its word and the switch output
// behind it stalls. The paper shows a fan-out in front of each group of 32 engines and a
// hold going from the engines back to the switch; the single-register structure is this
// design's choice.
//
// Timing: one cycle from accepted input to the engines when no engine holds.
module fan_out
  import retina_pkg::*;
#(
  parameter int N = N_XP
) (
  input  logic         clk,
  input  logic         rst_n,
  input  hit_t         in_data,
  input  logic         in_valid,
  output logic         in_hold,
  output hit_t         out_data,
  output logic         out_valid,   // strobe: every engine takes out_data this cycle
  input  logic [N-1:0] eng_hold
);

  logic full_q, hold_any;

  assign hold_any  = |eng_hold;
  assign out_valid = full_q && !hold_any;
  assign in_hold   = full_q && hold_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q   <= 1'b0;
      out_data <= '0;
    end else if (!in_hold) begin
      full_q   <= in_valid;
      if (in_valid) out_data <= in_data;
    end
  end

endmodule
