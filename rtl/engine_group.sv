// engine_group: one fan-out and the N engines of one grid column COL (x-_j), i.e. one
// "FAN OUT + 32 ENGINE" slice of the engine pool. Engine r of the group is grid cell
// (i = r, j = COL). All engines of a group see the same hits in the same cycles, so they
// run in lock step; their holds are ORed by the fan-out and returned to the switch.
//
// Interface: hit stream from one switch output (valid/hold); per engine the three
// weights and the result-ready flag; w_ack clears the results of every engine.
module engine_group
  import retina_pkg::*;
#(
  parameter int COL = 0,
  parameter int N   = N_XP
) (
  input  logic         clk,
  input  logic         rst_n,
  input  hit_t         in_data,
  input  logic         in_valid,
  output logic         in_hold,
  output w3_t  [N-1:0] w_out,
  output logic [N-1:0] w_full,
  input  logic         w_ack
);

  hit_t         bc_data;
  logic         bc_valid;
  logic [N-1:0] eng_hold;

  fan_out #(.N(N)) u_fan_out (
    .clk, .rst_n, .in_data, .in_valid, .in_hold,
    .out_data(bc_data), .out_valid(bc_valid), .eng_hold
  );

  for (genvar r = 0; r < N; r++) begin : g_eng
    engine #(.ROW(r), .COL(COL)) u_engine (
      .clk, .rst_n, .in_data(bc_data), .in_valid(bc_valid), .hold(eng_hold[r]),
      .w_out(w_out[r]), .w_full(w_full[r]), .w_ack
    );
  end

endmodule
