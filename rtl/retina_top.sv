// retina_top: the 4D artificial retina fast track finder.
//
// Data flow, per event:
//   8 strip planes -> 8 cluster_unit -> 4 layer_mux (layers 1+2, 3+4, 5+6, 7+8)
//   -> retina_switch (4:16, LUT routing on x) -> 16 engine_group (fan-out + 32 engines,
//   512 cellular units in all, one group per x- column) -> track_fitter (16 fan-in +
//   track fit units, track output merger) -> track output.
// Each engine accumulates W_ij for the three track time hypotheses t0-dT, t0, t0+dT;
// the fitter finds the local maxima of W_ij(t0) and interpolates x+, x- and the track
// time. Engines hold their input for three cycles per hit; the hold travels back through
// the fan-out, switch, mux and cluster units to the strip inputs.
//
// Events are delimited by an end-of-event word on every strip input. Events are
// pipelined: the engines accumulate event n+1 while the fitter works on event n.
//
// Interface: per plane a valid/hold stream of strip_t words (strip number, time in ps
// relative to t0, eoe); a valid/hold stream of track_t results; n_events counts the
// events fitted; ovf_cnt counts local maxima dropped because a track fit unit's queue
// was full. The data acquisition that feeds the strip inputs is outside this design.
module retina_top
  import retina_pkg::*;
#(
  parameter int THRESHOLD = 3 * 255 * 255
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  strip_t [N_LAYERS-1:0]      strip_data,
  input  logic   [N_LAYERS-1:0]      strip_valid,
  output logic   [N_LAYERS-1:0]      strip_hold,
  output track_t                     track_data,
  output logic                       track_valid,
  input  logic                       track_hold,
  output logic [15:0]                n_events,
  output logic [N_XM-1:0][7:0]       ovf_cnt
);

  localparam int N_MUX = N_LAYERS / 2;

  hit_t [N_LAYERS-1:0] cl_data;
  logic [N_LAYERS-1:0] cl_valid, cl_hold;
  hit_t [N_MUX-1:0]    mx_data;
  logic [N_MUX-1:0]    mx_valid, mx_hold;
  hit_t [N_XM-1:0]     sw_data;
  logic [N_XM-1:0]     sw_valid, sw_hold;
  w3_t  [N_XM-1:0][N_XP-1:0] w;
  logic [N_XM-1:0][N_XP-1:0] w_full;
  logic                      w_ack;

  for (genvar k = 0; k < N_LAYERS; k++) begin : g_layer
    cluster_unit #(.LAYER(k)) u_cluster (
      .clk, .rst_n,
      .in_data(strip_data[k]), .in_valid(strip_valid[k]), .in_hold(strip_hold[k]),
      .out_data(cl_data[k]), .out_valid(cl_valid[k]), .out_hold(cl_hold[k])
    );
  end

  for (genvar m = 0; m < N_MUX; m++) begin : g_mux
    layer_mux u_mux (
      .clk, .rst_n,
      .in_data(cl_data[2*m+1 -: 2]), .in_valid(cl_valid[2*m+1 -: 2]), .in_hold(cl_hold[2*m+1 -: 2]),
      .out_data(mx_data[m]), .out_valid(mx_valid[m]), .out_hold(mx_hold[m])
    );
  end

  retina_switch #(.N_IN(N_MUX), .N_OUT(N_XM)) u_switch (
    .clk, .rst_n,
    .in_data(mx_data), .in_valid(mx_valid), .in_hold(mx_hold),
    .out_data(sw_data), .out_valid(sw_valid), .out_hold(sw_hold)
  );

  for (genvar j = 0; j < N_XM; j++) begin : g_group
    engine_group #(.COL(j), .N(N_XP)) u_group (
      .clk, .rst_n,
      .in_data(sw_data[j]), .in_valid(sw_valid[j]), .in_hold(sw_hold[j]),
      .w_out(w[j]), .w_full(w_full[j]), .w_ack
    );
  end

  track_fitter #(.NC(N_XM), .NR(N_XP), .THRESHOLD(THRESHOLD)) u_fitter (
    .clk, .rst_n, .w_in(w), .w_full, .w_ack,
    .out_data(track_data), .out_valid(track_valid), .out_hold(track_hold),
    .n_events, .ovf_cnt
  );

endmodule
