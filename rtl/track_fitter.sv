// track_fitter: the track fitter of the board, 16 track fit units, each behind the
// fan-in of one engine group, plus the track output merger and the event controller.
//
// Controller: when every engine holds an event result (all fan-ins ready), it starts all
// track fit units in the same cycle, so that their row scans run in lock step and each
// unit can read the centre weight W(t0) of its neighbour columns from the neighbours'
// fan-ins. When all units are idle again (all maxima fitted and sent), it pulses w_ack,
// which frees the result registers of all engines for the next event. While the fitter
// works, the engines already accumulate the next event.
//
// The paper gives 16 track fit units fed through fan-ins and the interpolation method;
// the lock-step scan and the start/acknowledge control are this design's choices.
module track_fitter
  import retina_pkg::*;
#(
  parameter int NC        = N_XM,
  parameter int NR        = N_XP,
  parameter int THRESHOLD = 3 * 255 * 255
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  w3_t  [NC-1:0][NR-1:0]    w_in,
  input  logic [NC-1:0][NR-1:0]    w_full,
  output logic                     w_ack,
  output track_t                   out_data,
  output logic                     out_valid,
  input  logic                     out_hold,
  output logic [15:0]              n_events,   // events fitted so far
  output logic [NC-1:0][7:0]       ovf_cnt
);

  logic [NC-1:0]                   ready, idle;
  logic [NC-1:0][$clog2(NR)-1:0]   sel;
  w3_t  [NC-1:0]                   w_c;
  w_t   [NC-1:0]                   w_dn, w_up, w_l, w_r;
  track_t [NC-1:0]                 t_data;
  logic [NC-1:0]                   t_valid, t_hold;

  typedef enum logic [1:0] {C_WAIT, C_START, C_RUN, C_ACK} cstate_e;
  cstate_e st;
  logic    start;

  assign start = (st == C_START);
  assign w_ack = (st == C_ACK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_WAIT;
      n_events <= '0;
    end else begin
      unique case (st)
        C_WAIT:  if (&ready) st <= C_START;
        C_START: st <= C_RUN;
        C_RUN:   if (&idle && !out_valid) st <= C_ACK;
        C_ACK:   begin st <= C_WAIT; n_events <= n_events + 1'b1; end
        default: st <= C_WAIT;
      endcase
    end
  end

  for (genvar j = 0; j < NC; j++) begin : g_col
    fan_in #(.N(NR)) u_fan_in (
      .clk, .rst_n, .w_in(w_in[j]), .w_full(w_full[j]), .sel(sel[j]),
      .w_c(w_c[j]), .w_dn(w_dn[j]), .w_up(w_up[j]), .ready(ready[j])
    );
    assign w_l[j] = (j == 0)      ? '0 : w_c[(j == 0) ? 0 : j - 1][1];
    assign w_r[j] = (j == NC - 1) ? '0 : w_c[(j == NC - 1) ? j : j + 1][1];
    track_fit #(.COL(j), .N(NR), .THRESHOLD(THRESHOLD)) u_track_fit (
      .clk, .rst_n, .start, .sel(sel[j]),
      .w_c(w_c[j]), .w_dn(w_dn[j]), .w_up(w_up[j]), .w_left(w_l[j]), .w_right(w_r[j]),
      .out_data(t_data[j]), .out_valid(t_valid[j]), .out_hold(t_hold[j]),
      .idle(idle[j]), .ovf_cnt(ovf_cnt[j])
    );
  end

  track_merge #(.N(NC)) u_merge (
    .clk, .rst_n, .in_data(t_data), .in_valid(t_valid), .in_hold(t_hold),
    .out_data, .out_valid, .out_hold
  );

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) sel[0] == sel[NC-1]);

endmodule
