// cluster_unit: turns the fired strips of one detector plane into clusters (hits).
//
// The plane delivers, per event, its fired strips in increasing strip order, each with
// its measured time, followed by an end-of-event (eoe) word. Runs of adjacent strips are
// merged into one cluster. The cluster position is the centre of the run, converted to
// the common x unit (10 um): x = PITCH/2 * (first + last + 1) - N_STRIPS * PITCH / 2, so
// strip s covers [s*PITCH, (s+1)*PITCH) measured from the lower edge of the plane, and the
// plane is centred on x = 0. The cluster time is the earliest strip time of the run. The
// layer number is attached, so that downstream units know the z of the hit.
//
// The clustering rule, the position and time conventions and the input format are this
// design's own choices: the architecture only names a cluster unit per layer and says the
// engines receive "the measured x cluster position" and its time.
//
// Interface: valid/hold streams. A word moves when valid is high and hold is low. The
// output is registered; a cluster is emitted one cycle after the strip that closes it
// (a non-adjacent strip or eoe). On eoe with an open cluster the input is held for one
// cycle while the cluster goes out, then eoe is forwarded.
module cluster_unit
  import retina_pkg::*;
#(
  parameter int LAYER = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  strip_t in_data,
  input  logic   in_valid,
  output logic   in_hold,
  output hit_t   out_data,
  output logic   out_valid,
  input  logic   out_hold
);

  logic               open_q;
  logic [STRIP_W-1:0] first_q, last_q;
  t_t                 tmin_q;
  logic               out_free, take, emit_cl, emit_eoe;

  assign out_free = !out_valid || !out_hold;

  // cluster position from the first and last strip of the run
  function automatic x_t cluster_x(logic [STRIP_W-1:0] f, logic [STRIP_W-1:0] l);
    return x_t'((PITCH_U / 2) * (int'(f) + int'(l) + 1) - (N_STRIPS * PITCH_U) / 2);
  endfunction

  always_comb begin
    emit_cl  = 1'b0;
    emit_eoe = 1'b0;
    take     = 1'b0;
    if (in_valid && out_free) begin
      if (in_data.eoe) begin
        if (open_q) emit_cl = 1'b1;           // flush the open cluster first
        else begin emit_eoe = 1'b1; take = 1'b1; end
      end else begin
        take = 1'b1;
        if (open_q && (in_data.strip != last_q + 1'b1)) emit_cl = 1'b1;
      end
    end
  end

  assign in_hold = in_valid && !take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q    <= 1'b0;
      first_q   <= '0;
      last_q    <= '0;
      tmin_q    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_free) out_valid <= 1'b0;
      if (emit_cl) begin
        out_valid      <= 1'b1;
        out_data.eoe   <= 1'b0;
        out_data.layer <= LAYER_W'(LAYER);
        out_data.x     <= cluster_x(first_q, last_q);
        out_data.t     <= tmin_q;
      end else if (emit_eoe) begin
        out_valid      <= 1'b1;
        out_data       <= '0;
        out_data.eoe   <= 1'b1;
        out_data.layer <= LAYER_W'(LAYER);
      end
      if (take && !in_data.eoe) begin
        if (open_q && !emit_cl) begin          // extend the run
          last_q <= in_data.strip;
          if (in_data.t < tmin_q) tmin_q <= in_data.t;
        end else begin                         // start a new run
          open_q  <= 1'b1;
          first_q <= in_data.strip;
          last_q  <= in_data.strip;
          tmin_q  <= in_data.t;
        end
      end else if (emit_cl && in_data.eoe) begin
        open_q <= 1'b0;
      end
    end
  end

  // a held output word must stay unchanged
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_hold |=> out_valid && $stable(out_data));

endmodule
