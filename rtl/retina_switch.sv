// retina_switch: the 4:16 switch that delivers every hit, in parallel, to the engine
// groups whose receptors can be near it.
//
// Routing depends only on the space information of the hit. A look-up table indexed by
// {layer, coarse x bin} (x >> ROUTE_SHIFT, 5.12 mm bins) gives a 16-bit mask with one bit
// per engine group (grid column j). A bit is set when any receptor of column j on that
// layer lies within 2 sigma of the bin, i.e. when some engine of the group could give the
// hit a non-zero weight. The table is computed from the geometry at elaboration
// (retina_pkg::route_entry). A hit whose mask is empty is dropped.
//
// Structure: each of the 4 inputs has a register holding the hit and the set of outputs
// it still has to reach. Each of the 16 outputs has an output register and a round-robin
// arbiter over the inputs that request it. A hit leaves its input register when every
// output in its mask has taken a copy, so one hit may be copied to many groups in one
// cycle. Output registers honour the hold of the fan-out/engine group behind them; a
// held group blocks only the inputs that want it.
//
// End of event: eoe words act as a barrier across the 4 inputs. Once all four input
// registers hold eoe, input 0 broadcasts one eoe to all 16 outputs and then all four are
// released; hits of the next event cannot overtake it.
//
// The paper specifies the LUT-driven parallel delivery and the hold from the engines.
// The internal structure (per-input pending masks, per-output round-robin arbiters), the
// bin size and the eoe barrier are this design's choices. Latency: 2 cycles from an
// accepted input to a valid output when nothing holds (the paper quotes about 14 for its
// own switch).
module retina_switch
  import retina_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int N_OUT = N_XM
) (
  input  logic              clk,
  input  logic              rst_n,
  input  hit_t [N_IN-1:0]   in_data,
  input  logic [N_IN-1:0]   in_valid,
  output logic [N_IN-1:0]   in_hold,
  output hit_t [N_OUT-1:0]  out_data,
  output logic [N_OUT-1:0]  out_valid,
  input  logic [N_OUT-1:0]  out_hold
);

  localparam int LUT_DEPTH = N_LAYERS << ROUTE_BW;
  typedef logic [N_OUT-1:0] mask_t;
  typedef logic [LUT_DEPTH-1:0][N_OUT-1:0] route_lut_t;

  function automatic route_lut_t build_route();
    route_lut_t r;
    for (int k = 0; k < N_LAYERS; k++)
      for (int b = 0; b < (1 << ROUTE_BW); b++)
        for (int j = 0; j < N_OUT; j++)
          r[(k << ROUTE_BW) + b][j] = route_entry(k, b, j);
    return r;
  endfunction

  localparam route_lut_t ROUTE = build_route();

  hit_t  [N_IN-1:0]  ir_data;
  logic  [N_IN-1:0]  ir_valid;
  mask_t [N_IN-1:0]  ir_pend;
  logic  [N_IN-1:0]  ir_eoe;
  logic              eoe_go;
  logic  [N_IN-1:0][N_OUT-1:0] req, gnt;
  logic  [N_OUT-1:0] out_free;
  logic  [N_OUT-1:0][$clog2(N_IN)-1:0] rr_q;
  logic  [N_IN-1:0]  done;
  mask_t [N_IN-1:0]  gnt_in;

  always_comb begin
    for (int k = 0; k < N_IN; k++) ir_eoe[k] = ir_valid[k] && ir_data[k].eoe;
  end
  assign eoe_go   = &ir_eoe;
  assign out_free = ~out_valid | ~out_hold;

  // requests: hits request their pending outputs; eoe only from input 0 once all are eoe
  always_comb begin
    for (int k = 0; k < N_IN; k++)
      for (int o = 0; o < N_OUT; o++)
        req[k][o] = ir_valid[k] && ir_pend[k][o] &&
                    (!ir_data[k].eoe || (eoe_go && k == 0));
  end

  // per-output round-robin arbitration: the lowest n, starting at rr_q, wins
  always_comb begin
    gnt = '0;
    for (int o = 0; o < N_OUT; o++) begin
      if (out_free[o]) begin
        for (int n = N_IN - 1; n >= 0; n--) begin
          if (req[(int'(rr_q[o]) + n) % N_IN][o]) begin
            for (int m = 0; m < N_IN; m++) gnt[m][o] = 1'b0;
            gnt[(int'(rr_q[o]) + n) % N_IN][o] = 1'b1;
          end
        end
      end
    end
  end

  // an input is done with its word when no pending output remains after this cycle
  always_comb begin
    for (int k = 0; k < N_IN; k++) begin
      for (int o = 0; o < N_OUT; o++) gnt_in[k][o] = gnt[k][o];
      if (ir_data[k].eoe)   // released together, when input 0 has broadcast it
        done[k] = ir_valid[k] && eoe_go && ((ir_pend[0] & ~gnt_in[0]) == '0);
      else
        done[k] = ir_valid[k] && ((ir_pend[k] & ~gnt_in[k]) == '0);
    end
  end

  assign in_hold = ir_valid & ~done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ir_valid  <= '0;
      ir_data   <= '0;
      ir_pend   <= '0;
      out_valid <= '0;
      out_data  <= '0;
      rr_q      <= '0;
    end else begin
      for (int k = 0; k < N_IN; k++) begin
        if (!ir_valid[k] || done[k]) begin
          ir_valid[k] <= in_valid[k];
          ir_data[k]  <= in_data[k];
          if (in_data[k].eoe) ir_pend[k] <= '1;
          else ir_pend[k] <= ROUTE[{in_data[k].layer, in_data[k].x[X_W-1 -: ROUTE_BW] ^ {1'b1, {(ROUTE_BW-1){1'b0}}}}];
        end else begin
          ir_pend[k] <= ir_pend[k] & ~gnt_in[k];
        end
      end
      for (int o = 0; o < N_OUT; o++) begin
        if (out_free[o]) out_valid[o] <= 1'b0;
        for (int k = 0; k < N_IN; k++) begin
          if (gnt[k][o]) begin
            out_valid[o] <= 1'b1;
            out_data[o]  <= ir_data[k];
            rr_q[o]      <= ($clog2(N_IN))'((k + 1) % N_IN);
          end
        end
      end
    end
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_chk
    a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && out_hold[o] |=> out_valid[o] && $stable(out_data[o]));
  end

endmodule
