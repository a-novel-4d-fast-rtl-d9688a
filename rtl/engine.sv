// engine: one cellular unit of the 4D artificial retina, grid cell (ROW = i, COL = j)
// with track parameters x+_i = retina_pkg::xp_of_row(i), x-_j = xm_of_col(j).
//
// For each hit (layer k, position x, time t) the engine computes
//   |s_ijk|  = |x - xr_k|,   xr_k = x+_i + x-_j (z_k - z+) / z-          (receptor)
//   |t_ijk|h = |t - te_k,h|, te_k,h = h*dT + z_k / c * sqrt(1 + x-_j^2/z-^2), h = -1,0,+1
// The receptor position xr_k and the three expected times te_k,h are held in two small
// ROMs indexed by the layer (i.e. by z only), computed at elaboration. The four values
// |s|, |t|-1, |t|0, |t|+1 are serialized over four cycles through a single exponential
// ROM (exp_lut), deserialized, and the space response is multiplied by each of the three
// time responses (a DSP multiply in an FPGA). Each product is added to one of three
// saturating accumulators W_ij(t0-dT), W_ij(t0), W_ij(t0+dT). The space ROM returns 0
// beyond 2 sigma, so hits outside the receptive field add nothing.
//
// Because the exp ROM is used four times per hit, the engine raises hold for three
// cycles after each accepted word and so takes one hit every four cycles, as in the
// paper. An end-of-event (eoe) word follows the hits through the pipeline; when it
// reaches the accumulators their values are copied to w_out, w_full is set and the
// accumulators are cleared for the next event. w_out stays until w_ack; an eoe arriving
// while the previous result is still unread (or still in flight) is held, while hits of
// the next event are accepted and accumulated meanwhile.
//
// The datapath of Fig. 9 of the paper (two z-indexed LUTs, subtract and absolute value,
// serializer, shared exp LUT, deserializer, product, accumulator, 3-cycle hold) is
// followed. Word widths, ROM formats, saturation and the eoe/w_ack protocol are this
// design's choices.
//
// Interface: in_valid is a strobe from the fan-out, only given when hold is low.
// Timing: a hit accepted in cycle c has its last product in the accumulators at the end
// of cycle c+7 (8-cycle latency); w_full rises 5 cycles after the eoe is accepted.
module engine
  import retina_pkg::*;
#(
  parameter int ROW = 0,
  parameter int COL = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  hit_t in_data,
  input  logic in_valid,
  output logic hold,
  output w3_t  w_out,
  output logic w_full,
  input  logic w_ack
);

  typedef logic [N_LAYERS-1:0][X_W-1:0]        rx_rom_t;
  typedef logic [N_LAYERS-1:0][N_HYP-1:0][T_W-1:0] te_rom_t;

  function automatic rx_rom_t build_rx();
    rx_rom_t r;
    for (int k = 0; k < N_LAYERS; k++)
      r[k] = X_W'(receptor_x(xp_of_row(ROW), xm_of_col(COL), k));
    return r;
  endfunction

  function automatic te_rom_t build_te();
    te_rom_t r;
    for (int k = 0; k < N_LAYERS; k++)
      for (int h = 0; h < N_HYP; h++)
        r[k][h] = T_W'(receptor_t(xm_of_col(COL), k) + (h - 1) * DT_PS);
    return r;
  endfunction

  localparam rx_rom_t RX = build_rx();
  localparam te_rom_t TE = build_te();

  // ---- stage 0: serializer (item 0 = space, items 1..3 = time hypotheses) ----
  hit_t       hr;
  logic       s0_v, s0_eoe;
  logic [1:0] s0_item;
  logic       eoe_busy;                 // an eoe is in flight to the accumulators

  assign hold = (s0_v && s0_item != 2'd3) || (in_data.eoe && (w_full || eoe_busy));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_v    <= 1'b0;
      s0_item <= '0;
      s0_eoe  <= 1'b0;
      hr      <= '0;
    end else if (in_valid) begin
      hr      <= in_data;
      s0_v    <= 1'b1;
      s0_item <= 2'd0;
      s0_eoe  <= in_data.eoe;
    end else if (s0_v) begin
      s0_item <= s0_item + 2'd1;
      if (s0_item == 2'd3) s0_v <= 1'b0;
    end
  end

  // ---- stage 1: subtract, absolute value, exp address ----
  logic signed [T_W:0]   diff;
  logic        [T_W:0]   mag, shifted;
  logic                  s1_v, s1_eoe, s1_time;
  logic [1:0]            s1_item;
  logic [EXP_AW-1:0]     s1_n;

  always_comb begin
    if (s0_item == 2'd0) diff = $signed({hr.x[X_W-1], hr.x}) - $signed({RX[hr.layer][X_W-1], RX[hr.layer]});
    else                 diff = $signed({hr.t[T_W-1], hr.t})
                                - $signed({TE[hr.layer][s0_item - 2'd1][T_W-1], TE[hr.layer][s0_item - 2'd1]});
    mag     = diff[T_W] ? (T_W+1)'(-diff) : (T_W+1)'(diff);
    shifted = (s0_item == 2'd0) ? (mag >> EXP_SHIFT_X) : (mag >> EXP_SHIFT_T);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s1_eoe <= 1'b0; s1_time <= 1'b0; s1_item <= '0; s1_n <= '0;
    end else begin
      s1_v    <= s0_v && !s0_eoe;
      s1_eoe  <= s0_v && s0_eoe && s0_item == 2'd0;
      s1_time <= (s0_item != 2'd0);
      s1_item <= s0_item;
      s1_n    <= (shifted > (T_W+1)'((1 << EXP_AW) - 1)) ? '1 : EXP_AW'(shifted);
    end
  end

  // ---- stage 2: shared exponential ROM ----
  logic [E_W-1:0] e2;
  logic           s2_v, s2_eoe;
  logic [1:0]     s2_item;

  exp_lut u_exp (.clk(clk), .is_time(s1_time), .n(s1_n), .q(e2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_v <= 1'b0; s2_eoe <= 1'b0; s2_item <= '0;
    end else begin
      s2_v <= s1_v; s2_eoe <= s1_eoe; s2_item <= s1_item;
    end
  end

  // ---- stage 3: deserializer and space x time product ----
  logic [E_W-1:0] es;
  logic [P_W-1:0] prod;
  logic           s3_v, s3_eoe;
  logic [1:0]     s3_hyp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      es <= '0; prod <= '0; s3_v <= 1'b0; s3_eoe <= 1'b0; s3_hyp <= '0;
    end else begin
      s3_v   <= s2_v && s2_item != 2'd0;
      s3_eoe <= s2_eoe;
      if (s2_v && s2_item == 2'd0) es <= e2;
      prod   <= es * e2;
      s3_hyp <= s2_item - 2'd1;
    end
  end

  // ---- stage 4: accumulators and event result ----
  w3_t acc;
  logic [ACC_W:0] sum;
  assign sum = {1'b0, acc[s3_hyp]} + (ACC_W+1)'(prod);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      w_out    <= '0;
      w_full   <= 1'b0;
      eoe_busy <= 1'b0;
    end else begin
      if (in_valid && in_data.eoe) eoe_busy <= 1'b1;
      if (w_ack) w_full <= 1'b0;
      if (s3_eoe) begin
        w_out    <= acc;
        acc      <= '0;
        w_full   <= 1'b1;
        eoe_busy <= 1'b0;
      end else if (s3_v) begin
        acc[s3_hyp] <= sum[ACC_W] ? '1 : sum[ACC_W-1:0];
      end
    end
  end

  a_no_strobe_on_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> !hold);

endmodule
