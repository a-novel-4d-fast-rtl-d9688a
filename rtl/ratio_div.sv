// ratio_div: sequential divider for the interpolation ratio r = num / den of the track
// fitter, as a signed fixed-point number with RATIO_FW fraction bits.
//
// A restoring shift-subtract divider on the magnitudes produces one quotient bit per
// cycle, RATIO_FW + 2 bits in all, so |r| < 4 (larger ratios saturate). den = 0 gives r = 0. The result appears
// RATIO_FW + 3 cycles after start, with done high for one cycle. This unit is this
// design's choice for evaluating the quotients of the Gaussian interpolation.
module ratio_div
  import retina_pkg::*;
#(
  parameter int IW = LOG_W + 2      // width of num and den (signed)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [IW-1:0]     num,
  input  logic signed [IW-1:0]     den,
  output logic signed [RATIO_FW+2:0] r,
  output logic                     done
);

  localparam int QW = RATIO_FW + 2;
  localparam int RW = IW + QW + 1;

  logic [RW-1:0]          rem, dvs;
  logic [QW-1:0]          q;
  logic [$clog2(QW+1)-1:0] cnt;
  logic                   busy, neg, zero, sat;
  logic [IW-1:0]          an, ad;

  assign an = num[IW-1] ? IW'(-num) : IW'(num);
  assign ad = den[IW-1] ? IW'(-den) : IW'(den);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem <= '0; dvs <= '0; q <= '0; cnt <= '0; busy <= 1'b0; neg <= 1'b0; zero <= 1'b0; sat <= 1'b0;
      r <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem  <= RW'(an) << RATIO_FW;
        dvs  <= RW'(ad) << (QW - 1);
        q    <= '0;
        cnt  <= '0;
        busy <= 1'b1;
        neg  <= num[IW-1] ^ den[IW-1];
        zero <= (den == '0);
        sat  <= (RW'(an) >= (RW'(ad) << 2));
      end else if (busy) begin
        if (int'(cnt) == QW) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (zero)     r <= '0;
          else if (sat) r <= neg ? -$signed({1'b0, {QW{1'b1}}}) : $signed({1'b0, {QW{1'b1}}});
          else          r <= neg ? -$signed({1'b0, q}) : $signed({1'b0, q});
        end else begin
          cnt <= cnt + 1'b1;
          if (rem >= dvs) begin
            rem <= rem - dvs;
            q   <= {q[QW-2:0], 1'b1};
          end else begin
            q   <= {q[QW-2:0], 1'b0};
          end
          dvs <= dvs >> 1;
        end
      end
    end
  end

endmodule
