// kalman_fusion: adaptive two-sensor scalar Kalman filter that fuses the
// filtered EMA tune (z1) and the filtered WLC tune (z2) into q_pred.
//
// Per measurement pair, in order:
//   predict   x_pred = x, P_pred = P + Q
//   adapt     R_i = alpha (z_i - x_pred)^2 + (1 - alpha) R_i      (i = 1, 2)
//   fuse      w1 = R2 / (R1 + R2), w2 = 1 - w1,
//             z_f = w1 z1 + w2 z2, R_f = R1 R2 / (R1 + R2) = R1 w1
//   update    K = P_pred / (P_pred + R_f), x = x_pred + K (z_f - x_pred),
//             P = (1 - K) P_pred
//   adapt Q   Q = alpha (z_f - x_pred)^2 + (1 - alpha) Q
// w1 = (1/R1) / (1/R1 + 1/R2) is computed as R2 / (R1 + R2), the same value.
// Tunes are Q0.16, variances unsigned Q0.32 (floored at RMIN so the weights
// stay defined), weights and gain Q1.16; the two divisions share one
// sequential divider. The first pair after reset or clear only initialises
// x = z1, P = P0, R1 = R2 = R0, Q = Q0.
//
// Interface: start with z1, z2, alpha; done pulses with x (q_pred) and w1,
// the current weight of the EMA tune. Timing: about 2 * 57 + 4 clocks.
//
// The equations are the paper's. Number formats, initial values and the
// first-sample initialisation are this design's choices.
module kalman_fusion
  import tune_pkg::*;
#(
  parameter logic [39:0] P0   = 40'd1 << 20,
  parameter logic [39:0] R0   = 40'd1 << 16,
  parameter logic [39:0] Q0   = 40'd1 << 12,
  parameter logic [39:0] RMIN = 40'd1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  input  logic    start,
  input  tune_t   z1,
  input  tune_t   z2,
  input  frac16_t alpha,
  output logic    busy,
  output logic    done,
  output tune_t   x,
  output frac16_t w1
);
  localparam int VW = 40;
  localparam int DIVW = 56;
  typedef logic [VW-1:0] var_t;

  typedef enum logic [2:0] {S_IDLE, S_ADAPT, S_W, S_FUSE, S_K, S_UPD} state_t;
  state_t state;

  var_t  P, Q, R1, R2, Pp, Rf;
  tune_t z1r, z2r, zf;
  logic  init;

  logic            div_start, div_done;
  logic [DIVW-1:0] div_num, div_den, div_quo;

  seq_div #(.W(DIVW)) u_div (
    .clk, .rst_n,
    .start (div_start),
    .num   (div_num),
    .den   (div_den),
    .busy  (),
    .done  (div_done),
    .quo   (div_quo),
    .rem   ()
  );

  function automatic var_t sq(input tune_t a, input tune_t b);
    logic [TUNE_W-1:0] d;
    d = (a > b) ? a - b : b - a;
    return var_t'(d) * var_t'(d);
  endfunction

  function automatic var_t smooth(input var_t sample, input var_t old, input frac16_t a);
    return var_t'((64'(a) * 64'(sample) + 64'(ONE16 - a) * 64'(old)) >> 16);
  endfunction

  function automatic var_t floor_r(input var_t r);
    return (r < RMIN) ? RMIN : r;
  endfunction

  var_t r1n, r2n;
  always_comb begin
    r1n = floor_r(smooth(sq(z1r, x), R1, alpha));
    r2n = floor_r(smooth(sq(z2r, x), R2, alpha));
  end

  frac16_t kq;
  assign kq = (div_quo > DIVW'(ONE16)) ? ONE16 : frac16_t'(div_quo);

  logic signed [TUNE_W+1:0]  innov;
  logic signed [TUNE_W+19:0] corr;
  always_comb begin
    innov = (TUNE_W+2)'(zf) - (TUNE_W+2)'(x);
    corr  = ((TUNE_W+20)'(innov) * (TUNE_W+20)'(signed'({1'b0, kq}))) >>> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      init      <= 1'b1;
      P         <= P0;
      Q         <= Q0;
      R1        <= R0;
      R2        <= R0;
      Pp        <= '0;
      Rf        <= '0;
      x         <= '0;
      w1        <= frac16_t'(17'h08000);
      z1r       <= '0;
      z2r       <= '0;
      zf        <= '0;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      done      <= 1'b0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (clear) begin
            init <= 1'b1;
          end else if (start) begin
            z1r <= z1;
            z2r <= z2;
            if (init) begin
              x    <= z1;
              P    <= P0;
              Q    <= Q0;
              R1   <= R0;
              R2   <= R0;
              w1   <= frac16_t'(17'h08000);
              init <= 1'b0;
              done <= 1'b1;
            end else begin
              state <= S_ADAPT;
            end
          end
        end
        S_ADAPT: begin
          R1        <= r1n;
          R2        <= r2n;
          Pp        <= P + Q;
          div_num   <= DIVW'(r2n) << 16;
          div_den   <= DIVW'(r1n) + DIVW'(r2n);
          div_start <= 1'b1;
          state     <= S_W;
        end
        S_W: if (div_done) begin
          w1    <= kq;
          zf    <= tune_t'((34'(kq) * 34'(z1r) + 34'(ONE16 - kq) * 34'(z2r)) >> 16);
          Rf    <= var_t'((64'(R1) * 64'(kq)) >> 16);
          state <= S_FUSE;
        end
        S_FUSE: begin
          div_num   <= DIVW'(Pp) << 16;
          div_den   <= DIVW'(Pp) + DIVW'(Rf);
          div_start <= 1'b1;
          state     <= S_K;
        end
        S_K: if (div_done) begin
          x     <= tune_t'((TUNE_W+20)'(x) + corr);
          P     <= var_t'((64'(ONE16 - kq) * 64'(Pp)) >> 16);
          Q     <= smooth(sq(zf, x), Q, alpha);
          state <= S_UPD;
        end
        S_UPD: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
