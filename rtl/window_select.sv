// window_select: chooses the STFT window length N_t from the recent change
// of the revolution frequency f0.
//
// A window is only useful while f0, and with it every sideband, moves by less
// than a tolerable amount during the window. Each time a frame starts, the
// block samples f0 together with the current time in decimated samples. From two successive samples it gets the f0 rate, and it sets
//   N_t = tol * dt / |df0|      (dt in samples, tol and df0 in Q16.16 bins)
// i.e. the longest window over which f0 changes by at most tol. The result is
// clamped to [nt_min, nt_max]; with a constant f0, or before two samples
// exist, N_t = nt_max. The clamp is applied on the output, so a new nt_max
// acts at once.
//
// Interface: sample pulses with f0 and the time t_end valid; nt is the chosen length;
// nt_valid pulses when a new rate-based value has been computed.
// Timing: the quotient comes from a 56-bit sequential divider, 56 clocks
// after sample; samples closer than that are ignored. The new value is used
// by the acquisition buffer from its next frame on.
//
// Paper vs. own choices: the rule (tolerable f0 change of 10 kHz per window,
// hence at most 1 ms at 10 MHz/s, or a window "determined by the FPGA itself
// based on recent frequency variations") is the paper's. Using only the last
// two frames as "recent", the clamp limits and the formats are this design's.
module window_select
  import tune_pkg::*;
#(
  parameter int LW = 14
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          sample,
  input  freq_t         f0,
  input  logic [31:0]   t_end,
  input  freq_t         tol,
  input  logic [LW-1:0] nt_min,
  input  logic [LW-1:0] nt_max,
  output logic [LW-1:0] nt,
  output logic          nt_valid
);
  localparam int DW = 56;
  localparam int TW = DW - FREQ_W;   // time difference bits used

  logic          have_prev;
  freq_t         f0_prev;
  logic [31:0]   t_prev;
  logic [31:0]   raw;                // unclamped length, saturated
  logic          div_start, div_busy, div_done;
  logic [DW-1:0] div_num, div_den, div_quo;

  wire freq_t       df  = (f0 >= f0_prev) ? f0 - f0_prev : f0_prev - f0;
  wire logic [31:0] dt  = t_end - t_prev;
  wire logic [TW-1:0] dt_s = (dt[31:TW] != '0) ? '1 : dt[TW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_prev <= 1'b0;
      f0_prev   <= '0;
      t_prev    <= '0;
      raw       <= '1;
      div_start <= 1'b0;
      div_num   <= '0;
      div_den   <= '0;
      nt_valid  <= 1'b0;
    end else begin
      div_start <= 1'b0;
      nt_valid  <= 1'b0;
      if (sample && !div_busy && !div_start) begin
        have_prev <= 1'b1;
        f0_prev   <= f0;
        t_prev    <= t_end;
        if (have_prev) begin
          if (df == '0) begin
            raw      <= '1;
            nt_valid <= 1'b1;
          end else begin
            div_num   <= DW'(tol) * DW'(dt_s);
            div_den   <= DW'(df);
            div_start <= 1'b1;
          end
        end
      end
      if (div_done) begin
        raw      <= (div_quo[DW-1:32] != '0) ? '1 : div_quo[31:0];
        nt_valid <= 1'b1;
      end
    end
  end

  seq_div #(.W(DW)) u_div (
    .clk, .rst_n,
    .start (div_start), .num (div_num), .den (div_den),
    .busy (div_busy), .done (div_done), .quo (div_quo), .rem ()
  );

  always_comb begin
    if (raw > 32'(nt_max))      nt = nt_max;
    else if (raw < 32'(nt_min)) nt = nt_min;
    else                        nt = raw[LW-1:0];
  end
endmodule
