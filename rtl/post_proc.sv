// post_proc: validity check and latency compensation of the fused tune.
//
// With f_c the centre of the BPM band [band_lo, band_hi], the harmonic
// nearest to it is n = round(f_c / f0) = floor((f_c + f0/2) / f0), found with
// a sequential divider. The block then checks whether the lower sideband
// (n - q) f0 or the upper sideband (n + q) f0 lies inside the band. If neither
// does, the BPM cannot have seen the tune at this f0 and the result goes out
// with unreliable = 1. The mapped tune lies in (0, 0.5); when the machine's
// fractional tune is above one half (above_half = 1) the check uses 1 - q.
// The time stamp of the result is moved back by lat_comp to compensate the
// delay of mapping, EMA and median filtering: ts_out = ts_in - lat_comp.
//
// Interface: start with q, above_half, f0, band_lo, band_hi (Q16.16 STFT
// bins), ts_in, lat_comp; done pulses with q_out (= q), unreliable, ts_out,
// about 36 clocks later.
//
// The check and the time-stamp shift are the paper's. Taking f_c as the band
// centre, the above_half input and the subtraction of a configured constant
// are this design's choices.
module post_proc
  import tune_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  tune_t       q,
  input  logic        above_half,
  input  freq_t       f0,
  input  freq_t       band_lo,
  input  freq_t       band_hi,
  input  logic [31:0] ts_in,
  input  logic [31:0] lat_comp,
  output logic        busy,
  output logic        done,
  output tune_t       q_out,
  output logic        unreliable,
  output logic [31:0] ts_out,
  output logic [15:0] harmonic
);
  localparam int DW = 34;

  typedef enum logic [1:0] {S_IDLE, S_DIV, S_CHECK} state_t;
  state_t state;

  logic [16:0] qe;     // Q1.16 fractional tune used for the check
  freq_t       rf0, rlo, rhi;
  logic        div_start, div_done;
  logic [DW-1:0] div_num, div_den, div_quo;

  seq_div #(.W(DW)) u_div (
    .clk, .rst_n,
    .start (div_start),
    .num   (div_num),
    .den   (div_den),
    .busy  (),
    .done  (div_done),
    .quo   (div_quo),
    .rem   ()
  );

  logic [63:0] nf0, qf0, lower, upper;
  logic        lo_in, up_in;
  always_comb begin
    nf0   = 64'(div_quo) * 64'(rf0);
    qf0   = (64'(qe) * 64'(rf0)) >> 16;
    lower = nf0 - qf0;
    upper = nf0 + qf0;
    lo_in = (nf0 >= qf0) && (lower >= 64'(rlo)) && (lower <= 64'(rhi));
    up_in = (upper >= 64'(rlo)) && (upper <= 64'(rhi));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      qe         <= '0;
      rf0        <= '0;
      rlo        <= '0;
      rhi        <= '0;
      div_start  <= 1'b0;
      div_num    <= '0;
      div_den    <= '0;
      done       <= 1'b0;
      q_out      <= '0;
      unreliable <= 1'b0;
      ts_out     <= '0;
      harmonic   <= '0;
    end else begin
      div_start <= 1'b0;
      done      <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          qe        <= (above_half && q != '0) ? 17'h10000 - 17'(q) : 17'(q);
          rf0       <= f0;
          rlo       <= band_lo;
          rhi       <= band_hi;
          q_out     <= q;
          ts_out    <= ts_in - lat_comp;
          div_num   <= ((DW'(band_lo) + DW'(band_hi)) >> 1) + (DW'(f0) >> 1);
          div_den   <= DW'(f0);
          div_start <= 1'b1;
          state     <= S_DIV;
        end
        S_DIV: if (div_done) state <= S_CHECK;
        S_CHECK: begin
          unreliable <= !(lo_in || up_in);
          harmonic   <= 16'(div_quo);
          done       <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
