// gauss_smooth: Gaussian smoothing of a spectrum along the frequency axis.
//
// The window size follows the rule N_f = max(3, 2*floor(N_T/2) + 1), where N_T
// is the number of bins spanned by the transverse Schottky sideband; the
// kernel is a Gaussian with sigma = (N_f - 1)/3 normalised to unit gain
// (Q1.16 coefficients, built at elaboration). Bins stream in one per cycle;
// a shift register holds the last N_f bins and output bin i - h
// (h = (N_f-1)/2) is produced when input bin i arrives. After in_last the
// block feeds h zero bins to flush the tail, so the output has exactly as many
// bins as the input and the spectrum is zero-padded at both ends.
//
// Interface: in_valid/in_data/in_last; out_valid/out_data/out_last, registered.
// Latency: h + 1 cycles; the block needs h idle cycles after in_last before
// the next spectrum starts.
//
// The kernel and the window-size rule are the paper's; treating N_T as an
// elaboration-time parameter and zero padding at the edges are this design's
// choices.
module gauss_smooth
  import tune_pkg::*;
#(
  parameter int NT = 5,
  parameter int NF = nf_from_nt(NT)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  psd_t in_data,
  input  logic in_last,
  output logic out_valid,
  output psd_t out_data,
  output logic out_last
);
  localparam int H = (NF - 1) / 2;
  localparam gcoef_arr_t G = gauss_coefs(NF);
  localparam int SUM_W = PSD_W + GCOEF_W + 1;

  psd_t          sr [NF];          // sr[0] newest
  logic [15:0]   seen;             // inputs accepted in this spectrum
  logic [15:0]   flush;            // zero bins still to insert
  logic          active;

  wire  shift_in = in_valid || (flush != '0);
  psd_t din;
  assign din = in_valid ? in_data : '0;

  // convolution of the window as it will be after this shift
  logic [SUM_W-1:0] sum;
  always_comb begin
    sum = SUM_W'(G[0]) * SUM_W'(din);
    for (int k = 1; k < NF; k++) sum += SUM_W'(G[k]) * SUM_W'(sr[k-1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NF; k++) sr[k] <= '0;
      seen      <= '0;
      flush     <= '0;
      active    <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (shift_in) begin
        if (!active && in_valid) begin
          // first bin of a new spectrum: window starts empty (zero padding)
          for (int k = 1; k < NF; k++) sr[k] <= '0;
          sr[0] <= din;
          seen  <= 16'd1;
          active <= 1'b1;
        end else begin
          sr[0] <= din;
          for (int k = 1; k < NF; k++) sr[k] <= sr[k-1];
          if (in_valid) seen <= seen + 1'b1;
        end
        // an output is due once the window centre holds a real bin
        if ((active && (seen + (in_valid ? 16'd1 : 16'd0) > 16'(H))) || (!active && H == 0)) begin
          out_valid <= 1'b1;
          out_data  <= psd_t'(sum >> 16);
        end
        if (in_valid && in_last) begin
          if (H == 0) begin
            out_last <= 1'b1;
            active   <= 1'b0;
          end else begin
            flush <= 16'(H);
          end
        end else if (!in_valid) begin
          flush <= flush - 1'b1;
          if (flush == 16'd1) begin
            out_last <= 1'b1;
            active   <= 1'b0;
          end
        end
      end
    end
  end

  initial assert (NF % 2 == 1 && NF >= 3 && NF <= MAX_NF) else $error("NF must be odd, 3..MAX_NF");
endmodule
