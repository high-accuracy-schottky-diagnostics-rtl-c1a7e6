// tune_mapper: maps the transverse sidebands of the smoothed spectrum onto a
// common tune axis and averages them, producing P_t.
//
// Frequencies are Q16.16 numbers in units of one STFT bin (delta_f). The
// block first stores the NB/2 input bins. Then, for each tune bin
// j = 0..NQ-1 (q_j = j / (2 NQ), so the axis covers [0, 0.5)), it walks the
// revolution harmonics n = 1, 2, ... and looks at both sidebands
// F = (n - q_j) f0 and F = (n + q_j) f0. A sideband inside the BPM band
// [band_lo, band_hi] is located in the sampled spectrum by bandpass-sampling
// aliasing: r = F mod NB, mirrored to NB - r when r > NB/2 (an inverted
// sideband). The spectrum is linearly interpolated at r and the value added
// to a sum; P_t[j] is that sum divided by the number c of in-band sidebands
// (multiplied by round(65536 / c) >> 16; 0 when c = 0). Averaging rather than
// summing keeps the noise floor of P_t the same at every tune, whether one or
// several sidebands fall in the band, so that a noise-only stretch does not
// favour tunes near 0 or 0.5 where both sidebands of a harmonic are seen. The
// walk ends when the lower sideband of harmonic n lies above band_hi, or
// after NMAX harmonics.
//
// Interface: in_valid/in_data/in_last load the spectrum; f0, band_lo and
// band_hi are sampled with in_last. The output streams NQ bins with
// out_idx = j. Timing: NB/2 load cycles, then 1 + 2 * (harmonics visited)
// cycles per tune bin.
//
// Mapping into (0, 0.5), interpolation and inversion are the paper's; the
// linear interpolation, averaging over the in-band sidebands and the alias model
// are this design's reading of it.
module tune_mapper
  import tune_pkg::*;
#(
  parameter int NB   = 1024,
  parameter int NQ   = 512,
  parameter int NMAX = 16,
  parameter int QW   = $clog2(NQ)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  psd_t          in_data,
  input  logic          in_last,
  input  freq_t         f0,
  input  freq_t         band_lo,
  input  freq_t         band_hi,
  output logic          busy,
  output logic          out_valid,
  output logic [QW-1:0] out_idx,
  output psd_t          out_data,
  output logic          out_last
);
  localparam int NH   = NB / 2;
  localparam int AW   = $clog2(NB);
  localparam int HW   = $clog2(NH);
  localparam int SW   = PSD_W + 5;
  localparam int NW   = $clog2(NMAX + 1);
  localparam int CW   = $clog2(2 * NMAX + 1);

  typedef logic [16:0] recip_t;
  typedef recip_t recip_arr_t [2 * NMAX + 1];
  function automatic recip_arr_t mk_recip();
    recip_arr_t r;
    r[0] = '0;
    for (int i = 1; i <= 2 * NMAX; i++) r[i] = recip_t'((65536 + i / 2) / i);
    return r;
  endfunction
  localparam recip_arr_t RECIP = mk_recip();

  psd_t mem [NH];
  logic [HW-1:0] wptr;

  typedef enum logic [1:0] {S_LOAD, S_QSET, S_WALK} state_t;
  state_t state;

  freq_t         rf0, rlo, rhi;
  logic [QW-1:0] j;
  logic [NW-1:0] n;
  logic          side;        // 0: lower sideband, 1: upper sideband
  freq_t         base;        // n * f0
  freq_t         qf0;         // q_j * f0
  logic [SW-1:0] sum;
  logic [CW-1:0] cnt;         // in-band sidebands found for this tune bin
  logic [SW+17-1:0] avg;
  assign avg = (SW+17)'(sum) * (SW+17)'(RECIP[cnt]) >> 16;

  // candidate frequency and its place in the sampled spectrum
  freq_t              fcand;
  logic               inband;
  logic [AW+16-1:0]   r;
  logic [HW:0]        idx0;
  logic [HW-1:0]      ia, ib;
  logic [15:0]        fr;
  logic [PSD_W+17-1:0] interp;
  always_comb begin
    fcand  = side ? base + qf0 : base - qf0;
    inband = (fcand >= rlo) && (fcand <= rhi);
    r      = fcand[AW+16-1:0];
    if (r > (AW+16)'(NH) << 16) r = ((AW+16)'(NB) << 16) - r;
    idx0   = r[AW+15:16];
    fr     = r[15:0];
    if (idx0 >= (HW+1)'(NH - 1)) begin
      ia = HW'(NH - 1);
      ib = HW'(NH - 1);
    end else begin
      ia = idx0[HW-1:0];
      ib = idx0[HW-1:0] + 1'b1;
    end
    interp = ((PSD_W+17)'(mem[ia]) * (PSD_W+17)'(17'h10000 - {1'b0, fr}) +
              (PSD_W+17)'(mem[ib]) * (PSD_W+17)'(fr)) >> 16;
  end

  wire walk_end = (!side && (fcand > rhi)) || (n == NW'(NMAX) && side) || (rf0 == '0);

  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_LOAD;
      wptr      <= '0;
      rf0       <= '0;
      rlo       <= '0;
      rhi       <= '0;
      j         <= '0;
      n         <= '0;
      side      <= 1'b0;
      base      <= '0;
      qf0       <= '0;
      sum       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_LOAD: if (in_valid) begin
          wptr <= wptr + 1'b1;
          if (in_last) begin
            wptr  <= '0;
            rf0   <= f0;
            rlo   <= band_lo;
            rhi   <= band_hi;
            j     <= '0;
            state <= S_QSET;
          end
        end
        S_QSET: begin
          qf0   <= freq_t'((64'(rf0) * 64'(bin_to_tune(int'(j), NQ))) >> 16);
          base  <= rf0;
          n     <= NW'(1);
          side  <= 1'b0;
          sum   <= '0;
          cnt   <= '0;
          state <= S_WALK;
        end
        S_WALK: begin
          if (walk_end) begin
            out_valid <= 1'b1;
            out_idx   <= j;
            out_data  <= (avg > (SW+17)'({PSD_W{1'b1}})) ? {PSD_W{1'b1}} : PSD_W'(avg);
            out_last  <= (j == QW'(NQ - 1));
            if (j == QW'(NQ - 1)) begin
              state <= S_LOAD;
            end else begin
              j     <= j + 1'b1;
              state <= S_QSET;
            end
          end else begin
            if (inband) begin
              sum <= sum + SW'(interp);
              cnt <= cnt + 1'b1;
            end
            side <= ~side;
            if (side) begin
              n    <= n + 1'b1;
              base <= base + rf0;
            end
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  assign busy = (state != S_LOAD);

  initial assert ((NB & (NB - 1)) == 0 && (NQ & (NQ - 1)) == 0) else $error("NB and NQ must be powers of two");
endmodule
