// stft_psd: averaged power spectrum of one STFT window.
//
// A window of N_t = win_len samples is cut into ceil(N_t / NB) batches of NB
// samples; the last batch is zero-padded. For each batch the engine streams
// the samples from the frame buffer into fft_core, runs the transform, and adds
// the power |X_k|^2 >> PWR_SHIFT of bins k = 0..NB/2-1 into an accumulator
// array. After the last batch the accumulator is multiplied by
// round(65536 / nbatch) >> 16 (the average P_bar) and streamed out, one bin
// per clock, with psd_last on bin NB/2-1.
//
// Interface: start (level or pulse, sampled when idle) begins a frame;
// buf_addr/buf_data read the frame buffer with one cycle latency; release
// pulses once all samples have been read so the buffer can refill.
// Timing per batch: NB+1 load cycles, NB/2*log2(NB) FFT cycles, NB/2 power
// cycles; then NB/2 output cycles per frame.
//
// Batching and averaging follow the paper. The zero padding of the last
// batch, the lack of a window function and the fixed-point scaling are this
// design's choices.
module stft_psd
  import tune_pkg::*;
#(
  parameter int NB         = 1024,
  parameter int NBATCH_MAX = 8,
  parameter int PWR_SHIFT  = 8,
  parameter int DW         = 28,
  parameter int BUF_AW     = $clog2(NB * NBATCH_MAX),
  parameter int LW         = BUF_AW + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [LW-1:0]     win_len,
  output logic [BUF_AW-1:0] buf_addr,
  input  sample_t           buf_data,
  output logic              release_buf,
  output logic              busy,
  output logic              psd_valid,
  output psd_t              psd_data,
  output logic              psd_last
);
  localparam int AW    = $clog2(NB);
  localparam int HALF  = NB / 2;
  localparam int ACC_W = 2 * DW + $clog2(NBATCH_MAX) + 1;
  localparam int BW    = $clog2(NBATCH_MAX + 1);

  typedef logic [16:0] recip_t;
  typedef recip_t recip_arr_t [NBATCH_MAX + 1];
  function automatic recip_arr_t mk_recip();
    recip_arr_t r;
    r[0] = 17'd65536;
    for (int i = 1; i <= NBATCH_MAX; i++) r[i] = recip_t'((65536 + i / 2) / i);
    return r;
  endfunction
  localparam recip_arr_t RECIP = mk_recip();

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_FFT, S_PWR, S_OUT} state_t;
  state_t state;

  logic [LW-1:0]  nt;
  logic [BW-1:0]  nbatch, batch;
  logic [AW:0]    cnt;
  logic           ld_pend, ld_pad;
  logic [AW-1:0]  ld_addr_d;
  logic           fft_start, fft_done;
  logic [AW-1:0]  rd_addr;
  logic signed [DW-1:0] rd_re, rd_im;
  logic [ACC_W-1:0] acc [HALF];

  fft_core #(.N(NB), .DW(DW)) u_fft (
    .clk, .rst_n,
    .ld_valid (ld_pend),
    .ld_addr  (ld_addr_d),
    .ld_re    (ld_pad ? DW'(0) : DW'(buf_data)),
    .ld_im    (DW'(0)),
    .start    (fft_start),
    .busy     (),
    .done     (fft_done),
    .rd_addr  (rd_addr),
    .rd_re    (rd_re),
    .rd_im    (rd_im)
  );

  logic [ACC_W-1:0] pwr;
  logic [ACC_W+17-1:0] scaled;
  always_comb begin
    pwr     = ACC_W'((2*DW)'(rd_re * rd_re) + (2*DW)'(rd_im * rd_im)) >> PWR_SHIFT;
    rd_addr = cnt[AW-1:0];
    scaled  = (ACC_W+17)'(acc[cnt[AW-2:0]]) * (ACC_W+17)'(RECIP[nbatch]);
  end

  wire [LW-1:0] sample_idx = LW'(batch) * LW'(NB) + LW'(cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      nt          <= '0;
      nbatch      <= '0;
      batch       <= '0;
      cnt         <= '0;
      ld_pend     <= 1'b0;
      ld_pad      <= 1'b0;
      ld_addr_d   <= '0;
      fft_start   <= 1'b0;
      release_buf <= 1'b0;
      psd_valid   <= 1'b0;
      psd_data    <= '0;
      psd_last    <= 1'b0;
    end else begin
      fft_start   <= 1'b0;
      release_buf <= 1'b0;
      psd_valid   <= 1'b0;
      psd_last    <= 1'b0;
      ld_pend     <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          nt     <= (win_len == '0) ? LW'(1) : win_len;
          nbatch <= BW'((((win_len == '0) ? LW'(1) : win_len) + LW'(NB - 1)) / LW'(NB));
          batch  <= '0;
          cnt    <= '0;
          state  <= S_LOAD;
        end
        S_LOAD: begin
          if (cnt < (AW+1)'(NB)) begin
            ld_pend   <= 1'b1;
            ld_pad    <= (sample_idx >= nt);
            ld_addr_d <= cnt[AW-1:0];
            cnt       <= cnt + 1'b1;
          end else begin
            // last sample written this cycle (ld_pend from previous cycle)
            fft_start <= 1'b1;
            if (batch == nbatch - 1'b1) release_buf <= 1'b1;
            state <= S_FFT;
          end
        end
        S_FFT: if (fft_done) begin
          cnt   <= '0;
          state <= S_PWR;
        end
        S_PWR: begin
          acc[cnt[AW-2:0]] <= (batch == '0) ? pwr : acc[cnt[AW-2:0]] + pwr;
          cnt <= cnt + 1'b1;
          if (cnt == (AW+1)'(HALF - 1)) begin
            cnt <= '0;
            if (batch == nbatch - 1'b1) begin
              state <= S_OUT;
            end else begin
              batch <= batch + 1'b1;
              state <= S_LOAD;
            end
          end
        end
        S_OUT: begin
          psd_valid <= 1'b1;
          psd_data  <= ((scaled >> 16) > (ACC_W+17)'({PSD_W{1'b1}})) ? {PSD_W{1'b1}} : PSD_W'(scaled >> 16);
          psd_last  <= (cnt == (AW+1)'(HALF - 1));
          cnt       <= cnt + 1'b1;
          if (cnt == (AW+1)'(HALF - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The frame buffer registers its read data, so the sample addressed in one
  // cycle arrives in the next, together with ld_pend, ld_pad and ld_addr_d.
  assign buf_addr = sample_idx[BUF_AW-1:0];

  assign busy = (state != S_IDLE);

  initial assert (NBATCH_MAX >= 1 && (NB & (NB - 1)) == 0) else $error("NB must be a power of two");
endmodule
