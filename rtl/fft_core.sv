// fft_core: in-place radix-2 decimation-in-time FFT of N complex points.
//
// Samples are written in natural order through the load port and stored at
// the bit-reversed address, so the butterfly passes read and write in place.
// After start, log2(N) stages of N/2 butterflies run at one butterfly per
// clock: for stage s (span 2^s) butterfly k combines elements
// i = (k >> s) * 2^(s+1) + (k mod 2^s) and i + 2^s with twiddle
// W^((k mod 2^s) * N / 2^(s+1)), W = exp(-j 2 pi / N). done pulses for one
// cycle after the last butterfly; the result is then read in natural order on
// the combinational read port. A transform takes N/2 * log2(N) clocks.
//
// Twiddles are Q1.14 values computed at elaboration. There is no scaling: the
// data path is DW bits wide, enough for a 16-bit input to grow by log2(N)
// bits. The paper only states that the PSD of each batch is computed; the FFT
// architecture is this design's choice.
module fft_core #(
  parameter int N  = 1024,
  parameter int DW = 28,
  parameter int AW = $clog2(N)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ld_valid,
  input  logic [AW-1:0]        ld_addr,
  input  logic signed [DW-1:0] ld_re,
  input  logic signed [DW-1:0] ld_im,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  input  logic [AW-1:0]        rd_addr,
  output logic signed [DW-1:0] rd_re,
  output logic signed [DW-1:0] rd_im
);
  localparam int TW = 16;
  typedef logic signed [TW-1:0] tw_t;
  typedef tw_t tw_arr_t [N/2];

  function automatic tw_arr_t mk_cos();
    tw_arr_t t;
    for (int k = 0; k < N/2; k++)
      t[k] = tw_t'($rtoi($floor($cos(2.0 * 3.14159265358979323846 * k / N) * 16384.0 + 0.5)));
    return t;
  endfunction
  function automatic tw_arr_t mk_sin();
    tw_arr_t t;
    for (int k = 0; k < N/2; k++)
      t[k] = tw_t'($rtoi($floor(-$sin(2.0 * 3.14159265358979323846 * k / N) * 16384.0 + 0.5)));
    return t;
  endfunction
  localparam tw_arr_t WR = mk_cos();
  localparam tw_arr_t WI = mk_sin();

  function automatic logic [AW-1:0] bitrev(input logic [AW-1:0] a);
    for (int b = 0; b < AW; b++) bitrev[b] = a[AW-1-b];
  endfunction

  logic signed [DW-1:0] mre [N];
  logic signed [DW-1:0] mim [N];

  logic [$clog2(AW+1)-1:0] stage;
  logic [AW-2:0]           k;

  // butterfly addressing
  logic [AW-1:0] pos, idx_i, idx_j;
  logic [AW-2:0] twk;
  always_comb begin
    pos   = AW'(k) & ((AW'(1) << stage) - 1'b1);
    idx_i = ((AW'(k) >> stage) << (stage + 1)) | pos;
    idx_j = idx_i | (AW'(1) << stage);
    twk   = (AW-1)'(pos << (AW - 1 - int'(stage)));
  end

  localparam int PW = DW + TW + 1;
  logic signed [PW-1:0] pr, pi;
  logic signed [DW-1:0] tr, ti;
  always_comb begin
    pr = PW'(mre[idx_j]) * PW'(WR[twk]) - PW'(mim[idx_j]) * PW'(WI[twk]);
    pi = PW'(mre[idx_j]) * PW'(WI[twk]) + PW'(mim[idx_j]) * PW'(WR[twk]);
    // round to nearest, back to Q0 data
    tr = DW'((pr + PW'(8192)) >>> 14);
    ti = DW'((pi + PW'(8192)) >>> 14);
  end

  always_ff @(posedge clk) begin
    if (ld_valid && !busy) begin
      mre[bitrev(ld_addr)] <= ld_re;
      mim[bitrev(ld_addr)] <= ld_im;
    end else if (busy) begin
      mre[idx_i] <= mre[idx_i] + tr;
      mim[idx_i] <= mim[idx_i] + ti;
      mre[idx_j] <= mre[idx_i] - tr;
      mim[idx_j] <= mim[idx_i] - ti;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      stage <= '0;
      k     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          stage <= '0;
          k     <= '0;
        end
      end else begin
        k <= k + 1'b1;
        if (&k) begin
          if (stage == $bits(stage)'(AW - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            stage <= stage + 1'b1;
          end
        end
      end
    end
  end

  assign rd_re = mre[rd_addr];
  assign rd_im = mim[rd_addr];
endmodule
