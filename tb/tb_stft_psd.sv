// tb_stft_psd: a frame buffer model feeds windows of different lengths
// (a whole number of batches, and one with a zero-padded partial batch) to
// stft_psd. Every output bin is compared with the average over batches of
// |DFT|^2 / 2^PWR_SHIFT computed in floating point, and the stream shape
// (NB/2 bins, psd_last on the last one, one release per frame) is checked.
module tb_stft_psd;
  import tune_pkg::*;
  localparam int NB = 64, NBM = 4, BUF_AW = 8, LW = 9, PWR_SHIFT = 8;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1, start = 0;
  logic [LW-1:0] win_len = '0;
  logic [BUF_AW-1:0] buf_addr;
  sample_t buf_data;
  logic release_buf, busy, psd_valid, psd_last;
  psd_t psd_data;
  int checks = 0, failures = 0;

  stft_psd #(.NB(NB), .NBATCH_MAX(NBM), .PWR_SHIFT(PWR_SHIFT)) dut (.*);
  always #5 clk = ~clk;

  int mem [256];
  always @(posedge clk) buf_data <= sample_t'(mem[buf_addr]);

  psd_t got [$];
  int   lasts, releases;
  always @(posedge clk) begin
    if (psd_valid) got.push_back(psd_data);
    if (psd_valid && psd_last) lasts++;
    if (release_buf) releases++;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", msg);
    end
  endtask

  task automatic frame(input int nt);
    int nbat;
    real ref_p [NB/2];
    for (int n = 0; n < 256; n++)
      mem[n] = int'(8000.0 * $cos(2.0 * PI * 10.3 * n / NB)) + int'($urandom_range(0, 8000)) - 4000;
    got.delete();
    lasts = 0;
    releases = 0;
    nbat = (nt + NB - 1) / NB;
    for (int k = 0; k < NB/2; k++) ref_p[k] = 0.0;
    for (int b = 0; b < nbat; b++)
      for (int k = 0; k < NB/2; k++) begin
        real re, im;
        re = 0.0;
        im = 0.0;
        for (int n = 0; n < NB; n++) begin
          real x;
          x = (b * NB + n < nt) ? real'(mem[b * NB + n]) : 0.0;
          re += x * $cos(2.0 * PI * k * n / NB);
          im -= x * $sin(2.0 * PI * k * n / NB);
        end
        ref_p[k] += (re * re + im * im) / real'(1 << PWR_SHIFT) / real'(nbat);
      end
    @(negedge clk);
    win_len = LW'(nt);
    start = 1;
    @(negedge clk);
    start = 0;
    wait (lasts == 1);
    repeat (3) @(negedge clk);
    check(got.size() == NB / 2, $sformatf("nt=%0d: %0d bins", nt, got.size()));
    check(releases == 1, $sformatf("nt=%0d: %0d releases", nt, releases));
    for (int k = 0; k < NB/2 && k < got.size(); k++) begin
      real g, tol;
      g = real'(got[k]);
      tol = 0.01 * ref_p[k] + 2000.0;
      check((g - ref_p[k]) < tol && (ref_p[k] - g) < tol,
            $sformatf("nt=%0d bin %0d: %f expected %f", nt, k, g, ref_p[k]));
    end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(128);   // two full batches
    frame(150);   // three batches, the last zero-padded
    frame(40);    // one partial batch
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
