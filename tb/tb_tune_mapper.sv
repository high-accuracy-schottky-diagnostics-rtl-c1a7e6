// tb_tune_mapper: loads a random spectrum and compares every mapped tune bin
// with a floating-point model of the mapping: for q_j = j/(2 NQ) and every
// harmonic n, each sideband (n -+ q_j) f0 inside the band is aliased
// (F mod NB, mirrored above NB/2), linearly interpolated and averaged. Two
// f0/band settings are used; the model counts how many sidebands it found
// upright and inverted so both cases are known to be exercised.
module tb_tune_mapper;
  import tune_pkg::*;
  localparam int NB = 64, NQ = 32, NMAX = 16, QW = 5;
  logic clk = 0, rst_n = 1, in_valid = 0, in_last = 0, busy, out_valid, out_last;
  psd_t in_data = '0, out_data;
  freq_t f0 = '0, band_lo = '0, band_hi = '0;
  logic [QW-1:0] out_idx;
  int checks = 0, failures = 0;

  tune_mapper #(.NB(NB), .NQ(NQ), .NMAX(NMAX)) dut (.*);
  always #5 clk = ~clk;

  psd_t got [$];
  int   idx [$];
  int   lasts;
  always @(posedge clk) if (out_valid) begin
    got.push_back(out_data);
    idx.push_back(int'(out_idx));
    if (out_last) lasts++;
  end

  initial begin
    #2000000;
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

  real spec [NB/2];
  int n_up, n_inv;

  function automatic real model(int j, real rf0, real lo, real hi);
    real q, s;
    int c;
    q = real'(j) / real'(2 * NQ);
    s = 0.0;
    c = 0;
    for (int n = 1; n <= NMAX; n++)
      for (int sd = 0; sd < 2; sd++) begin
        real fq, r, fr;
        int i0, i1;
        if (n == NMAX && sd == 1) continue;
        fq = (sd == 0) ? (n - q) * rf0 : (n + q) * rf0;
        if (fq < lo || fq > hi) continue;
        r = fq - real'(NB) * $floor(fq / real'(NB));
        if (r > real'(NB / 2)) begin
          r = real'(NB) - r;
          n_inv++;
        end else n_up++;
        i0 = int'($floor(r));
        fr = r - real'(i0);
        if (i0 >= NB / 2 - 1) begin
          i0 = NB / 2 - 1;
          i1 = i0;
        end else i1 = i0 + 1;
        s += spec[i0] * (1.0 - fr) + spec[i1] * fr;
        c++;
      end
    return (c == 0) ? 0.0 : s / real'(c);
  endfunction

  task automatic run(input real rf0, input real lo, input real hi);
    for (int i = 0; i < NB / 2; i++) spec[i] = real'($urandom_range(1000, 1000000));
    got.delete();
    idx.delete();
    lasts = 0;
    f0 = freq_t'(longint'(rf0 * 65536.0));
    band_lo = freq_t'(longint'(lo * 65536.0));
    band_hi = freq_t'(longint'(hi * 65536.0));
    for (int i = 0; i < NB / 2; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data = psd_t'(longint'(spec[i]));
      in_last = (i == NB / 2 - 1);
    end
    @(negedge clk);
    in_valid = 0;
    in_last = 0;
    wait (lasts == 1);
    @(negedge clk);
    check(got.size() == NQ, $sformatf("%0d output bins", got.size()));
    for (int j = 0; j < NQ && j < got.size(); j++) begin
      real m, g;
      m = model(j, real'(f0) / 65536.0, real'(band_lo) / 65536.0, real'(band_hi) / 65536.0);
      g = real'(got[j]);
      check(idx[j] == j, "out_idx order");
      check((g - m) < 0.002 * m + 8.0 && (m - g) < 0.002 * m + 8.0,
            $sformatf("f0=%f bin %0d: %f expected %f", rf0, j, g, m));
    end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    n_up = 0;
    n_inv = 0;
    run(12.3, 40.0, 70.0);
    run(7.77, 100.0, 131.0);
    check(n_up > 10 && n_inv > 10, $sformatf("sidebands: %0d upright, %0d inverted", n_up, n_inv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
