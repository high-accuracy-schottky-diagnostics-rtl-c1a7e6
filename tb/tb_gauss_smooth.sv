// tb_gauss_smooth: checks the kernel (Gaussian, sigma = (N_f-1)/3, unit
// gain) against floating point, then streams two random spectra back to back
// and compares every output bin with a zero-padded convolution computed in
// the testbench. Also checks N_f = max(3, 2*floor(N_T/2)+1) for a few N_T and
// the stream length and out_last position.
module tb_gauss_smooth;
  import tune_pkg::*;
  localparam int NT = 7;
  localparam int NF = nf_from_nt(NT);
  localparam int H = (NF - 1) / 2;
  localparam int L = 40;
  logic clk = 0, rst_n = 1, in_valid = 0, in_last = 0, out_valid, out_last;
  psd_t in_data = '0, out_data;
  int checks = 0, failures = 0;

  gauss_smooth #(.NT(NT)) dut (.*);
  always #5 clk = ~clk;

  psd_t got [$];
  int lastpos [$];
  always @(posedge clk) if (out_valid) begin
    got.push_back(out_data);
    if (out_last) lastpos.push_back(got.size() - 1);
  end

  initial begin
    #1000000;
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

  longint x [2][L];
  initial begin
    gcoef_arr_t g;
    real sigma, s;
    int sum;
    check(nf_from_nt(0) == 3 && nf_from_nt(4) == 5 && nf_from_nt(5) == 5 && nf_from_nt(8) == 9 && NF == 7, "N_f rule");
    // kernel
    g = gauss_coefs(NF);
    sigma = real'(NF - 1) / 3.0;
    s = 0.0;
    for (int i = 0; i < NF; i++) s += $exp(-((i - H) ** 2) / (2.0 * sigma * sigma));
    sum = 0;
    for (int i = 0; i < NF; i++) begin
      real e;
      e = $exp(-((i - H) ** 2) / (2.0 * sigma * sigma)) / s * 65536.0;
      check((real'(g[i]) - e) < 2.0 && (e - real'(g[i])) < 2.0, $sformatf("coef %0d = %0d expected %f", i, g[i], e));
      sum += int'(g[i]);
    end
    check(sum == 65536, "kernel gain");

    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    got.delete();
    lastpos.delete();
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < L; i++) x[f][i] = longint'($urandom_range(0, 1000000)) * ((i == 17) ? 50 : 1);
    for (int f = 0; f < 2; f++) begin
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        in_valid = 1;
        in_data = psd_t'(x[f][i]);
        in_last = (i == L - 1);
      end
      @(negedge clk);
      in_valid = 0;
      in_last = 0;
      repeat (H) @(negedge clk);   // required gap
    end
    repeat (5) @(negedge clk);
    check(got.size() == 2 * L, $sformatf("%0d outputs", got.size()));
    check(lastpos.size() == 2 && lastpos[0] == L - 1 && lastpos[1] == 2 * L - 1, "out_last position");
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < L; i++) begin
        longint acc;
        acc = 0;
        for (int kk = 0; kk < NF; kk++) begin
          int t;
          t = i + kk - H;
          if (t >= 0 && t < L) acc += longint'(g[kk]) * x[f][t];
        end
        acc = acc >>> 16;
        if (f * L + i < got.size())
          check(longint'(got[f * L + i]) == acc, $sformatf("spectrum %0d bin %0d: %0d expected %0d", f, i, got[f * L + i], acc));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
