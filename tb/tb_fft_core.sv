// tb_fft_core: loads random complex data, runs the FFT and compares every
// bin with a direct DFT computed in floating point in the testbench. Also
// checks the transform time, N/2 * log2(N) clocks from start to done.
module tb_fft_core;
  localparam int N = 64, DW = 28, AW = 6;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 1;
  logic ld_valid = 0, start = 0, busy, done;
  logic [AW-1:0] ld_addr = '0, rd_addr = '0;
  logic signed [DW-1:0] ld_re = '0, ld_im = '0, rd_re, rd_im;
  int checks = 0, failures = 0;

  fft_core #(.N(N), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xr [N], xi [N];

  initial begin
    int cycles;
    real er, ei, tol, maxerr;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      for (int n = 0; n < N; n++) begin
        if (trial == 0) begin
          // a pure tone in bin 5
          xr[n] = int'(10000.0 * $cos(2.0 * PI * 5 * n / N));
          xi[n] = 0;
        end else begin
          xr[n] = int'($urandom_range(0, 60000)) - 30000;
          xi[n] = (trial == 2) ? int'($urandom_range(0, 60000)) - 30000 : 0;
        end
      end
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        ld_valid = 1;
        ld_addr  = AW'(n);
        ld_re    = DW'(xr[n]);
        ld_im    = DW'(xi[n]);
      end
      @(negedge clk);
      ld_valid = 0;
      start = 1;
      @(negedge clk);
      start = 0;
      cycles = 1;
      while (!done) begin
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (cycles != N / 2 * AW + 1) begin
        failures++;
        $display("FAIL: transform took %0d cycles, expected %0d", cycles, N / 2 * AW + 1);
      end
      maxerr = 0.0;
      for (int k = 0; k < N; k++) begin
        er = 0.0;
        ei = 0.0;
        for (int n = 0; n < N; n++) begin
          er += xr[n] * $cos(2.0 * PI * k * n / N) + xi[n] * $sin(2.0 * PI * k * n / N);
          ei += xi[n] * $cos(2.0 * PI * k * n / N) - xr[n] * $sin(2.0 * PI * k * n / N);
        end
        rd_addr = AW'(k);
        #1;
        tol = 40.0;
        checks++;
        if ((real'(rd_re) - er) > tol || (er - real'(rd_re)) > tol ||
            (real'(rd_im) - ei) > tol || (ei - real'(rd_im)) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL: trial %0d bin %0d got (%0d,%0d) expected (%f,%f)", trial, k, rd_re, rd_im, er, ei);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
