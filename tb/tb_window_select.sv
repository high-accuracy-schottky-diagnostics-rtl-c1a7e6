// tb_window_select: checks the automatic window length against a model of
// N_t = clamp(floor(tol * dt / |df0|), nt_min, nt_max).
//
// Sequence: the first sample alone must give nt_max; then 300 random pairs
// of f0 step (both signs, including zero) and time step are applied, each
// followed by a check of nt against the model; between samples nt_max and
// nt_min are changed at random and the clamp must follow at once. Finally
// the paper's operating point: a tolerable change of 10 kHz and f0 moving
// at 10 MHz/s must give a 1 ms window (6250 samples at 6.25 MS/s).
module tb_window_select;
  import tune_pkg::*;
  localparam int  LW = 14;
  localparam real DF = 250.0e6 / 40.0 / 1024.0;

  logic          clk = 0, rst_n = 1, sample = 0, nt_valid;
  freq_t         f0 = '0, tol = '0;
  logic [31:0]   t_end = '0;
  logic [LW-1:0] nt_min = 14'd1024, nt_max = 14'd8192, nt;
  int checks = 0, failures = 0;

  window_select #(.LW(LW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
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

  function automatic longint model(longint tl, longint dt, longint df,
                                   longint lo, longint hi);
    longint q;
    if (dt > 64'hFFFFFF) dt = 64'hFFFFFF;
    q = (df == 0) ? 64'hFFFFFFFF : (tl * dt) / df;
    if (q > hi) return hi;
    if (q < lo) return lo;
    return q;
  endfunction

  int n_valid = 0;
  always @(posedge clk) if (nt_valid) n_valid++;

  task automatic pulse(input freq_t f, input logic [31:0] t);
    @(negedge clk);
    f0 = f; t_end = t; sample = 1;
    @(negedge clk);
    sample = 0;
    repeat (70) @(negedge clk);
  endtask

  initial begin
    freq_t  f_prev;
    logic [31:0] t_prev;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    tol    = freq_t'($urandom_range(20000, 200000));
    f_prev = freq_t'($urandom_range(1000000, 60000000));
    t_prev = $urandom();
    pulse(f_prev, t_prev);
    check(nt == nt_max, "first sample gives nt_max");

    for (int i = 0; i < 300; i++) begin
      longint df, dt, exp_nt;
      freq_t f;
      logic [31:0] t;
      case ($urandom_range(0, 3))
        0: df = 0;
        1: df = longint'($urandom_range(1, 64));
        2: df = longint'($urandom_range(1, 20000));
        default: df = longint'($urandom_range(1, 2000000));
      endcase
      dt = (i % 50 == 7) ? longint'($urandom_range(20000000, 40000000))
                         : longint'($urandom_range(64, 40000));
      f = ($urandom_range(0, 1) != 0) ? f_prev + freq_t'(df) : f_prev - freq_t'(df);
      t = t_prev + 32'(dt);
      pulse(f, t);
      exp_nt = model(longint'(tol), dt, df, longint'(nt_min), longint'(nt_max));
      check(longint'(nt) == exp_nt,
            $sformatf("df=%0d dt=%0d tol=%0d: nt=%0d, expected %0d", df, dt, tol, nt, exp_nt));
      // the clamp limits act immediately
      nt_min = 14'($urandom_range(64, 2048));
      nt_max = 14'($urandom_range(2048, 16383));
      #1;
      exp_nt = model(longint'(tol), dt, df, longint'(nt_min), longint'(nt_max));
      check(longint'(nt) == exp_nt, "clamp follows new limits");
      f_prev = f;
      t_prev = t;
    end

    // operating point of the paper
    nt_min = 14'd1024;
    nt_max = 14'd8192;
    tol    = freq_t'(longint'(10.0e3 / DF * 65536.0));
    pulse(f_prev, t_prev);
    pulse(f_prev + freq_t'(longint'(10.0e6 * 1.0e-3 / DF * 65536.0)), t_prev + 32'd6250);
    check(nt >= 14'd6249 && nt <= 14'd6251, $sformatf("10 MHz/s gives %0d samples, expected 6250", nt));
    check(n_valid == 302, $sformatf("%0d new values, expected 302", n_valid));
    $display("10 kHz tolerance at 10 MHz/s: %0d samples", nt);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
