// tb_median_filter: random tune values with occasional large outliers are
// fed to the filter; each output is compared with the median of the last N
// inputs computed by sorting in the testbench (the window starts filled with
// the first value). Also checks that a single outlier never reaches the
// output and that clear restarts the window.
module tb_median_filter;
  import tune_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 1, clear = 0, in_valid = 0, out_valid;
  tune_t in_data = '0, out_data;
  int checks = 0, failures = 0;

  median_filter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

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

  int hist [$];
  function automatic int ref_median();
    int w [$];
    for (int i = 0; i < N; i++) w.push_back(hist[(hist.size() - N + i)]);
    w.sort();
    return w[N / 2];
  endfunction

  task automatic push(input int v);
    @(negedge clk);
    in_valid = 1;
    in_data = tune_t'(v);
    if (hist.size() == 0) for (int i = 0; i < N; i++) hist.push_back(v);
    else hist.push_back(v);
    @(negedge clk);
    in_valid = 0;
    check(out_valid, "out_valid");
    check(int'(out_data) == ref_median(), $sformatf("median %0d expected %0d", out_data, ref_median()));
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int v;
      v = 20972 + int'($urandom_range(0, 60)) - 30;
      if (t % 9 == 4) v = int'($urandom_range(0, 32767));   // shot noise
      push(v);
      check(out_data > tune_t'(20900) && out_data < tune_t'(21050), "outlier reached the output");
      if (t % 3 == 0) repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // clear, then duplicates and a step
    @(negedge clk);
    clear = 1;
    @(negedge clk);
    clear = 0;
    hist.delete();
    push(100);
    for (int t = 0; t < 8; t++) push((t < 3) ? 100 : 5000);
    check(int'(out_data) == 5000, "step passes after (N+1)/2 samples");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
