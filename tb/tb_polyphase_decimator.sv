// tb_polyphase_decimator: checks the polyphase decimator against a direct-form
// FIR evaluated in the testbench, y[k] = sum_i h[i] x[(k+1)D - 1 - i], with
// the same rounding (>>> 17) and saturation. Also checks that exactly one
// output appears per D inputs, and that a tone at the band centre passes with
// about unit gain while a tone far outside the band is strongly attenuated.
module tb_polyphase_decimator;
  import tune_pkg::*;
  localparam int D = 40, TAPS = 160, NIN = 4000;
  localparam coef_arr_t H = bandpass_coefs(TAPS, 36.0/250.0, 3.0/250.0);

  logic clk = 0, rst_n = 1, in_valid = 0, out_valid;
  sample_t in_data = '0, out_data;
  int checks = 0, failures = 0;

  polyphase_decimator dut (.*);
  always #5 clk = ~clk;

  int     xs [NIN];
  int     outs [$];
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) outs.push_back(int'(out_data));

  function automatic int ref_out(int k);
    longint acc = 0;
    longint s;
    for (int i = 0; i < TAPS; i++) begin
      int t = (k + 1) * D - 1 - i;
      if (t >= 0) acc += longint'(H[i]) * longint'(xs[t]);
    end
    s = acc >>> 17;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    return int'(s);
  endfunction

  task automatic run(input int mode, input real fnorm, input real amp);
    outs.delete();
    for (int t = 0; t < NIN; t++) begin
      if (mode == 0) xs[t] = int'($urandom_range(0, 40000)) - 20000;
      else           xs[t] = int'(amp * $sin(2.0 * PI * fnorm * t));
    end
    @(negedge clk);
    rst_n = 1;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    outs.delete();
    for (int t = 0; t < NIN; t++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = sample_t'(xs[t]);
      // a gap every few samples: the decimator must count inputs, not clocks
      if (t % 7 == 3) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(posedge clk);
  endtask

  initial begin
    int maxabs;
    // 1. bit-exact against the direct form, random input
    run(0, 0.0, 0.0);
    checks++;
    if (outs.size() != NIN / D) begin
      failures++;
      $display("FAIL: %0d outputs for %0d inputs", outs.size(), NIN);
    end
    for (int k = 0; k < outs.size(); k++) begin
      checks++;
      if (outs[k] != ref_out(k)) begin
        failures++;
        if (failures < 10) $display("FAIL: y[%0d]=%0d expected %0d", k, outs[k], ref_out(k));
      end
    end
    // 2. in-band tone (36 MHz at 250 MS/s) passes with gain close to 1
    run(1, 36.0 / 250.0, 10000.0);
    maxabs = 0;
    for (int k = 10; k < outs.size(); k++) if ((outs[k] < 0 ? -outs[k] : outs[k]) > maxabs) maxabs = (outs[k] < 0 ? -outs[k] : outs[k]);
    checks++;
    if (maxabs < 8000 || maxabs > 11000) begin
      failures++;
      $display("FAIL: in-band peak %0d", maxabs);
    end
    // 3. out-of-band tone (10 MHz) is attenuated
    run(1, 10.0 / 250.0, 10000.0);
    maxabs = 0;
    for (int k = 10; k < outs.size(); k++) if ((outs[k] < 0 ? -outs[k] : outs[k]) > maxabs) maxabs = (outs[k] < 0 ? -outs[k] : outs[k]);
    checks++;
    if (maxabs > 300) begin
      failures++;
      $display("FAIL: out-of-band peak %0d", maxabs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
