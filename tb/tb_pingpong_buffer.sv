// tb_pingpong_buffer: fills frames of a counting sequence, reads them back
// and checks data, frame length, time stamp and the alternation of the two
// banks; then withholds frame_release to check that the writer stops and
// raises overflow instead of overwriting a full bank.
module tb_pingpong_buffer;
  import tune_pkg::*;
  localparam int DEPTH = 256, AW = 8, LW = 9;
  logic clk = 0, rst_n = 1;
  logic wr_valid = 0;
  sample_t wr_data = '0;
  logic [LW-1:0] win_len = LW'(100);
  logic frame_ready, frame_bank, frame_release = 0, overflow;
  logic [LW-1:0] frame_len;
  logic [31:0] frame_ts;
  logic [AW-1:0] rd_addr = '0;
  sample_t rd_data;
  int checks = 0, failures = 0;
  int wcount = 0;
  bit wr_en = 0;

  pingpong_buffer #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer: one sample every 3 clocks, value = running sample count
  always @(negedge clk) begin
    wr_valid <= 1'b0;
    if (wr_en && ($urandom_range(0, 2) == 0)) begin
      wr_valid <= 1'b1;
      wr_data  <= sample_t'(wcount);
      wcount++;
    end
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    int expect_start;
    bit last_bank;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr_en = 1;
    expect_start = 0;
    last_bank = 1;
    for (int f = 0; f < 6; f++) begin
      if (f == 3) win_len = LW'(37);   // a different window length
      wait (frame_ready);
      @(negedge clk);
      check(frame_bank != last_bank, $sformatf("frame %0d bank did not alternate", f));
      last_bank = frame_bank;
      check(frame_ts == 32'(expect_start), $sformatf("frame %0d ts %0d expected %0d", f, frame_ts, expect_start));
      check(frame_len == ((f >= 4) ? LW'(37) : LW'(100)) || (f == 3 && (frame_len == LW'(100) || frame_len == LW'(37))),
            $sformatf("frame %0d len %0d", f, frame_len));
      for (int a = 0; a < int'(frame_len); a++) begin
        rd_addr = AW'(a);
        @(negedge clk);
        check(int'(rd_data) == expect_start + a, $sformatf("frame %0d addr %0d data %0d", f, a, rd_data));
      end
      expect_start += int'(frame_len);
      frame_release = 1;
      @(negedge clk);
      frame_release = 0;
    end
    check(!overflow, "overflow while the reader kept up");
    // reader stalls: both banks fill, then samples are dropped
    wait (frame_ready);
    repeat (400) @(negedge clk);
    check(overflow, "no overflow with both banks full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
