// pingpong_buffer: two frame buffers ("ping" and "pong") between the
// decimated sample stream and the STFT engine.
//
// The write side fills one bank with win_len samples (the STFT window N_t,
// latched at the start of each frame), marks it full and moves on to the other
// bank, so acquisition never stops while the reader works on the full bank.
// The reader sees frame_ready with frame_len and frame_ts (the running sample
// count at the frame's first sample), reads rd_addr -> rd_data with one cycle
// latency, and pulses frame_release when done; the bank then becomes free.
// Frames are handed to the reader in the order they were filled.
// If the writer needs a bank that is still full, samples are dropped until it
// is released and the sticky overflow flag is raised; with a reader faster than
// one frame time this never happens.
//
// The two-buffer scheme is the paper's; the handshake, the drop policy and the
// time stamp are this design's choices.
module pingpong_buffer
  import tune_pkg::*;
#(
  parameter int DEPTH = 8192,
  parameter int AW    = $clog2(DEPTH),
  parameter int LW    = $clog2(DEPTH) + 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side
  input  logic          wr_valid,
  input  sample_t       wr_data,
  input  logic [LW-1:0] win_len,
  // read side
  output logic          frame_ready,
  output logic          frame_bank,
  output logic [LW-1:0] frame_len,
  output logic [31:0]   frame_ts,
  input  logic [AW-1:0] rd_addr,
  output sample_t       rd_data,
  input  logic          frame_release,
  output logic          overflow
);
  sample_t mem0 [DEPTH];
  sample_t mem1 [DEPTH];

  logic          wbank;         // bank being written
  logic [LW-1:0] wcnt;
  logic [LW-1:0] wlen;
  logic [1:0]    full;          // per-bank full flag
  logic [LW-1:0] flen [2];
  logic [31:0]   fts  [2];
  logic [31:0]   scount;        // decimated samples seen
  logic          rbank;         // bank the reader gets next

  wire wr_ok = wr_valid && !full[wbank];

  always_ff @(posedge clk) begin
    if (wr_ok) begin
      if (wbank) mem1[wcnt[AW-1:0]] <= wr_data;
      else       mem0[wcnt[AW-1:0]] <= wr_data;
    end
    rd_data <= rbank ? mem1[rd_addr] : mem0[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank    <= 1'b0;
      wcnt     <= '0;
      wlen     <= '0;
      full     <= '0;
      flen[0]  <= '0;
      flen[1]  <= '0;
      fts[0]   <= '0;
      fts[1]   <= '0;
      scount   <= '0;
      rbank    <= 1'b0;
      overflow <= 1'b0;
    end else begin
      if (wr_valid) scount <= scount + 1;
      if (wr_valid && full[wbank]) overflow <= 1'b1;
      if (wr_ok) begin
        if (wcnt == '0) begin
          wlen        <= (win_len == '0) ? LW'(1) : ((win_len > LW'(DEPTH)) ? LW'(DEPTH) : win_len);
          fts[wbank]  <= scount;
        end
        if ((wcnt != '0 && wcnt + 1'b1 >= wlen) ||
            (wcnt == '0 && (win_len <= LW'(1)))) begin
          full[wbank] <= 1'b1;
          flen[wbank] <= (wcnt == '0) ? LW'(1) : wcnt + 1'b1;
          wcnt        <= '0;
          wbank       <= ~wbank;
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end
      if (frame_release && full[rbank]) begin
        full[rbank] <= 1'b0;
        rbank       <= ~rbank;
      end
    end
  end

  assign frame_ready = full[rbank];
  assign frame_bank  = rbank;
  assign frame_len   = flen[rbank];
  assign frame_ts    = fts[rbank];
endmodule
