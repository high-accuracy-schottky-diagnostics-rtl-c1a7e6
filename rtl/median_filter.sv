// median_filter: online sliding-window median of the last N tune values.
//
// Each new sample replaces the oldest entry of an N-entry window (N odd).
// The median is found by rank counting: entry i is the median when fewer than
// (N+1)/2 entries are smaller than it and at least (N+1)/2 are smaller or
// equal, counting equal entries by position so exactly one entry qualifies.
// After reset or clear the first sample fills the whole window, so the output
// starts at the first value instead of a median of stale data.
//
// Interface: in_valid/in_data; out_valid pulses one cycle later with the
// median of the window that includes the new sample. The filter suppresses
// single outliers ("shot noise") at the cost of (N-1)/2 samples of delay on a
// step. The paper uses it on both the EMA tune and the WLC tune; the window
// size N and the start-up fill are this design's choices.
module median_filter
  import tune_pkg::*;
#(
  parameter int N = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  in_valid,
  input  tune_t in_data,
  output logic  out_valid,
  output tune_t out_data
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;
  tune_t          win [N];
  logic [PW-1:0]  wp;
  logic           empty;

  // window as it is after inserting in_data
  tune_t nxt [N];
  always_comb begin
    for (int i = 0; i < N; i++)
      nxt[i] = (empty || int'(wp) == i) ? in_data : win[i];
  end

  tune_t med;
  always_comb begin
    med = nxt[0];
    for (int i = 0; i < N; i++) begin
      int below;
      below = 0;
      for (int m = 0; m < N; m++)
        if (nxt[m] < nxt[i] || (nxt[m] == nxt[i] && m < i)) below++;
      if (below == (N - 1) / 2) med = nxt[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) win[i] <= '0;
      wp        <= '0;
      empty     <= 1'b1;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        empty <= 1'b1;
        wp    <= '0;
      end else if (in_valid) begin
        for (int i = 0; i < N; i++) win[i] <= nxt[i];
        wp        <= (wp == PW'(N - 1)) ? '0 : wp + 1'b1;
        empty     <= 1'b0;
        out_valid <= 1'b1;
        out_data  <= med;
      end
    end
  end

  initial assert (N % 2 == 1) else $error("N must be odd");
endmodule
