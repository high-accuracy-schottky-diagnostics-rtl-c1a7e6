// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// start loads num and den; W clocks later done pulses for one cycle with
// quo = num / den and rem = num % den. A zero divisor gives quo = all ones.
// Used by kalman_fusion (weights and gain) and post_proc (harmonic number).
module seq_div #(
  parameter int W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quo,
  output logic [W-1:0] rem
);
  localparam int CW = $clog2(W + 1);
  logic [W-1:0]  d;
  logic [W:0]    r;
  logic [W-1:0]  q;
  logic [CW-1:0] cnt;

  wire [W:0] r_sh  = {r[W-1:0], q[W-1]};
  wire [W:0] r_sub = r_sh - {1'b0, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d    <= '0;
      r    <= '0;
      q    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      rem  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          d    <= den;
          r    <= '0;
          q    <= num;
          cnt  <= CW'(W);
          busy <= 1'b1;
        end
      end else begin
        if (!r_sub[W]) begin
          r <= r_sub;
          q <= {q[W-2:0], 1'b1};
        end else begin
          r <= r_sh;
          q <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= (d == '0) ? '1 : (!r_sub[W] ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0});
          rem  <= !r_sub[W] ? r_sub[W-1:0] : r_sh[W-1:0];
        end
      end
    end
  end
endmodule
