// seq_divider -- unsigned restoring divider, one quotient bit per clock.
//
// Pulse start with dividend and divisor; done pulses W+1 cycles later with
// quotient = dividend / divisor (all ones when divisor is 0).  busy is high in
// between; start is ignored while busy.  Used once per row by the LayerNorm and
// softmax units, so its latency is hidden behind the row being streamed.
module seq_divider #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient
);
  logic [W-1:0] q, d;
  logic [W:0]   r;
  logic [$clog2(W+1)-1:0] n;
  logic [W:0]   r_sh;

  assign r_sh = {r[W-1:0], q[W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; q <= '0; d <= '0; r <= '0; n <= '0; quotient <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; q <= dividend; d <= divisor; r <= '0; n <= '0;
        end
      end else if (n == W[$clog2(W+1)-1:0]) begin
        busy <= 1'b0; done <= 1'b1;
        quotient <= (d == '0) ? '1 : q;
      end else begin
        n <= n + 1'b1;
        if (r_sh >= {1'b0, d}) begin
          r <= r_sh - {1'b0, d};
          q <= {q[W-2:0], 1'b1};
        end else begin
          r <= r_sh;
          q <= {q[W-2:0], 1'b0};
        end
      end
    end
  end
endmodule
