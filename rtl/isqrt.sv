// isqrt -- sequential integer square root, one result bit per clock.
//
// Pulse start with an unsigned W-bit radicand (W even); done pulses W/2+1
// cycles later with root = floor(sqrt(radicand)).  Digit-by-digit method:
// two radicand bits are brought down per step and the trial subtrahend is
// 4*root+1.  Used for the standard deviation of the LayerNorm unit.
module isqrt #(
  parameter int W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   radicand,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   x;
  logic [W/2+1:0] rem;
  logic [W/2-1:0] res;
  logic [$clog2(W)-1:0] n;
  logic [W/2+1:0] rem_sh, trial;

  assign rem_sh = {rem[W/2-1:0], x[W-1:W-2]};
  assign trial  = {res, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; x <= '0; rem <= '0; res <= '0; n <= '0; root <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1; x <= radicand; rem <= '0; res <= '0; n <= '0;
        end
      end else if (n == $clog2(W)'(W / 2)) begin
        busy <= 1'b0; done <= 1'b1; root <= res;
      end else begin
        n <= n + 1'b1;
        x <= {x[W-3:0], 2'b00};
        if (rem_sh >= trial) begin
          rem <= rem_sh - trial;
          res <= {res[W/2-2:0], 1'b1};
        end else begin
          rem <= rem_sh;
          res <= {res[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
