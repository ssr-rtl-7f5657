// aie_mm_tile -- functional model, in synthesizable RTL, of one AIE tile running
// the matrix-multiply kernel of an HMM unit.
//
// The tile holds a W1 x W2 INT8 weight block in its local memory.  Each LHS
// AXI4-Stream beat carries one INT8 activation x[k]; the tile adds x[k]*W[k][n]
// into all W2 accumulators at once.  After w1_len beats (one row segment) the
// partial row is added to the partial row arriving on the cascade input from the
// previous tile of the chain (Fig. 6 draws these cascades in red) and handed to
// the next tile, or, for the last tile, to the output serializer.
// Timing: w1_len cycles per row segment plus one cycle for the cascade hand-off
// (the hand-off waits for the cascade register to be empty, so the ready path
// never runs combinationally along the chain);
// the LHS stream is back-pressured (tready low) while the tile waits to hand off.
// The paper specifies the tile only by its function; the one-element-per-beat
// stream and the lock-step cascade are choices of this model.
module aie_mm_tile
  import ssr_pkg::*;
#(
  parameter int W1    = 8,     // max rows of the weight block (K per tile)
  parameter int W2    = 8,     // max columns of the weight block (N per tile)
  parameter bit FIRST = 1'b1   // first tile of a cascade chain: no cascade input
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(W1+1)-1:0] w1_len,
  // weight (local memory) write port
  input  logic                    wt_we,
  input  logic [$clog2(W1)-1:0]   wt_k,
  input  logic [$clog2(W2)-1:0]   wt_n,
  input  i8_t                     wt_data,
  // LHS activation stream
  input  i8_t                     lhs_tdata,
  input  logic                    lhs_tvalid,
  input  logic                    lhs_tlast,
  output logic                    lhs_tready,
  // cascade in / out
  input  acc_t                    casc_in [W2],
  input  logic                    casc_in_valid,
  output logic                    casc_in_ready,
  output acc_t                    casc_out [W2],
  output logic                    casc_out_valid,
  input  logic                    casc_out_ready
);
  // local memory: one word per weight row, so a beat reads a whole row
  logic [W2*8-1:0] wmem [W1];
  logic [W2*8-1:0] wrow;
  acc_t acc  [W2];
  logic [$clog2(W1+1)-1:0] k;
  logic hold;
  logic handoff;

  assign lhs_tready    = !hold;
  assign handoff       = hold && (FIRST || casc_in_valid) && !casc_out_valid;
  assign casc_in_ready = handoff && !FIRST;

  always_ff @(posedge clk) begin
    if (wt_we) wmem[wt_k][32'(wt_n)*8 +: 8] <= wt_data;
  end
  assign wrow = wmem[k[$clog2(W1)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; hold <= 1'b0; casc_out_valid <= 1'b0;
      for (int n = 0; n < W2; n++) begin acc[n] <= '0; casc_out[n] <= '0; end
    end else begin
      if (casc_out_valid && casc_out_ready) casc_out_valid <= 1'b0;
      if (!hold && lhs_tvalid) begin
        for (int n = 0; n < W2; n++)
          acc[n] <= acc[n] + acc_t'(lhs_tdata) * acc_t'(i8_t'(wrow[n*8 +: 8]));
        if (k == w1_len - 1'b1) begin k <= '0; hold <= 1'b1; end
        else k <= k + 1'b1;
      end
      if (handoff) begin
        for (int n = 0; n < W2; n++) begin
          casc_out[n] <= acc[n] + (FIRST ? acc_t'(0) : casc_in[n]);
          acc[n] <= '0;
        end
        casc_out_valid <= 1'b1;
        hold <= 1'b0;
      end
    end
  end

  // TLAST must mark exactly the last beat of a row segment.
  a_tlast: assert property (@(posedge clk) disable iff (!rst_n)
    (lhs_tvalid && lhs_tready) |-> (lhs_tlast == (k == w1_len - 1'b1)));
endmodule
