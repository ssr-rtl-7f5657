// hmm_type1 -- heterogeneous matrix-multiply unit, type 1 (two activation operands).
//
// Used where both operands are activations (the attention products of a
// transformer), so the right-hand operand cannot be pinned (Sec. 4.3, Fig. 6
// HMM-Type1).  C*B RHS AXI4-Streams each carry one w1 x w2 block in k-major
// order (w2 elements of row k, then row k+1, TLAST on the last element); the
// block is written into the local memory of the A tiles that share it.  Once
// every RHS block of the operation has arrived the A*B LHS streams are let
// through, and results leave on A*C streams.  rhs_clear starts a new operation:
// the RHS streams are accepted again and LHS is held until the reload finishes.
// With the Fig. 6 example (x8 LHS, x2 RHS, x4 OUT) A=4, B=2, C=1.
module hmm_type1
  import ssr_pkg::*;
#(
  parameter int A  = 4,
  parameter int B  = 2,
  parameter int C  = 1,
  parameter int W1 = 32,
  parameter int W2 = 197
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(W1+1)-1:0] w1_len,
  input  logic [$clog2(W2+1)-1:0] w2_len,
  input  logic                    rhs_clear,
  output logic                    rhs_loaded,
  input  i8_t                     rhs_tdata  [C*B],   // index c*B + b
  input  logic                    rhs_tvalid [C*B],
  input  logic                    rhs_tlast  [C*B],
  output logic                    rhs_tready [C*B],
  input  i8_t                     lhs_tdata  [A*B],
  input  logic                    lhs_tvalid [A*B],
  input  logic                    lhs_tlast  [A*B],
  output logic                    lhs_tready [A*B],
  output acc_t                    out_tdata  [A*C],
  output logic                    out_tvalid [A*C],
  output logic                    out_tlast  [A*C],
  input  logic                    out_tready [A*C]
);
  logic wt_we   [B*C];
  logic [$clog2(W1)-1:0] wt_k [B*C];
  logic [$clog2(W2)-1:0] wt_n [B*C];
  i8_t  wt_data [B*C];
  logic done_s  [C*B];

  for (genvar c = 0; c < C; c++) begin : g_c
    for (genvar b = 0; b < B; b++) begin : g_b
      localparam int S = c*B + b;      // RHS stream index
      logic [$clog2(W1+1)-1:0] k;
      logic [$clog2(W2+1)-1:0] n;
      assign rhs_tready[S]  = !done_s[S];
      assign wt_we[b*C+c]   = rhs_tvalid[S] && !done_s[S];
      assign wt_k[b*C+c]    = k[$clog2(W1)-1:0];
      assign wt_n[b*C+c]    = n[$clog2(W2)-1:0];
      assign wt_data[b*C+c] = rhs_tdata[S];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          k <= '0; n <= '0; done_s[S] <= 1'b0;
        end else if (rhs_clear) begin
          k <= '0; n <= '0; done_s[S] <= 1'b0;
        end else if (rhs_tvalid[S] && !done_s[S]) begin
          if (n == w2_len - 1'b1) begin
            n <= '0;
            if (k == w1_len - 1'b1) begin k <= '0; done_s[S] <= 1'b1; end
            else k <= k + 1'b1;
          end else n <= n + 1'b1;
        end
      end
      a_rhs_last: assert property (@(posedge clk) disable iff (!rst_n)
        (rhs_tvalid[S] && rhs_tready[S]) |-> (rhs_tlast[S] == ((n == w2_len - 1'b1) && (k == w1_len - 1'b1))));
    end
  end

  always_comb begin
    rhs_loaded = 1'b1;
    for (int s = 0; s < C*B; s++) rhs_loaded &= done_s[s];
  end

  logic lv [A*B];
  logic lr [A*B];
  for (genvar i = 0; i < A*B; i++) begin : g_l
    assign lv[i]         = lhs_tvalid[i] && rhs_loaded;
    assign lhs_tready[i] = lr[i] && rhs_loaded;
  end

  hmm_array #(.A(A), .B(B), .C(C), .W1(W1), .W2(W2)) u_array (
    .clk, .rst_n, .w1_len, .w2_len,
    .wt_we, .wt_k, .wt_n, .wt_data,
    .lhs_tdata, .lhs_tvalid(lv), .lhs_tlast, .lhs_tready(lr),
    .out_tdata, .out_tvalid, .out_tlast, .out_tready
  );
endmodule
