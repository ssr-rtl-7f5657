// hmm_type0 -- heterogeneous matrix-multiply unit, type 0 (weights pinned).
//
// An A x B x C array of AIE tiles (hmm_array) computes OUT = LHS x W where W is
// stored once in the tiles' local memories ("pinned"), so only the activation
// operand travels over PLIO: A*B LHS streams in, A*C result streams out
// (Sec. 4.3, Fig. 6 HMM-Type0).  Weights are written through a configuration
// port addressed by block (b,c) and element (k,n) of the w1 x w2 block; every
// one of the B*C*w1_len*w2_len elements must be written once after wcfg_clear
// before the array accepts activations (pinned goes high).  Rows of LHS then
// stream through with no further weight traffic.
// The configuration port and the "pinned" gate are choices of this RTL.
module hmm_type0
  import ssr_pkg::*;
#(
  parameter int A  = 2,
  parameter int B  = 4,
  parameter int C  = 1,
  parameter int W1 = 48,
  parameter int W2 = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(W1+1)-1:0] w1_len,
  input  logic [$clog2(W2+1)-1:0] w2_len,
  input  logic                    wcfg_clear,
  input  logic                    wcfg_we,
  input  logic [$clog2(B*C+1)-1:0] wcfg_blk,   // b*C + c
  input  logic [$clog2(W1)-1:0]   wcfg_k,
  input  logic [$clog2(W2)-1:0]   wcfg_n,
  input  i8_t                     wcfg_data,
  output logic                    pinned,
  input  i8_t                     lhs_tdata  [A*B],
  input  logic                    lhs_tvalid [A*B],
  input  logic                    lhs_tlast  [A*B],
  output logic                    lhs_tready [A*B],
  output acc_t                    out_tdata  [A*C],
  output logic                    out_tvalid [A*C],
  output logic                    out_tlast  [A*C],
  input  logic                    out_tready [A*C]
);
  localparam int CW = $clog2(B*C*W1*W2 + 1);
  logic [CW-1:0] wcount;
  logic [CW-1:0] wtotal;
  assign wtotal = CW'(B*C) * CW'(w1_len) * CW'(w2_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcount <= '0; pinned <= 1'b0;
    end else if (wcfg_clear) begin
      wcount <= '0; pinned <= 1'b0;
    end else if (wcfg_we && !pinned) begin
      wcount <= wcount + 1'b1;
      if (wcount + 1'b1 == wtotal) pinned <= 1'b1;
    end
  end

  logic wt_we   [B*C];
  logic [$clog2(W1)-1:0] wt_k [B*C];
  logic [$clog2(W2)-1:0] wt_n [B*C];
  i8_t  wt_data [B*C];
  logic lv [A*B];
  logic lr [A*B];
  for (genvar i = 0; i < B*C; i++) begin : g_w
    assign wt_we[i]   = wcfg_we && !pinned && (wcfg_blk == i);
    assign wt_k[i]    = wcfg_k;
    assign wt_n[i]    = wcfg_n;
    assign wt_data[i] = wcfg_data;
  end
  for (genvar i = 0; i < A*B; i++) begin : g_l
    assign lv[i]         = lhs_tvalid[i] && pinned;
    assign lhs_tready[i] = lr[i] && pinned;
  end

  hmm_array #(.A(A), .B(B), .C(C), .W1(W1), .W2(W2)) u_array (
    .clk, .rst_n, .w1_len, .w2_len,
    .wt_we, .wt_k, .wt_n, .wt_data,
    .lhs_tdata, .lhs_tvalid(lv), .lhs_tlast, .lhs_tready(lr),
    .out_tdata, .out_tvalid, .out_tlast, .out_tready
  );
endmodule
