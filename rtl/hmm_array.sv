// hmm_array -- the A x B x C grid of AIE tiles shared by both HMM types.
//
// Tile (a,b,c) receives LHS stream (a,b) and holds weight block (b,c).
// Cascades run along b: tile (a,0,c) starts a chain and tile (a,B-1,c) ends it,
// so A x B x C tiles work at once and A x C of them produce output (Sec. 4.3).
// The last tile of each chain feeds a serializer that puts the W2-wide result
// row on output stream (a,c) one INT32 word per beat, with TLAST on the last
// word of the row.  Row r of the operation is handled by row group a = r mod A
// (row interleaving is this RTL's choice; the paper gives only the A,B,C split).
// Weight writes to block (b,c) are broadcast to all A tiles that use it.
module hmm_array
  import ssr_pkg::*;
#(
  parameter int A  = 2,
  parameter int B  = 4,
  parameter int C  = 1,
  parameter int W1 = 8,
  parameter int W2 = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(W1+1)-1:0] w1_len,
  input  logic [$clog2(W2+1)-1:0] w2_len,
  input  logic                    wt_we   [B*C],
  input  logic [$clog2(W1)-1:0]   wt_k    [B*C],
  input  logic [$clog2(W2)-1:0]   wt_n    [B*C],
  input  i8_t                     wt_data [B*C],
  input  i8_t                     lhs_tdata  [A*B],
  input  logic                    lhs_tvalid [A*B],
  input  logic                    lhs_tlast  [A*B],
  output logic                    lhs_tready [A*B],
  output acc_t                    out_tdata  [A*C],
  output logic                    out_tvalid [A*C],
  output logic                    out_tlast  [A*C],
  input  logic                    out_tready [A*C]
);
  logic lhs_ready_t [A][B][C];
  acc_t casc   [A][C][B+1][W2];
  logic casc_v [A][C][B+1];
  logic casc_r [A][C][B+1];

  for (genvar a = 0; a < A; a++) begin : g_a
    for (genvar c = 0; c < C; c++) begin : g_c
      for (genvar n = 0; n < W2; n++) begin : g_z
        assign casc[a][c][0][n] = '0;
      end
      assign casc_v[a][c][0] = 1'b0;
      for (genvar b = 0; b < B; b++) begin : g_b
        aie_mm_tile #(.W1(W1), .W2(W2), .FIRST(b == 0)) u_tile (
          .clk, .rst_n, .w1_len,
          .wt_we(wt_we[b*C+c]), .wt_k(wt_k[b*C+c]), .wt_n(wt_n[b*C+c]), .wt_data(wt_data[b*C+c]),
          .lhs_tdata(lhs_tdata[a*B+b]), .lhs_tvalid(lhs_tvalid[a*B+b] && lhs_tready[a*B+b]),
          .lhs_tlast(lhs_tlast[a*B+b]), .lhs_tready(lhs_ready_t[a][b][c]),
          .casc_in(casc[a][c][b]), .casc_in_valid(casc_v[a][c][b]), .casc_in_ready(casc_r[a][c][b]),
          .casc_out(casc[a][c][b+1]), .casc_out_valid(casc_v[a][c][b+1]), .casc_out_ready(casc_r[a][c][b+1])
        );
      end

      // output serializer of chain (a,c)
      acc_t row_q [W2];
      logic busy;
      logic [$clog2(W2+1)-1:0] j;
      assign casc_r[a][c][B]  = !busy;
      assign out_tvalid[a*C+c] = busy;
      assign out_tdata[a*C+c]  = row_q[j[$clog2(W2)-1:0]];
      assign out_tlast[a*C+c]  = busy && (j == w2_len - 1'b1);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          busy <= 1'b0; j <= '0;
          for (int n = 0; n < W2; n++) row_q[n] <= '0;
        end else if (!busy) begin
          if (casc_v[a][c][B]) begin
            busy <= 1'b1; j <= '0;
            for (int n = 0; n < W2; n++) row_q[n] <= casc[a][c][B][n];
          end
        end else if (out_tready[a*C+c]) begin
          if (j == w2_len - 1'b1) busy <= 1'b0;
          else j <= j + 1'b1;
        end
      end
    end
  end

  // An LHS stream (a,b) is broadcast to the C tiles (a,b,*); a beat is taken
  // only when all of them can take it.
  for (genvar a = 0; a < A; a++) begin : g_ra
    for (genvar b = 0; b < B; b++) begin : g_rb
      always_comb begin
        lhs_tready[a*B+b] = 1'b1;
        for (int c = 0; c < C; c++) lhs_tready[a*B+b] &= lhs_ready_t[a][b][c];
      end
    end
  end
endmodule
