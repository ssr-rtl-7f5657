// axis_generator -- "AXI Stream Generator" of an HCE: turns a banked buffer
// into the per-AIE operand streams of an HMM unit.
//
// Stream (a,b), a < NA, b < NB, carries rows r = a, a+NA, a+2NA, ... < rows of
// the stored matrix, restricted to column block b (seg_len elements each),
// one INT8 element per beat, TLAST on the last element of each row segment.
// The element (r, b*seg_len + k) is read from bank (r mod PR, b) at address
// (r / PR)*seg_len + k of a force_partition_buffer; since PR is a multiple of
// NA each bank is read by one stream only, so all NA*NB streams run at one beat
// per cycle.  Bank reads take one cycle; each stream keeps a 4-entry FIFO and
// issues a read only when the FIFO has room for it, so back-pressure (tready
// low) never loses data.
// Fine-grained forwarding (Sec. 4.3, Fig. 8(d)): with gate_en set, row r is
// sent only once the producing accelerator reports it complete, i.e. when
// rows_done[r mod A_PROD] > r / A_PROD.  gate_wait is high in cycles in which
// some stream waits for such a row.  Streams, FIFO depth and gating rule are
// choices of this RTL.
module axis_generator #(
  parameter int NA     = 2,
  parameter int NB     = 4,
  parameter int PR     = 2,
  parameter int A_PROD = 1,
  parameter int DEPTH  = 4800,
  parameter int RW     = 9,
  parameter int OW     = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [RW-1:0]            rows,
  input  logic [OW-1:0]            seg_len,
  input  logic                     gate_en,
  input  logic [RW-1:0]            rows_done [A_PROD],
  output logic                     busy,
  output logic                     gate_wait,
  // bank read ports of the source buffer
  output logic                     rd_en   [PR*NB],
  output logic [$clog2(DEPTH)-1:0] rd_addr [PR*NB],
  input  logic [7:0]               rd_data [PR*NB],
  // operand streams, index a*NB + b
  output logic [7:0]               m_tdata  [NA*NB],
  output logic                     m_tvalid [NA*NB],
  output logic                     m_tlast  [NA*NB],
  input  logic                     m_tready [NA*NB]
);
  localparam int NS = NA*NB;
  localparam int AW = $clog2(DEPTH);

  logic          issue   [NS];
  logic [RW-1:0] cur_r   [NS];
  logic [AW-1:0] cur_a   [NS];
  logic          s_busy  [NS];
  logic          s_wait  [NS];

  for (genvar a = 0; a < NA; a++) begin : g_a
    for (genvar b = 0; b < NB; b++) begin : g_b
      localparam int S = a*NB + b;
      logic [RW-1:0] r;
      logic [OW-1:0] k;
      logic          active, pend, pend_last;
      logic [$clog2(PR+1)-1:0] pend_pr;
      logic          avail;
      logic [8:0]    f_dout;
      logic          f_empty, f_full;
      logic [2:0]    f_cnt;
      logic [7:0]    pend_data;

      assign avail = !gate_en || (int'(rows_done[int'(r) % A_PROD]) > int'(r) / A_PROD);
      assign issue[S] = active && avail && ((int'(f_cnt) + (pend ? 1 : 0)) < 4);
      assign cur_r[S] = r;
      assign cur_a[S] = AW'((int'(r) / PR) * int'(seg_len) + int'(k));
      assign s_wait[S] = active && !avail;
      assign s_busy[S] = active || pend || !f_empty;

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          r <= '0; k <= '0; active <= 1'b0; pend <= 1'b0; pend_last <= 1'b0; pend_pr <= '0;
        end else begin
          pend <= issue[S];
          if (issue[S]) begin
            pend_last <= (k == seg_len - 1'b1);
            pend_pr   <= ($clog2(PR+1))'(int'(r) % PR);
          end
          if (start) begin
            r <= RW'(a); k <= '0; active <= (a < int'(rows));
          end else if (issue[S]) begin
            if (k == seg_len - 1'b1) begin
              k <= '0;
              r <= r + RW'(NA);
              if (int'(r) + NA >= int'(rows)) active <= 1'b0;
            end else k <= k + 1'b1;
          end
        end
      end

      always_comb begin
        pend_data = '0;
        for (int p = 0; p < PR; p++)
          if (p == int'(pend_pr)) pend_data = rd_data[p*NB + b];
      end

      sync_fifo #(.W(9), .DEPTH(4)) u_fifo (
        .clk, .rst_n,
        .wr(pend), .din({pend_last, pend_data}),
        .rd(m_tvalid[S] && m_tready[S]),
        .dout(f_dout), .empty(f_empty), .full(f_full), .count(f_cnt)
      );
      assign m_tvalid[S] = !f_empty;
      assign m_tdata[S]  = f_dout[7:0];
      assign m_tlast[S]  = f_dout[8];
    end
  end

  // bank (p,b) is read only by stream (p mod NA, b)
  for (genvar p = 0; p < PR; p++) begin : g_bank_r
    for (genvar b = 0; b < NB; b++) begin : g_bank_c
      localparam int S = (p % NA)*NB + b;
      assign rd_en[p*NB+b]   = issue[S] && (int'(cur_r[S]) % PR == p);
      assign rd_addr[p*NB+b] = cur_a[S];
    end
  end

  always_comb begin
    busy = 1'b0; gate_wait = 1'b0;
    for (int s = 0; s < NS; s++) begin
      busy |= s_busy[s];
      gate_wait |= s_wait[s];
    end
  end
endmodule
