// softmax -- row-wise softmax with the line-buffer pipeline that Sec. 4.3
// applies to LayerNorm and says carries over to the other nonlinear kernels.
//
// For every row of n INT32 scores x:
//   m = max(x);  d = (m - x) >>> shift;  e = 2^(-d/8)  (Q0.16);
//   p = e * floor(2^32 / sum(e)) >> 17     (Q1.15, 32768 = 1.0)
// Three stages overlap on successive rows:
//   1. max stage: tracks the row maximum while pushing x into line buffer 1;
//   2. exp stage: re-reads the row, forms e, accumulates sum(e) and pushes e
//      into line buffer 2; at the end of the row a sequential divider forms
//      the reciprocal of the sum;
//   3. normalise stage: re-reads e and multiplies by the reciprocal.
// The exponential is base 2 with 1/8 steps: e = frac[d mod 8] >> (d div 8),
// frac[k] = round(2^16 * 2^(-k/8)); shift sets the scale of the scores (one
// input step is 2^shift / 8 in log2 units).  Base-2 exponent, table and
// formats are this RTL's choice; the paper names the unit only.
// Interface: valid/ready streams, at best one element per cycle.
module softmax
  import ssr_pkg::*;
#(
  parameter int MAX_N = 197
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(MAX_N+1)-1:0] n,
  input  logic [4:0]                 shift,
  input  acc_t                       s_data,
  input  logic                       s_valid,
  output logic                       s_ready,
  output acc_t                       m_data,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [31:0]                rows_done
);
  localparam int NW = $clog2(MAX_N+1);
  localparam int LB = 2 * MAX_N;
  localparam int EW = 16 + NW;        // sum of exponentials
  localparam int DW = 40;             // reciprocal divider width

  logic acc2, last2, acc3, last3;   // stage hand-shakes, used before their stage

  // ---------------- stage 1: max ----------------
  logic [NW-1:0] c1;
  acc_t          mx1, mx_fin;
  logic          acc1, last1;
  logic          lb1_full, lb1_empty;
  acc_t          lb1_dout;
  logic          mx_full, mx_empty;
  acc_t          mx_dout;

  assign last1   = (c1 == n - 1'b1);
  assign s_ready = !lb1_full && !(last1 && mx_full);
  assign acc1    = s_valid && s_ready;
  assign mx_fin  = (c1 == '0 || s_data > mx1) ? s_data : mx1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1 <= '0; mx1 <= '0;
    end else if (acc1) begin
      mx1 <= mx_fin;
      c1  <= last1 ? '0 : c1 + 1'b1;
    end
  end

  sync_fifo #(.W(32), .DEPTH(LB)) u_lb1 (
    .clk, .rst_n, .wr(acc1), .din(s_data), .rd(acc2),
    .dout(lb1_dout), .empty(lb1_empty), .full(lb1_full), .count());
  sync_fifo #(.W(32), .DEPTH(2)) u_mx (
    .clk, .rst_n, .wr(acc1 && last1), .din(mx_fin), .rd(acc2 && last2),
    .dout(mx_dout), .empty(mx_empty), .full(mx_full), .count());

  // ---------------- stage 2: exponent and sum ----------------
  logic [NW-1:0] c2;
  logic [32:0]   diff;
  logic [32:0]   dsh;
  logic [15:0]   e2;
  logic [EW-1:0] sum2, sum_fin;
  logic          lb2_full, lb2_empty;
  logic [15:0]   lb2_dout;
  logic          div_start, div_busy, div_done;
  logic [DW-1:0] div_a, div_q;
  logic          inv_full, inv_empty;
  logic [DW-1:0] inv_dout;

  assign last2   = (c2 == n - 1'b1);
  assign diff    = 33'($signed(mx_dout)) - 33'($signed(lb1_dout));   // >= 0
  assign dsh     = diff >> shift;
  assign e2      = (dsh >= 33'd128) ? 16'd0 : (exp2_frac_q16(dsh[2:0]) >> dsh[6:3]);
  assign sum_fin = sum2 + EW'(e2);
  assign acc2    = !lb1_empty && !mx_empty && !lb2_full && !(last2 && (div_busy || div_start || div_done || inv_full));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c2 <= '0; sum2 <= '0; div_start <= 1'b0; div_a <= '0;
    end else begin
      div_start <= 1'b0;
      if (acc2) begin
        if (last2) begin
          c2 <= '0; sum2 <= '0; div_start <= 1'b1; div_a <= DW'(sum_fin);
        end else begin
          c2 <= c2 + 1'b1; sum2 <= sum_fin;
        end
      end
    end
  end

  sync_fifo #(.W(16), .DEPTH(LB)) u_lb2 (
    .clk, .rst_n, .wr(acc2), .din(e2), .rd(acc3),
    .dout(lb2_dout), .empty(lb2_empty), .full(lb2_full), .count());

  seq_divider #(.W(DW)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(DW'(1) << 32), .divisor(div_a),
    .busy(div_busy), .done(div_done), .quotient(div_q));

  sync_fifo #(.W(DW), .DEPTH(2)) u_inv (
    .clk, .rst_n, .wr(div_done), .din(div_q), .rd(acc3 && last3),
    .dout(inv_dout), .empty(inv_empty), .full(inv_full), .count());

  // ---------------- stage 3: normalise ----------------
  logic [NW-1:0] c3;
  logic [55:0]   p3;
  assign last3 = (c3 == n - 1'b1);
  assign acc3  = !lb2_empty && !inv_empty && (!m_valid || m_ready);
  assign p3    = 56'(lb2_dout) * 56'(inv_dout);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c3 <= '0; m_valid <= 1'b0; m_data <= '0; rows_done <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (acc3) begin
        m_valid <= 1'b1;
        m_data  <= acc_t'(p3 >> 17);
        if (last3) begin c3 <= '0; rows_done <= rows_done + 1'b1; end
        else c3 <= c3 + 1'b1;
      end
    end
  end

  // the row-end divider result must find room in the reciprocal FIFO
  a_inv_room: assert property (@(posedge clk) disable iff (!rst_n) !(div_done && inv_full));
endmodule
