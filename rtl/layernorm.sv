// layernorm -- row-wise LayerNorm with the bypass line-buffer pipeline of
// Sec. 4.3 / Fig. 7(b),(d).
//
// For every row of n INT32 values x:  mu = sum(x)/n,  var = sum((x-mu)^2)/n,
// sigma = sqrt(var),  y = (x-mu)/sigma * gamma[col] + beta[col].
// Three stages run concurrently on successive rows, joined by line buffers:
//   1. mean stage: accumulates sum(x) while pushing x into line buffer 1; at
//      the end of the row a sequential divider produces mu;
//   2. variance stage: as soon as mu of a row is ready it re-reads the row from
//      line buffer 1, accumulates (x-mu)^2 and pushes x into line buffer 2; at
//      the end of the row var, sigma and inv = 2^40/sigma are formed by three
//      sequential units that are themselves pipelined across rows;
//   3. output stage: re-reads x from line buffer 2 and emits
//      y = ((x-mu) * inv * gamma) >>> 40 + beta.
// So the mean of row r+1 is being summed while the variance of row r is being
// summed and row r-1 is being normalised (Fig. 7(d)), instead of the three
// passes over an SRAM copy of Fig. 7(c).
// Formats (this RTL's choice): gamma and beta are signed Q8.8, the output is
// y*256 as INT32 (Q8 fixed point) for the following Reformat unit.  Divisions
// truncate toward zero; sqrt truncates.  Fig. 7(a) prints
// sigma = sqrt(sum((x-u)^2)) without the 1/n; this RTL uses the usual
// LayerNorm variance, which divides by n.
// Interface: valid/ready streams in and out, one element per cycle at best;
// gamma/beta are written through a configuration port.
module layernorm
  import ssr_pkg::*;
#(
  parameter int MAX_N = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(MAX_N+1)-1:0] n,
  input  logic                       cfg_we,
  input  logic [$clog2(MAX_N)-1:0]   cfg_idx,
  input  logic signed [15:0]         cfg_gamma,
  input  logic signed [15:0]         cfg_beta,
  input  acc_t                       s_data,
  input  logic                       s_valid,
  output logic                       s_ready,
  output acc_t                       m_data,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [31:0]                rows_done
);
  localparam int NW = $clog2(MAX_N+1);
  localparam int SW = 32 + NW;        // sum of a row
  localparam int VW = 72;             // sum of squares of a row
  localparam int RW = VW / 2;         // sigma
  localparam int IW = 48;             // inverse sigma divider
  localparam int LB = 4 * MAX_N;      // line buffer depth (rows in flight)

  logic signed [15:0] gam [MAX_N];
  logic signed [15:0] bet [MAX_N];
  always_ff @(posedge clk) begin
    if (cfg_we) begin gam[cfg_idx] <= cfg_gamma; bet[cfg_idx] <= cfg_beta; end
  end

  logic acc2, last2, acc3, last3;   // stage hand-shakes, used before their stage

  // ---------------- stage 1: mean ----------------
  logic [NW-1:0]        c1;
  logic signed [SW-1:0] sum1;
  logic                 lb1_full, lb1_empty;
  acc_t                 lb1_dout;
  logic                 mdiv_busy, mdiv_done, mdiv_start;
  logic [SW-1:0]        mdiv_q, mdiv_a;
  logic                 mdiv_neg;
  logic                 last1, acc1;
  logic                 mu1_full, mu1_empty;
  acc_t                 mu1_dout;
  logic signed [SW-1:0] sum_fin;

  assign last1   = (c1 == n - 1'b1);
  // the last element of a row may enter only if the divider can take the sum
  assign s_ready = !lb1_full && !(last1 && (mdiv_busy || mdiv_start || mdiv_done || mu1_full));
  assign acc1    = s_valid && s_ready;
  assign sum_fin = sum1 + SW'(s_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1 <= '0; sum1 <= '0; mdiv_start <= 1'b0; mdiv_a <= '0; mdiv_neg <= 1'b0;
    end else begin
      mdiv_start <= 1'b0;
      if (acc1) begin
        if (last1) begin
          c1 <= '0; sum1 <= '0;
          mdiv_start <= 1'b1;
          mdiv_neg   <= sum_fin < 0;
          mdiv_a     <= (sum_fin < 0) ? SW'(-sum_fin) : SW'(sum_fin);
        end else begin
          c1 <= c1 + 1'b1; sum1 <= sum_fin;
        end
      end
    end
  end

  seq_divider #(.W(SW)) u_mdiv (
    .clk, .rst_n, .start(mdiv_start), .dividend(mdiv_a), .divisor(SW'(n)),
    .busy(mdiv_busy), .done(mdiv_done), .quotient(mdiv_q));

  sync_fifo #(.W(32), .DEPTH(LB)) u_lb1 (
    .clk, .rst_n, .wr(acc1), .din(s_data), .rd(acc2),
    .dout(lb1_dout), .empty(lb1_empty), .full(lb1_full), .count());

  sync_fifo #(.W(32), .DEPTH(2)) u_mu1 (
    .clk, .rst_n, .wr(mdiv_done), .din(mdiv_neg ? -acc_t'(mdiv_q) : acc_t'(mdiv_q)),
    .rd(acc2 && last2), .dout(mu1_dout), .empty(mu1_empty), .full(mu1_full), .count());

  // ---------------- stage 2: variance ----------------
  logic [NW-1:0]        c2;
  logic [VW-1:0]        sq2, sq_fin;
  logic                 lb2_full, lb2_empty;
  acc_t                 lb2_dout;
  logic signed [32:0]   d2;
  logic                 mu2_full, mu2_empty;
  acc_t                 mu2_dout;
  logic                 vdiv_start, vdiv_busy, vdiv_done;
  logic [VW-1:0]        vdiv_a, vdiv_q;
  logic                 sq_start, sq_busy, sq_done;
  logic [RW-1:0]        sq_root;
  logic                 idiv_start, idiv_busy, idiv_done;
  logic [IW-1:0]        idiv_q, sig_q;
  logic                 inv_full, inv_empty;
  logic [IW-1:0]        inv_dout;
  logic                 var_v, sig_v;

  assign last2  = (c2 == n - 1'b1);
  assign d2     = 33'(lb1_dout) - 33'(mu1_dout);
  assign sq_fin = sq2 + VW'($unsigned(66'(d2) * 66'(d2)));
  // a row's first element also reserves the mu slot of stage 3
  assign acc2   = !lb1_empty && !mu1_empty && !lb2_full && !(c2 == '0 && mu2_full)
                  && !(last2 && (vdiv_busy || vdiv_start || vdiv_done || var_v));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c2 <= '0; sq2 <= '0; vdiv_start <= 1'b0; vdiv_a <= '0;
    end else begin
      vdiv_start <= 1'b0;
      if (acc2) begin
        if (last2) begin
          c2 <= '0; sq2 <= '0; vdiv_start <= 1'b1; vdiv_a <= sq_fin;
        end else begin
          c2 <= c2 + 1'b1; sq2 <= sq_fin;
        end
      end
    end
  end

  sync_fifo #(.W(32), .DEPTH(LB)) u_lb2 (
    .clk, .rst_n, .wr(acc2), .din(lb1_dout), .rd(acc3),
    .dout(lb2_dout), .empty(lb2_empty), .full(lb2_full), .count());

  sync_fifo #(.W(32), .DEPTH(4)) u_mu2 (
    .clk, .rst_n, .wr(acc2 && c2 == '0), .din(mu1_dout), .rd(acc3 && last3),
    .dout(mu2_dout), .empty(mu2_empty), .full(mu2_full), .count());

  seq_divider #(.W(VW)) u_vdiv (
    .clk, .rst_n, .start(vdiv_start), .dividend(vdiv_a), .divisor(VW'(n)),
    .busy(vdiv_busy), .done(vdiv_done), .quotient(vdiv_q));

  // var -> sqrt -> 1/sigma, each unit taking the next row's value as soon as
  // it is free; one holding register between units.
  logic [VW-1:0] var_q;
  assign sq_start   = var_v && !sq_busy && !sq_done && !sig_v;
  assign idiv_start = sig_v && !idiv_busy && !idiv_done && !inv_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      var_v <= 1'b0; var_q <= '0; sig_v <= 1'b0; sig_q <= '0;
    end else begin
      if (vdiv_done) begin var_v <= 1'b1; var_q <= vdiv_q; end
      else if (sq_start) var_v <= 1'b0;
      if (sq_done) begin sig_v <= 1'b1; sig_q <= (sq_root == '0) ? IW'(1) : IW'(sq_root); end
      else if (idiv_start) sig_v <= 1'b0;
    end
  end

  isqrt #(.W(VW)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .radicand(var_q),
    .busy(sq_busy), .done(sq_done), .root(sq_root));

  seq_divider #(.W(IW)) u_idiv (
    .clk, .rst_n, .start(idiv_start), .dividend(IW'(1) << 40), .divisor(sig_q),
    .busy(idiv_busy), .done(idiv_done), .quotient(idiv_q));

  sync_fifo #(.W(IW), .DEPTH(2)) u_inv (
    .clk, .rst_n, .wr(idiv_done), .din(idiv_q), .rd(acc3 && last3),
    .dout(inv_dout), .empty(inv_empty), .full(inv_full), .count());

  // ---------------- stage 3: normalise ----------------
  logic [NW-1:0]        c3;
  logic signed [32:0]   d3;
  logic signed [96:0]   prod3;
  logic signed [56:0]   y3;
  assign last3 = (c3 == n - 1'b1);
  assign acc3  = !lb2_empty && !mu2_empty && !inv_empty && (!m_valid || m_ready);
  assign d3    = 33'(lb2_dout) - 33'(mu2_dout);
  assign prod3 = 97'(d3) * 97'($signed({1'b0, inv_dout})) * 97'(gam[c3[$clog2(MAX_N)-1:0]]);
  assign y3    = 57'(prod3 >>> 40) + 57'(bet[c3[$clog2(MAX_N)-1:0]]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c3 <= '0; m_valid <= 1'b0; m_data <= '0; rows_done <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (acc3) begin
        m_valid <= 1'b1;
        m_data  <= (y3 > 57'sd2147483647) ? 32'sh7fffffff :
                   (y3 < -57'sd2147483648) ? 32'sh80000000 : acc_t'(y3);
        if (last3) begin c3 <= '0; rows_done <= rows_done + 1'b1; end
        else c3 <= c3 + 1'b1;
      end
    end
  end
endmodule
