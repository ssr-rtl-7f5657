// ssr_top -- two SSR spatial accelerators with on-chip forwarding, as drawn
// in the architecture overview (Fig. 6) of the SSR paper.
//
// Acc0 = HMM-Type0 + SSR-HCE0.  The weight matrix W0 (K0 x N0) is pinned in the
// AIE tiles; the activation X (M x K0) is loaded from DDR into a banked input
// buffer and streamed by an AXI Stream Generator over A0*B0 LHS streams.  Each
// of the A0 result streams ends in an HCE0 lane: AXI Stream Receiver, then
// LayerNorm (Fig. 7), Reformat (INT32 -> INT8) and optionally GELU, selected at
// run time by post_op.  The lanes write their rows directly into Buff L of
// Acc1, a force-partitioned buffer of lcm(A0,A1) x B1 banks (Fig. 8): this is
// the on-chip forwarding, with no trip to DDR and no bank conflicts.
// Acc1 = HMM-Type1 + SSR-HCE1 computes S = softmax(Y x K^T): K (N1 x K1, one row
// per token) is loaded into Buff R, turned k-major by the Transpose units and
// loaded into the tiles over B1 RHS streams; the Buff L generator sends row r of
// Y as soon as the HCE0 lane that produces it has finished it (fine-grained
// pipeline, Sec. 4.3), so Acc1 runs while Acc0 is still computing.  Each of the
// A1 result streams passes Receiver, Softmax and Reformat and lands in an
// output buffer that the AXI DMA stores to DDR.
// Sequence after start: load K (AXI DMA read), then load W0 and X while the
// Transpose units already stream K into the Acc1 tiles, run both accelerators,
// store S; done pulses at the end.  Matrix sizes are run-time
// inputs bounded by the MAX_* parameters; K0 must be a multiple of B0 and
// N0 (= K1) a multiple of B1.  DDR addresses must be 128-byte aligned; byte
// counts are rounded up to whole 8-byte beats (extra bytes are ignored on
// load, zero on store).  Status counters report the mechanisms at work.
// What follows the paper: the block structure of Fig. 6, the two HMM types and
// their A/B/C parallelism (defaults from the x8/x2/x4 PLIO counts of Fig. 6),
// force partition, line-buffer nonlinear kernels, on-chip forwarding.  This
// RTL's own choices: the concrete two-layer workload (MM+LayerNorm feeding
// attention scores), the byte-serial DMA side, formats and handshakes.
module ssr_top
  import ssr_pkg::*;
#(
  parameter int A0      = 2,
  parameter int B0      = 4,
  parameter int C0      = 1,
  parameter int A1      = 4,
  parameter int B1      = 2,
  parameter int C1      = 1,
  parameter int MAX_M   = 197,
  parameter int MAX_K0  = 192,
  parameter int MAX_N0  = 64,
  parameter int MAX_N1  = 197,
  parameter int AXI_AW  = 32,
  parameter int AXI_DW  = 64,
  // derived
  parameter int RW      = $clog2(MAX_M + 1) + 1,
  parameter int OW      = $clog2(((MAX_K0 > MAX_N1) ? MAX_K0 : MAX_N1) + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration and control (host side)
  input  logic              start,
  input  logic [RW-1:0]     cfg_m,
  input  logic [OW-1:0]     cfg_k0,
  input  logic [OW-1:0]     cfg_n0,
  input  logic [OW-1:0]     cfg_n1,
  input  logic [AXI_AW-1:0] cfg_x_addr,
  input  logic [AXI_AW-1:0] cfg_w_addr,
  input  logic [AXI_AW-1:0] cfg_k_addr,
  input  logic [AXI_AW-1:0] cfg_o_addr,
  input  post_op_e          cfg_post_op,
  input  logic [15:0]       cfg_rf0_mult,
  input  logic [5:0]        cfg_rf0_shift,
  input  logic [15:0]       cfg_rf1_mult,
  input  logic [5:0]        cfg_rf1_shift,
  input  logic [4:0]        cfg_sm_shift,
  input  logic              ln_cfg_we,
  input  logic [$clog2(MAX_N0)-1:0] ln_cfg_idx,
  input  logic signed [15:0] ln_cfg_gamma,
  input  logic signed [15:0] ln_cfg_beta,
  output logic              busy,
  output logic              done,
  // status counters
  output logic [31:0]       stat_run_cycles,
  output logic [31:0]       stat_overlap_cycles,
  output logic [31:0]       stat_gate_wait_cycles,
  output logic [31:0]       stat_stall_cycles,
  output logic [31:0]       stat_saturations,
  output logic [31:0]       stat_ln_rows,
  output logic [31:0]       stat_gelu_elems,
  output logic [31:0]       stat_sm_rows,
  output logic [15:0]       stat_errors,
  // AXI4 master towards the NoC / DDR
  output logic [AXI_AW-1:0] m_araddr,
  output logic [7:0]        m_arlen,
  output logic [2:0]        m_arsize,
  output logic [1:0]        m_arburst,
  output logic              m_arvalid,
  input  logic              m_arready,
  input  logic [AXI_DW-1:0] m_rdata,
  input  logic [1:0]        m_rresp,
  input  logic              m_rlast,
  input  logic              m_rvalid,
  output logic              m_rready,
  output logic [AXI_AW-1:0] m_awaddr,
  output logic [7:0]        m_awlen,
  output logic [2:0]        m_awsize,
  output logic [1:0]        m_awburst,
  output logic              m_awvalid,
  input  logic              m_awready,
  output logic [AXI_DW-1:0] m_wdata,
  output logic [AXI_DW/8-1:0] m_wstrb,
  output logic              m_wlast,
  output logic              m_wvalid,
  input  logic              m_wready,
  input  logic [1:0]        m_bresp,
  input  logic              m_bvalid,
  output logic              m_bready
);
  // ------------------------------------------------------------------ sizes
  localparam int W1_0  = MAX_K0 / B0;
  localparam int W2_0  = MAX_N0 / C0;
  localparam int W1_1  = MAX_N0 / B1;
  localparam int W2_1  = MAX_N1 / C1;
  localparam int PR_L  = lcm(A0, A1);                 // forced row partition of Buff L
  localparam int XDEP  = ((MAX_M + A0 - 1) / A0) * W1_0;
  localparam int LDEP  = ((MAX_M + PR_L - 1) / PR_L) * W1_1;
  localparam int RDEP  = MAX_N1 * W1_1;
  localparam int ODEP  = ((MAX_M + A1 - 1) / A1) * MAX_N1;
  localparam int BYTE_SH = $clog2(AXI_DW / 8);

  initial begin
    assert (C0 == 1 && C1 == 1) else $error("row-wise HCE units need whole rows per stream (C0 = C1 = 1)");
    assert (MAX_K0 % B0 == 0 && MAX_N0 % B1 == 0) else $error("K dimensions must split evenly over B");
  end

  // run-time tile sizes
  logic [OW-1:0] w1_0, w1_1;
  assign w1_0 = OW'(cfg_k0 / OW'(B0));
  assign w1_1 = OW'(cfg_n0 / OW'(B1));

  // ------------------------------------------------------------------ control
  typedef enum logic [2:0] {S_IDLE, S_LOAD_W, S_LOAD_X, S_LOAD_K, S_RUN, S_STORE, S_DONE} state_e;
  state_e st;
  logic   issued;        // DMA command of the current phase issued
  logic   phase_go;      // one-cycle pulse on entering RUN
  logic   k_go;          // one-cycle pulse when K is in Buff R: start the RHS load of Acc1

  logic            dma_rd_start, dma_rd_busy, dma_rd_valid;
  logic [AXI_AW-1:0] dma_rd_addr, dma_wr_addr;
  logic [31:0]     dma_rd_bytes, dma_wr_bytes;
  logic [7:0]      dma_rd_data, dma_wr_data;
  logic            dma_wr_start, dma_wr_busy, dma_wr_valid, dma_wr_ready;
  logic [15:0]     dma_errors;

  function automatic logic [31:0] round_beats(input logic [31:0] b);
    return ((b + 32'(AXI_DW/8 - 1)) >> BYTE_SH) << BYTE_SH;
  endfunction

  logic [31:0] phase_bytes;   // useful bytes of the current load phase
  logic [31:0] byte_cnt;      // useful bytes consumed so far
  logic        load_byte;     // a useful byte is taken this cycle
  logic        run_finished;
  logic        store_finished;

  always_comb begin
    unique case (st)
      S_LOAD_W: phase_bytes = 32'(cfg_k0) * 32'(cfg_n0);
      S_LOAD_X: phase_bytes = 32'(cfg_m) * 32'(cfg_k0);
      S_LOAD_K: phase_bytes = 32'(cfg_n1) * 32'(cfg_n0);
      default:  phase_bytes = 32'(cfg_m) * 32'(cfg_n1);
    endcase
    unique case (st)
      S_LOAD_W: dma_rd_addr = cfg_w_addr;
      S_LOAD_X: dma_rd_addr = cfg_x_addr;
      default:  dma_rd_addr = cfg_k_addr;
    endcase
  end
  assign dma_rd_start = (st == S_LOAD_W || st == S_LOAD_X || st == S_LOAD_K) && !issued;
  assign dma_rd_bytes = round_beats(phase_bytes);
  assign dma_wr_start = (st == S_STORE) && !issued;
  assign dma_wr_addr  = cfg_o_addr;
  assign dma_wr_bytes = round_beats(phase_bytes);
  assign load_byte    = dma_rd_valid && (byte_cnt < phase_bytes) &&
                        (st == S_LOAD_W || st == S_LOAD_X || st == S_LOAD_K);
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; issued <= 1'b0; byte_cnt <= '0; done <= 1'b0; phase_go <= 1'b0; k_go <= 1'b0;
    end else begin
      done <= 1'b0; phase_go <= 1'b0; k_go <= 1'b0;
      if (dma_rd_start || dma_wr_start) issued <= 1'b1;
      if (load_byte) byte_cnt <= byte_cnt + 1'b1;
      unique case (st)
        S_IDLE:   if (start) begin st <= S_LOAD_K; issued <= 1'b0; byte_cnt <= '0; end
        S_LOAD_W, S_LOAD_X, S_LOAD_K:
          if (issued && !dma_rd_busy && byte_cnt == phase_bytes) begin
            issued <= 1'b0; byte_cnt <= '0;
            st <= (st == S_LOAD_K) ? S_LOAD_W : (st == S_LOAD_W) ? S_LOAD_X : S_RUN;
            if (st == S_LOAD_K) k_go <= 1'b1;
            if (st == S_LOAD_X) phase_go <= 1'b1;
          end
        S_RUN:    if (!phase_go && run_finished) begin st <= S_STORE; issued <= 1'b0; end
        S_STORE:  if (issued && store_finished && !dma_wr_busy) st <= S_DONE;
        S_DONE:   begin done <= 1'b1; st <= S_IDLE; end
        default:  st <= S_IDLE;
      endcase
    end
  end

  axi_dma #(.AW(AXI_AW), .DW(AXI_DW)) u_dma (
    .clk, .rst_n,
    .rd_start(dma_rd_start), .rd_addr(dma_rd_addr), .rd_bytes(dma_rd_bytes), .rd_busy(dma_rd_busy),
    .rd_data(dma_rd_data), .rd_valid(dma_rd_valid), .rd_ready(1'b1),
    .wr_start(dma_wr_start), .wr_addr(dma_wr_addr), .wr_bytes(dma_wr_bytes), .wr_busy(dma_wr_busy),
    .wr_data(dma_wr_data), .wr_valid(dma_wr_valid), .wr_ready(dma_wr_ready),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .m_awaddr, .m_awlen, .m_awsize, .m_awburst, .m_awvalid, .m_awready,
    .m_wdata, .m_wstrb, .m_wlast, .m_wvalid, .m_wready,
    .m_bresp, .m_bvalid, .m_bready, .resp_errors(dma_errors)
  );

  // ------------------------------------------------------------------ load walkers
  // (row, column-block, offset) counters over the byte stream of each load
  logic [RW-1:0] ld_r;
  logic [OW-1:0] ld_c;                      // column within the row
  logic [$clog2(B0+B1+1)-1:0] ld_b;         // column block
  logic [OW-1:0] ld_o;                      // offset inside the block
  logic [OW-1:0] ld_rowlen, ld_seg;
  always_comb begin
    unique case (st)
      S_LOAD_W: begin ld_rowlen = cfg_n0; ld_seg = OW'(cfg_n0 / OW'(C0)); end
      S_LOAD_X: begin ld_rowlen = cfg_k0; ld_seg = w1_0; end
      default:  begin ld_rowlen = cfg_n0; ld_seg = w1_1; end
    endcase
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_r <= '0; ld_c <= '0; ld_b <= '0; ld_o <= '0;
    end else if (dma_rd_start) begin
      ld_r <= '0; ld_c <= '0; ld_b <= '0; ld_o <= '0;
    end else if (load_byte) begin
      if (ld_c == ld_rowlen - 1'b1) begin
        ld_c <= '0; ld_b <= '0; ld_o <= '0; ld_r <= ld_r + 1'b1;
      end else begin
        ld_c <= ld_c + 1'b1;
        if (ld_o == ld_seg - 1'b1) begin ld_o <= '0; ld_b <= ld_b + 1'b1; end
        else ld_o <= ld_o + 1'b1;
      end
    end
  end

  // W0 row k belongs to block b = k / w1_0 at local row k mod w1_0
  logic [$clog2(B0+1)-1:0] wk_b;
  logic [OW-1:0]           wk_l;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wk_b <= '0; wk_l <= '0;
    end else if (dma_rd_start) begin
      wk_b <= '0; wk_l <= '0;
    end else if (load_byte && st == S_LOAD_W && ld_c == ld_rowlen - 1'b1) begin
      if (wk_l == w1_0 - 1'b1) begin wk_l <= '0; wk_b <= wk_b + 1'b1; end
      else wk_l <= wk_l + 1'b1;
    end
  end

  // ------------------------------------------------------------------ Acc0
  logic                   h0_pinned;
  i8_t                    h0_lhs_d [A0*B0];
  logic                   h0_lhs_v [A0*B0], h0_lhs_l [A0*B0], h0_lhs_r [A0*B0];
  acc_t                   h0_out_d [A0*C0];
  logic                   h0_out_v [A0*C0], h0_out_l [A0*C0], h0_out_r [A0*C0];
  logic [7:0]             g0_d [A0*B0];

  hmm_type0 #(.A(A0), .B(B0), .C(C0), .W1(W1_0), .W2(W2_0)) u_hmm0 (
    .clk, .rst_n,
    .w1_len(($clog2(W1_0+1))'(w1_0)), .w2_len(($clog2(W2_0+1))'(cfg_n0 / OW'(C0))),
    .wcfg_clear(st == S_IDLE && start),
    .wcfg_we(load_byte && st == S_LOAD_W),
    .wcfg_blk(($clog2(B0*C0+1))'(int'(wk_b) * C0 + int'(ld_b))),
    .wcfg_k(($clog2(W1_0))'(wk_l)), .wcfg_n(($clog2(W2_0))'(ld_o)),
    .wcfg_data(i8_t'(dma_rd_data)), .pinned(h0_pinned),
    .lhs_tdata(h0_lhs_d), .lhs_tvalid(h0_lhs_v), .lhs_tlast(h0_lhs_l), .lhs_tready(h0_lhs_r),
    .out_tdata(h0_out_d), .out_tvalid(h0_out_v), .out_tlast(h0_out_l), .out_tready(h0_out_r)
  );

  // input buffer of Acc0: A0 x B0 banks, written by the DMA walker
  logic                       xb_we [1];
  logic [RW-1:0]              xb_row [1];
  logic [$clog2(B0+1)-1:0]    xb_cb [1];
  logic [OW-1:0]              xb_co [1];
  logic [7:0]                 xb_wd [1];
  logic                       xb_re [A0*B0];
  logic [$clog2(XDEP)-1:0]    xb_ra [A0*B0];
  logic [7:0]                 xb_rd [A0*B0];
  assign xb_we[0]  = load_byte && st == S_LOAD_X;
  assign xb_row[0] = ld_r;
  assign xb_cb[0]  = ($clog2(B0+1))'(ld_b);
  assign xb_co[0]  = ld_o;
  assign xb_wd[0]  = dma_rd_data;

  force_partition_buffer #(.W(8), .PR(A0), .PC(B0), .NW(1), .DEPTH(XDEP), .RW(RW), .OW(OW)) u_xbuf (
    .clk, .seg_len(w1_0),
    .wr_en(xb_we), .wr_row(xb_row), .wr_cblk(xb_cb), .wr_coff(xb_co), .wr_data(xb_wd),
    .rd_en(xb_re), .rd_addr(xb_ra), .rd_data(xb_rd)
  );

  logic [RW-1:0] all_rows [1];
  logic          g0_busy, g0_wait;
  assign all_rows[0] = cfg_m;
  axis_generator #(.NA(A0), .NB(B0), .PR(A0), .A_PROD(1), .DEPTH(XDEP), .RW(RW), .OW(OW)) u_gen0 (
    .clk, .rst_n, .start(phase_go), .rows(cfg_m), .seg_len(w1_0),
    .gate_en(1'b0), .rows_done(all_rows), .busy(g0_busy), .gate_wait(g0_wait),
    .rd_en(xb_re), .rd_addr(xb_ra), .rd_data(xb_rd),
    .m_tdata(g0_d), .m_tvalid(h0_lhs_v), .m_tlast(h0_lhs_l), .m_tready(h0_lhs_r)
  );
  for (genvar i = 0; i < A0*B0; i++) begin : g_h0d
    assign h0_lhs_d[i] = i8_t'(g0_d[i]);
  end

  // HCE0 lanes -> Buff L (force partition lcm(A0,A1) x B1)
  logic                       lb_we  [A0];
  logic [RW-1:0]              lb_row [A0];
  logic [$clog2(B1+1)-1:0]    lb_cb  [A0];
  logic [OW-1:0]              lb_co  [A0];
  logic [7:0]                 lb_wd  [A0];
  logic [RW-1:0]              lane_rows [A0];
  logic [31:0]                ln_rows_l [A0];
  logic [31:0]                sat0_l [A0];
  logic [15:0]                ferr0_l [A0];
  logic                       gelu_fire_l [A0];

  for (genvar a = 0; a < A0; a++) begin : g_hce0
    acc_t          rc_d;  logic rc_v, rc_r, rc_eol;
    logic [RW-1:0] rc_row; logic [OW-1:0] rc_col; logic [RW-1:0] rc_rows;
    acc_t          ln_o;  logic ln_ov, ln_or, ln_ir;
    acc_t          rf_i;  logic rf_iv, rf_ir;
    i8_t           rf_o;  logic rf_ov, rf_or;
    i8_t           ge_o;  logic ge_ov, ge_ir;
    i8_t           out_d; logic out_v;
    logic          is_ln, is_ge;
    assign is_ln = (cfg_post_op == POST_LN);
    assign is_ge = (cfg_post_op == POST_GELU);

    axis_receiver #(.RW(RW), .OW(OW)) u_rcv (
      .clk, .rst_n, .start(phase_go), .row_base(RW'(a)), .row_step(RW'(A0)), .row_len(cfg_n0),
      .s_tdata(h0_out_d[a]), .s_tvalid(h0_out_v[a]), .s_tlast(h0_out_l[a]), .s_tready(h0_out_r[a]),
      .m_data(rc_d), .m_valid(rc_v), .m_row(rc_row), .m_col(rc_col), .m_eol(rc_eol), .m_ready(rc_r),
      .rows_rcvd(rc_rows), .framing_errors(ferr0_l[a])
    );

    layernorm #(.MAX_N(MAX_N0)) u_ln (
      .clk, .rst_n, .n(($clog2(MAX_N0+1))'(cfg_n0)),
      .cfg_we(ln_cfg_we), .cfg_idx(ln_cfg_idx), .cfg_gamma(ln_cfg_gamma), .cfg_beta(ln_cfg_beta),
      .s_data(rc_d), .s_valid(rc_v && is_ln), .s_ready(ln_ir),
      .m_data(ln_o), .m_valid(ln_ov), .m_ready(ln_or), .rows_done(ln_rows_l[a])
    );

    assign rc_r  = is_ln ? ln_ir : rf_ir;
    assign rf_i  = is_ln ? ln_o  : rc_d;
    assign rf_iv = is_ln ? ln_ov : rc_v;
    assign ln_or = is_ln && rf_ir;

    reformat u_rf (
      .clk, .rst_n, .mult(cfg_rf0_mult), .shift(cfg_rf0_shift),
      .s_data(rf_i), .s_valid(rf_iv), .s_ready(rf_ir),
      .m_data(rf_o), .m_valid(rf_ov), .m_ready(rf_or), .sat_count(sat0_l[a])
    );

    gelu u_gelu (
      .clk, .rst_n, .s_data(rf_o), .s_valid(rf_ov && is_ge), .s_ready(ge_ir),
      .m_data(ge_o), .m_valid(ge_ov), .m_ready(1'b1)
    );
    assign rf_or = is_ge ? ge_ir : 1'b1;
    assign out_d = is_ge ? ge_o  : rf_o;
    assign out_v = is_ge ? ge_ov : rf_ov;
    assign gelu_fire_l[a] = is_ge && ge_ov;

    // writer: lane a produces rows a, a+A0, ...; columns split into B1 blocks of w1_1
    logic [RW-1:0] wr_r; logic [OW-1:0] wr_c, wr_o; logic [$clog2(B1+1)-1:0] wr_b;
    assign lb_we[a]  = out_v;
    assign lb_row[a] = wr_r;
    assign lb_cb[a]  = wr_b;
    assign lb_co[a]  = wr_o;
    assign lb_wd[a]  = out_d;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wr_r <= '0; wr_c <= '0; wr_o <= '0; wr_b <= '0; lane_rows[a] <= '0;
      end else if (phase_go) begin
        wr_r <= RW'(a); wr_c <= '0; wr_o <= '0; wr_b <= '0; lane_rows[a] <= '0;
      end else if (out_v) begin
        if (wr_c == cfg_n0 - 1'b1) begin
          wr_c <= '0; wr_o <= '0; wr_b <= '0; wr_r <= wr_r + RW'(A0);
          lane_rows[a] <= lane_rows[a] + 1'b1;
        end else begin
          wr_c <= wr_c + 1'b1;
          if (wr_o == w1_1 - 1'b1) begin wr_o <= '0; wr_b <= wr_b + 1'b1; end
          else wr_o <= wr_o + 1'b1;
        end
      end
    end
  end

  logic                     lr_re [PR_L*B1];
  logic [$clog2(LDEP)-1:0]  lr_ra [PR_L*B1];
  logic [7:0]               lr_rd [PR_L*B1];
  force_partition_buffer #(.W(8), .PR(PR_L), .PC(B1), .NW(A0), .DEPTH(LDEP), .RW(RW), .OW(OW)) u_buff_l (
    .clk, .seg_len(w1_1),
    .wr_en(lb_we), .wr_row(lb_row), .wr_cblk(lb_cb), .wr_coff(lb_co), .wr_data(lb_wd),
    .rd_en(lr_re), .rd_addr(lr_ra), .rd_data(lr_rd)
  );

  // ------------------------------------------------------------------ Buff R + Transpose
  logic                     rb_we [1];
  logic [RW-1:0]            rb_row [1];
  logic [$clog2(B1+1)-1:0]  rb_cb [1];
  logic [OW-1:0]            rb_co [1];
  logic [7:0]               rb_wd [1];
  logic                     rr_re [B1];
  logic [$clog2(RDEP)-1:0]  rr_ra [B1];
  logic [7:0]               rr_rd [B1];
  assign rb_we[0]  = load_byte && st == S_LOAD_K;
  assign rb_row[0] = ld_r;
  assign rb_cb[0]  = ($clog2(B1+1))'(ld_b);
  assign rb_co[0]  = ld_o;
  assign rb_wd[0]  = dma_rd_data;
  force_partition_buffer #(.W(8), .PR(1), .PC(B1), .NW(1), .DEPTH(RDEP), .RW(RW), .OW(OW)) u_buff_r (
    .clk, .seg_len(w1_1),
    .wr_en(rb_we), .wr_row(rb_row), .wr_cblk(rb_cb), .wr_coff(rb_co), .wr_data(rb_wd),
    .rd_en(rr_re), .rd_addr(rr_ra), .rd_data(rr_rd)
  );

  logic [7:0] gr_d [B1];
  logic       gr_v [B1], gr_l [B1], gr_r [B1];
  logic       gr_busy, gr_wait;
  logic [RW-1:0] n1_rows [1];
  assign n1_rows[0] = RW'(cfg_n1);
  axis_generator #(.NA(1), .NB(B1), .PR(1), .A_PROD(1), .DEPTH(RDEP), .RW(RW), .OW(OW)) u_gen_r (
    .clk, .rst_n, .start(k_go), .rows(RW'(cfg_n1)), .seg_len(w1_1),
    .gate_en(1'b0), .rows_done(n1_rows), .busy(gr_busy), .gate_wait(gr_wait),
    .rd_en(rr_re), .rd_addr(rr_ra), .rd_data(rr_rd),
    .m_tdata(gr_d), .m_tvalid(gr_v), .m_tlast(gr_l), .m_tready(gr_r)
  );

  i8_t  h1_rhs_d [C1*B1];
  logic h1_rhs_v [C1*B1], h1_rhs_l [C1*B1], h1_rhs_r [C1*B1];
  for (genvar b = 0; b < B1; b++) begin : g_tr
    logic [7:0] t_d;
    transpose #(.W(8), .MAXR(MAX_N1), .MAXC(W1_1)) u_tr (
      .clk, .rst_n, .nrows(($clog2(MAX_N1+1))'(cfg_n1)), .ncols(($clog2(W1_1+1))'(w1_1)),
      .s_tdata(gr_d[b]), .s_tvalid(gr_v[b]), .s_tready(gr_r[b]),
      .m_tdata(t_d), .m_tvalid(h1_rhs_v[b]), .m_tlast(h1_rhs_l[b]), .m_tready(h1_rhs_r[b])
    );
    assign h1_rhs_d[b] = i8_t'(t_d);
  end

  // ------------------------------------------------------------------ Acc1
  i8_t   h1_lhs_d [A1*B1];
  logic  h1_lhs_v [A1*B1], h1_lhs_l [A1*B1], h1_lhs_r [A1*B1];
  acc_t  h1_out_d [A1*C1];
  logic  h1_out_v [A1*C1], h1_out_l [A1*C1], h1_out_r [A1*C1];
  logic  h1_loaded;
  logic [7:0] g1_d [A1*B1];
  logic  g1_busy, g1_wait;

  axis_generator #(.NA(A1), .NB(B1), .PR(PR_L), .A_PROD(A0), .DEPTH(LDEP), .RW(RW), .OW(OW)) u_gen1 (
    .clk, .rst_n, .start(phase_go), .rows(cfg_m), .seg_len(w1_1),
    .gate_en(1'b1), .rows_done(lane_rows), .busy(g1_busy), .gate_wait(g1_wait),
    .rd_en(lr_re), .rd_addr(lr_ra), .rd_data(lr_rd),
    .m_tdata(g1_d), .m_tvalid(h1_lhs_v), .m_tlast(h1_lhs_l), .m_tready(h1_lhs_r)
  );
  for (genvar i = 0; i < A1*B1; i++) begin : g_h1d
    assign h1_lhs_d[i] = i8_t'(g1_d[i]);
  end

  hmm_type1 #(.A(A1), .B(B1), .C(C1), .W1(W1_1), .W2(W2_1)) u_hmm1 (
    .clk, .rst_n,
    .w1_len(($clog2(W1_1+1))'(w1_1)), .w2_len(($clog2(W2_1+1))'(cfg_n1)),
    .rhs_clear(k_go), .rhs_loaded(h1_loaded),
    .rhs_tdata(h1_rhs_d), .rhs_tvalid(h1_rhs_v), .rhs_tlast(h1_rhs_l), .rhs_tready(h1_rhs_r),
    .lhs_tdata(h1_lhs_d), .lhs_tvalid(h1_lhs_v), .lhs_tlast(h1_lhs_l), .lhs_tready(h1_lhs_r),
    .out_tdata(h1_out_d), .out_tvalid(h1_out_v), .out_tlast(h1_out_l), .out_tready(h1_out_r)
  );

  // HCE1 lanes -> output buffer (A1 x 1 banks)
  logic                     ob_we  [A1];
  logic [RW-1:0]            ob_row [A1];
  logic [0:0]               ob_cb  [A1];
  logic [OW-1:0]            ob_co  [A1];
  logic [7:0]               ob_wd  [A1];
  logic [RW-1:0]            out_rows [A1];
  logic [31:0]              sm_rows_l [A1];
  logic [31:0]              sat1_l [A1];
  logic [15:0]              ferr1_l [A1];

  for (genvar a = 0; a < A1; a++) begin : g_hce1
    acc_t          rc_d;  logic rc_v, rc_r, rc_eol;
    logic [RW-1:0] rc_row; logic [OW-1:0] rc_col; logic [RW-1:0] rc_rows;
    acc_t          sm_o;  logic sm_ov, sm_or;
    i8_t           rf_o;  logic rf_ov;

    axis_receiver #(.RW(RW), .OW(OW)) u_rcv (
      .clk, .rst_n, .start(phase_go), .row_base(RW'(a)), .row_step(RW'(A1)), .row_len(cfg_n1),
      .s_tdata(h1_out_d[a]), .s_tvalid(h1_out_v[a]), .s_tlast(h1_out_l[a]), .s_tready(h1_out_r[a]),
      .m_data(rc_d), .m_valid(rc_v), .m_row(rc_row), .m_col(rc_col), .m_eol(rc_eol), .m_ready(rc_r),
      .rows_rcvd(rc_rows), .framing_errors(ferr1_l[a])
    );
    softmax #(.MAX_N(MAX_N1)) u_sm (
      .clk, .rst_n, .n(($clog2(MAX_N1+1))'(cfg_n1)), .shift(cfg_sm_shift),
      .s_data(rc_d), .s_valid(rc_v), .s_ready(rc_r),
      .m_data(sm_o), .m_valid(sm_ov), .m_ready(sm_or), .rows_done(sm_rows_l[a])
    );
    reformat u_rf (
      .clk, .rst_n, .mult(cfg_rf1_mult), .shift(cfg_rf1_shift),
      .s_data(sm_o), .s_valid(sm_ov), .s_ready(sm_or),
      .m_data(rf_o), .m_valid(rf_ov), .m_ready(1'b1), .sat_count(sat1_l[a])
    );

    logic [RW-1:0] wr_r; logic [OW-1:0] wr_c;
    assign ob_we[a]  = rf_ov;
    assign ob_row[a] = wr_r;
    assign ob_cb[a]  = 1'b0;
    assign ob_co[a]  = wr_c;
    assign ob_wd[a]  = rf_o;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wr_r <= '0; wr_c <= '0; out_rows[a] <= '0;
      end else if (phase_go) begin
        wr_r <= RW'(a); wr_c <= '0; out_rows[a] <= '0;
      end else if (rf_ov) begin
        if (wr_c == cfg_n1 - 1'b1) begin
          wr_c <= '0; wr_r <= wr_r + RW'(A1); out_rows[a] <= out_rows[a] + 1'b1;
        end else wr_c <= wr_c + 1'b1;
      end
    end
  end

  logic                     or_re [A1];
  logic [$clog2(ODEP)-1:0]  or_ra [A1];
  logic [7:0]               or_rd [A1];
  force_partition_buffer #(.W(8), .PR(A1), .PC(1), .NW(A1), .DEPTH(ODEP), .RW(RW), .OW(OW)) u_obuf (
    .clk, .seg_len(cfg_n1),
    .wr_en(ob_we), .wr_row(ob_row), .wr_cblk(ob_cb), .wr_coff(ob_co), .wr_data(ob_wd),
    .rd_en(or_re), .rd_addr(or_ra), .rd_data(or_rd)
  );

  always_comb begin
    int total;
    total = 0;
    for (int a = 0; a < A1; a++) total += int'(out_rows[a]);
    run_finished = (total == int'(cfg_m)) && h1_loaded;
  end

  // ------------------------------------------------------------------ store walker
  logic [RW-1:0] s_r;  logic [OW-1:0] s_c;
  logic          s_active, s_pend, s_issue;
  logic [$clog2(A1+1)-1:0] s_pend_bank;
  logic [31:0]   s_sent;
  logic [7:0]    sf_dout, s_pend_data;
  logic          sf_empty, sf_full;
  logic [2:0]    sf_cnt;
  assign s_issue = (st == S_STORE) && s_active && ((int'(sf_cnt) + (s_pend ? 1 : 0)) < 4);
  for (genvar a = 0; a < A1; a++) begin : g_ord
    assign or_re[a] = s_issue && (int'(s_r) % A1 == a);
    assign or_ra[a] = ($clog2(ODEP))'((int'(s_r) / A1) * int'(cfg_n1) + int'(s_c));
  end
  always_comb begin
    s_pend_data = '0;
    for (int a = 0; a < A1; a++) if (a == int'(s_pend_bank)) s_pend_data = or_rd[a];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_r <= '0; s_c <= '0; s_active <= 1'b0; s_pend <= 1'b0; s_pend_bank <= '0; s_sent <= '0;
    end else begin
      s_pend <= s_issue;
      if (s_issue) s_pend_bank <= ($clog2(A1+1))'(int'(s_r) % A1);
      if (st == S_RUN) begin
        s_r <= '0; s_c <= '0; s_active <= (cfg_m != 0); s_sent <= '0;
      end else if (s_issue) begin
        if (s_c == cfg_n1 - 1'b1) begin
          s_c <= '0; s_r <= s_r + 1'b1;
          if (s_r == cfg_m - 1'b1) s_active <= 1'b0;
        end else s_c <= s_c + 1'b1;
      end
      if (dma_wr_valid && dma_wr_ready) s_sent <= s_sent + 1'b1;
    end
  end
  sync_fifo #(.W(8), .DEPTH(4)) u_sfifo (
    .clk, .rst_n, .wr(s_pend), .din(s_pend_data),
    .rd(!sf_empty && dma_wr_ready),
    .dout(sf_dout), .empty(sf_empty), .full(sf_full), .count(sf_cnt)
  );
  // after the last result byte, zero padding up to a whole beat
  assign dma_wr_valid   = !sf_empty || (s_sent >= phase_bytes && st == S_STORE);
  assign dma_wr_data    = sf_empty ? 8'h00 : sf_dout;
  assign store_finished = (s_sent >= phase_bytes);

  // ------------------------------------------------------------------ status
  logic any_h0, any_h1, any_stall;
  always_comb begin
    any_h0 = 1'b0; any_h1 = 1'b0; any_stall = 1'b0;
    for (int i = 0; i < A0*B0; i++) begin
      any_h0    |= h0_lhs_v[i] && h0_lhs_r[i];
      any_stall |= h0_lhs_v[i] && !h0_lhs_r[i];
    end
    for (int i = 0; i < A1*B1; i++) begin
      any_h1    |= h1_lhs_v[i] && h1_lhs_r[i];
      any_stall |= h1_lhs_v[i] && !h1_lhs_r[i];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stat_run_cycles <= '0; stat_overlap_cycles <= '0; stat_gate_wait_cycles <= '0;
      stat_stall_cycles <= '0; stat_gelu_elems <= '0;
    end else if (st == S_IDLE && start) begin
      stat_run_cycles <= '0; stat_overlap_cycles <= '0; stat_gate_wait_cycles <= '0;
      stat_stall_cycles <= '0; stat_gelu_elems <= '0;
    end else if (st == S_RUN) begin
      stat_run_cycles <= stat_run_cycles + 1'b1;
      if (any_h0 && any_h1) stat_overlap_cycles <= stat_overlap_cycles + 1'b1;
      if (g1_wait && h1_loaded) stat_gate_wait_cycles <= stat_gate_wait_cycles + 1'b1;
      if (any_stall) stat_stall_cycles <= stat_stall_cycles + 1'b1;
      for (int a = 0; a < A0; a++) if (gelu_fire_l[a]) stat_gelu_elems <= stat_gelu_elems + 1'b1;
    end
  end
  always_comb begin
    stat_saturations = '0; stat_ln_rows = '0; stat_sm_rows = '0; stat_errors = dma_errors;
    for (int a = 0; a < A0; a++) begin
      stat_saturations += sat0_l[a]; stat_ln_rows += ln_rows_l[a]; stat_errors += ferr0_l[a];
    end
    for (int a = 0; a < A1; a++) begin
      stat_saturations += sat1_l[a]; stat_sm_rows += sm_rows_l[a]; stat_errors += ferr1_l[a];
    end
  end
endmodule
