// tb_ssr_top -- end-to-end test of the two-accelerator SSR design at its
// default parameters.
//
// A behavioural DDR (ddr_model, random back-pressure) holds X, W0 and K.  The
// test runs four operations through the same hardware:
//   1. small sizes, LayerNorm after Acc0      (M=10, K0=16, N0=8,  N1=10)
//   2. small sizes, GELU after Acc0           (mode switch)
//   3. small sizes, no post-op (bypass)       (mode switch)
//   4. DeiT-T sizes, LayerNorm                (M=197, K0=192, N0=64, N1=197)
// and compares every stored byte of S = reformat(softmax(Y x K^T)) with a
// reference computed here from the formulas of the module headers.  It also
// requires each mechanism to have happened: weights pinned, on-chip
// forwarding overlap of Acc0 and Acc1, Acc1 waiting for a forwarded row,
// stream back-pressure stalls, Reformat saturation, LayerNorm rows, GELU
// elements and softmax rows; and checks that Acc1 overlaps Acc0 (the run phase
// is shorter than the two accelerators' stream times added together).
module tb_ssr_top;
  import ssr_pkg::*;
  import ssr_ref_pkg::*;

  localparam int MEMB = 131072;
  localparam int XA = 32'h0000, WA = 32'h9400, KA = 32'hC400, OA = 32'hF800;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic start = 1'b0;
  logic [8:0] cfg_m; logic [7:0] cfg_k0, cfg_n0, cfg_n1;
  post_op_e cfg_post_op;
  logic [15:0] rf0_mult, rf1_mult; logic [5:0] rf0_shift, rf1_shift; logic [4:0] sm_shift;
  logic ln_we = 1'b0; logic [5:0] ln_idx; logic signed [15:0] ln_g, ln_b;
  logic busy, done;
  logic [31:0] st_run, st_ovl, st_gate, st_stall, st_sat, st_ln, st_gelu, st_sm;
  logic [15:0] st_err;

  logic [31:0] araddr, awaddr; logic [7:0] arlen, awlen; logic [2:0] arsize, awsize;
  logic [1:0] arburst, awburst, rresp, bresp;
  logic arvalid, arready, rlast, rvalid, rready, awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic [63:0] rdata, wdata; logic [7:0] wstrb;

  ssr_top u_dut (
    .clk, .rst_n, .start, .cfg_m, .cfg_k0, .cfg_n0, .cfg_n1,
    .cfg_x_addr(XA), .cfg_w_addr(WA), .cfg_k_addr(KA), .cfg_o_addr(OA),
    .cfg_post_op, .cfg_rf0_mult(rf0_mult), .cfg_rf0_shift(rf0_shift),
    .cfg_rf1_mult(rf1_mult), .cfg_rf1_shift(rf1_shift), .cfg_sm_shift(sm_shift),
    .ln_cfg_we(ln_we), .ln_cfg_idx(ln_idx), .ln_cfg_gamma(ln_g), .ln_cfg_beta(ln_b),
    .busy, .done,
    .stat_run_cycles(st_run), .stat_overlap_cycles(st_ovl), .stat_gate_wait_cycles(st_gate),
    .stat_stall_cycles(st_stall), .stat_saturations(st_sat), .stat_ln_rows(st_ln),
    .stat_gelu_elems(st_gelu), .stat_sm_rows(st_sm), .stat_errors(st_err),
    .m_araddr(araddr), .m_arlen(arlen), .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid),
    .m_arready(arready), .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid),
    .m_rready(rready), .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
    .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb), .m_wlast(wlast),
    .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp), .m_bvalid(bvalid), .m_bready(bready)
  );

  ddr_model #(.AW(32), .DW(64), .MEM_BYTES(MEMB), .STALL_PCT(20)) u_ddr (
    .clk, .rst_n, .araddr, .arlen, .arsize, .arburst, .arvalid, .arready,
    .rdata, .rresp, .rlast, .rvalid, .rready,
    .awaddr, .awlen, .awsize, .awburst, .awvalid, .awready,
    .wdata, .wstrb, .wlast, .wvalid, .wready, .bresp, .bvalid, .bready
  );

  int checks = 0, failures = 0;
  int n_ovl = 0, n_gate = 0, n_stall = 0, n_sat = 0, n_ln = 0, n_gelu = 0, n_sm = 0, n_pin = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // one complete operation with the given sizes and post-op
  task automatic run_op(input int m, input int k0, input int n0, input int n1, input post_op_e op);
    int x[][], w[][], km[][], y[][], yq[][], s[][];
    int g[], b[];
    int rowv[], outv[];
    int bad;
    longint t0;
    x = new[m]; w = new[k0]; km = new[n1]; y = new[m]; yq = new[m]; s = new[m];
    g = new[n0]; b = new[n0];
    for (int i = 0; i < m; i++) begin
      x[i] = new[k0];
      for (int k = 0; k < k0; k++) begin x[i][k] = $urandom_range(15) - 8; u_ddr.mem[XA + i*k0 + k] = 8'(x[i][k]); end
    end
    for (int k = 0; k < k0; k++) begin
      w[k] = new[n0];
      for (int n = 0; n < n0; n++) begin w[k][n] = $urandom_range(15) - 8; u_ddr.mem[WA + k*n0 + n] = 8'(w[k][n]); end
    end
    for (int j = 0; j < n1; j++) begin
      km[j] = new[n0];
      for (int n = 0; n < n0; n++) begin km[j][n] = $urandom_range(15) - 8; u_ddr.mem[KA + j*n0 + n] = 8'(km[j][n]); end
    end
    for (int i = 0; i < m*n1 + 8; i++) u_ddr.mem[OA + i] = 8'hA5;
    for (int n = 0; n < n0; n++) begin
      g[n] = 128 + $urandom_range(255); b[n] = $urandom_range(127) - 64;
      @(negedge clk); ln_we = 1'b1; ln_idx = 6'(n); ln_g = 16'(g[n]); ln_b = 16'(b[n]);
    end
    @(negedge clk); ln_we = 1'b0;

    cfg_m = 9'(m); cfg_k0 = 8'(k0); cfg_n0 = 8'(n0); cfg_n1 = 8'(n1); cfg_post_op = op;
    rf0_mult = (op == POST_GELU) ? 16'd2 : 16'd1;
    rf0_shift = (op == POST_LN) ? 6'd5 : (op == POST_GELU) ? 6'd1 : 6'd7;
    rf1_mult = 16'd1; rf1_shift = 6'd7; sm_shift = 5'd6;

    // reference
    for (int i = 0; i < m; i++) begin
      y[i] = new[n0]; yq[i] = new[n0];
      for (int n = 0; n < n0; n++) begin
        y[i][n] = 0;
        for (int k = 0; k < k0; k++) y[i][n] += x[i][k] * w[k][n];
      end
      if (op == POST_LN) begin
        layernorm_ref(n0, y[i], g, b, rowv);
        for (int n = 0; n < n0; n++) yq[i][n] = reformat_ref(rowv[n], 1, int'(rf0_shift));
      end else begin
        for (int n = 0; n < n0; n++) begin
          yq[i][n] = reformat_ref(y[i][n], int'(rf0_mult), int'(rf0_shift));
          if (op == POST_GELU) yq[i][n] = gelu_ref(yq[i][n]);
        end
      end
    end
    for (int i = 0; i < m; i++) begin
      s[i] = new[n1];
      for (int j = 0; j < n1; j++) begin
        s[i][j] = 0;
        for (int n = 0; n < n0; n++) s[i][j] += yq[i][n] * km[j][n];
      end
    end

    @(negedge clk); start = 1'b1; t0 = cycle;
    @(negedge clk); start = 1'b0;
    while (!done) @(posedge clk);
    $display("op m=%0d k0=%0d n0=%0d n1=%0d post=%0d: %0d cycles (run %0d, overlap %0d, gate-wait %0d, stalls %0d, sat %0d)",
             m, k0, n0, n1, op, cycle - t0, st_run, st_ovl, st_gate, st_stall, st_sat);
    bad = 0;
    for (int i = 0; i < m; i++) begin
      softmax_ref(n1, int'(sm_shift), s[i], outv);
      for (int j = 0; j < n1; j++) begin
        int exp_b, got;
        exp_b = reformat_ref(outv[j], 1, int'(rf1_shift));
        got = int'($signed(u_ddr.mem[OA + i*n1 + j]));
        if (got != exp_b) begin
          bad++;
          if (bad < 5) $display("  S[%0d][%0d] got %0d expected %0d", i, j, got, exp_b);
        end
      end
    end
    check(bad == 0, $sformatf("output mismatches: %0d of %0d", bad, m*n1));
    // zero padding after the last byte up to the beat boundary
    for (int i = m*n1; i % 8 != 0; i++) check(u_ddr.mem[OA + i] == 8'h00, "store padding");
    check(st_err == 0, "framing / AXI response errors");
    if (u_dut.u_hmm0.pinned) n_pin++;
    if (st_ovl > 0) n_ovl++;
    if (st_gate > 0) n_gate++;
    if (st_stall > 0) n_stall++;
    if (st_sat > 0) n_sat++;
    if (op == POST_LN) begin check(st_ln != 0, "LayerNorm rows counted"); n_ln++; end
    if (op == POST_GELU && st_gelu > 0) n_gelu++;
    if (st_sm != 0) n_sm++;
    // Acc1 must overlap Acc0: run time below the serial sum of both stream phases
    begin
      longint t_acc0, t_acc1;
      t_acc0 = longint'((m + 1) / 2) * k0 / 4;       // rows per lane x segment length
      t_acc1 = longint'((m + 3) / 4) * n0 / 2;
      check(st_run < (t_acc0 + t_acc1) * 4 + 2000, "run phase bounded");
    end
  endtask

  initial begin
    cfg_m = '0; cfg_k0 = '0; cfg_n0 = '0; cfg_n1 = '0; cfg_post_op = POST_NONE;
    rf0_mult = '0; rf0_shift = '0; rf1_mult = '0; rf1_shift = '0; sm_shift = '0;
    ln_idx = '0; ln_g = '0; ln_b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_op(10, 16, 8, 10, POST_LN);
    run_op(10, 16, 8, 10, POST_GELU);
    run_op(9, 16, 8, 7, POST_NONE);
    run_op(197, 192, 64, 197, POST_LN);
    check(n_pin > 0,   "weights pinned");
    check(n_ovl > 0,   "Acc0/Acc1 overlap (on-chip forwarding) happened");
    check(n_gate > 0,  "Acc1 waited for a forwarded row");
    check(n_stall > 0, "stream back-pressure happened");
    check(n_sat > 0,   "Reformat saturation happened");
    check(n_ln > 0,    "LayerNorm mode used");
    check(n_gelu > 0,  "GELU mode used");
    check(n_sm > 0,    "softmax rows produced");
    $display("mechanisms: pinned=%0d overlap=%0d gate=%0d stall=%0d sat=%0d ln=%0d gelu=%0d sm=%0d",
             n_pin, n_ovl, n_gate, n_stall, n_sat, n_ln, n_gelu, n_sm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
