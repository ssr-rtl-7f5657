// tb_softmax -- unit test of the line-buffered softmax.
// Streams random rows (several value ranges, including constant rows and rows
// with one dominant element) with random input gaps and output back-pressure,
// compares every Q1.15 output with the reference model, and checks that the
// three stages overlapped (a new row was accepted while an older one was
// still being output) and that rows_done counts rows.
module tb_softmax;
  import ssr_pkg::*;
  import ssr_ref_pkg::*;
  localparam int MAX_N = 16;
  localparam int ROWS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = !clk;

  logic [4:0] n;
  logic [4:0] shift;
  acc_t s_data, m_data; logic s_valid, s_ready, m_valid, m_ready;
  logic [31:0] rows_done;

  softmax #(.MAX_N(MAX_N)) dut (.clk, .rst_n, .n, .shift,
    .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_ready, .rows_done);

  int checks = 0, failures = 0;
  int xin[$], yexp[$];
  int overlap = 0;
  int nrow;

  always @(posedge clk) begin
    if (rst_n && m_valid && m_ready) begin
      int e;
      checks++;
      e = yexp.pop_front();
      if (m_data !== e) begin
        failures++;
        if (failures < 10) $display("FAIL: row %0d col %0d y=%0d expected %0d", (checks-1)/nrow, (checks-1)%nrow, m_data, e);
      end
    end
    if (rst_n && s_valid && s_ready && m_valid) overlap++;
    if (rst_n) m_ready <= ($urandom_range(99) < 75);
  end

  initial begin
    int x[], y[];
    n = '0; shift = 5'd4; s_data = '0; s_valid = 1'b0; m_ready = 1'b0;
    nrow = 12;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    n = 5'(nrow);
    for (int r = 0; r < ROWS; r++) begin
      int range_;
      range_ = (r % 5 == 0) ? 0 : (r % 5 == 1) ? 3 : (r % 5 == 2) ? 100 : 100000;
      x = new[nrow];
      for (int i = 0; i < nrow; i++)
        x[i] = (range_ == 0) ? -77 : int'($urandom_range(2*range_)) - range_ + ((r % 2) ? 0 : -range_ / 2);
      softmax_ref(nrow, int'(shift), x, y);
      for (int i = 0; i < nrow; i++) yexp.push_back(y[i]);
      for (int i = 0; i < nrow; i++) begin
        @(negedge clk);
        while ($urandom_range(99) < 10) begin s_valid = 1'b0; @(negedge clk); end
        s_valid = 1'b1; s_data = x[i];
        @(posedge clk); while (!s_ready) @(posedge clk);
        @(negedge clk); s_valid = 1'b0;
      end
    end
    while (yexp.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++; if (rows_done != ROWS) begin failures++; $display("FAIL: rows_done %0d", rows_done); end
    checks++; if (overlap == 0) begin failures++; $display("FAIL: stages never overlapped"); end
    $display("overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
