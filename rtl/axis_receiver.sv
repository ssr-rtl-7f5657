// axis_receiver -- "AXI Stream Receiver" of an HCE: terminates one HMM output
// stream and hands its INT32 words to the element-wise and nonlinear units.
//
// The stream of output chain (a,c) carries result rows r = a, a+step, ... one
// word per beat, row_len words per row, TLAST on the last.  The receiver tags
// each word with its row and column, raises eol on the last word of a row, and
// counts framing errors (TLAST not where the row length says) and completed
// rows.  It adds no latency: tready follows the downstream ready.
module axis_receiver
  import ssr_pkg::*;
#(
  parameter int RW = 9,
  parameter int OW = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,        // reset row/column tracking
  input  logic [RW-1:0] row_base,
  input  logic [RW-1:0] row_step,
  input  logic [OW-1:0] row_len,
  input  acc_t          s_tdata,
  input  logic          s_tvalid,
  input  logic          s_tlast,
  output logic          s_tready,
  output acc_t          m_data,
  output logic          m_valid,
  output logic [RW-1:0] m_row,
  output logic [OW-1:0] m_col,
  output logic          m_eol,
  input  logic          m_ready,
  output logic [RW-1:0] rows_rcvd,
  output logic [15:0]   framing_errors
);
  logic [RW-1:0] row;
  logic [OW-1:0] col;

  assign s_tready = m_ready;
  assign m_valid  = s_tvalid;
  assign m_data   = s_tdata;
  assign m_row    = row;
  assign m_col    = col;
  assign m_eol    = (col == row_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row <= '0; col <= '0; rows_rcvd <= '0; framing_errors <= '0;
    end else if (start) begin
      row <= row_base; col <= '0; rows_rcvd <= '0;
    end else if (s_tvalid && s_tready) begin
      if (s_tlast != m_eol) framing_errors <= framing_errors + 1'b1;
      if (m_eol) begin
        col <= '0; row <= row + row_step; rows_rcvd <= rows_rcvd + 1'b1;
      end else col <= col + 1'b1;
    end
  end
endmodule
