// sync_fifo -- single-clock show-ahead FIFO used as line buffer and skid storage.
//
// The head element is visible on dout whenever empty is low; a read (rd) pops it.
// Write and read may happen in the same cycle.  DEPTH need not be a power of two.
// count reports the occupancy.  Overflow and underflow are checked by assertions.
module sync_fifo #(
  parameter int W     = 32,
  parameter int DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr,
  input  logic [W-1:0]               din,
  input  logic                       rd,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int CW = $clog2(DEPTH+1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rp];

  always_ff @(posedge clk) begin
    if (wr && !full) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (wr && !full) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd && !empty) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + CW'(wr && !full) - CW'(rd && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd && empty));
endmodule
