// transpose -- data layout change unit of an HCE (Fig. 6 SSR-HCE1 "Transpose").
//
// A tile of nrows x ncols elements enters row-major (one element per beat) and
// leaves column-major, TLAST on the last element of the tile.  Two tile
// buffers are used in ping-pong fashion: while one tile is read out, the next
// is written, so the unit streams at one element per cycle after the first
// tile.  In this design it turns the stored K matrix (tokens x head dim) into
// the k-major RHS stream that loads an HMM-Type1 array.  The buffers are read
// asynchronously (LUT/register storage, matching the paper's Table 8 which
// reports no BRAM for Transpose); buffer organisation is this RTL's choice.
module transpose #(
  parameter int W    = 8,
  parameter int MAXR = 197,
  parameter int MAXC = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [$clog2(MAXR+1)-1:0] nrows,
  input  logic [$clog2(MAXC+1)-1:0] ncols,
  input  logic [W-1:0]              s_tdata,
  input  logic                      s_tvalid,
  output logic                      s_tready,
  output logic [W-1:0]              m_tdata,
  output logic                      m_tvalid,
  output logic                      m_tlast,
  input  logic                      m_tready
);
  localparam int N  = MAXR * MAXC;
  localparam int AW = $clog2(N);
  logic [W-1:0] mem0 [N];
  logic [W-1:0] mem1 [N];
  logic         full [2];
  logic         wb, rb;
  logic [AW-1:0] wa, ra;
  logic [$clog2(MAXR+1)-1:0] rr;
  logic [$clog2(MAXC+1)-1:0] rc;
  logic [AW:0]  total;

  assign total    = (AW+1)'(nrows) * (AW+1)'(ncols);
  assign s_tready = !full[wb];
  assign m_tvalid = full[rb];
  assign m_tdata  = rb ? mem1[ra] : mem0[ra];
  assign m_tlast  = (rr == nrows - 1'b1) && (rc == ncols - 1'b1);

  always_ff @(posedge clk) begin
    if (s_tvalid && s_tready) begin
      if (wb) mem1[wa] <= s_tdata;
      else    mem0[wa] <= s_tdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full[0] <= 1'b0; full[1] <= 1'b0; wb <= 1'b0; rb <= 1'b0;
      wa <= '0; ra <= '0; rr <= '0; rc <= '0;
    end else begin
      if (s_tvalid && s_tready) begin
        if ((AW+1)'(wa) == total - 1'b1) begin
          wa <= '0; full[wb] <= 1'b1; wb <= !wb;
        end else wa <= wa + 1'b1;
      end
      if (m_tvalid && m_tready) begin
        if (rr == nrows - 1'b1) begin
          rr <= '0;
          if (rc == ncols - 1'b1) begin
            rc <= '0; ra <= '0; full[rb] <= 1'b0; rb <= !rb;
          end else begin
            rc <= rc + 1'b1; ra <= AW'(rc + 1'b1);
          end
        end else begin
          rr <= rr + 1'b1; ra <= ra + AW'(ncols);
        end
      end
    end
  end
endmodule
