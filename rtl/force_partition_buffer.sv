// force_partition_buffer -- banked on-chip RAM with a forced bank partition
// for conflict-free on-chip forwarding between two spatial accelerators.
//
// The matrix held here is split into PR x PC banks: element (row, col) lives in
// bank (row mod PR, col / seg_len) at address (row / PR) * seg_len + col mod
// seg_len.  The producer writes through NW lanes, lane l owning rows
// r = l (mod NW); the consumer reads through one port per bank.  Section 4.3
// (Fig. 8) chooses the partition so that it is divisible by both sides'
// parallelism: with PR a multiple of the producer's A and of the consumer's A,
// and PC equal to the consumer's B, every bank has exactly one writing lane and
// one reading stream, so the producer never stalls on a bank conflict and the
// forwarding overlaps its computation.  Fig. 8(b) forces a 4 x 2 partition for
// a 2 x 2 producer and a 4 x 1 consumer; Fig. 6 draws Buff L as banks B0..B7.
// Writers give (row, column block, offset) so that no run-time divider is
// needed.  Reads return data one cycle after rd_en.  Each bank is a simple
// dual-port RAM (one write, one read per cycle).
module force_partition_buffer #(
  parameter int W     = 8,
  parameter int PR    = 4,     // row partition
  parameter int PC    = 2,     // column partition
  parameter int NW    = 2,     // producer write lanes
  parameter int DEPTH = 1600,  // words per bank
  parameter int RW    = 9,     // row index width
  parameter int OW    = 8      // column offset / segment length width
) (
  input  logic                     clk,
  input  logic [OW-1:0]            seg_len,
  input  logic                     wr_en   [NW],
  input  logic [RW-1:0]            wr_row  [NW],
  input  logic [$clog2(PC+1)-1:0]  wr_cblk [NW],
  input  logic [OW-1:0]            wr_coff [NW],
  input  logic [W-1:0]             wr_data [NW],
  input  logic                     rd_en   [PR*PC],
  input  logic [$clog2(DEPTH)-1:0] rd_addr [PR*PC],
  output logic [W-1:0]             rd_data [PR*PC]
);
  localparam int AW = $clog2(DEPTH);

  initial begin
    assert (PR % NW == 0) else $error("force partition: PR=%0d not a multiple of NW=%0d", PR, NW);
  end

  for (genvar pr = 0; pr < PR; pr++) begin : g_r
    for (genvar pc = 0; pc < PC; pc++) begin : g_c
      localparam int L = pr % NW;      // the only lane that can write this bank
      logic [W-1:0] mem [DEPTH];
      logic         we;
      logic [AW-1:0] wa;
      assign we = wr_en[L] && (int'(wr_row[L]) % PR == pr) && (int'(wr_cblk[L]) == pc);
      assign wa = AW'((int'(wr_row[L]) / PR) * int'(seg_len) + int'(wr_coff[L]));
      always_ff @(posedge clk) begin
        if (we) mem[wa] <= wr_data[L];
        if (rd_en[pr*PC+pc]) rd_data[pr*PC+pc] <= mem[rd_addr[pr*PC+pc]];
      end
    end
  end

  // lane ownership: a lane only writes its own rows, so banks never collide
  for (genvar l = 0; l < NW; l++) begin : g_chk
    a_lane_owner: assert property (@(posedge clk) wr_en[l] |-> (int'(wr_row[l]) % NW == l));
    a_cblk_range: assert property (@(posedge clk) wr_en[l] |-> (int'(wr_cblk[l]) < PC));
  end
endmodule
