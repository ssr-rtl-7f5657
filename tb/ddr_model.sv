// ddr_model -- behavioural AXI4 slave standing in for the DDR4 memory behind
// the NoC.  Byte-addressed array of MEM_BYTES; one read and one write burst at
// a time; INCR bursts only.  Ready and valid are withheld at random (about
// one cycle in STALL_PCT percent) to exercise back-pressure.  Not synthesizable.
module ddr_model #(
  parameter int AW = 32,
  parameter int DW = 64,
  parameter int MEM_BYTES = 65536,
  parameter int STALL_PCT = 25
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [AW-1:0]   araddr,
  input  logic [7:0]      arlen,
  input  logic [2:0]      arsize,
  input  logic [1:0]      arburst,
  input  logic            arvalid,
  output logic            arready,
  output logic [DW-1:0]   rdata,
  output logic [1:0]      rresp,
  output logic            rlast,
  output logic            rvalid,
  input  logic            rready,
  input  logic [AW-1:0]   awaddr,
  input  logic [7:0]      awlen,
  input  logic [2:0]      awsize,
  input  logic [1:0]      awburst,
  input  logic            awvalid,
  output logic            awready,
  input  logic [DW-1:0]   wdata,
  input  logic [DW/8-1:0] wstrb,
  input  logic            wlast,
  input  logic            wvalid,
  output logic            wready,
  output logic [1:0]      bresp,
  output logic            bvalid,
  input  logic            bready
);
  localparam int NB = DW / 8;
  logic [7:0] mem [MEM_BYTES];
  logic       r_act, w_act;
  logic [AW-1:0] r_a, w_a;
  logic [8:0] r_left;
  int         bursts_r, bursts_w;

  function automatic logic [DW-1:0] rd_beat(input logic [AW-1:0] a);
    logic [DW-1:0] d;
    for (int i = 0; i < NB; i++) d[8*i +: 8] = mem[(int'(a) + i) % MEM_BYTES];
    return d;
  endfunction

  assign rresp = 2'b00;
  assign bresp = 2'b00;
  assign rdata = rd_beat(r_a);
  assign rlast = (r_left == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; r_act <= 1'b0; r_a <= '0; r_left <= '0;
      awready <= 1'b0; wready <= 1'b0; bvalid <= 1'b0; w_act <= 1'b0; w_a <= '0;
      bursts_r <= 0; bursts_w <= 0;
    end else begin
      // read
      arready <= !r_act && ($urandom_range(99) >= STALL_PCT);
      if (arvalid && arready) begin
        assert (arburst == 2'b01 && arsize == 3'($clog2(NB))) else $error("ddr_model: unsupported AR");
        r_act <= 1'b1; r_a <= araddr; r_left <= 9'(arlen) + 1'b1; arready <= 1'b0;
        bursts_r <= bursts_r + 1;
      end
      if (rvalid && rready) begin
        rvalid <= 1'b0;
        r_a <= r_a + AW'(NB);
        r_left <= r_left - 1'b1;
        if (r_left == 1) r_act <= 1'b0;
      end else if (r_act && !rvalid && !(arvalid && arready)) begin
        rvalid <= ($urandom_range(99) >= STALL_PCT);
      end
      // write
      awready <= !w_act && !bvalid && ($urandom_range(99) >= STALL_PCT);
      if (awvalid && awready) begin
        assert (awburst == 2'b01 && awsize == 3'($clog2(NB))) else $error("ddr_model: unsupported AW");
        w_act <= 1'b1; w_a <= awaddr; awready <= 1'b0;
        bursts_w <= bursts_w + 1;
      end
      wready <= w_act && ($urandom_range(99) >= STALL_PCT);
      if (wvalid && wready) begin
        for (int i = 0; i < NB; i++) if (wstrb[i]) mem[(int'(w_a) + i) % MEM_BYTES] <= wdata[8*i +: 8];
        w_a <= w_a + AW'(NB);
        wready <= 1'b0;
        if (wlast) begin w_act <= 1'b0; bvalid <= 1'b1; end
      end
      if (bvalid && bready) bvalid <= 1'b0;
    end
  end
endmodule
