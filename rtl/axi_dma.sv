// axi_dma -- AXI4 master that moves data between off-chip DDR (through the
// NoC) and the PL buffers of a spatial accelerator (Sec. 4.2, Fig. 6 "AXI DMA").
//
// Read channel: rd_start with a byte address and a byte count (multiples of
// DW/8, address aligned to 16 beats) issues INCR bursts of up to 16 beats on
// AR, receives R beats, and delivers the bytes in address order on a
// byte-wide valid/ready stream.  Write channel: wr_start with address and
// count collects bytes from a byte-wide stream, packs them into DW-bit beats
// and writes them with INCR bursts on AW/W, waiting for each B response.
// One burst is outstanding per direction.  Bursts of 16 beats at 16-beat
// aligned addresses never cross a 4 KB boundary.  Data width, burst length and
// the byte-stream side are choices of this RTL; the paper gives the function.
module axi_dma #(
  parameter int AW = 32,
  parameter int DW = 64
) (
  input  logic            clk,
  input  logic            rst_n,
  // read command and byte stream out
  input  logic            rd_start,
  input  logic [AW-1:0]   rd_addr,
  input  logic [31:0]     rd_bytes,
  output logic            rd_busy,
  output logic [7:0]      rd_data,
  output logic            rd_valid,
  input  logic            rd_ready,
  // write command and byte stream in
  input  logic            wr_start,
  input  logic [AW-1:0]   wr_addr,
  input  logic [31:0]     wr_bytes,
  output logic            wr_busy,
  input  logic [7:0]      wr_data,
  input  logic            wr_valid,
  output logic            wr_ready,
  // AXI4 master
  output logic [AW-1:0]   m_araddr,
  output logic [7:0]      m_arlen,
  output logic [2:0]      m_arsize,
  output logic [1:0]      m_arburst,
  output logic            m_arvalid,
  input  logic            m_arready,
  input  logic [DW-1:0]   m_rdata,
  input  logic [1:0]      m_rresp,
  input  logic            m_rlast,
  input  logic            m_rvalid,
  output logic            m_rready,
  output logic [AW-1:0]   m_awaddr,
  output logic [7:0]      m_awlen,
  output logic [2:0]      m_awsize,
  output logic [1:0]      m_awburst,
  output logic            m_awvalid,
  input  logic            m_awready,
  output logic [DW-1:0]   m_wdata,
  output logic [DW/8-1:0] m_wstrb,
  output logic            m_wlast,
  output logic            m_wvalid,
  input  logic            m_wready,
  input  logic [1:0]      m_bresp,
  input  logic            m_bvalid,
  output logic            m_bready,
  output logic [15:0]     resp_errors
);
  localparam int NB = DW / 8;
  localparam int BEAT_SH = $clog2(NB);
  localparam int MAXB = 16;

  assign m_arsize  = 3'(BEAT_SH);
  assign m_arburst = 2'b01;
  assign m_awsize  = 3'(BEAT_SH);
  assign m_awburst = 2'b01;
  assign m_wstrb   = '1;

  // ---------------- read ----------------
  typedef enum logic [1:0] {R_IDLE, R_AR, R_DATA} rstate_e;
  rstate_e rs;
  logic [31:0]       r_beats_left;    // beats still to request
  logic [DW-1:0]     r_buf;
  logic [BEAT_SH:0]  r_bytes_in_buf;
  logic [BEAT_SH-1:0] r_idx;

  assign rd_busy  = (rs != R_IDLE) || (r_bytes_in_buf != 0);
  assign rd_valid = (r_bytes_in_buf != 0);
  assign rd_data  = r_buf[8*r_idx +: 8];
  assign m_rready = (rs == R_DATA) && ((r_bytes_in_buf == 0) || (r_bytes_in_buf == 1 && rd_ready));
  assign m_arvalid = (rs == R_AR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= R_IDLE; r_beats_left <= '0; m_araddr <= '0; m_arlen <= '0;
      r_buf <= '0; r_bytes_in_buf <= '0; r_idx <= '0;
    end else begin
      if (rd_valid && rd_ready) begin
        r_bytes_in_buf <= r_bytes_in_buf - 1'b1;
        r_idx <= r_idx + 1'b1;
      end
      case (rs)
        R_IDLE: if (rd_start && rd_bytes != 0) begin
          m_araddr     <= rd_addr;
          r_beats_left <= rd_bytes >> BEAT_SH;
          m_arlen      <= 8'(((rd_bytes >> BEAT_SH) > MAXB ? MAXB : (rd_bytes >> BEAT_SH)) - 1);
          rs <= R_AR;
        end
        R_AR: if (m_arready) begin
          r_beats_left <= r_beats_left - (32'(m_arlen) + 1);
          rs <= R_DATA;
        end
        R_DATA: if (m_rvalid && m_rready) begin
          r_buf <= m_rdata; r_bytes_in_buf <= (BEAT_SH+1)'(NB); r_idx <= '0;
          if (m_rlast) begin
            if (r_beats_left == 0) rs <= R_IDLE;
            else begin
              m_araddr <= m_araddr + AW'((32'(m_arlen) + 1) << BEAT_SH);
              m_arlen  <= 8'((r_beats_left > MAXB ? MAXB : r_beats_left) - 1);
              rs <= R_AR;
            end
          end
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // ---------------- write ----------------
  typedef enum logic [1:0] {W_IDLE, W_AW, W_DATA, W_RESP} wstate_e;
  wstate_e ws;
  logic [31:0]        w_beats_left;   // beats not yet assigned to a burst
  logic [7:0]         w_beat;         // beat index inside the burst
  logic [BEAT_SH:0]   w_fill;
  logic [DW-1:0]      w_buf;

  assign wr_busy   = (ws != W_IDLE);
  assign m_awvalid = (ws == W_AW);
  assign m_wvalid  = (ws == W_DATA) && (w_fill == (BEAT_SH+1)'(NB));
  assign m_wdata   = w_buf;
  assign m_wlast   = (w_beat == m_awlen);
  assign m_bready  = (ws == W_RESP);
  assign wr_ready  = (ws == W_DATA) && (w_fill != (BEAT_SH+1)'(NB));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= W_IDLE; w_beats_left <= '0; w_beat <= '0; w_fill <= '0; w_buf <= '0;
      m_awaddr <= '0; m_awlen <= '0; resp_errors <= '0;
    end else begin
      if (m_rvalid && m_rready && m_rresp != 2'b00) resp_errors <= resp_errors + 1'b1;
      if (m_bvalid && m_bready && m_bresp != 2'b00) resp_errors <= resp_errors + 1'b1;
      if (wr_valid && wr_ready) begin
        w_buf[8*w_fill[BEAT_SH-1:0] +: 8] <= wr_data;
        w_fill <= w_fill + 1'b1;
      end
      case (ws)
        W_IDLE: if (wr_start && wr_bytes != 0) begin
          m_awaddr     <= wr_addr;
          w_beats_left <= wr_bytes >> BEAT_SH;
          m_awlen      <= 8'(((wr_bytes >> BEAT_SH) > MAXB ? MAXB : (wr_bytes >> BEAT_SH)) - 1);
          ws <= W_AW;
        end
        W_AW: if (m_awready) begin
          w_beats_left <= w_beats_left - (32'(m_awlen) + 1);
          w_beat <= '0; w_fill <= '0;
          ws <= W_DATA;
        end
        W_DATA: if (m_wvalid && m_wready) begin
          w_fill <= '0;
          w_beat <= w_beat + 1'b1;
          if (m_wlast) ws <= W_RESP;
        end
        W_RESP: if (m_bvalid) begin
          if (w_beats_left == 0) ws <= W_IDLE;
          else begin
            m_awaddr <= m_awaddr + AW'((32'(m_awlen) + 1) << BEAT_SH);
            m_awlen  <= 8'((w_beats_left > MAXB ? MAXB : w_beats_left) - 1);
            ws <= W_AW;
          end
        end
        default: ws <= W_IDLE;
      endcase
    end
  end

  a_rd_len: assert property (@(posedge clk) disable iff (!rst_n) rd_start |-> rd_bytes[BEAT_SH-1:0] == '0);
  a_wr_len: assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> wr_bytes[BEAT_SH-1:0] == '0);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_arvalid && !m_arready) |=> (m_arvalid && $stable(m_araddr) && $stable(m_arlen)));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_wvalid && !m_wready) |=> (m_wvalid && $stable(m_wdata)));
endmodule
