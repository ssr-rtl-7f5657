// reformat -- data type conversion unit (INT32 -> INT8) of an HCE.
//
// y = saturate_int8( (x * mult + 2^(shift-1)) >>> shift ), i.e. a fixed-point
// requantisation with round-half-up.  The paper names Reformat as the data
// type conversion that is fused with the HMM output (reuse distance one,
// Sec. 4.3); the scale/shift/saturate form is this RTL's choice.  One pipeline
// register, full throughput, valid/ready with the register acting as a one-deep
// buffer.  sat_count counts outputs that were clipped (overflow).
module reformat
  import ssr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] mult,
  input  logic [5:0]  shift,
  input  acc_t        s_data,
  input  logic        s_valid,
  output logic        s_ready,
  output i8_t         m_data,
  output logic        m_valid,
  input  logic        m_ready,
  output logic [31:0] sat_count
);
  logic signed [48:0] prod, rnd, scaled;
  logic               sat_hi, sat_lo;

  always_comb begin
    prod   = 49'(s_data) * $signed({1'b0, mult});
    rnd    = (shift == 0) ? 49'sd0 : (49'sd1 <<< (shift - 1'b1));
    scaled = (prod + rnd) >>> shift;
    sat_hi = scaled > 49'sd127;
    sat_lo = scaled < -49'sd128;
  end

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_data <= '0; sat_count <= '0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) begin
        m_data <= sat_hi ? 8'sd127 : sat_lo ? -8'sd128 : i8_t'(scaled);
        if (sat_hi || sat_lo) sat_count <= sat_count + 1'b1;
      end
    end
  end
endmodule
