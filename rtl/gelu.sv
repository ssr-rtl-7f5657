// gelu -- element-wise GELU on INT8 by table look-up.
//
// Inputs and outputs use the same fixed-point scale, 1/16 per LSB (Q3.4):
// table[q] = clamp(round(16 * g(q/16)), -128, 127) with
// g(x) = 0.5*x*(1 + tanh(sqrt(2/pi)*(x + 0.044715*x^3))), the usual tanh form
// of GELU.  The 256-entry table is read from rtl/gelu_table.hex (entry i is the
// output for input code i taken as an unsigned byte).  The paper lists GeLU as
// an HCE unit with no BRAM and no DSP (Table 8), which a LUT-only ROM matches;
// the scale and the tanh form are choices of this RTL.  One pipeline register,
// valid/ready.
module gelu
  import ssr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  i8_t  s_data,
  input  logic s_valid,
  output logic s_ready,
  output i8_t  m_data,
  output logic m_valid,
  input  logic m_ready
);
  logic [7:0] rom [256];
  initial $readmemh("rtl/gelu_table.hex", rom);

  assign s_ready = !m_valid || m_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_data <= '0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) m_data <= i8_t'(rom[s_data]);
    end
  end
endmodule
