// power_calc: power of a complex filter output, P = re^2 + im^2.
//
// The FT convolution pipeline ends with this step, so that the plane handed
// to harmonic summing holds real powers (the paper's "-P" kernels). The sum is
// shifted right by SHIFT and saturated to PW bits; the shift, the saturation
// and the fixed-point format are this design's choices.
//
// Timing: one register stage, out_valid follows in_valid by one cycle.
module power_calc
  import fdas_pkg::*;
#(
  parameter int unsigned SHIFT = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  cplx_t         in_data,
  output logic          out_valid,
  output logic [PW-1:0] out_power
);
  logic [2*CW:0] sq;
  logic [2*CW:0] sh;
  always_comb begin
    sq = (2*CW+1)'(in_data.re * in_data.re) + (2*CW+1)'(in_data.im * in_data.im);
    sh = sq >> SHIFT;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_power <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_power <= (|sh[2*CW:PW]) ? {PW{1'b1}} : sh[PW-1:0];
    end
  end
endmodule
