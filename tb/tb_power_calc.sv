// tb_power_calc: random complex values, including large ones that saturate,
// checked against re^2 + im^2 computed in 64-bit integers; checks the
// one-cycle latency.
module tb_power_calc;
  import fdas_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid = 1'b0, out_valid;
  cplx_t in_data = '0;
  logic [PW-1:0] out_power;
  power_calc dut (.*);
  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint re, im, p, want;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      int lim = (t % 3 == 0) ? 200000 : 40000;
      re = longint'($urandom_range(2 * lim)) - lim;
      im = longint'($urandom_range(2 * lim)) - lim;
      @(negedge clk);
      in_valid = 1'b1;
      in_data = '{re: comp_t'(re), im: comp_t'(im)};
      @(negedge clk);
      in_valid = 1'b0;
      p = re * re + im * im;
      want = (p > 64'hFFFF_FFFF) ? 64'hFFFF_FFFF : p;
      checks++;
      if (!out_valid || longint'(out_power) != want) begin
        failures++;
        $display("(%0d,%0d): got %0d valid %0b want %0d", re, im, out_power, out_valid, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
