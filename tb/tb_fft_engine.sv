// tb_fft_engine: checks the FFT engine against a direct DFT computed in
// floating point. Runs one forward transform of random data and one inverse
// transform of a random spectrum at N = 64, and checks the transform time of
// (N/2)*log2(N) cycles.
module tb_fft_engine;
  import fdas_pkg::*;
  localparam int unsigned N  = 64;
  localparam int unsigned LG = $clog2(N);
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic          wr_en = 1'b0, start = 1'b0, inverse = 1'b0;
  logic [LG-1:0] wr_addr = '0, rd_addr = '0;
  cplx_t         wr_data = '0, rd_data;
  logic          busy, done;

  fft_engine #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  real xr [N], xi [N];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic inv, input int amp);
    real er, ei, maxmag, tol, dr, di;
    int  cycles;
    for (int n = 0; n < N; n++) begin
      xr[n] = real'($urandom_range(2 * amp) ) - amp;
      xi[n] = real'($urandom_range(2 * amp) ) - amp;
      @(negedge clk);
      wr_en = 1'b1; wr_addr = LG'(n);
      wr_data = '{re: comp_t'($rtoi(xr[n])), im: comp_t'($rtoi(xi[n]))};
    end
    @(negedge clk); wr_en = 1'b0; start = 1'b1; inverse = inv;
    @(negedge clk); start = 1'b0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (cycles != (N / 2) * LG + 1) begin
      failures++;
      $display("transform took %0d cycles, expected %0d", cycles, (N / 2) * LG + 1);
    end
    maxmag = 0.0;
    for (int k = 0; k < N; k++) maxmag = (xr[k] > maxmag) ? xr[k] : maxmag;
    for (int k = 0; k < N; k++) begin
      er = 0.0; ei = 0.0;
      for (int n = 0; n < N; n++) begin
        real ang = (inv ? 2.0 : -2.0) * PI * k * n / N;
        er += xr[n] * $cos(ang) - xi[n] * $sin(ang);
        ei += xr[n] * $sin(ang) + xi[n] * $cos(ang);
      end
      if (inv) begin er = er / N; ei = ei / N; end
      tol = inv ? 4.0 + 0.002 * amp : 4.0 + 0.002 * amp * N;
      rd_addr = LG'(k);
      @(negedge clk);
      dr = real'(rd_data.re) - er;
      di = real'(rd_data.im) - ei;
      checks++;
      if (dr > tol || dr < -tol || di > tol || di < -tol) begin
        failures++;
        if (failures < 10)
          $display("%s bin %0d: got (%0d,%0d) want (%f,%f)", inv ? "inv" : "fwd", k,
                   rd_data.re, rd_data.im, er, ei);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(1'b0, 2000);
    run(1'b1, 200000);
    run(1'b0, 30000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
