// tb_aols_fdfir: the overlap-save kernel at a small size (50 channels,
// 5 taps, 16-point chunks, 3 templates) against a direct time-domain
// convolution y[i] = sum_j x[i-j] h[j] and its power, computed in floating
// point. Template spectra are prepared here as the host would, by a DFT of
// the zero-padded taps scaled by 2^14. Every valid point of the raw plane is
// checked; the overlap points are left for the FOP preparation stage.
module tb_aols_fdfir;
  import fdas_pkg::*;
  localparam int unsigned N_CHAN = 50, N_TAP = 5, N_FFT = 16, N_TEMP = 3;
  localparam int unsigned L = N_FFT - N_TAP + 1, N_CHUNK = (N_CHAN + L - 1) / L;
  localparam logic [AW-1:0] IN_B = 0, SPEC_B = 1000, COEF_B = 2000, RAW_B = 3000;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;

  aols_fdfir #(.N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP)) dut (
    .clk, .rst_n, .start, .in_base(IN_B), .spec_base(SPEC_B), .coef_base(COEF_B),
    .raw_base(RAW_B), .busy, .done, .mem_req, .mem_rsp);
  ddr_model u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  real xr [N_CHAN], xi [N_CHAN];
  real hr [N_TEMP][N_TAP], hi [N_TEMP][N_TAP];

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real yr, yi, mag, got, tol;
    cplx_t w;
    for (int i = 0; i < N_CHAN; i++) begin
      xr[i] = real'($urandom_range(2000)) - 1000.0;
      xi[i] = real'($urandom_range(2000)) - 1000.0;
      w = '{re: comp_t'($rtoi(xr[i])), im: comp_t'($rtoi(xi[i]))};
      u_mem.poke(IN_B + AW'(i), w);
    end
    for (int t = 0; t < N_TEMP; t++) begin
      for (int j = 0; j < N_TAP; j++) begin
        hr[t][j] = (real'($urandom_range(2000)) - 1000.0) / 2000.0;
        hi[t][j] = (real'($urandom_range(2000)) - 1000.0) / 2000.0;
      end
      for (int k = 0; k < N_FFT; k++) begin
        real sr, si, a;
        sr = 0.0;
        si = 0.0;
        for (int j = 0; j < N_TAP; j++) begin
          a = -2.0 * PI * k * j / N_FFT;
          sr += hr[t][j] * $cos(a) - hi[t][j] * $sin(a);
          si += hr[t][j] * $sin(a) + hi[t][j] * $cos(a);
        end
        w = '{re: comp_t'($rtoi(sr * 16384.0)), im: comp_t'($rtoi(si * 16384.0))};
        u_mem.poke(COEF_B + AW'(t * N_FFT + k), w);
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    checks++;
    if (!busy) begin failures++; $display("kernel did not start"); end
    wait (done);
    @(negedge clk);
    for (int t = 0; t < N_TEMP; t++)
      for (int i = 0; i < N_CHAN; i++) begin
        int c, m;
        c = i / L;
        m = i % L;
        yr = 0.0; yi = 0.0;
        for (int j = 0; j < N_TAP; j++)
          if (i - j >= 0) begin
            yr += xr[i-j] * hr[t][j] - xi[i-j] * hi[t][j];
            yi += xr[i-j] * hi[t][j] + xi[i-j] * hr[t][j];
          end
        mag = $sqrt(yr * yr + yi * yi);
        got = $sqrt(real'(u_mem.peek(RAW_B + AW'((t * N_CHUNK + c) * N_FFT + N_TAP - 1 + m)) & 64'hFFFF_FFFF));
        tol = 3.0 + 0.01 * mag;
        checks++;
        if (got - mag > tol || mag - got > tol) begin
          failures++;
          if (failures < 10) $display("t=%0d i=%0d: |y| got %f want %f", t, i, got, mag);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
