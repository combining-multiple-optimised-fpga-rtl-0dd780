// tb_fop_prep: fills a raw plane (40 channels, 5 taps, 16-point chunks,
// 3 templates) whose every word encodes its own template, chunk and position,
// with the overlap and padding points marked invalid, runs the FOP
// preparation and checks every FOP word and that no invalid word was copied.
module tb_fop_prep;
  import fdas_pkg::*;
  localparam int unsigned N_CHAN = 40, N_TAP = 5, N_FFT = 16, N_TEMP = 3;
  localparam int unsigned L = N_FFT - N_TAP + 1, N_CHUNK = (N_CHAN + L - 1) / L;
  localparam logic [AW-1:0] RAW_B = 100, FOP_B = 5000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 1'b0, busy, done;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  fop_prep #(.N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP)) dut (
    .clk, .rst_n, .start, .raw_base(RAW_B), .fop_base(FOP_B), .busy, .done, .mem_req, .mem_rsp);
  ddr_model u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));

  int checks = 0, failures = 0;

  function automatic logic [DW-1:0] tag(input int t, input int c, input int n);
    int j;
    j = c * L + n - (N_TAP - 1);
    if (n < N_TAP - 1 || j >= N_CHAN) return 64'hDEAD_0000 + DW'(n);
    return DW'(t * 100000 + j);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DW-1:0] got;
    for (int t = 0; t < N_TEMP; t++)
      for (int c = 0; c < N_CHUNK; c++)
        for (int n = 0; n < N_FFT; n++)
          u_mem.poke(RAW_B + AW'((t * N_CHUNK + c) * N_FFT + n), tag(t, c, n));
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    wait (done);
    @(negedge clk);
    for (int j = 0; j < N_CHAN; j++)
      for (int t = 0; t < N_TEMP; t++) begin
        got = u_mem.peek(FOP_B + AW'(j * N_TEMP + t));
        checks++;
        if (got != DW'(t * 100000 + j)) begin
          failures++;
          if (failures < 10) $display("FOP(%0d,%0d) = %h", t, j, got);
        end
      end
    // Nothing written past the FOP, and exactly N_CHAN*N_TEMP writes.
    checks++;
    if (u_mem.peek(FOP_B + AW'(N_CHAN * N_TEMP)) != 0 || u_mem.n_writes != N_CHAN * N_TEMP) begin
      failures++;
      $display("write count %0d", u_mem.n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
