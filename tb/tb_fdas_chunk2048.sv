// tb_fdas_chunk2048: end-to-end run of the FDAS pipeline with the reference
// design's sizes for everything but the array length: 2048-point overlap-save
// chunks, 421-tap templates, 42 templates (half an 85-row FOP), 8 harmonic
// planes, 200 candidates per plane, double buffering. Only the number of
// channels is reduced, to 4000 (three chunks of 1628 valid points, the last one
// padded), so that three input arrays simulate in a few tens of millions of
// cycles.
//
// Workload: template t is a pure delay of D(t) = floor(420*t/41) samples, so the
// last template uses the full 421-tap span (delay 420). Its spectrum is
// H_t[k] = 2^14 e^{-j2pi k D(t)/2048}. Each input array is a handful of impulses
// of amplitude A, some placed on either side of a chunk boundary. The ideal FOP
// is A^2 at column n + D(t) for an impulse at n and 0 elsewhere, and the
// harmonic sums are whole multiples of A^2. Thresholds sit at half-way values,
// so the rounding of the 2048-point fixed-point transforms cannot move a
// decision; the reported powers are compared to within 2%.
//
// The first array is summed over all columns. The second and third are summed
// over the middle and last third of the columns only, as two of three devices
// sharing one array would do; the host changes the range before it
// acknowledges the previous results, so each run picks up its own range.
//
// Every list entry, count and dropped count is compared with lists built here
// from the ideal FOP and the harmonic-sum definition. The run also checks that
// the host was stalled by full buffers, that stages overlapped, that the
// kernels contended for the memory port and that a 200-entry list overflowed.
module tb_fdas_chunk2048;
  import fdas_pkg::*;
  localparam int unsigned N_CHAN = 4000, N_TAP = 421, N_FFT = 2048, N_TEMP = 42;
  localparam int unsigned N_HP = 8, N_CAND = 200, N_BUF = 2, N_ARR = 3;
  localparam longint A = 1000;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  logic fill_ready, fill_done = 0, res_valid, res_ack = 0;
  logic [0:0] fill_slot, res_slot;
  logic [AW-1:0] fill_addr;
  logic thr_we = 0;
  logic [2:0] thr_plane = 0, cand_rd_plane = 0;
  logic [5:0] thr_row = 0;
  logic [7:0] cand_rd_idx = 0;
  logic [HW-1:0] thr_value = 0;
  logic [AW-1:0] hm_col_lo = 0, hm_col_hi = N_CHAN;
  cand_t cand_rd_data;
  logic [7:0] cand_count [N_HP];
  logic [31:0] cand_dropped [N_HP];
  logic [31:0] cand_detected, mem_conflicts, buf_full_cycles, overlap_cycles;
  logic stage_busy [3];

  fdas_top #(.N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP),
             .N_HP(N_HP), .N_CAND(N_CAND), .N_BUF(N_BUF)) dut (.*);
  ddr_model u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  int n_stall = 0, n_hits = 0, n_overflow = 0;
  longint fop [N_ARR][N_TEMP][N_CHAN];
  cand_t exp_list [N_ARR][N_HP][$];
  int exp_drop [N_ARR][N_HP];

  function automatic int delay(input int t);
    return (420 * t) / 41;
  endfunction

  function automatic int lo_col(input int a);
    return (a == 0) ? 0 : a * N_CHAN / 3;
  endfunction

  function automatic int hi_col(input int a);
    return (a == 0) ? N_CHAN : (a + 1) * N_CHAN / 3;
  endfunction

  function automatic longint thr(input int k);
    return A * A * (k / 2) + A * A / 2;
  endfunction

  function automatic bit impulse(input int a, input int n);
    return (n == 3 + a) || (n == 1627) || (n == 1628 + 5 * a) || (n == 3255 - a) || (n == 3999);
  endfunction

  initial begin
    repeat (80000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected results from the ideal FOP.
  initial begin
    longint hp;
    for (int a = 0; a < N_ARR; a++) begin
      for (int t = 0; t < N_TEMP; t++)
        for (int j = 0; j < N_CHAN; j++)
          fop[a][t][j] = (j - delay(t) >= 0 && impulse(a, j - delay(t))) ? A * A : 0;
      for (int k = 0; k < N_HP; k++) exp_drop[a][k] = 0;
      for (int j = lo_col(a); j < hi_col(a); j++)
        for (int i = 0; i < N_TEMP; i++) begin
          hp = 0;
          for (int k = 0; k < N_HP; k++) begin
            hp += fop[a][i / (k + 1)][j / (k + 1)];
            if (hp > thr(k)) begin
              if (exp_list[a][k].size() < N_CAND)
                exp_list[a][k].push_back('{plane: 4'(k), row: 8'(i), col: 24'(j), power: HW'(hp)});
              else exp_drop[a][k]++;
            end
          end
        end
    end
  end

  // Host: template spectra, thresholds, input arrays.
  initial begin
    cplx_t w;
    real ang;
    for (int t = 0; t < N_TEMP; t++)
      for (int k = 0; k < N_FFT; k++) begin
        ang = -2.0 * PI * real'(k) * real'(delay(t)) / real'(N_FFT);
        w = '{re: comp_t'($rtoi($floor(16384.0 * $cos(ang) + 0.5))),
              im: comp_t'($rtoi($floor(16384.0 * $sin(ang) + 0.5)))};
        u_mem.poke(AW'(t * N_FFT + k), w);
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N_HP; k++)
      for (int r = 0; r < N_TEMP; r++) begin
        @(negedge clk);
        thr_we = 1; thr_plane = 3'(k); thr_row = 6'(r); thr_value = HW'(thr(k));
      end
    @(negedge clk); thr_we = 0;
    for (int a = 0; a < N_ARR; a++) begin
      @(negedge clk);
      while (!fill_ready) begin n_stall++; @(negedge clk); end
      for (int n = 0; n < N_CHAN; n++)
        u_mem.poke(fill_addr + AW'(n), impulse(a, n) ? {32'(A), 32'(0)} : '0);
      fill_done = 1'b1;
      @(negedge clk);
      fill_done = 1'b0;
    end
  end

  // Host: candidate lists.
  initial begin
    longint got_p, want_p;
    wait (rst_n);
    for (int a = 0; a < N_ARR; a++) begin
      @(negedge clk);
      while (!res_valid) @(negedge clk);
      $display("array %0d results at %0t", a, $time);
      checks++;
      if (res_slot != 1'(a % N_BUF)) begin failures++; $display("array %0d: slot %0d", a, res_slot); end
      for (int k = 0; k < N_HP; k++) begin
        checks++;
        if (cand_count[k] != 8'(exp_list[a][k].size()) || cand_dropped[k] != 32'(exp_drop[a][k])) begin
          failures++;
          $display("array %0d plane %0d: count %0d want %0d, dropped %0d want %0d", a, k,
                   cand_count[k], exp_list[a][k].size(), cand_dropped[k], exp_drop[a][k]);
        end
        if (cand_dropped[k] != 0) n_overflow++;
        for (int q = 0; q < exp_list[a][k].size(); q++) begin
          cand_rd_plane = 3'(k); cand_rd_idx = 8'(q);
          @(negedge clk);
          got_p  = longint'(cand_rd_data.power);
          want_p = longint'(exp_list[a][k][q].power);
          checks++;
          n_hits++;
          if (cand_rd_data.plane != exp_list[a][k][q].plane || cand_rd_data.row != exp_list[a][k][q].row ||
              cand_rd_data.col != exp_list[a][k][q].col ||
              got_p - want_p > want_p / 50 || want_p - got_p > want_p / 50) begin
            failures++;
            $display("array %0d plane %0d entry %0d: got (%0d,%0d,%0d) want (%0d,%0d,%0d)", a, k, q,
                     cand_rd_data.row, cand_rd_data.col, got_p,
                     exp_list[a][k][q].row, exp_list[a][k][q].col, want_p);
          end
        end
      end
      if (a + 1 < N_ARR) begin
        hm_col_lo = AW'(lo_col(a + 1));
        hm_col_hi = AW'(hi_col(a + 1));
      end
      res_ack = 1'b1;
      @(negedge clk);
      res_ack = 1'b0;
    end
    $display("host stalls %0d, buffer-full cycles %0d, stage overlap cycles %0d, memory conflicts %0d, overflowing lists %0d, candidates %0d",
             n_stall, buf_full_cycles, overlap_cycles, mem_conflicts, n_overflow, n_hits);
    checks += 4;
    if (n_stall == 0)        begin failures++; $display("no full-buffer stall"); end
    if (overlap_cycles == 0) begin failures++; $display("stages never overlapped"); end
    if (mem_conflicts == 0)  begin failures++; $display("no memory conflict"); end
    if (n_overflow == 0)     begin failures++; $display("no candidate-list overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
