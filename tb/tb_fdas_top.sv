// tb_fdas_top: end-to-end run of the FDAS pipeline at a reduced size
// (24 channels, 5 taps, 16-point chunks, 4 templates, 4 harmonic planes,
// 3 candidates per plane, double buffering) on three input arrays.
//
// Workload: template t is a pure delay of t samples, H_t[k] = 2^14 e^{-j2pi kt/N},
// and each input array is a few impulses of amplitude A. The ideal FOP is
// then A^2 where column j - t hits an impulse and 0 elsewhere, so the harmonic
// sums are whole multiples of A^2; thresholds sit at half-way values so
// fixed-point error cannot move a decision. The expected candidate lists are
// built here from that ideal FOP and the harmonic-sum definition, and every
// list entry, count and dropped count is compared.
//
// It also counts the mechanisms of the design and fails if one never happens:
// full-buffer stall of the host, overlap of pipeline stages, memory-port
// conflicts between kernels, and candidate-list overflow.
module tb_fdas_top;
  import fdas_pkg::*;
  localparam int unsigned N_CHAN = 24, N_TAP = 5, N_FFT = 16, N_TEMP = 4;
  localparam int unsigned N_HP = 4, N_CAND = 3, N_BUF = 2, N_ARR = 3;
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
  logic [1:0] thr_plane = 0, thr_row = 0, cand_rd_plane = 0, cand_rd_idx = 0;
  logic [HW-1:0] thr_value = 0;
  logic [AW-1:0] hm_col_lo = 0, hm_col_hi = N_CHAN;
  cand_t cand_rd_data;
  logic [1:0] cand_count [N_HP];
  logic [31:0] cand_dropped [N_HP];
  logic [31:0] cand_detected, mem_conflicts, buf_full_cycles, overlap_cycles;
  logic stage_busy [3];

  fdas_top #(.N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP),
             .N_HP(N_HP), .N_CAND(N_CAND), .N_BUF(N_BUF)) dut (.*);
  ddr_model u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  int n_stall = 0, n_overflow = 0, n_hits = 0;
  longint fop [N_ARR][N_TEMP][N_CHAN];
  cand_t exp_list [N_ARR][N_HP][$];
  int exp_drop [N_ARR][N_HP];

  function automatic longint thr(input int k);
    return A * A * (k / 2) + A * A / 2;
  endfunction

  function automatic bit impulse(input int a, input int n);
    return (n == 2 + a) || (n == 9) || (n == 19 - 2 * a);
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
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
          fop[a][t][j] = (j - t >= 0 && impulse(a, j - t)) ? A * A : 0;
      for (int k = 0; k < N_HP; k++) exp_drop[a][k] = 0;
      for (int j = 0; j < N_CHAN; j++)
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
    for (int t = 0; t < N_TEMP; t++)
      for (int k = 0; k < N_FFT; k++) begin
        real ang;
        ang = -2.0 * PI * k * t / N_FFT;
        w = '{re: comp_t'($rtoi($floor(16384.0 * $cos(ang) + 0.5))),
              im: comp_t'($rtoi($floor(16384.0 * $sin(ang) + 0.5)))};
        u_mem.poke(AW'(t * N_FFT + k), w);
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < N_HP; k++)
      for (int r = 0; r < N_TEMP; r++) begin
        @(negedge clk);
        thr_we = 1; thr_plane = 2'(k); thr_row = 2'(r); thr_value = HW'(thr(k));
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
      // Keep the next array ready right away, so the pipeline fills up.
    end
  end

  // Host: candidate lists.
  initial begin
    longint got_p, want_p;
    wait (rst_n);
    for (int a = 0; a < N_ARR; a++) begin
      @(negedge clk);
      while (!res_valid) @(negedge clk);
      checks++;
      if (res_slot != 1'(a % N_BUF)) begin failures++; $display("array %0d: slot %0d", a, res_slot); end
      for (int k = 0; k < N_HP; k++) begin
        checks++;
        if (cand_count[k] != 2'(exp_list[a][k].size()) || cand_dropped[k] != 32'(exp_drop[a][k])) begin
          failures++;
          $display("array %0d plane %0d: count %0d want %0d, dropped %0d want %0d", a, k,
                   cand_count[k], exp_list[a][k].size(), cand_dropped[k], exp_drop[a][k]);
        end
        if (cand_dropped[k] != 0) n_overflow++;
        for (int q = 0; q < exp_list[a][k].size(); q++) begin
          cand_rd_plane = 2'(k); cand_rd_idx = 2'(q);
          @(negedge clk);
          got_p  = longint'(cand_rd_data.power);
          want_p = longint'(exp_list[a][k][q].power);
          checks++;
          n_hits++;
          if (cand_rd_data.plane != exp_list[a][k][q].plane || cand_rd_data.row != exp_list[a][k][q].row ||
              cand_rd_data.col != exp_list[a][k][q].col ||
              got_p - want_p > want_p / 100 || want_p - got_p > want_p / 100) begin
            failures++;
            $display("array %0d plane %0d entry %0d: got (%0d,%0d,%0d) want (%0d,%0d,%0d)", a, k, q,
                     cand_rd_data.row, cand_rd_data.col, got_p,
                     exp_list[a][k][q].row, exp_list[a][k][q].col, want_p);
          end
        end
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
