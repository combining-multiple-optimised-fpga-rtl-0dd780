// tb_harmonic_sum: a random transposed FOP (20 columns, 6 rows, 8 planes),
// every harmonic-plane value checked against
// HP_k(i,j) = sum_{m=1..k} FOP(floor(i/m), floor(j/m)) computed here, and
// the output order (column, row, plane) and count checked. The plane is
// summed once whole, then as three column ranges (the split over three
// devices), then with an empty range, which must finish without output.
module tb_harmonic_sum;
  import fdas_pkg::*;
  localparam int unsigned N_CHAN = 20, N_TEMP = 6, N_HP = 8;
  localparam logic [AW-1:0] FOP_B = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, hp_valid;
  logic [AW-1:0] col_lo = 0, col_hi = 0;
  logic [2:0] hp_plane, hp_row;
  logic [23:0] hp_col;
  logic [HW-1:0] hp_power;
  mem_req_t mem_req;
  mem_rsp_t mem_rsp;
  harmonic_sum #(.N_CHAN(N_CHAN), .N_TEMP(N_TEMP), .N_HP(N_HP)) dut (
    .clk, .rst_n, .start, .fop_base(FOP_B), .col_lo, .col_hi, .busy, .done, .mem_req, .mem_rsp,
    .hp_valid, .hp_plane, .hp_row, .hp_col, .hp_power);
  ddr_model u_mem (.clk, .rst_n, .req(mem_req), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  longint fop [N_TEMP][N_CHAN];
  int n_out = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && hp_valid) begin
    int j, i, k;
    longint want;
    j = int'(col_lo) + n_out / (N_TEMP * N_HP);
    i = (n_out / N_HP) % N_TEMP;
    k = n_out % N_HP;
    want = 0;
    for (int m = 1; m <= k + 1; m++) want += fop[i / m][j / m];
    checks++;
    if (hp_col != 24'(j) || hp_row != 3'(i) || hp_plane != 3'(k) || longint'(hp_power) != want) begin
      failures++;
      if (failures < 10) $display("out %0d: (%0d,%0d,%0d)=%0d want (%0d,%0d,%0d)=%0d", n_out,
                                  hp_plane, hp_row, hp_col, hp_power, k, i, j, want);
    end
    n_out++;
  end

  task automatic run(input int lo, input int hi);
    @(negedge clk);
    n_out = 0;
    col_lo = AW'(lo); col_hi = AW'(hi); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != (hi - lo) * N_TEMP * N_HP) begin
      failures++; $display("range %0d..%0d: %0d outputs", lo, hi, n_out);
    end
  endtask

  initial begin
    for (int i = 0; i < N_TEMP; i++)
      for (int j = 0; j < N_CHAN; j++) begin
        fop[i][j] = longint'($urandom);
        u_mem.poke(FOP_B + AW'(j * N_TEMP + i), DW'(fop[i][j]));
      end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, N_CHAN);
    run(0, 7);
    run(7, 14);
    run(14, N_CHAN);
    run(5, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
