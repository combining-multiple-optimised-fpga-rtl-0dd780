// tb_cand_detect: random thresholds and random plane values with a small list
// size (4 planes, 6 rows, 5 candidates per plane), so that lists overflow.
// A scoreboard built here predicts every list entry, the counts and the
// dropped counts.
module tb_cand_detect;
  import fdas_pkg::*;
  localparam int unsigned N_TEMP = 6, N_HP = 4, N_CAND = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, cfg_we = 0, in_valid = 0;
  logic [1:0] cfg_plane = 0, in_plane = 0, rd_plane = 0;
  logic [2:0] cfg_row = 0, in_row = 0, rd_idx = 0;
  logic [HW-1:0] cfg_thr = 0, in_power = 0;
  logic [23:0] in_col = 0;
  cand_t rd_cand;
  logic [2:0] count [N_HP];
  logic [31:0] dropped [N_HP];
  logic [31:0] detected;
  cand_detect #(.N_TEMP(N_TEMP), .N_HP(N_HP), .N_CAND(N_CAND)) dut (.*);

  int checks = 0, failures = 0;
  longint thr [N_HP][N_TEMP];
  cand_t  exp_list [N_HP][$];
  int     exp_drop [N_HP];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pass();
    for (int k = 0; k < N_HP; k++) begin exp_list[k].delete(); exp_drop[k] = 0; end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int s = 0; s < 60; s++) begin
      @(negedge clk);
      in_valid = 1;
      in_plane = 2'($urandom_range(N_HP - 1));
      in_row   = 3'($urandom_range(N_TEMP - 1));
      in_col   = 24'($urandom);
      in_power = HW'($urandom_range(1000));
      if (longint'(in_power) > thr[in_plane][in_row]) begin
        if (exp_list[in_plane].size() < N_CAND)
          exp_list[in_plane].push_back('{plane: 4'(in_plane), row: 8'(in_row), col: in_col, power: in_power});
        else exp_drop[in_plane]++;
      end
    end
    @(negedge clk); in_valid = 0;
    for (int k = 0; k < N_HP; k++) begin
      checks++;
      if (count[k] != 3'(exp_list[k].size()) || dropped[k] != 32'(exp_drop[k])) begin
        failures++;
        $display("plane %0d count %0d/%0d dropped %0d/%0d", k, count[k], exp_list[k].size(), dropped[k], exp_drop[k]);
      end
      for (int q = 0; q < exp_list[k].size(); q++) begin
        rd_plane = 2'(k); rd_idx = 3'(q);
        @(negedge clk);
        checks++;
        if (rd_cand != exp_list[k][q]) begin failures++; $display("plane %0d entry %0d wrong", k, q); end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < N_HP; k++)
      for (int r = 0; r < N_TEMP; r++) begin
        @(negedge clk);
        cfg_we = 1; cfg_plane = 2'(k); cfg_row = 3'(r);
        thr[k][r] = (r == 0) ? 500 : longint'($urandom_range(700, 950));
        cfg_thr = HW'(thr[k][r]);
      end
    @(negedge clk); cfg_we = 0;
    run_pass();
    run_pass();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
