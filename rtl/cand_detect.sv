// cand_detect: threshold detection and candidate lists of the harmonic-summing
// module.
//
// Every harmonic-plane value HP_k(i,j) that arrives is compared with the
// threshold TA(k,i) of its plane and row; a value strictly greater than the
// threshold is a candidate. Each of the N_HP planes has a list of up to
// N_CAND candidates (the paper collects N_cand = 200 per plane); a candidate
// found when its list is full is dropped and counted in `dropped`.
//
// The threshold array is written by the host through cfg_*. `clear` empties
// all lists and counters at the start of a run; the lists are read back with
// rd_plane/rd_idx, one cycle latency. The comparison and the list sizes follow
// the paper; the keep-first-N_CAND policy on overflow, the threshold format
// and the read port are this design's choices.
//
// Timing: one value per cycle, stored the cycle after in_valid.
module cand_detect
  import fdas_pkg::*;
#(
  parameter int unsigned N_TEMP = N_TEMP_DEF,
  parameter int unsigned N_HP   = N_HP_DEF,
  parameter int unsigned N_CAND = N_CAND_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        cfg_we,
  input  logic [$clog2(N_HP)-1:0]     cfg_plane,
  input  logic [$clog2(N_TEMP)-1:0]   cfg_row,
  input  logic [HW-1:0]               cfg_thr,
  input  logic                        in_valid,
  input  logic [$clog2(N_HP)-1:0]     in_plane,
  input  logic [$clog2(N_TEMP)-1:0]   in_row,
  input  logic [23:0]                 in_col,
  input  logic [HW-1:0]               in_power,
  input  logic [$clog2(N_HP)-1:0]     rd_plane,
  input  logic [$clog2(N_CAND)-1:0]   rd_idx,
  output cand_t                       rd_cand,
  output logic [$clog2(N_CAND+1)-1:0] count   [N_HP],
  output logic [31:0]                 dropped [N_HP],
  output logic [31:0]                 detected
);
  logic [HW-1:0] ta   [N_HP][N_TEMP];
  cand_t         list [N_HP][N_CAND];

  logic hit;
  assign hit = in_valid && (in_power > ta[in_plane][in_row]);

  always_ff @(posedge clk) begin
    if (cfg_we) ta[cfg_plane][cfg_row] <= cfg_thr;
    if (hit && count[in_plane] < ($bits(count[0]))'(N_CAND))
      list[in_plane][count[in_plane][$clog2(N_CAND)-1:0]] <=
        '{plane: 4'(in_plane), row: 8'(in_row), col: in_col, power: in_power};
    rd_cand <= list[rd_plane][rd_idx];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_HP; k++) begin
        count[k]   <= '0;
        dropped[k] <= '0;
      end
      detected <= '0;
    end else if (clear) begin
      for (int k = 0; k < N_HP; k++) begin
        count[k]   <= '0;
        dropped[k] <= '0;
      end
      detected <= '0;
    end else if (hit) begin
      detected <= detected + 1'b1;
      if (count[in_plane] < ($bits(count[0]))'(N_CAND)) count[in_plane] <= count[in_plane] + 1'b1;
      else dropped[in_plane] <= dropped[in_plane] + 1'b1;
    end
  end
endmodule
