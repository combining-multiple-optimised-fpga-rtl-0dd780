// fdas_top: the frequency domain acceleration search (FDAS) module of a pulsar
// search engine, as one FPGA design: FT convolution, FOP preparation and
// harmonic summing with candidate detection, run as a buffered pipeline.
//
// Data flow for one input array of N_CHAN complex samples:
//   aols_fdfir   overlap-save filtering with N_TEMP templates and power
//                calculation -> raw output plane (with overlap points)
//   fop_prep     discard the overlap, transpose -> filter-output plane (FOP)
//   harmonic_sum N_HP harmonic planes from the FOP, point by point
//   cand_detect  threshold test against the threshold array, up to N_CAND
//                candidates per plane
// buffer_ctrl runs the three stages on N_BUF buffers (double buffering by
// default) so that consecutive input arrays overlap; mem_arbiter shares the
// one off-chip memory port among the three stage kernels.
//
// This is the combination the paper found best (AOLS-2048 + discard and
// transpose + Naive-MultipleHP, double buffered). Everything the paper takes
// from the platform stays outside: the off-chip memory and its controller
// are reached through mem_req/mem_rsp, and the host writes input arrays and
// template spectra straight into that memory and drives the control ports.
//
// Off-chip memory map (64-bit words):
//   0                          template spectra, N_TEMP x N_FFT
//   SLOT0 + b*SLOT_SZ          buffer b: input array, chunk spectra,
//                              raw plane, FOP (in that order)
// Host protocol: when fill_ready, write an input array at fill_addr and pulse
// fill_done; when res_valid, read the candidate lists of buffer res_slot
// through cand_rd_* and pulse res_ack. Thresholds are written with thr_*.
// hm_col_lo/hm_col_hi select the FOP columns this device sums (0 and N_CHAN
// for all of them, a 1/N share when N devices split the harmonic summing);
// they are sampled when a harmonic-summing run starts, which is never before
// res_ack of the previous array.
module fdas_top
  import fdas_pkg::*;
#(
  parameter int unsigned N_CHAN  = N_CHAN_DEF,
  parameter int unsigned N_TAP   = N_TAP_DEF,
  parameter int unsigned N_FFT   = N_FFT_DEF,
  parameter int unsigned N_TEMP  = N_TEMP_DEF,
  parameter int unsigned N_HP    = N_HP_DEF,
  parameter int unsigned N_CAND  = N_CAND_DEF,
  parameter int unsigned N_BUF   = N_BUF_DEF,
  parameter int unsigned H_SHIFT = 14,
  parameter int unsigned P_SHIFT = 0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // off-chip memory
  output mem_req_t                    mem_req,
  input  mem_rsp_t                    mem_rsp,
  // host: input arrays
  output logic                        fill_ready,
  output logic [$clog2(N_BUF)-1:0]    fill_slot,
  output logic [AW-1:0]               fill_addr,
  input  logic                        fill_done,
  // host: threshold array
  input  logic                        thr_we,
  input  logic [$clog2(N_HP)-1:0]     thr_plane,
  input  logic [$clog2(N_TEMP)-1:0]   thr_row,
  input  logic [HW-1:0]               thr_value,
  // host: share of the FOP columns summed on this device
  input  logic [AW-1:0]               hm_col_lo,
  input  logic [AW-1:0]               hm_col_hi,
  // host: candidate lists
  output logic                        res_valid,
  output logic [$clog2(N_BUF)-1:0]    res_slot,
  input  logic                        res_ack,
  input  logic [$clog2(N_HP)-1:0]     cand_rd_plane,
  input  logic [$clog2(N_CAND)-1:0]   cand_rd_idx,
  output cand_t                       cand_rd_data,
  output logic [$clog2(N_CAND+1)-1:0] cand_count   [N_HP],
  output logic [31:0]                 cand_dropped [N_HP],
  output logic [31:0]                 cand_detected,
  // status
  output logic                        stage_busy [3],
  output logic [31:0]                 mem_conflicts,
  output logic [31:0]                 buf_full_cycles,
  output logic [31:0]                 overlap_cycles
);
  localparam int unsigned L       = N_FFT - N_TAP + 1;
  localparam int unsigned N_CHUNK = (N_CHAN + L - 1) / L;
  localparam longint unsigned COEF_SZ = longint'(N_TEMP) * N_FFT;
  localparam longint unsigned IN_SZ   = 64'(N_CHAN);
  localparam longint unsigned SPEC_SZ = longint'(N_CHUNK) * N_FFT;
  localparam longint unsigned RAW_SZ  = longint'(N_TEMP) * N_CHUNK * N_FFT;
  localparam longint unsigned FOP_SZ  = longint'(N_TEMP) * N_CHAN;
  localparam longint unsigned SLOT_SZ = IN_SZ + SPEC_SZ + RAW_SZ + FOP_SZ;
  localparam longint unsigned SLOT0   = COEF_SZ;

  initial assert (SLOT0 + N_BUF * SLOT_SZ <= (64'd1 << AW))
    else $error("buffers do not fit the address space");

  localparam int unsigned BW = $clog2(N_BUF);

  function automatic logic [AW-1:0] in_addr(input logic [BW-1:0] b);
    return AW'(SLOT0) + AW'(b) * AW'(SLOT_SZ);
  endfunction

  // Buffer control.
  logic          st_start [3];
  logic [BW-1:0] st_slot  [3];
  logic          st_done  [3];

  buffer_ctrl #(.N_BUF(N_BUF)) u_buf (
    .clk, .rst_n, .fill_ready, .fill_slot, .fill_done,
    .st_start, .st_slot, .st_done, .st_busy(stage_busy),
    .res_valid, .res_slot, .res_ack,
    .full_cycles(buf_full_cycles), .overlap_cycles
  );
  assign fill_addr = in_addr(fill_slot);

  // Memory interconnect.
  mem_req_t k_req [3];
  mem_rsp_t k_rsp [3];
  mem_arbiter #(.NM(3)) u_arb (
    .clk, .rst_n, .m_req(k_req), .m_rsp(k_rsp), .s_req(mem_req), .s_rsp(mem_rsp),
    .conflicts(mem_conflicts)
  );

  // Stage 1: FT convolution.
  logic [AW-1:0] ft_b;
  logic          ft_busy;
  assign ft_b = in_addr(st_slot[0]);
  aols_fdfir #(
    .N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP),
    .H_SHIFT(H_SHIFT), .P_SHIFT(P_SHIFT)
  ) u_ft (
    .clk, .rst_n, .start(st_start[0]),
    .in_base(ft_b), .spec_base(ft_b + AW'(IN_SZ)), .coef_base('0),
    .raw_base(ft_b + AW'(IN_SZ + SPEC_SZ)),
    .busy(ft_busy), .done(st_done[0]), .mem_req(k_req[0]), .mem_rsp(k_rsp[0])
  );

  // Stage 2: FOP preparation (discard + transpose).
  logic [AW-1:0] fp_b;
  logic          fp_busy;
  assign fp_b = in_addr(st_slot[1]);
  fop_prep #(.N_CHAN(N_CHAN), .N_TAP(N_TAP), .N_FFT(N_FFT), .N_TEMP(N_TEMP)) u_fop (
    .clk, .rst_n, .start(st_start[1]),
    .raw_base(fp_b + AW'(IN_SZ + SPEC_SZ)), .fop_base(fp_b + AW'(IN_SZ + SPEC_SZ + RAW_SZ)),
    .busy(fp_busy), .done(st_done[1]), .mem_req(k_req[1]), .mem_rsp(k_rsp[1])
  );

  // Stage 3: harmonic summing and candidate detection.
  logic [AW-1:0]             hm_b;
  logic                      hm_busy, hp_valid;
  logic [$clog2(N_HP)-1:0]   hp_plane;
  logic [$clog2(N_TEMP)-1:0] hp_row;
  logic [23:0]               hp_col;
  logic [HW-1:0]             hp_power;
  assign hm_b = in_addr(st_slot[2]);
  harmonic_sum #(.N_CHAN(N_CHAN), .N_TEMP(N_TEMP), .N_HP(N_HP)) u_hm (
    .clk, .rst_n, .start(st_start[2]), .fop_base(hm_b + AW'(IN_SZ + SPEC_SZ + RAW_SZ)),
    .col_lo(hm_col_lo), .col_hi(hm_col_hi),
    .busy(hm_busy), .done(st_done[2]), .mem_req(k_req[2]), .mem_rsp(k_rsp[2]),
    .hp_valid, .hp_plane, .hp_row, .hp_col, .hp_power
  );

  cand_detect #(.N_TEMP(N_TEMP), .N_HP(N_HP), .N_CAND(N_CAND)) u_cd (
    .clk, .rst_n, .clear(st_start[2]),
    .cfg_we(thr_we), .cfg_plane(thr_plane), .cfg_row(thr_row), .cfg_thr(thr_value),
    .in_valid(hp_valid), .in_plane(hp_plane), .in_row(hp_row), .in_col(hp_col),
    .in_power(hp_power), .rd_plane(cand_rd_plane), .rd_idx(cand_rd_idx),
    .rd_cand(cand_rd_data), .count(cand_count), .dropped(cand_dropped), .detected(cand_detected)
  );

  // The stage kernels and the buffer controller must agree on who is running.
  assert property (@(posedge clk) disable iff (!rst_n) ft_busy |-> stage_busy[0]);
  assert property (@(posedge clk) disable iff (!rst_n) fp_busy |-> stage_busy[1]);
  assert property (@(posedge clk) disable iff (!rst_n) hm_busy |-> stage_busy[2]);
endmodule
