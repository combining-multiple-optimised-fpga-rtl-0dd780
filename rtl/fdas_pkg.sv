// fdas_pkg: types and constants shared by the FDAS (frequency domain
// acceleration search) pipeline.
//
// Numbers that follow the paper: 2^21 channels per input array, 421-tap
// templates, 2048-point overlap-save chunks (AOLS-2048), 42 templates per run
// (half of the 85-row filter-output plane), 8 harmonic planes and 200
// candidates per plane. The paper computes in single-precision floating
// point; this design uses fixed point instead (a choice of this design):
// complex samples are two signed 32-bit words packed into one 64-bit memory
// word, powers are unsigned 32-bit values in the low half of a word.
//
// The off-chip memory is reached through a simple request/grant port: a
// master holds `valid` with `we`, `addr` and `wdata` until `gnt`; a read
// returns one `rvalid` pulse with `rdata` later, in request order.
package fdas_pkg;

  // Memory port widths.
  localparam int unsigned AW = 32;   // word address
  localparam int unsigned DW = 64;   // memory word

  // Paper sizes (Table 1 and Section 2.1.3).
  localparam int unsigned N_CHAN_DEF  = 1 << 21;
  localparam int unsigned N_TAP_DEF   = 421;
  localparam int unsigned N_FFT_DEF   = 2048;
  localparam int unsigned N_TEMP_DEF  = 42;   // templates per run (half FOP)
  localparam int unsigned N_HP_DEF    = 8;
  localparam int unsigned N_CAND_DEF  = 200;
  localparam int unsigned N_BUF_DEF   = 2;    // double buffering

  // Fixed-point formats (this design's choice).
  localparam int unsigned CW  = 32;  // complex component width
  localparam int unsigned TWW = 16;  // twiddle width, Q1.14
  localparam int unsigned PW  = 32;  // power width
  localparam int unsigned HW  = 40;  // harmonic sum width

  typedef logic signed [CW-1:0] comp_t;

  typedef struct packed {
    comp_t re;
    comp_t im;
  } cplx_t;

  typedef struct packed {
    logic          valid;
    logic          we;
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic          gnt;
    logic          rvalid;
    logic [DW-1:0] rdata;
  } mem_rsp_t;

  // One detected candidate: harmonic plane (0 = HP_1), FOP row, column and
  // harmonic-summed power.
  typedef struct packed {
    logic [3:0]    plane;
    logic [7:0]    row;
    logic [23:0]   col;
    logic [HW-1:0] power;
  } cand_t;

  function automatic int unsigned clog2u(input int unsigned v);
    return (v <= 1) ? 1 : $clog2(v);
  endfunction

endpackage
