// aols_fdfir: area-efficient overlap-save FDFIR kernel with power output
// (AOLS-N_FFT-P). It applies N_TEMP FIR templates of up to N_TAP taps to one
// input array of N_CHAN complex samples and writes, for every template, the
// power of the filter output to the raw output plane in off-chip memory.
//
// How it works (following the paper's overlap-save description): the input is
// cut into N_CHUNK chunks of N_FFT samples that overlap by N_TAP-1 samples;
// the first chunk is preceded by N_TAP-1 zeros, and positions past the end of
// the array read as zero. The kernel has a single FFT engine and runs in two
// phases, like the paper's AOLS kernel that is launched twice:
//   1. forward: every chunk is transformed once and its spectrum X_c is
//      stored in the spectrum area;
//   2. filter: for every template t and chunk c, X_c[k] * H_t[k] is formed
//      (H_t is the template's N_FFT-point spectrum, prepared by the host in
//      the coefficient area, scaled by 2^H_SHIFT), inverse transformed, and
//      the power of all N_FFT outputs is written to the raw plane.
// The first N_TAP-1 points of every chunk in the raw plane are the overlap
// that overlap-save discards; that is left to the FOP preparation stage,
// which is how the paper's combination splits the work.
//
// Memory layout (word addresses, relative to the bases given at start):
//   in_base   + i                       input sample i, cplx_t
//   spec_base + c*N_FFT + k             spectrum of chunk c, cplx_t
//   coef_base + t*N_FFT + k             spectrum of template t, cplx_t
//   raw_base  + (t*N_CHUNK + c)*N_FFT + n  power, low PW bits
//
// Interface and timing: pulse start with the bases valid; busy until done
// pulses. One memory access at a time on the mem_req/mem_rsp port. Fixed
// point, one FFT engine, the two phases and the memory-access order are this
// design's choices where the paper describes an OpenCL kernel.
module aols_fdfir
  import fdas_pkg::*;
#(
  parameter int unsigned N_CHAN  = N_CHAN_DEF,
  parameter int unsigned N_TAP   = N_TAP_DEF,
  parameter int unsigned N_FFT   = N_FFT_DEF,
  parameter int unsigned N_TEMP  = N_TEMP_DEF,
  parameter int unsigned H_SHIFT = 14,
  parameter int unsigned P_SHIFT = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] in_base,
  input  logic [AW-1:0] spec_base,
  input  logic [AW-1:0] coef_base,
  input  logic [AW-1:0] raw_base,
  output logic          busy,
  output logic          done,
  output mem_req_t      mem_req,
  input  mem_rsp_t      mem_rsp
);
  localparam int unsigned L       = N_FFT - N_TAP + 1;        // valid outputs per chunk
  localparam int unsigned N_CHUNK = (N_CHAN + L - 1) / L;
  localparam int unsigned LG      = $clog2(N_FFT);

  initial assert (N_TAP < N_FFT) else $error("N_TAP must be below N_FFT");

  typedef enum logic [3:0] {
    S_IDLE, S_FLD, S_FLD_WAIT, S_FFT, S_FST_RD0, S_FST_RD, S_FST_WR,
    S_PLD, S_PLD_SPEC, S_PLD_COEF, S_PST_RD, S_PST_PW, S_PST_PW2, S_PST_WR, S_DONE
  } state_t;
  state_t state;

  logic                    phase_filter;         // 0 = forward phase, 1 = filter phase
  logic [LG:0]             n;                    // sample / bin counter
  logic [$clog2(N_CHUNK+1)-1:0] c;               // chunk
  logic [$clog2(N_TEMP+1)-1:0]  t;               // template
  logic signed [AW:0]      cstart;               // first input index of chunk c

  logic [AW-1:0] b_in, b_spec, b_coef, b_raw;
  cplx_t         xk;                             // spectrum bin held for the multiply

  // FFT engine.
  logic          f_wr, f_start, f_inv, f_busy, f_done;
  logic [LG-1:0] f_waddr, f_raddr;
  cplx_t         f_wdata, f_rdata;
  fft_engine #(.N(N_FFT)) u_fft (
    .clk, .rst_n, .wr_en(f_wr), .wr_addr(f_waddr), .wr_data(f_wdata),
    .start(f_start), .inverse(f_inv), .busy(f_busy), .done(f_done),
    .rd_addr(f_raddr), .rd_data(f_rdata)
  );

  // Power of the inverse-transform output.
  logic          p_in, p_out;
  logic [PW-1:0] p_val;
  power_calc #(.SHIFT(P_SHIFT)) u_pow (
    .clk, .rst_n, .in_valid(p_in), .in_data(f_rdata), .out_valid(p_out), .out_power(p_val)
  );

  // Spectrum times template spectrum.
  cplx_t hk, prod;
  logic signed [2*CW:0] xr, xi, hr, hi, mr, mi;
  always_comb begin
    hk   = cplx_t'(mem_rsp.rdata);
    xr   = (2*CW+1)'(xk.re);
    xi   = (2*CW+1)'(xk.im);
    hr   = (2*CW+1)'(hk.re);
    hi   = (2*CW+1)'(hk.im);
    mr   = xr * hr - xi * hi;
    mi   = xr * hi + xi * hr;
    prod = '{re: comp_t'(mr >>> H_SHIFT), im: comp_t'(mi >>> H_SHIFT)};
  end

  logic signed [AW:0] pos;
  assign pos = cstart + (AW+1)'(n);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      phase_filter <= 1'b0;
      n            <= '0;
      c            <= '0;
      t            <= '0;
      cstart       <= '0;
      b_in         <= '0;
      b_spec       <= '0;
      b_coef       <= '0;
      b_raw        <= '0;
      xk           <= '0;
      mem_req      <= '0;
      f_wr         <= 1'b0;
      f_waddr      <= '0;
      f_wdata      <= '0;
      f_start      <= 1'b0;
      f_inv        <= 1'b0;
      f_raddr      <= '0;
      p_in         <= 1'b0;
      done         <= 1'b0;
    end else begin
      f_wr    <= 1'b0;
      f_start <= 1'b0;
      p_in    <= 1'b0;
      done    <= 1'b0;
      if (mem_req.valid && mem_rsp.gnt) mem_req.valid <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          b_in <= in_base; b_spec <= spec_base; b_coef <= coef_base; b_raw <= raw_base;
          phase_filter <= 1'b0;
          c <= '0; t <= '0; n <= '0;
          cstart <= -(AW+1)'(N_TAP - 1);
          state <= S_FLD;
        end

        // Forward phase: load chunk c, zero outside the array.
        S_FLD: begin
          if (n == (LG+1)'(N_FFT)) begin
            f_start <= 1'b1;
            f_inv   <= 1'b0;
            state   <= S_FFT;
          end else if (pos < 0 || pos >= (AW+1)'(N_CHAN)) begin
            f_wr <= 1'b1; f_waddr <= LG'(n); f_wdata <= '0;
            n <= n + 1'b1;
          end else begin
            mem_req <= '{valid: 1'b1, we: 1'b0, addr: b_in + AW'(pos), wdata: '0};
            state   <= S_FLD_WAIT;
          end
        end
        S_FLD_WAIT: if (mem_rsp.rvalid) begin
          f_wr <= 1'b1; f_waddr <= LG'(n); f_wdata <= cplx_t'(mem_rsp.rdata);
          n <= n + 1'b1;
          state <= S_FLD;
        end

        S_FFT: if (f_done) begin
          n <= '0;
          f_raddr <= '0;
          state <= phase_filter ? S_PST_RD : S_FST_RD0;
        end

        // Forward phase: store spectrum of chunk c.
        S_FST_RD0: state <= S_FST_RD;          // f_rdata valid next cycle
        S_FST_RD: begin
          mem_req <= '{valid: 1'b1, we: 1'b1,
                       addr: b_spec + AW'(c) * AW'(N_FFT) + AW'(n), wdata: f_rdata};
          state <= S_FST_WR;
        end
        S_FST_WR: if (mem_req.valid && mem_rsp.gnt) begin
          if (n == (LG+1)'(N_FFT - 1)) begin
            n <= '0;
            if (c == ($bits(c))'(N_CHUNK - 1)) begin
              phase_filter <= 1'b1;
              c <= '0; t <= '0;
              state <= S_PLD;
            end else begin
              c <= c + 1'b1;
              cstart <= cstart + (AW+1)'(L);
              state <= S_FLD;
            end
          end else begin
            n <= n + 1'b1;
            f_raddr <= LG'(n + 1'b1);
            state <= S_FST_RD0;
          end
        end

        // Filter phase: X_c[k] * H_t[k] into the FFT engine.
        S_PLD: begin
          if (n == (LG+1)'(N_FFT)) begin
            f_start <= 1'b1;
            f_inv   <= 1'b1;
            state   <= S_FFT;
          end else begin
            mem_req <= '{valid: 1'b1, we: 1'b0,
                         addr: b_spec + AW'(c) * AW'(N_FFT) + AW'(n), wdata: '0};
            state <= S_PLD_SPEC;
          end
        end
        S_PLD_SPEC: if (mem_rsp.rvalid) begin
          xk <= cplx_t'(mem_rsp.rdata);
          mem_req <= '{valid: 1'b1, we: 1'b0,
                       addr: b_coef + AW'(t) * AW'(N_FFT) + AW'(n), wdata: '0};
          state <= S_PLD_COEF;
        end
        S_PLD_COEF: if (mem_rsp.rvalid) begin
          f_wr <= 1'b1; f_waddr <= LG'(n); f_wdata <= prod;
          n <= n + 1'b1;
          state <= S_PLD;
        end

        // Filter phase: power of all N_FFT outputs to the raw plane.
        S_PST_RD: state <= S_PST_PW;          // f_rdata valid next cycle
        S_PST_PW: begin
          p_in  <= 1'b1;
          state <= S_PST_PW2;
        end
        S_PST_PW2: if (p_out) begin
          mem_req <= '{valid: 1'b1, we: 1'b1,
                       addr: b_raw + (AW'(t) * AW'(N_CHUNK) + AW'(c)) * AW'(N_FFT) + AW'(n),
                       wdata: DW'(p_val)};
          state <= S_PST_WR;
        end
        S_PST_WR: if (mem_req.valid && mem_rsp.gnt) begin
          if (n == (LG+1)'(N_FFT - 1)) begin
            n <= '0;
            if (c == ($bits(c))'(N_CHUNK - 1)) begin
              c <= '0;
              if (t == ($bits(t))'(N_TEMP - 1)) state <= S_DONE;
              else begin
                t <= t + 1'b1;
                state <= S_PLD;
              end
            end else begin
              c <= c + 1'b1;
              state <= S_PLD;
            end
          end else begin
            n <= n + 1'b1;
            f_raddr <= LG'(n + 1'b1);
            state <= S_PST_RD;
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // The engine is only started from the two load states, never while busy.
  assert property (@(posedge clk) disable iff (!rst_n) f_start |-> !f_busy);

endmodule
