// fft_engine: N-point complex FFT engine shared by the forward and inverse
// transforms of the area-efficient overlap-save filter (one FFT engine per
// kernel, as in the AOLS kernel).
//
// How it works: an in-place, iterative radix-2 decimation-in-time FFT over
// one N-word working memory. Samples are written in natural order and stored
// at their bit-reversed address; log2(N) passes of N/2 butterflies follow,
// one butterfly per clock (two reads and two writes of the working memory in
// the same cycle). The result is read back in natural order.
//
// Arithmetic (this design's choice, the paper uses single-precision float):
// 32-bit signed components, Q1.14 twiddles from a table computed at
// elaboration. The forward transform is unscaled (the caller keeps inputs
// small enough for log2(N) bits of growth). The inverse transform uses
// conjugate twiddles and halves every butterfly output, so it returns
// IDFT(X) = (1/N) * sum X[k] e^{+j2pi kn/N}.
//
// The paper's kernel uses a radix-4 feed-forward pipelined FFT; this engine
// is a simpler memory-based radix-2 one that gives the same transform at a
// lower rate.
//
// Interface and timing:
//   wr_en/wr_addr/wr_data  load one sample (natural index) per cycle, idle only
//   start, inverse         start a transform; busy until done pulses
//   transform time         (N/2)*log2(N) cycles from start to done
//   rd_addr -> rd_data     result read, one cycle latency
module fft_engine
  import fdas_pkg::*;
#(
  parameter int unsigned N = N_FFT_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_addr,
  input  cplx_t                wr_data,
  input  logic                 start,
  input  logic                 inverse,
  output logic                 busy,
  output logic                 done,
  input  logic [$clog2(N)-1:0] rd_addr,
  output cplx_t                rd_data
);
  localparam int unsigned LG = $clog2(N);
  localparam real PI = 3.14159265358979323846;

  typedef logic signed [TWW-1:0] tw_t;

  function automatic tw_t tw_cos(input int k);
    return tw_t'($rtoi($floor(16384.0 * $cos(2.0 * PI * k / N) + 0.5)));
  endfunction
  function automatic tw_t tw_sin(input int k);
    return tw_t'($rtoi($floor(16384.0 * $sin(2.0 * PI * k / N) + 0.5)));
  endfunction

  function automatic logic [LG-1:0] bitrev(input logic [LG-1:0] a);
    for (int b = 0; b < LG; b++) bitrev[b] = a[LG-1-b];
  endfunction

  // Twiddle table: cos and sin of 2*pi*k/N for k < N/2.
  tw_t tw_c [N/2];
  tw_t tw_s [N/2];
  for (genvar k = 0; k < N / 2; k++) begin : g_tw
    localparam tw_t C = tw_cos(k);
    localparam tw_t S = tw_sin(k);
    assign tw_c[k] = C;
    assign tw_s[k] = S;
  end

  cplx_t mem [N];

  logic [$clog2(LG+1)-1:0] stage;   // pass number
  logic [LG-2:0]           bfly;    // butterfly within the pass
  logic                    inv_q;

  // Butterfly addressing for the current pass.
  logic [LG-1:0] i0, i1, half, pos, grp_base;
  logic [LG-2:0] tw_idx;
  always_comb begin
    half     = LG'(1) << stage;
    pos      = LG'(bfly) & (half - LG'(1));
    grp_base = (LG'(bfly) - pos) << 1;
    i0       = grp_base + pos;
    i1       = i0 + half;
    tw_idx   = (LG-1)'(pos << (LG - 1 - int'(stage)));
  end

  // Butterfly datapath.
  cplx_t a, b, y0, y1;
  tw_t   wr, wi;
  logic signed [CW+TWW-1:0] pr, pi_;
  comp_t tr, ti;
  logic signed [CW:0] s0r, s0i, s1r, s1i;
  always_comb begin
    a   = mem[i0];
    b   = mem[i1];
    wr  = tw_c[tw_idx];
    wi  = inv_q ? tw_s[tw_idx] : -tw_s[tw_idx];
    pr  = b.re * wr - b.im * wi;
    pi_ = b.re * wi + b.im * wr;
    tr  = comp_t'(pr >>> (TWW - 2));
    ti  = comp_t'(pi_ >>> (TWW - 2));
    s0r = a.re + tr;
    s0i = a.im + ti;
    s1r = a.re - tr;
    s1i = a.im - ti;
    if (inv_q) begin
      y0 = '{re: comp_t'(s0r >>> 1), im: comp_t'(s0i >>> 1)};
      y1 = '{re: comp_t'(s1r >>> 1), im: comp_t'(s1i >>> 1)};
    end else begin
      y0 = '{re: comp_t'(s0r), im: comp_t'(s0i)};
      y1 = '{re: comp_t'(s1r), im: comp_t'(s1i)};
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      mem[i0] <= y0;
      mem[i1] <= y1;
    end else if (wr_en) begin
      mem[bitrev(wr_addr)] <= wr_data;
    end
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      stage <= '0;
      bfly  <= '0;
      inv_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          stage <= '0;
          bfly  <= '0;
          inv_q <= inverse;
        end
      end else begin
        bfly <= bfly + 1'b1;
        if (&bfly) begin
          if (int'(stage) == LG - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            stage <= stage + 1'b1;
          end
        end
      end
    end
  end

  // A load during a transform would corrupt it.
  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wr_en);

endmodule
