// fop_prep: FOP preparation between FT convolution and harmonic summing,
// doing the discard and the transpose the paper's best combination needs.
//
// Discard: the overlap-save kernel writes N_FFT powers per chunk and
// template, of which the first N_TAP-1 are the overlap and, in the last
// chunk, the points past channel N_CHAN-1 are padding. Only the
// N_FFT-N_TAP+1 valid points of each chunk are copied, which removes the
// invalid slices of the raw plane and leaves the standard filter-output plane
// (FOP) of N_TEMP rows by N_CHAN columns.
// Transpose: the FOP is written column-major, fop_base + j*N_TEMP + t, so
// that the N_TEMP rows of one column sit at consecutive addresses for the
// column-wise harmonic summing.
//
// Interface and timing: pulse start with the bases valid; busy until done
// pulses. It reads one word and writes one word per FOP point, one access at
// a time, so it is bound by the memory port. The loop order (columns outer,
// templates inner) is this design's choice.
module fop_prep
  import fdas_pkg::*;
#(
  parameter int unsigned N_CHAN = N_CHAN_DEF,
  parameter int unsigned N_TAP  = N_TAP_DEF,
  parameter int unsigned N_FFT  = N_FFT_DEF,
  parameter int unsigned N_TEMP = N_TEMP_DEF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] raw_base,
  input  logic [AW-1:0] fop_base,
  output logic          busy,
  output logic          done,
  output mem_req_t      mem_req,
  input  mem_rsp_t      mem_rsp
);
  localparam int unsigned L       = N_FFT - N_TAP + 1;
  localparam int unsigned N_CHUNK = (N_CHAN + L - 1) / L;

  typedef enum logic [2:0] {S_IDLE, S_RD, S_RD_WAIT, S_WR_WAIT, S_DONE} state_t;
  state_t state;

  logic [$clog2(N_CHUNK+1)-1:0] c;   // chunk
  logic [$clog2(L+1)-1:0]       m;   // valid point within the chunk
  logic [$clog2(N_TEMP+1)-1:0]  t;   // template (FOP row)
  logic [AW-1:0]                j;   // FOP column = c*L + m
  logic [AW-1:0]                b_raw, b_fop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      c       <= '0;
      m       <= '0;
      t       <= '0;
      j       <= '0;
      b_raw   <= '0;
      b_fop   <= '0;
      mem_req <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (mem_req.valid && mem_rsp.gnt) mem_req.valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          b_raw <= raw_base;
          b_fop <= fop_base;
          c <= '0; m <= '0; t <= '0; j <= '0;
          state <= S_RD;
        end
        S_RD: begin
          mem_req <= '{valid: 1'b1, we: 1'b0,
                       addr: b_raw + (AW'(t) * AW'(N_CHUNK) + AW'(c)) * AW'(N_FFT)
                             + AW'(N_TAP - 1) + AW'(m),
                       wdata: '0};
          state <= S_RD_WAIT;
        end
        S_RD_WAIT: if (mem_rsp.rvalid) begin
          mem_req <= '{valid: 1'b1, we: 1'b1, addr: b_fop + j * AW'(N_TEMP) + AW'(t),
                       wdata: mem_rsp.rdata};
          state <= S_WR_WAIT;
        end
        S_WR_WAIT: if (mem_req.valid && mem_rsp.gnt) begin
          state <= S_RD;
          if (t == ($bits(t))'(N_TEMP - 1)) begin
            t <= '0;
            j <= j + 1'b1;
            if (j == AW'(N_CHAN - 1)) state <= S_DONE;
            else if (m == ($bits(m))'(L - 1)) begin
              m <= '0;
              c <= c + 1'b1;
            end else m <= m + 1'b1;
          end else t <= t + 1'b1;
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
endmodule
