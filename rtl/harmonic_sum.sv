// harmonic_sum: Naive-MultipleHP harmonic summing. All N_HP harmonic planes
// are computed together, point by point, from the transposed FOP in off-chip
// memory, so no harmonic plane is ever stored.
//
// How it works: for every FOP column j (outer loop) and row i (inner loop)
// the running sum starts at zero and, for k = 1..N_HP, the stretched-plane
// value SP_k(i,j) = FOP(floor(i/k), floor(j/k)) is read and added:
// HP_k(i,j) = HP_{k-1}(i,j) + SP_k(i,j), with HP_1 = FOP. Each HP_k(i,j) is
// sent out on hp_* for threshold detection as soon as it is formed. The
// quotients floor(i/k) and floor(j/k) are kept per k as counters that step
// with i and j, so no divider is needed.
//
// The recurrence and the plane count follow the paper's algorithm; the exact
// stretch (integer division of both the row and the column by k), the row
// indexing of the half plane (row i = 0..N_TEMP-1) and the loop order are this
// design's choices, since the paper does not spell them out.
//
// Column range: only columns col_lo <= j < col_hi are summed (sampled at
// start; 0 and N_CHAN for the whole plane). This lets N devices loaded with
// the same design each take 1/N of the FOP, as in the paper's multi-device
// runs; splitting by columns is this design's choice. The counters are stepped
// up to col_lo one column per cycle without memory accesses, which keeps the
// quotient/remainder counters divider-free at a cost of at most N_CHAN cycles.
//
// Interface and timing: pulse start with fop_base, col_lo and col_hi valid;
// busy until done. One read per plane and point, one at a time: the irregular
// off-chip reads that limit this method in the paper. FOP layout:
// fop_base + j*N_TEMP + i.
module harmonic_sum
  import fdas_pkg::*;
#(
  parameter int unsigned N_CHAN = N_CHAN_DEF,
  parameter int unsigned N_TEMP = N_TEMP_DEF,
  parameter int unsigned N_HP   = N_HP_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [AW-1:0]             fop_base,
  input  logic [AW-1:0]             col_lo,
  input  logic [AW-1:0]             col_hi,
  output logic                      busy,
  output logic                      done,
  output mem_req_t                  mem_req,
  input  mem_rsp_t                  mem_rsp,
  output logic                      hp_valid,
  output logic [$clog2(N_HP)-1:0]   hp_plane,
  output logic [$clog2(N_TEMP)-1:0] hp_row,
  output logic [23:0]               hp_col,
  output logic [HW-1:0]             hp_power
);
  localparam int unsigned KW = $clog2(N_HP);
  localparam int unsigned IW = $clog2(N_TEMP);

  typedef enum logic [2:0] {S_IDLE, S_SKIP, S_RD, S_WAIT, S_DONE} state_t;
  state_t state;

  logic [KW-1:0]  k;                 // plane index, divisor k+1
  logic [IW-1:0]  i;
  logic [AW-1:0]  j;
  logic [AW-1:0]  b_fop;
  logic [AW-1:0]  b_lo, b_hi;
  logic [HW-1:0]  acc;
  logic [IW-1:0]  qi [N_HP];         // floor(i/(k+1))
  logic [KW-1:0]  ri [N_HP];         // i mod (k+1)
  logic [AW-1:0]  qj [N_HP];         // floor(j/(k+1))
  logic [KW-1:0]  rj [N_HP];         // j mod (k+1)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      k        <= '0;
      i        <= '0;
      j        <= '0;
      b_fop    <= '0;
      b_lo     <= '0;
      b_hi     <= '0;
      acc      <= '0;
      mem_req  <= '0;
      done     <= 1'b0;
      hp_valid <= 1'b0;
      hp_plane <= '0;
      hp_row   <= '0;
      hp_col   <= '0;
      hp_power <= '0;
      for (int q = 0; q < N_HP; q++) begin
        qi[q] <= '0; ri[q] <= '0; qj[q] <= '0; rj[q] <= '0;
      end
    end else begin
      done     <= 1'b0;
      hp_valid <= 1'b0;
      if (mem_req.valid && mem_rsp.gnt) mem_req.valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          b_fop <= fop_base;
          b_lo  <= col_lo;
          b_hi  <= col_hi;
          k <= '0; i <= '0; j <= '0; acc <= '0;
          for (int q = 0; q < N_HP; q++) begin
            qi[q] <= '0; ri[q] <= '0; qj[q] <= '0; rj[q] <= '0;
          end
          state <= (col_lo >= col_hi) ? S_DONE : S_SKIP;
        end
        S_SKIP: begin
          if (j == b_lo) state <= S_RD;
          else begin
            for (int q = 0; q < N_HP; q++) begin
              if (rj[q] == KW'(q)) begin rj[q] <= '0; qj[q] <= qj[q] + 1'b1; end
              else rj[q] <= rj[q] + 1'b1;
            end
            j <= j + 1'b1;
          end
        end
        S_RD: begin
          mem_req <= '{valid: 1'b1, we: 1'b0,
                       addr: b_fop + qj[k] * AW'(N_TEMP) + AW'(qi[k]), wdata: '0};
          state <= S_WAIT;
        end
        S_WAIT: if (mem_rsp.rvalid) begin
          hp_valid <= 1'b1;
          hp_plane <= k;
          hp_row   <= i;
          hp_col   <= 24'(j);
          hp_power <= acc + HW'(mem_rsp.rdata[PW-1:0]);
          acc      <= acc + HW'(mem_rsp.rdata[PW-1:0]);
          state    <= S_RD;
          if (k == KW'(N_HP - 1)) begin
            k   <= '0;
            acc <= '0;
            if (i == IW'(N_TEMP - 1)) begin
              i <= '0;
              for (int q = 0; q < N_HP; q++) begin
                qi[q] <= '0;
                ri[q] <= '0;
                if (rj[q] == KW'(q)) begin rj[q] <= '0; qj[q] <= qj[q] + 1'b1; end
                else rj[q] <= rj[q] + 1'b1;
              end
              j <= j + 1'b1;
              if (j == b_hi - 1'b1) state <= S_DONE;
            end else begin
              i <= i + 1'b1;
              for (int q = 0; q < N_HP; q++) begin
                if (ri[q] == KW'(q)) begin ri[q] <= '0; qi[q] <= qi[q] + 1'b1; end
                else ri[q] <= ri[q] + 1'b1;
              end
            end
          end else k <= k + 1'b1;
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

  a_range: assert property (@(posedge clk) disable iff (!rst_n)
                            (state == S_IDLE && start) |-> col_hi <= AW'(N_CHAN));
endmodule
