// mem_arbiter: off-chip memory interconnect. The kernels of the pipeline
// (FT convolution, FOP preparation, harmonic summing) share one port to the
// off-chip memory, which is how the paper's kernels share the device's global
// memory bandwidth; when several run at once they slow each other down.
//
// How it works: a round-robin choice among the masters with a valid request,
// starting after the master granted last, is forwarded to the memory port,
// and the memory's grant is returned to that master. Reads are answered in
// order; the master number of every granted read is queued (up to DEPTH
// outstanding reads) and each returning word is steered to the master at
// the head of the queue. A read is held back while the queue is full.
// `conflicts` counts the cycles in which more than one master was waiting.
// The round-robin policy and the queue are this design's choices.
//
// Rule for masters (checked by assertion): a request stays valid with the
// same address and data until it is granted.
module mem_arbiter
  import fdas_pkg::*;
#(
  parameter int unsigned NM    = 3,
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mem_req_t    m_req [NM],
  output mem_rsp_t    m_rsp [NM],
  output mem_req_t    s_req,
  input  mem_rsp_t    s_rsp,
  output logic [31:0] conflicts
);
  localparam int unsigned SW = (NM > 1) ? $clog2(NM) : 1;
  localparam int unsigned QW = $clog2(DEPTH);

  logic [SW-1:0] rr, sel;
  logic          any;
  logic [SW-1:0] q_id [DEPTH];
  logic [QW-1:0] q_wp, q_rp;
  logic [QW:0]   q_n;
  logic          q_full;
  int unsigned   n_valid;

  assign q_full = (q_n == (QW+1)'(DEPTH));

  always_comb begin
    any = 1'b0;
    sel = rr;
    n_valid = 0;
    for (int d = 0; d < NM; d++) if (m_req[d].valid) n_valid++;
    for (int d = NM - 1; d >= 0; d--) begin
      logic [SW-1:0] idx;
      idx = SW'((int'(rr) + d) % NM);
      if (m_req[idx].valid) begin
        any = 1'b1;
        sel = idx;
      end
    end
  end

  always_comb begin
    s_req = m_req[sel];
    if (!any || (!m_req[sel].we && q_full)) s_req.valid = 1'b0;
    for (int d = 0; d < NM; d++) begin
      m_rsp[d].gnt    = (SW'(d) == sel) && s_req.valid && s_rsp.gnt;
      m_rsp[d].rvalid = s_rsp.rvalid && (q_n != 0) && (q_id[q_rp] == SW'(d));
      m_rsp[d].rdata  = s_rsp.rdata;
    end
  end

  logic push, pop;
  assign push = s_req.valid && s_rsp.gnt && !s_req.we;
  assign pop  = s_rsp.rvalid && (q_n != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr        <= '0;
      q_wp      <= '0;
      q_rp      <= '0;
      q_n       <= '0;
      conflicts <= '0;
      for (int d = 0; d < DEPTH; d++) q_id[d] <= '0;
    end else begin
      if (s_req.valid && s_rsp.gnt) rr <= (sel == SW'(NM - 1)) ? '0 : sel + 1'b1;
      if (push) begin
        q_id[q_wp] <= sel;
        q_wp <= q_wp + 1'b1;
      end
      if (pop) q_rp <= q_rp + 1'b1;
      q_n <= q_n + (QW+1)'(push) - (QW+1)'(pop);
      if (n_valid > 1) conflicts <= conflicts + 1'b1;
    end
  end

  for (genvar d = 0; d < NM; d++) begin : g_rule
    assert property (@(posedge clk) disable iff (!rst_n)
      m_req[d].valid && !m_rsp[d].gnt |=> m_req[d].valid && $stable(m_req[d].addr)
                                            && $stable(m_req[d].we) && $stable(m_req[d].wdata))
      else $error("master %0d changed its request before the grant", d);
  end
  assert property (@(posedge clk) disable iff (!rst_n) s_rsp.rvalid |-> q_n != 0)
    else $error("read data with no read outstanding");
endmodule
