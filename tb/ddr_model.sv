// ddr_model: behavioural model of the off-chip memory behind the memory
// port (not synthesizable logic; it stands in for the board's DDR memory and
// its controller). Words live in a sparse associative array, unwritten words
// read as zero. A request is granted on a pseudo-random subset of cycles
// (GNT_PCT percent), and each read returns its word LAT cycles after the
// grant, in request order.
module ddr_model
  import fdas_pkg::*;
#(
  parameter int unsigned LAT     = 3,
  parameter int unsigned GNT_PCT = 70
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  logic [DW-1:0] mem [logic [AW-1:0]];
  logic          gnt_ok;
  logic [DW-1:0] pipe_d [LAT];
  logic          pipe_v [LAT];
  longint        n_reads = 0, n_writes = 0;

  always_ff @(posedge clk) gnt_ok <= ($urandom_range(99) < GNT_PCT);

  always_comb begin
    rsp.gnt    = req.valid && gnt_ok;
    rsp.rvalid = pipe_v[LAT-1];
    rsp.rdata  = pipe_d[LAT-1];
  end

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin pipe_v[i] <= 1'b0; pipe_d[i] <= '0; end
    end else begin
      for (int i = LAT - 1; i > 0; i--) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      pipe_v[0] <= rsp.gnt && !req.we;
      pipe_d[0] <= (mem.exists(req.addr)) ? mem[req.addr] : '0;
      if (rsp.gnt && req.we) begin
        mem[req.addr] = req.wdata;
        n_writes++;
      end
      if (rsp.gnt && !req.we) n_reads++;
    end
  end

  function automatic logic [DW-1:0] peek(input logic [AW-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction
  function automatic void poke(input logic [AW-1:0] a, input logic [DW-1:0] d);
    mem[a] = d;
  endfunction
endmodule
