// tb_mem_arbiter: three masters issue random reads and writes to disjoint
// address ranges through the arbiter to the memory model. Each master checks
// that every read returns the last value it wrote there (so a misrouted or
// reordered read fails), counts grants, and the test checks that all three
// were served and that conflicts were seen.
module tb_mem_arbiter;
  import fdas_pkg::*;
  localparam int unsigned NM = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  mem_req_t s_req;
  mem_rsp_t s_rsp;
  logic [31:0] conflicts;
  mem_arbiter #(.NM(NM), .DEPTH(4)) dut (.*);
  ddr_model #(.LAT(4), .GNT_PCT(60)) u_mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp));

  int checks = 0, failures = 0;
  int done_cnt = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NM; g++) begin : g_m
    logic [DW-1:0] shadow [16];
    initial begin
      logic [3:0] a;
      logic [DW-1:0] w;
      for (int q = 0; q < 16; q++) shadow[q] = '0;
      m_req[g] = '0;
      wait (rst_n);
      for (int op = 0; op < 200; op++) begin
        @(negedge clk);
        a = 4'($urandom);
        if ($urandom_range(1)) begin
          w = {32'(g), 32'($urandom)};
          m_req[g] = '{valid: 1'b1, we: 1'b1, addr: AW'(g * 1000) + AW'(a), wdata: w};
          shadow[a] = w;
          do @(posedge clk); while (!m_rsp[g].gnt);
          #1 m_req[g].valid = 1'b0;
        end else begin
          m_req[g] = '{valid: 1'b1, we: 1'b0, addr: AW'(g * 1000) + AW'(a), wdata: '0};
          do @(posedge clk); while (!m_rsp[g].gnt);
          #1 m_req[g].valid = 1'b0;
          do @(posedge clk); while (!m_rsp[g].rvalid);
          checks++;
          if (m_rsp[g].rdata != shadow[a]) begin
            failures++;
            $display("master %0d addr %0d: got %h want %h", g, a, m_rsp[g].rdata, shadow[a]);
          end
        end
      end
      done_cnt++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (done_cnt == NM);
    checks++;
    if (conflicts == 0) begin failures++; $display("no conflicts seen"); end
    $display("conflict cycles: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
