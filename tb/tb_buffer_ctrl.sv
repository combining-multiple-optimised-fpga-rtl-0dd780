// tb_buffer_ctrl: the multiple-buffering controller with stage models of
// random length, double and triple buffered. For each array it checks that
// the stages run in order, that a buffer is reused only after its candidates
// were acknowledged, that harmonic summing waits for the previous
// acknowledgement, and that stages overlapped and a full-buffer stall
// occurred.
module tb_buffer_ctrl;
  localparam int unsigned N_ARR = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int finished = 0;

  for (genvar G = 0; G < 2; G++) begin : g_cfg
    localparam int unsigned NB = G + 2;
    localparam int unsigned SW = $clog2(NB);
    logic fill_ready, fill_done = 0, res_valid, res_ack = 0;
    logic [SW-1:0] fill_slot, res_slot;
    logic st_start [3], st_done [3], st_busy [3];
    logic [SW-1:0] st_slot [3];
    logic [31:0] full_cycles, overlap_cycles;
    int fill_cnt = 0, ack_cnt = 0, blocked = 0;
    int done_cnt [3] = '{0, 0, 0};

    buffer_ctrl #(.N_BUF(NB)) dut (.*);

    initial for (int s = 0; s < 3; s++) st_done[s] = 1'b0;

    // Host: fill arrays as fast as buffers allow.
    initial begin
      wait (rst_n);
      while (fill_cnt < N_ARR) begin
        @(negedge clk);
        if (fill_ready) begin
          checks++;
          if (fill_slot != SW'(fill_cnt % NB)) begin failures++; $display("fill slot"); end
          fill_done = 1'b1;
          @(negedge clk);
          fill_done = 1'b0;
          fill_cnt++;
        end else blocked++;
      end
    end

    // Host: take candidates.
    initial begin
      wait (rst_n);
      while (ack_cnt < N_ARR) begin
        @(negedge clk);
        if (res_valid) begin
          repeat ($urandom_range(5)) @(negedge clk);
          checks++;
          if (res_slot != SW'(ack_cnt % NB)) begin failures++; $display("result slot"); end
          res_ack = 1'b1;
          @(negedge clk);
          res_ack = 1'b0;
          ack_cnt++;
        end
      end
      checks += 2;
      if (overlap_cycles == 0) begin failures++; $display("NB=%0d: stages never overlapped", NB); end
      if (full_cycles == 0 || blocked == 0) begin failures++; $display("NB=%0d: buffers never full", NB); end
      $display("NB=%0d: overlap %0d cycles, full %0d cycles", NB, overlap_cycles, full_cycles);
      finished++;
    end

    // Stage models. Stage 1 (FOP) is short, stage 0 and 2 long.
    for (genvar s = 0; s < 3; s++) begin : g_st
      initial begin
        int a;
        a = 0;
        wait (rst_n);
        while (a < N_ARR) begin
          @(posedge clk);
          if (st_start[s]) begin
            checks++;
            if (st_slot[s] != SW'(a % NB)) begin failures++; $display("stage %0d slot", s); end
            if (s == 0 && !(fill_cnt > a && ack_cnt + NB > a)) begin failures++; $display("FT early"); end
            if (s > 0 && done_cnt[s-1] <= a) begin failures++; $display("stage %0d early", s); end
            if (s == 2 && ack_cnt != a) begin failures++; $display("HM before ack"); end
            repeat ((s == 1) ? $urandom_range(5, 15) : $urandom_range(20, 60)) @(negedge clk);
            st_done[s] = 1'b1;
            @(negedge clk);
            st_done[s] = 1'b0;
            done_cnt[s]++;
            a++;
          end
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (finished == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
