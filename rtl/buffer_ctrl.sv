// buffer_ctrl: multiple-buffering controller of the FDAS pipeline.
//
// The pipeline has three stages, FT convolution, FOP preparation and harmonic
// summing, and N_BUF buffers in off-chip memory, each large enough for one
// input array and all the planes made from it. Every buffer steps through
//   FREE -> FILLED (host wrote an input array) -> FT_DONE -> FOP_DONE
//        -> HM_DONE (candidates ready) -> FREE (host took the candidates).
// Each stage works through the buffers in ring order: it starts on its next
// buffer as soon as that buffer has reached the state the stage needs and
// the stage is idle. So with two buffers the FT convolution of one array
// runs while the previous array is prepared and harmonic-summed (double
// buffering), and with three, all three stages can overlap (triple
// buffering); the pipeline period tends to the slowest stage.
// Harmonic summing also waits until the host has acknowledged the previous
// candidates, because there is one set of candidate lists.
//
// The stage sequence and the double/triple-buffering rule follow the paper;
// the buffer states, ring order and host handshake are this design's
// choices.
//
// Interface: fill_ready/fill_slot tell the host where the next input array
// goes, fill_done marks it written; st_start[s]/st_slot[s] launch stage s,
// st_done[s] ends it; res_valid/res_slot announce finished candidates,
// res_ack frees the buffer. Counters: cycles with no free buffer and cycles
// with two or more stages busy.
module buffer_ctrl #(
  parameter int unsigned N_BUF = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     fill_ready,
  output logic [$clog2(N_BUF)-1:0] fill_slot,
  input  logic                     fill_done,
  output logic                     st_start [3],
  output logic [$clog2(N_BUF)-1:0] st_slot  [3],
  input  logic                     st_done  [3],
  output logic                     st_busy  [3],
  output logic                     res_valid,
  output logic [$clog2(N_BUF)-1:0] res_slot,
  input  logic                     res_ack,
  output logic [31:0]              full_cycles,
  output logic [31:0]              overlap_cycles
);
  localparam int unsigned SW = (N_BUF > 1) ? $clog2(N_BUF) : 1;

  typedef enum logic [2:0] {FREE, FILLED, FT_DONE, FOP_DONE, HM_DONE} buf_state_t;
  buf_state_t st [N_BUF];

  logic [SW-1:0] wp, rp;
  logic [SW-1:0] sp [3];
  logic          go [3];

  function automatic logic [SW-1:0] nxt(input logic [SW-1:0] p);
    return (p == SW'(N_BUF - 1)) ? '0 : p + 1'b1;
  endfunction

  assign fill_ready = (st[wp] == FREE);
  assign fill_slot  = wp;
  assign res_valid  = (st[rp] == HM_DONE);
  assign res_slot   = rp;

  always_comb begin
    for (int s = 0; s < 3; s++) begin
      go[s] = !st_busy[s] && (st[sp[s]] == buf_state_t'(s + 1));
      st_start[s] = go[s];
      st_slot[s]  = sp[s];
    end
    // One candidate list set: harmonic summing waits for the host.
    if (res_valid) go[2] = 1'b0;
    st_start[2] = go[2];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < N_BUF; b++) st[b] <= FREE;
      for (int s = 0; s < 3; s++) begin
        sp[s]      <= '0;
        st_busy[s] <= 1'b0;
      end
      wp             <= '0;
      rp             <= '0;
      full_cycles    <= '0;
      overlap_cycles <= '0;
    end else begin
      if (fill_done && fill_ready) begin
        st[wp] <= FILLED;
        wp <= nxt(wp);
      end
      for (int s = 0; s < 3; s++) begin
        if (go[s]) st_busy[s] <= 1'b1;
        if (st_done[s] && st_busy[s]) begin
          st_busy[s] <= 1'b0;
          st[sp[s]]  <= buf_state_t'(s + 2);
          sp[s]      <= nxt(sp[s]);
        end
      end
      if (res_ack && res_valid) begin
        st[rp] <= FREE;
        rp <= nxt(rp);
      end
      if (!fill_ready) full_cycles <= full_cycles + 1'b1;
      if (32'(st_busy[0]) + 32'(st_busy[1]) + 32'(st_busy[2]) >= 2)
        overlap_cycles <= overlap_cycles + 1'b1;
    end
  end

  for (genvar s = 0; s < 3; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) st_done[s] |-> st_busy[s])
      else $error("stage %0d reported done while idle", s);
  end
endmodule
