// tb_noc_router: self-checking test of the star network on chip.
//
// Ten sources send random routed events (including ids that name no sink) to
// ten sinks that stall at random. Each sink must receive exactly the events
// addressed to it, with the header stripped, in per-source order. A second
// phase checks non-blocking behaviour: sink 0 is held stalled while source 1
// keeps sending to sink 5, which must still receive every event at full
// rate. Events carry their source in the channel field so the test can tell
// them apart.
module tb_noc_router;
  import speck_pkg::*;
  localparam int NS = 10, ND = 10, N = 200;

  logic clk = 0, rst_n = 0;
  logic [NS-1:0] src_valid, src_ready;
  routed_event_t [NS-1:0] src_ev;
  logic [ND-1:0] dst_valid, dst_ready;
  event_t [ND-1:0] dst_ev;
  int checks = 0, failures = 0;
  event_t exp_q[ND][NS][$];
  int sent[NS];
  logic taken[NS];
  logic [ND-1:0] stall_mask;
  int fixed_dest[NS];

  noc_router #(.N_SRC(NS), .N_DST(ND)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++)
      if (src_valid[s] && src_ready[s]) begin
        taken[s] = 1'b1; sent[s]++;
        if (src_ev[s].dest < ND) exp_q[src_ev[s].dest][s].push_back(src_ev[s].ev);
      end
    for (int d = 0; d < ND; d++)
      if (dst_valid[d] && dst_ready[d]) begin
        int s;
        event_t e;
        checks++;
        s = int'(dst_ev[d].c);
        if (s >= NS || exp_q[d][s].size() == 0) begin
          failures++; $display("FAIL: sink %0d got unexpected %h", d, dst_ev[d]);
        end else begin
          e = exp_q[d][s].pop_front();
          if (e != dst_ev[d]) begin failures++; $display("FAIL: sink %0d order", d); end
        end
      end
  end

  always @(negedge clk) begin
    for (int d = 0; d < ND; d++)
      dst_ready[d] <= stall_mask[d] ? 1'b0 : ($urandom_range(0, 3) != 0 || stall_mask == '0 && d == 5);
    for (int s = 0; s < NS; s++)
      if (!src_valid[s] || taken[s]) begin
        taken[s] = 1'b0;
        if (sent[s] < N && $urandom_range(0, 1)) begin
          src_valid[s] <= 1'b1;
          src_ev[s].dest <= (fixed_dest[s] >= 0) ? DESTW'(fixed_dest[s]) : DESTW'($urandom_range(0, 11));
          src_ev[s].ev   <= '{c: CW'(s), x: 7'($urandom), y: 7'($urandom)};
        end else src_valid[s] <= 1'b0;
      end
  end

  initial begin
    int n5;
    src_valid = '0; src_ev = '0; dst_ready = '0; stall_mask = '0;
    foreach (sent[s]) begin sent[s] = 0; taken[s] = 0; fixed_dest[s] = -1; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (sent.sum() == NS * N);
    repeat (100) @(negedge clk);
    for (int d = 0; d < ND; d++)
      for (int s = 0; s < NS; s++) begin
        checks++;
        if (exp_q[d][s].size() != 0) begin
          failures++; $display("FAIL: sink %0d missing %0d from %0d", d, exp_q[d][s].size(), s);
        end
      end
    // non-blocking: source 0 floods stalled sink 0, source 1 talks to sink 5
    foreach (sent[s]) sent[s] = N;   // silence all sources
    repeat (5) @(negedge clk);
    stall_mask = 10'b1;
    fixed_dest[0] = 0; fixed_dest[1] = 5;
    sent[0] = 0; sent[1] = N - 50;
    n5 = 0;
    repeat (120) begin
      @(posedge clk); #1;
      if (dst_valid[5] && dst_ready[5]) n5++;
    end
    checks++;
    if (sent[1] != N) begin failures++; $display("FAIL: source 1 blocked, sent %0d", sent[1] - (N - 50)); end
    checks++;
    if (dst_valid[0] != 1'b1 || src_ready[0]) begin failures++; $display("FAIL: stalled sink not holding"); end
    stall_mask = '0;
    repeat (300) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
