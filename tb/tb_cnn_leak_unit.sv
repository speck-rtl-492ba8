// tb_cnn_leak_unit: self-checking test of the bias/leak sweep.
//
// Biases of 6 feature maps are written (one zero, one killed). For an output
// space of 6 x 5 x 7 neurons, each tick must produce, in neuron order, one
// {bias(f), n} per neuron whose bias is neither zero nor killed, with
// n = (f*OH + y)*OW + x. Ticks are given while a sweep is still running to
// check that one pending tick is kept; with leak disabled a tick produces
// nothing. Output stalls are random; with a free output the sweep runs at one
// neuron per cycle.
module tb_cnn_leak_unit;
  import speck_pkg::*;

  logic clk = 0, rst_n = 0;
  cnn_cfg_t cfg;
  logic tick, cfg_we, cfg_kill, out_valid, out_ready, busy;
  logic [15:0] cfg_addr, cfg_wdata, out_naddr;
  logic signed [15:0] out_w;
  int checks = 0, failures = 0;
  int bias [6];
  bit killb [6];
  logic [31:0] exp_q[$];
  logic stall_en;
  localparam int F = 6, OH = 5, OW = 7;

  cnn_leak_unit #(.WORDS(64)) dut (.*);
  always #5 clk = ~clk;

  task automatic expect_sweep();
    for (int f = 0; f < F; f++)
      for (int n = f * OH * OW; n < (f + 1) * OH * OW; n++)
        if (!killb[f] && bias[f] != 0) exp_q.push_back({16'(bias[f]), 16'(n)});
  endtask

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected bias event n=%0d", out_naddr); end
    else begin
      logic [31:0] e;
      e = exp_q.pop_front();
      if (e != {out_w, out_naddr}) begin
        failures++; $display("FAIL: got %0d/%0d expected %0d/%0d", out_w, out_naddr, $signed(e[31:16]), e[15:0]);
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic pulse();
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
  endtask

  initial begin
    int n, first, last;
    cfg = '0; tick = 0; cfg_we = 0; cfg_kill = 0; cfg_addr = 0; cfg_wdata = 0;
    out_ready = 1; stall_en = 1;
    // 7x5 output: in 9x7, kernel 3x3, stride 1, no padding
    cfg.in_w = 9; cfg.in_h = 7; cfg.k_w = 3; cfg.k_h = 3; cfg.out_f = F; cfg.leak_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < F; f++) begin
      bias[f] = (f == 2) ? 0 : $urandom_range(0, 400) - 200;
      killb[f] = (f == 4);
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(f); cfg_wdata = 16'(bias[f]); cfg_kill = killb[f];
    end
    @(negedge clk); cfg_we = 0;
    // one tick
    expect_sweep();
    pulse();
    repeat (500) @(negedge clk);
    // three ticks during one sweep: two sweeps in total
    expect_sweep(); expect_sweep();
    pulse(); pulse(); pulse();
    repeat (900) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d missing", exp_q.size()); exp_q.delete(); end
    // leak disabled: nothing
    cfg.leak_en = 0;
    pulse();
    repeat (50) @(negedge clk);
    cfg.leak_en = 1;
    // rate with a free output
    stall_en = 0;
    expect_sweep();
    @(negedge clk);
    n = 0; first = -1; last = -1;
    fork
      pulse();
      for (int i = 0; i < 260; i++) begin
        @(posedge clk); #1;
        if (out_valid) begin n++; if (first < 0) first = i; last = i; end
      end
    join
    checks++;
    // features 0,1,3,5 active: 4*35 events; the skipped features 2 and 4
    // still cost one cycle per neuron, so the sweep spans 6*35 cycles
    if (n != 140 || last - first + 1 != 6 * 35) begin
      failures++; $display("FAIL: rate n=%0d span=%0d", n, last - first + 1);
    end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d missing at end", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
