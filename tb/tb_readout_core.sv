// tb_readout_core: self-checking test of the decision readout.
//
// Random bursts of class events (some with channels beyond the 16 classes,
// which must be ignored) are sent between readout ticks, with the FIFO
// filled back to back. The reference keeps the per-class count of each bin
// and its own history; after every tick the presented values must equal the
// mean of the last 2**avg_log2 bins, the above flags must follow the
// threshold, and the maximum must be the largest value with the lowest class
// winning ties. All window lengths 1..16 are used. The results must appear
// two cycles after the tick.
module tb_readout_core;
  import speck_pkg::*;
  localparam int NC = NUM_CLASSES, H = 16;

  logic clk = 0, rst_n = 0;
  readout_cfg_t cfg;
  logic tick, in_valid, in_ready, max_above, out_valid;
  event_t in_ev;
  logic [NC-1:0][15:0] values;
  logic [NC-1:0] above;
  logic [$clog2(NC)-1:0] max_class;
  logic [15:0] max_value;
  int checks = 0, failures = 0;
  int cnt [NC];
  int hist [NC][H];
  int n_ties;

  readout_core dut (.*);
  always #5 clk = ~clk;

  task automatic send(int c);
    in_valid = 1; in_ev = '{c: CW'(c), x: '0, y: '0};
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
    if (c < NC) cnt[c]++;
  endtask

  task automatic do_tick();
    int lat, exp_v [NC], mv, mc, wl;
    repeat (4) @(negedge clk);            // FIFO drained
    for (int k = 0; k < NC; k++) begin
      for (int b = H - 1; b > 0; b--) hist[k][b] = hist[k][b - 1];
      hist[k][0] = cnt[k];
      cnt[k] = 0;
    end
    wl = 1 << cfg.avg_log2;
    mv = -1; mc = 0;
    for (int k = 0; k < NC; k++) begin
      int s;
      s = 0;
      for (int b = 0; b < wl; b++) s += hist[k][b];
      exp_v[k] = s / wl;
      if (exp_v[k] > mv) begin mv = exp_v[k]; mc = k; end
      else if (exp_v[k] == mv) n_ties++;
    end
    tick = 1;
    @(negedge clk); tick = 0;
    lat = 1;
    while (!out_valid && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (lat != 2) begin failures++; $display("FAIL: result latency %0d", lat); end
    for (int k = 0; k < NC; k++) begin
      checks++;
      if (int'(values[k]) != exp_v[k] || above[k] != (exp_v[k] >= int'(cfg.threshold))) begin
        failures++;
        $display("FAIL: class %0d value %0d/%0d expected %0d", k, values[k], above[k], exp_v[k]);
      end
    end
    checks++;
    if (int'(max_class) != mc || int'(max_value) != mv || max_above != (mv >= int'(cfg.threshold))) begin
      failures++;
      $display("FAIL: max %0d=%0d expected %0d=%0d", max_class, max_value, mc, mv);
    end
  endtask

  initial begin
    cfg = '0; tick = 0; in_valid = 0; in_ev = '0; n_ties = 0;
    for (int k = 0; k < NC; k++) begin
      cnt[k] = 0;
      for (int b = 0; b < H; b++) hist[k][b] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      cfg.avg_log2 = 3'((t / 12) % 5);
      cfg.threshold = 16'($urandom_range(0, 20));
      for (int i = 0; i < $urandom_range(0, 120); i++) begin
        int c;
        c = ($urandom_range(0, 9) == 0) ? $urandom_range(NC, 1023) :
            ($urandom_range(0, 2) == 0) ? (t % NC) : $urandom_range(0, NC - 1);
        send(c);
      end
      do_tick();
    end
    checks++;
    if (n_ties == 0) begin failures++; $display("FAIL: no tie was tested"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
