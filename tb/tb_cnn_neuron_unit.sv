// tb_cnn_neuron_unit: self-checking test of the neuron compute-in-memory
// controller.
//
// 64 neuron words are initialised through the configuration port (some of
// them killed). Random synaptic events, including large 16-bit values that
// drive the adder into saturation, are applied with random output stalls,
// under both reset modes. A reference model computes
//   s = sat16(v + w); spike = s >= thr;
//   v' = max(lower, spike ? (reset ? rv : s - thr) : s)
// and predicts the spike sequence; the final state of every word is read back
// through the configuration port and compared. The rate of one event per two
// cycles (the bubble of the flow control) is checked with a free output.
module tb_cnn_neuron_unit;
  import speck_pkg::*;
  localparam int W = 64;

  logic clk = 0, rst_n = 0;
  cnn_cfg_t cfg;
  logic cfg_we, cfg_re, cfg_kill;
  logic [15:0] cfg_addr, cfg_wdata;
  logic [16:0] cfg_rdata;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  logic signed [15:0] in_w;
  logic [15:0] in_addr, out_addr;
  int checks = 0, failures = 0;
  int ref_v [W];
  bit ref_k [W];
  int exp_q[$];
  int n_spikes, n_sat, n_clamp;
  logic stall_en;

  cnn_neuron_unit #(.WORDS(W)) dut (.*);
  always #5 clk = ~clk;

  function automatic int sat16(int v);
    if (v > 32767) begin n_sat++; return 32767; end
    if (v < -32768) begin n_sat++; return -32768; end
    return v;
  endfunction

  function automatic void model(int a, int w);
    int s, nv;
    bit sp;
    if (ref_k[a]) return;
    s  = sat16(ref_v[a] + w);
    sp = (s >= cfg.threshold);
    nv = sp ? (cfg.reset_to_value ? int'(cfg.reset_value) : sat16(s - cfg.threshold)) : s;
    if (nv < cfg.lower_bound) begin nv = cfg.lower_bound; n_clamp++; end
    ref_v[a] = nv;
    if (sp) exp_q.push_back(a);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) model(int'(in_addr), int'(in_w));
    if (out_valid && out_ready) begin
      checks++; n_spikes++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected spike %0d", out_addr); end
      else begin
        int e;
        e = exp_q.pop_front();
        if (e != int'(out_addr)) begin failures++; $display("FAIL: spike %0d expected %0d", out_addr, e); end
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic write_word(int a, int v, bit k);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'(a); cfg_wdata = 16'(v); cfg_kill = k;
    ref_v[a] = v; ref_k[a] = k;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic check_words();
    for (int a = 0; a < W; a++) begin
      @(negedge clk);
      cfg_re = 1; cfg_addr = 16'(a);
      @(negedge clk);
      cfg_re = 0;
      checks++;
      if ($signed(cfg_rdata[15:0]) != ref_v[a] || cfg_rdata[16] != ref_k[a]) begin
        failures++;
        $display("FAIL: word %0d = %0d/%0d expected %0d/%0d", a, $signed(cfg_rdata[15:0]),
                 cfg_rdata[16], ref_v[a], ref_k[a]);
      end
    end
  endtask

  task automatic send(int a, int w);
    in_valid = 1; in_addr = 16'(a); in_w = 16'(w);
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  initial begin
    int n, span, first, last;
    cfg = '0; cfg_we = 0; cfg_re = 0; cfg_kill = 0; cfg_addr = 0; cfg_wdata = 0;
    in_valid = 0; in_w = 0; in_addr = 0; out_ready = 1; stall_en = 1;
    n_spikes = 0; n_sat = 0; n_clamp = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      cfg.threshold = 16'(mode ? 300 : 100);
      cfg.lower_bound = -16'sd500;
      cfg.reset_to_value = mode[0];
      cfg.reset_value = 16'(mode ? -20 : 0);
      for (int a = 0; a < W; a++) write_word(a, $urandom_range(0, 200) - 100, ($urandom_range(0, 15) == 0));
      for (int i = 0; i < 3000; i++) begin
        int w;
        w = (i % 97 == 0) ? 32000 : (i % 89 == 0) ? -32000 : $urandom_range(0, 255) - 128;
        send($urandom_range(0, W - 1), w);
      end
      repeat (5) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d spikes missing", exp_q.size()); exp_q.delete(); end
      check_words();
    end
    checks++;
    if (n_spikes == 0 || n_sat == 0 || n_clamp == 0) begin
      failures++; $display("FAIL: coverage spikes=%0d sat=%0d clamp=%0d", n_spikes, n_sat, n_clamp);
    end
    // rate: 20 back-to-back events, 2 cycles each
    stall_en = 0;
    @(negedge clk);
    n = 0; first = -1; last = -1;
    fork
      for (int i = 0; i < 20; i++) send(i, 1);
      for (int i = 0; i < 60; i++) begin
        @(posedge clk); #1;
        if (busy) begin n++; if (first < 0) first = i; last = i; end
      end
    join
    span = last - first + 1;
    checks++;
    if (n != 20 || span != 39) begin failures++; $display("FAIL: rate busy=%0d span=%0d", n, span); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
