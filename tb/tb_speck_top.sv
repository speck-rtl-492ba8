// tb_speck_top: end-to-end test of the whole chip at its default sizes
// (128x128 sensor, nine cores with their full memories, readout).
//
// A three-core network is configured through the top's ports:
//   sensor 128x128 -> pre-processing: 2x2 pooling, 16x16 window at (8,8),
//     x mirrored, polarities as channels 0/1, sent to cores 0 and 3;
//   core 0: 3x3 convolution, padding 1, 2 -> 4 features on 16x16, biases
//     (leak) on, 2x2 output pooling, to core 1 and to readout classes 8..11;
//   core 1: 3x3 convolution, stride 2, padding 1, 4 -> 4 features on 8x8,
//     reset-to-value neurons, 4x4 output pooling, to readout classes 0..3;
//   core 3: fully connected 16x16x2 -> 4 (kernel as large as the map), to
//     readout classes 4..7.
// Stimulus comes from pixel requests (some pixels killed) and from the
// external AER input; the monitor output is stalled at random.
//
// The reference is order independent by construction: all weights and
// biases are non-negative and no larger than the threshold (subtract mode)
// or the threshold is 1 with 0/1 weights (reset mode), so each neuron's spike
// count depends only on the sum of its inputs, not on their arrival order.
// The model follows each event through pre-processing, each core and the
// readout. Every phase sends events, waits until the chip is quiet, applies a
// leak tick, waits again, and gives a readout tick: the readout values,
// threshold flags and winning class are compared with the model (the
// averaging window is switched half way). At the end the monitor stream and
// every used neuron word are compared. Each mechanism (merge, monitor fork
// and stall, pixel kill, window cut, two destinations, network contention,
// zero/killed weight skip, killed neuron, subtract and reset spikes, leak,
// pooling, readout threshold, window switch) is counted and must occur.
module tb_speck_top;
  import speck_pkg::*;
  localparam int SZ = SENSOR_DIM;

  logic clk = 0, rst_n = 0;
  logic [SZ-1:0][SZ-1:0][1:0] pix_req, pix_ack;
  logic [SZ-1:0][SZ-1:0]      pix_kill;
  logic [SZ-1:0][SZ-1:0][1:0] kreq;   // requests raised on killed pixels
  logic ext_valid, ext_ready, mon_valid, mon_ready;
  dvs_event_t ext_ev, mon_ev;
  logic sensor_en, ext_en, monitor_en;
  preproc_cfg_t pre_cfg;
  cnn_cfg_t [NUM_CORES-1:0] core_cfg;
  readout_cfg_t ro_cfg;
  mem_wr_t mem_wr;
  logic nrn_re;
  logic [3:0] nrn_core;
  logic [15:0] nrn_raddr;
  logic [STATEW:0] nrn_rdata;
  logic sim_tick, readout_tick;
  logic [NUM_CLASSES-1:0][15:0] ro_values;
  logic [NUM_CLASSES-1:0] ro_above;
  logic [$clog2(NUM_CLASSES)-1:0] ro_max_class;
  logic [15:0] ro_max_value;
  logic ro_max_above, ro_valid;
  logic [NUM_CORES-1:0] core_busy;

  speck_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------------------------------------------------------- model
  localparam int C0F = 4, C1F = 4, C3F = 4;
  int w0 [2 * C0F * 9];    bit k0 [2 * C0F * 9];
  int w1 [C0F * C1F * 9];  bit k1 [C0F * C1F * 9];
  int w3 [2 * C3F * 256];  bit k3 [2 * C3F * 256];
  int b0 [C0F];            bit bk0 [C0F];
  int v0 [C0F * 256];      bit nk0 [C0F * 256];
  int v1 [C1F * 16];
  int v3 [C3F];
  int cls [NUM_CLASSES];
  int hist [NUM_CLASSES][16];
  int mon_exp [dvs_event_t];
  int mon_left;

  // mechanism counters
  int n_sensor, n_ext, n_mon, n_mon_stall, n_killed_pix, n_roi_drop, n_two_dest;
  int n_noc_stall, n_zero_skip, n_kill_skip, n_kill_neuron, n_spk_sub, n_spk_reset;
  int n_leak, n_pool, n_stride, n_above, n_win_switch, n_ro_ticks;

  function automatic void to_readout(int c);
    if (c < NUM_CLASSES) cls[c]++;
  endfunction

  function automatic void core1_in(int c, int x, int y);
    // 8x8x4 -> 4x4x4, 3x3, stride 2, pad 1, reset mode, threshold 1
    for (int f = 0; f < C1F; f++)
      for (int oy = 3; oy >= 0; oy--)
        for (int ox = 3; ox >= 0; ox--) begin
          int kx, ky, k, n;
          kx = x + 1 - 2 * ox; ky = y + 1 - 2 * oy;
          if (kx >= 0 && kx < 3 && ky >= 0 && ky < 3) begin
            k = ((c * C1F + f) * 3 + ky) * 3 + kx;
            n = (f * 4 + oy) * 4 + ox;
            if (k1[k]) n_kill_skip++;
            else if (w1[k] == 0) n_zero_skip++;
            else begin
              n_stride++;
              // 0 + 1 >= 1: spike, reset to 0
              n_spk_reset++;
              to_readout(f);
            end
          end
        end
  endfunction

  function automatic void core0_update(int n, int w);
    int f, y, x;
    if (nk0[n]) begin n_kill_neuron++; return; end
    v0[n] += w;
    if (v0[n] >= 40) begin
      v0[n] -= 40;
      n_spk_sub++;
      f = n / 256; y = (n / 16) % 16; x = n % 16;
      if ((x & 1) || (y & 1)) n_pool++;
      core1_in(f, x >> 1, y >> 1);
      to_readout(8 + f);
    end
  endfunction

  function automatic void core0_in(int c, int x, int y);
    for (int f = 0; f < C0F; f++)
      for (int oy = 15; oy >= 0; oy--)
        for (int ox = 15; ox >= 0; ox--) begin
          int kx, ky, k;
          kx = x + 1 - ox; ky = y + 1 - oy;
          if (kx >= 0 && kx < 3 && ky >= 0 && ky < 3) begin
            k = ((c * C0F + f) * 3 + ky) * 3 + kx;
            if (k0[k]) n_kill_skip++;
            else if (w0[k] == 0) n_zero_skip++;
            else core0_update((f * 16 + oy) * 16 + ox, w0[k]);
          end
        end
  endfunction

  function automatic void core3_in(int c, int x, int y);
    for (int f = 0; f < C3F; f++) begin
      int k;
      k = ((c * C3F + f) * 16 + y) * 16 + x;
      if (k3[k]) n_kill_skip++;
      else if (w3[k] == 0) n_zero_skip++;
      else begin
        v3[f] += w3[k];
        if (v3[f] >= 100) begin v3[f] -= 100; n_spk_sub++; to_readout(4 + f); end
      end
    end
  endfunction

  // pre-processing of one event reaching the pre-processing block
  function automatic void pre_in(dvs_event_t e);
    int x, y, c;
    x = e.x >> 1; y = e.y >> 1;
    if (x < 8 || x > 23 || y < 8 || y > 23) begin n_roi_drop++; return; end
    x = 15 - (x - 8); y = y - 8;
    c = e.p;
    n_two_dest++;
    core0_in(c, x, y);
    core3_in(c, x, y);
  endfunction

  function automatic void leak0();
    for (int n = 0; n < C0F * 256; n++)
      if (!bk0[n / 256] && b0[n / 256] != 0) begin n_leak++; core0_update(n, b0[n / 256]); end
  endfunction

  // ------------------------------------------------------------ monitors
  always @(posedge clk) if (rst_n) begin
    pix_req <= pix_req & ~pix_ack;
    if (dut.arb_valid && dut.arb_ready) begin
      n_sensor++;
      pre_in(dut.arb_ev);
    end
    if (ext_valid && ext_ready) begin n_ext++; pre_in(ext_ev); end
    if (mon_valid && mon_ready) begin
      n_mon++; checks++;
      if (!mon_exp.exists(mon_ev) || mon_exp[mon_ev] == 0) begin
        failures++; $display("FAIL: unexpected monitor event p%0d (%0d,%0d)", mon_ev.p, mon_ev.x, mon_ev.y);
      end else begin mon_exp[mon_ev]--; mon_left--; end
    end
    if (mon_valid && !mon_ready) n_mon_stall++;
    if (|(dut.src_valid & ~dut.src_ready)) n_noc_stall++;
  end

  always @(negedge clk) mon_ready <= ($urandom_range(0, 2) != 0);

  // ------------------------------------------------------------ helpers
  task automatic wr(int core, mem_sel_e sel, int a, int d, bit k);
    @(negedge clk);
    mem_wr = '{en: 1'b1, core: 4'(core), sel: sel, addr: 16'(a), kill: k, data: 16'(d)};
  endtask

  task automatic quiet();
    int q;
    q = 0;
    while (q < 30) begin
      @(negedge clk);
      if (core_busy != 0 || dut.src_valid != 0 || dut.dst_valid != 0 || dut.si_valid
          || dut.arb_valid || ext_valid || (pix_req & ~kreq) != 0) q = 0;
      else q++;
    end
  endtask

  task automatic raise_pixels(int n);
    for (int i = 0; i < n; i++) begin
      int x, y, p;
      x = $urandom_range(0, SZ - 1); y = $urandom_range(0, SZ - 1); p = $urandom_range(0, 1);
      // aim most events at the window (pooled 8..23 -> pixels 16..47)
      if ($urandom_range(0, 4) != 0) begin x = $urandom_range(16, 47); y = $urandom_range(16, 47); end
      if (!pix_req[y][x][p]) begin
        pix_req[y][x][p] = 1'b1;
        if (pix_kill[y][x]) begin n_killed_pix++; kreq[y][x][p] = 1'b1; end
        else begin
          dvs_event_t e;
          e = '{p: 1'(p), x: XW'(x), y: XW'(y)};
          if (mon_exp.exists(e)) mon_exp[e]++; else mon_exp[e] = 1;
          mon_left++;
        end
      end
    end
  endtask

  task automatic send_ext(int n);
    for (int i = 0; i < n; i++) begin
      ext_valid = 1;
      ext_ev = '{p: 1'($urandom_range(0, 1)), x: XW'($urandom_range(14, 49)), y: XW'($urandom_range(14, 49))};
      do @(posedge clk); while (!ext_ready);
      #1 ext_valid = 0;
    end
  endtask

  task automatic readout_phase();
    int wl, exp_v [NUM_CLASSES], mv, mc;
    quiet();
    leak0();
    @(negedge clk); sim_tick = 1; @(negedge clk); sim_tick = 0;
    quiet();
    for (int k = 0; k < NUM_CLASSES; k++) begin
      for (int b = 15; b > 0; b--) hist[k][b] = hist[k][b - 1];
      hist[k][0] = cls[k]; cls[k] = 0;
    end
    wl = 1 << ro_cfg.avg_log2;
    mv = -1; mc = 0;
    for (int k = 0; k < NUM_CLASSES; k++) begin
      int s;
      s = 0;
      for (int b = 0; b < wl; b++) s += hist[k][b];
      exp_v[k] = s / wl;
      if (exp_v[k] > mv) begin mv = exp_v[k]; mc = k; end
    end
    @(negedge clk); readout_tick = 1; @(negedge clk); readout_tick = 0;
    while (!ro_valid) @(negedge clk);
    n_ro_ticks++;
    for (int k = 0; k < NUM_CLASSES; k++) begin
      checks++;
      if (int'(ro_values[k]) != exp_v[k] || ro_above[k] != (exp_v[k] >= int'(ro_cfg.threshold))) begin
        failures++; $display("FAIL: class %0d = %0d expected %0d", k, ro_values[k], exp_v[k]);
      end
      if (ro_above[k]) n_above++;
    end
    checks++;
    if (int'(ro_max_class) != mc || int'(ro_max_value) != mv) begin
      failures++; $display("FAIL: winner %0d=%0d expected %0d=%0d", ro_max_class, ro_max_value, mc, mv);
    end
  endtask

  task automatic read_check(int core, int a, int expv, bit expk);
    @(negedge clk);
    nrn_re = 1; nrn_core = 4'(core); nrn_raddr = 16'(a);
    @(negedge clk);
    nrn_re = 0;
    checks++;
    if ($signed(nrn_rdata[STATEW-1:0]) != expv || nrn_rdata[STATEW] != expk) begin
      failures++;
      $display("FAIL: core %0d neuron %0d = %0d expected %0d", core, a, $signed(nrn_rdata[STATEW-1:0]), expv);
    end
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL: mechanism never happened: %s", what); end
  endtask

  // ------------------------------------------------------------ test
  initial begin
    pix_req = '0; pix_kill = '0; kreq = '0; ext_valid = 0; ext_ev = '0; mon_ready = 1;
    sensor_en = 1; ext_en = 1; monitor_en = 1;
    pre_cfg = '0; core_cfg = '0; ro_cfg = '0; mem_wr = '0;
    nrn_re = 0; nrn_core = 0; nrn_raddr = 0; sim_tick = 0; readout_tick = 0;
    {n_sensor, n_ext, n_mon, n_mon_stall, n_killed_pix, n_roi_drop, n_two_dest} = '0;
    {n_noc_stall, n_zero_skip, n_kill_skip, n_kill_neuron, n_spk_sub, n_spk_reset} = '0;
    {n_leak, n_pool, n_stride, n_above, n_win_switch, n_ro_ticks} = '0;
    mon_left = 0;
    for (int k = 0; k < NUM_CLASSES; k++) begin
      cls[k] = 0;
      for (int b = 0; b < 16; b++) hist[k][b] = 0;
    end
    for (int i = 0; i < 400; i++) pix_kill[$urandom_range(16, 47)][$urandom_range(16, 47)] = 1'b1;

    // pre-processing
    pre_cfg.pool_x_log2 = 1; pre_cfg.pool_y_log2 = 1;
    pre_cfg.roi_x0 = 8; pre_cfg.roi_x1 = 23; pre_cfg.roi_y0 = 8; pre_cfg.roi_y1 = 23;
    pre_cfg.flip_x = 1; pre_cfg.pol_mode = POL_SEPARATE;
    pre_cfg.dest_en = 2'b11; pre_cfg.dest_id[0] = 4'd0; pre_cfg.dest_id[1] = 4'd3;
    // core 0
    core_cfg[0].in_w = 16; core_cfg[0].in_h = 16; core_cfg[0].in_c = 2; core_cfg[0].out_f = C0F;
    core_cfg[0].k_w = 3; core_cfg[0].k_h = 3; core_cfg[0].pad_x = 1; core_cfg[0].pad_y = 1;
    core_cfg[0].threshold = 16'sd40; core_cfg[0].lower_bound = -16'sd1000; core_cfg[0].leak_en = 1;
    core_cfg[0].pool_x_log2 = 1; core_cfg[0].pool_y_log2 = 1;
    core_cfg[0].dest_en = 2'b11; core_cfg[0].dest_id[0] = 4'd1; core_cfg[0].dest_id[1] = 4'(READOUT_ID);
    core_cfg[0].chan_shift[1] = 10'd8;
    // core 1
    core_cfg[1].in_w = 8; core_cfg[1].in_h = 8; core_cfg[1].in_c = C0F; core_cfg[1].out_f = C1F;
    core_cfg[1].k_w = 3; core_cfg[1].k_h = 3; core_cfg[1].pad_x = 1; core_cfg[1].pad_y = 1;
    core_cfg[1].stride_x_log2 = 1; core_cfg[1].stride_y_log2 = 1;
    core_cfg[1].threshold = 16'sd1; core_cfg[1].reset_to_value = 1; core_cfg[1].reset_value = 0;
    core_cfg[1].pool_x_log2 = 2; core_cfg[1].pool_y_log2 = 2;
    core_cfg[1].dest_en = 2'b01; core_cfg[1].dest_id[0] = 4'(READOUT_ID);
    // core 3
    core_cfg[3].in_w = 16; core_cfg[3].in_h = 16; core_cfg[3].in_c = 2; core_cfg[3].out_f = C3F;
    core_cfg[3].k_w = 16; core_cfg[3].k_h = 16; core_cfg[3].threshold = 16'sd100;
    core_cfg[3].dest_en = 2'b01; core_cfg[3].dest_id[0] = 4'(READOUT_ID); core_cfg[3].chan_shift[0] = 10'd4;
    ro_cfg.avg_log2 = 0; ro_cfg.threshold = 16'd12;

    repeat (3) @(negedge clk);
    rst_n = 1;
    // memories
    for (int k = 0; k < 2 * C0F * 9; k++) begin
      w0[k] = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(1, 40); k0[k] = ($urandom_range(0, 15) == 0);
      wr(0, MEM_KERNEL, k, w0[k], k0[k]);
    end
    for (int k = 0; k < C0F * C1F * 9; k++) begin
      w1[k] = $urandom_range(0, 2) != 0; k1[k] = ($urandom_range(0, 15) == 0);
      wr(1, MEM_KERNEL, k, w1[k], k1[k]);
    end
    for (int k = 0; k < 2 * C3F * 256; k++) begin
      w3[k] = ($urandom_range(0, 3) == 0) ? 0 : $urandom_range(1, 20); k3[k] = ($urandom_range(0, 31) == 0);
      wr(3, MEM_KERNEL, k, w3[k], k3[k]);
    end
    for (int f = 0; f < C0F; f++) begin
      b0[f] = (f == 1) ? 0 : $urandom_range(1, 8); bk0[f] = (f == 2);
      wr(0, MEM_BIAS, f, b0[f], bk0[f]);
    end
    for (int n = 0; n < C0F * 256; n++) begin
      v0[n] = 0; nk0[n] = ($urandom_range(0, 40) == 0);
      wr(0, MEM_NEURON, n, 0, nk0[n]);
    end
    for (int n = 0; n < C1F * 16; n++) begin v1[n] = 0; wr(1, MEM_NEURON, n, 0, 1'b0); end
    for (int n = 0; n < C3F; n++) begin v3[n] = 0; wr(3, MEM_NEURON, n, 0, 1'b0); end
    @(negedge clk); mem_wr.en = 0;

    for (int ph = 0; ph < 8; ph++) begin
      if (ph == 4) begin ro_cfg.avg_log2 = 1; n_win_switch++; end
      fork
        begin
          for (int r = 0; r < 6; r++) begin
            @(negedge clk); raise_pixels(15);
            repeat (40) @(negedge clk);
          end
        end
        send_ext(40);
      join
      readout_phase();
      $display("phase %0d done at %0t", ph, $time);
    end

    quiet();
    checks++;
    if (mon_left != 0) begin failures++; $display("FAIL: %0d monitor events missing", mon_left); end
    for (int n = 0; n < C0F * 256; n++) read_check(0, n, v0[n], nk0[n]);
    for (int n = 0; n < C1F * 16; n++) read_check(1, n, v1[n], 1'b0);
    for (int n = 0; n < C3F; n++) read_check(3, n, v3[n], 1'b0);

    $display("mechanisms:");
    need("sensor events", n_sensor);
    need("external events merged", n_ext);
    need("monitor copies", n_mon);
    need("monitor stall cycles", n_mon_stall);
    need("killed pixel requests", n_killed_pix);
    need("window (ROI) drops", n_roi_drop);
    need("two-destination routings", n_two_dest);
    need("network contention cycles", n_noc_stall);
    need("zero weight skips", n_zero_skip);
    need("killed weight skips", n_kill_skip);
    need("killed neuron hits", n_kill_neuron);
    need("subtract-mode spikes", n_spk_sub);
    need("reset-mode spikes", n_spk_reset);
    need("leak updates", n_leak);
    need("pooled spikes", n_pool);
    need("strided synapses", n_stride);
    need("readout ticks", n_ro_ticks);
    need("classes above threshold", n_above);
    need("averaging window switches", n_win_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
