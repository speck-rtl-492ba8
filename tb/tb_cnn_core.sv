// tb_cnn_core: self-checking end-to-end test of one convolution core.
//
// A small core (512 neuron words, 512 kernel words, two neuron units) is
// loaded through its memory write port with random 3x3 kernels for a layer of
// 2 input channels and 4 output features on an 8x8 map with padding 1, with
// zero and killed weights, killed neurons and per-feature biases (one zero,
// one killed). Random input events, some out of range, are then sent under
// random output stalls, with leak ticks in between while the core is idle.
// The reference model lists the synapses of each event (padding, kernel
// flip, feature order), applies the saturating integrate-and-fire update with
// the lower bound and the chosen reset mode to its own copy of the neuron
// memory, applies the biases on every tick, and turns every spike into the
// expected routed events (2x2 pooled, two destinations with channel
// offsets). Every output event must be expected and none may be missing;
// at the end every neuron word is read back and compared. Both reset modes
// are run, and the cycle count of one event (36 synapses at one per cycle)
// is checked.
module tb_cnn_core;
  import speck_pkg::*;
  localparam int NW = 512, KWD = 512;
  localparam int C = 2, F = 4, K = 3, S = 8;

  logic clk = 0, rst_n = 0;
  cnn_cfg_t cfg;
  logic tick, nrn_re, in_valid, in_ready, out_valid, out_ready, busy;
  mem_wr_t mem_wr;
  logic [15:0] nrn_raddr;
  logic [STATEW:0] nrn_rdata;
  event_t in_ev;
  routed_event_t out_ev;
  int checks = 0, failures = 0;

  int wgt [C * F * K * K];
  bit wkill [C * F * K * K];
  int bias [F];
  bit bkill [F];
  int v [F * S * S];
  bit nkill [F * S * S];
  int sb [routed_event_t];
  int pending, n_spikes, n_skipped;
  logic stall_en;

  cnn_core #(.NEURON_WORDS(NW), .KERNEL_WORDS(KWD), .NU(2)) dut (.*);
  always #5 clk = ~clk;

  function automatic int sat16(int x);
    return (x > 32767) ? 32767 : (x < -32768) ? -32768 : x;
  endfunction

  function automatic void update(int n, int w);
    int s, nv;
    bit sp;
    if (nkill[n]) return;
    s  = sat16(v[n] + w);
    sp = (s >= cfg.threshold);
    nv = sp ? (cfg.reset_to_value ? int'(cfg.reset_value) : sat16(s - cfg.threshold)) : s;
    if (nv < cfg.lower_bound) nv = cfg.lower_bound;
    v[n] = nv;
    if (sp) begin
      int f, y, x;
      routed_event_t r;
      f = n / (S * S); y = (n / S) % S; x = n % S;
      for (int d = 0; d < 2; d++) begin
        r.dest = cfg.dest_id[d];
        r.ev = '{c: CW'(f + cfg.chan_shift[d]), x: XW'(x >> 1), y: XW'(y >> 1)};
        if (sb.exists(r)) sb[r]++; else sb[r] = 1;
        pending++;
      end
    end
  endfunction

  function automatic void model_event(event_t e);
    int xp, yp, kx, ky, k;
    if (e.x >= S || e.y >= S || e.c >= C) return;
    xp = e.x + 1; yp = e.y + 1;
    for (int f = 0; f < F; f++)
      for (int oy = S - 1; oy >= 0; oy--)
        for (int ox = S - 1; ox >= 0; ox--) begin
          kx = xp - ox; ky = yp - oy;
          if (kx >= 0 && kx < K && ky >= 0 && ky < K) begin
            k = ((e.c * F + f) * K + ky) * K + kx;
            if (!wkill[k] && wgt[k] != 0) update((f * S + oy) * S + ox, wgt[k]);
            else n_skipped++;
          end
        end
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) model_event(in_ev);
    if (out_valid && out_ready) begin
      checks++; n_spikes++;
      if (!sb.exists(out_ev) || sb[out_ev] == 0) begin
        failures++;
        $display("FAIL: unexpected %0d:{%0d,%0d,%0d}", out_ev.dest, out_ev.ev.c, out_ev.ev.x, out_ev.ev.y);
      end else begin
        sb[out_ev]--; pending--;
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic wr(mem_sel_e sel, int a, int d, bit k);
    @(negedge clk);
    mem_wr = '{en: 1'b1, core: 4'd0, sel: sel, addr: 16'(a), kill: k, data: 16'(d)};
    @(negedge clk);
    mem_wr.en = 1'b0;
  endtask

  task automatic send(event_t e);
    in_valid = 1; in_ev = e;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 0;
  endtask

  task automatic idle();
    do @(negedge clk); while (busy);
    repeat (3) @(negedge clk);
  endtask

  task automatic do_tick();
    idle();
    for (int n = 0; n < F * S * S; n++)
      if (!bkill[n / (S * S)] && bias[n / (S * S)] != 0) update(n, bias[n / (S * S)]);
    tick = 1; @(negedge clk); tick = 0;
    idle();
  endtask

  task automatic check_state();
    for (int n = 0; n < F * S * S; n++) begin
      @(negedge clk);
      nrn_re = 1; nrn_raddr = 16'(n);
      @(negedge clk);
      nrn_re = 0;
      checks++;
      if ($signed(nrn_rdata[STATEW-1:0]) != v[n] || nrn_rdata[STATEW] != nkill[n]) begin
        failures++;
        $display("FAIL: neuron %0d = %0d expected %0d", n, $signed(nrn_rdata[STATEW-1:0]), v[n]);
      end
    end
  endtask

  initial begin
    int first, last;
    cfg = '0; tick = 0; nrn_re = 0; nrn_raddr = 0; in_valid = 0; in_ev = '0;
    mem_wr = '0; out_ready = 1; stall_en = 1;
    pending = 0; n_spikes = 0; n_skipped = 0;
    cfg.in_w = S; cfg.in_h = S; cfg.in_c = C; cfg.out_f = F; cfg.k_w = K; cfg.k_h = K;
    cfg.pad_x = 1; cfg.pad_y = 1; cfg.leak_en = 1; cfg.pool_x_log2 = 1; cfg.pool_y_log2 = 1;
    cfg.lower_bound = -16'sd200;
    cfg.dest_en = 2'b11; cfg.dest_id[0] = 4'd3; cfg.dest_id[1] = 4'd7;
    cfg.chan_shift[0] = 10'd0; cfg.chan_shift[1] = 10'd4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      cfg.threshold = 16'(mode ? 150 : 100);
      cfg.reset_to_value = mode[0];
      cfg.reset_value = 16'(mode ? -10 : 0);
      for (int k = 0; k < C * F * K * K; k++) begin
        wgt[k] = ($urandom_range(0, 4) == 0) ? 0 : $urandom_range(0, 90) - 30;
        wkill[k] = ($urandom_range(0, 12) == 0);
        wr(MEM_KERNEL, k, wgt[k], wkill[k]);
      end
      for (int f = 0; f < F; f++) begin
        bias[f] = (f == 1) ? 0 : $urandom_range(0, 30) - 10;
        bkill[f] = (f == 2);
        wr(MEM_BIAS, f, bias[f], bkill[f]);
      end
      for (int n = 0; n < F * S * S; n++) begin
        v[n] = 0; nkill[n] = ($urandom_range(0, 20) == 0);
        wr(MEM_NEURON, n, 0, nkill[n]);
      end
      for (int i = 0; i < 400; i++) begin
        send('{c: CW'($urandom_range(0, C)), x: XW'($urandom_range(0, S)), y: XW'($urandom_range(0, S))});
        if (i % 50 == 49) do_tick();
      end
      idle();
      checks++;
      if (pending != 0) begin failures++; $display("FAIL: %0d events missing", pending); pending = 0; sb.delete(); end
      check_state();
    end
    checks++;
    if (n_spikes == 0 || n_skipped == 0) begin failures++; $display("FAIL: spikes=%0d skipped=%0d", n_spikes, n_skipped); end
    // cycle count of one event in the middle of the map: 36 synapses
    stall_en = 0;
    cfg.threshold = 16'sd30000;
    idle();
    first = -1; last = -1;
    fork
      send('{c: 0, x: 4, y: 4});
      for (int i = 0; i < 80; i++) begin
        @(posedge clk); #1;
        if (busy) begin if (first < 0) first = i; last = i; end
      end
    join
    checks++;
    if (last - first + 1 < 36 || last - first + 1 > 36 + 10) begin
      failures++; $display("FAIL: one event kept the core busy for %0d cycles", last - first + 1);
    end
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
