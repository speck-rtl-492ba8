// tb_cnn_output_stage: self-checking test of spike merge, address
// decompression, pooling, channel shift and routing.
//
// Two neuron units emit random spikes (local addresses) under random output
// stalls, for random output map shapes, pooling factors, channel offsets and
// one or two destinations. A scoreboard holds the expected routed events,
// computed here from n = local*2 + unit, f = n / (OH*OW), y = n / OW mod OH,
// x = n mod OW, pooled and shifted; every output must match one expected
// event and none may be left over. Latency (3 cycles) is checked once.
module tb_cnn_output_stage;
  import speck_pkg::*;
  localparam int NU = 2;

  logic clk = 0, rst_n = 0;
  cnn_cfg_t cfg;
  logic [NU-1:0] in_valid, in_ready;
  logic [NU-1:0][15:0] in_addr;
  logic out_valid, out_ready;
  routed_event_t out_ev;
  int checks = 0, failures = 0;
  int sb [routed_event_t];
  int pending;
  logic stall_en;
  logic [NU-1:0] taken;

  cnn_output_stage #(.NU(NU)) dut (.*);
  always #5 clk = ~clk;

  function automatic void model(int u, int a);
    int n, ow, oh, f, x, y;
    routed_event_t r;
    ow = ((cfg.in_w + 2 * cfg.pad_x - cfg.k_w) >> cfg.stride_x_log2) + 1;
    oh = ((cfg.in_h + 2 * cfg.pad_y - cfg.k_h) >> cfg.stride_y_log2) + 1;
    n = a * NU + u;
    f = n / (ow * oh);
    y = (n / ow) % oh;
    x = n % ow;
    for (int d = 0; d < 2; d++)
      if (cfg.dest_en[d]) begin
        r.dest = cfg.dest_id[d];
        r.ev.c = CW'(f + cfg.chan_shift[d]);
        r.ev.x = XW'(x >> cfg.pool_x_log2);
        r.ev.y = XW'(y >> cfg.pool_y_log2);
        if (sb.exists(r)) sb[r]++; else sb[r] = 1;
        pending++;
      end
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < NU; u++)
      if (in_valid[u] && in_ready[u]) begin model(u, int'(in_addr[u])); taken[u] = 1; end
    if (out_valid && out_ready) begin
      checks++;
      if (!sb.exists(out_ev) || sb[out_ev] == 0) begin
        failures++; $display("FAIL: unexpected %0d:{%0d,%0d,%0d}", out_ev.dest, out_ev.ev.c, out_ev.ev.x, out_ev.ev.y);
      end else begin
        sb[out_ev]--; pending--;
      end
    end
  end

  int total;
  int ow_now, oh_now;
  always @(negedge clk) begin
    out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;
    for (int u = 0; u < NU; u++)
      if (!in_valid[u] || taken[u]) begin
        taken[u] = 0;
        if (total > 0 && $urandom_range(0, 1)) begin
          in_valid[u] <= 1;
          in_addr[u]  <= 16'($urandom_range(0, (cfg.out_f * ow_now * oh_now) / NU - 1));
          total--;
        end else in_valid[u] <= 0;
      end
  end

  initial begin
    int lat;
    cfg = '0; in_valid = '0; in_addr = '0; out_ready = 1; stall_en = 1; pending = 0; total = 0; taken = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      @(negedge clk);
      cfg.in_w = DIMW'($urandom_range(4, 40)); cfg.in_h = DIMW'($urandom_range(4, 40));
      cfg.k_w = KW'($urandom_range(1, 3)); cfg.k_h = KW'($urandom_range(1, 3));
      cfg.pad_x = 4'($urandom_range(0, 1)); cfg.pad_y = 4'($urandom_range(0, 1));
      cfg.stride_x_log2 = 2'($urandom_range(0, 1)); cfg.stride_y_log2 = 2'($urandom_range(0, 1));
      cfg.out_f = CNTW'($urandom_range(1, 16));
      cfg.pool_x_log2 = 2'($urandom_range(0, 2)); cfg.pool_y_log2 = 2'($urandom_range(0, 2));
      cfg.dest_en = (round % 3 == 0) ? 2'b11 : 2'(1 + round % 2);
      cfg.dest_id[0] = 4'($urandom_range(0, 9)); cfg.dest_id[1] = 4'($urandom_range(0, 9));
      cfg.chan_shift[0] = CW'($urandom_range(0, 100)); cfg.chan_shift[1] = CW'($urandom_range(0, 1023));
      ow_now = cnn_out_w(cfg); oh_now = cnn_out_h(cfg);
      if (cfg.out_f * ow_now * oh_now < NU) cfg.out_f = CNTW'(NU);
      total = 100;
      wait (total == 0);
      repeat (40) @(negedge clk);
      checks++;
      if (pending != 0) begin failures++; $display("FAIL: %0d events missing", pending); pending = 0; sb.delete(); end
    end
    // latency: one spike on a free output
    stall_en = 0;
    cfg.dest_en = 2'b01;
    repeat (3) @(negedge clk);
    in_valid[0] = 1; in_addr[0] = 0;
    @(posedge clk); #1 in_valid[0] = 0;
    lat = 1;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 3) begin failures++; $display("FAIL: latency %0d", lat); end
    repeat (5) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
