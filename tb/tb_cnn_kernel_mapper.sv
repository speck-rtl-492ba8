// tb_cnn_kernel_mapper: self-checking test of padding, anchor, sweep and
// address compression.
//
// For random layer shapes (input 1..20, kernel 1..5, stride 1/2/4, padding
// 0..2, up to 4 input channels and 4 output features) and random events, a
// brute-force reference enumerates every output neuron (ox, oy) and feature f
// with 0 <= x+pad - ox*s < KW and 0 <= y+pad - oy*s < KH, in the order f
// ascending, oy descending, ox descending, and computes the packed kernel and
// neuron addresses. The mapper's output sequence must match exactly, under
// random output stalls. It must also deliver one address pair per cycle on a
// free output.
module tb_cnn_kernel_mapper;
  import speck_pkg::*;

  logic clk = 0, rst_n = 0;
  cnn_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready, busy;
  event_t in_ev;
  logic [15:0] out_kaddr, out_naddr;
  int checks = 0, failures = 0;
  logic [31:0] exp_q[$];
  logic stall_en;

  cnn_kernel_mapper dut (.*);
  always #5 clk = ~clk;

  function automatic void model(event_t e);
    int xp, yp, ow, oh, kx, ky, k, n;
    if (e.x >= cfg.in_w || e.y >= cfg.in_h || e.c >= cfg.in_c) return;
    xp = e.x + cfg.pad_x; yp = e.y + cfg.pad_y;
    ow = ((cfg.in_w + 2 * cfg.pad_x - cfg.k_w) >> cfg.stride_x_log2) + 1;
    oh = ((cfg.in_h + 2 * cfg.pad_y - cfg.k_h) >> cfg.stride_y_log2) + 1;
    for (int f = 0; f < cfg.out_f; f++)
      for (int oy = oh - 1; oy >= 0; oy--)
        for (int ox = ow - 1; ox >= 0; ox--) begin
          kx = xp - (ox << cfg.stride_x_log2);
          ky = yp - (oy << cfg.stride_y_log2);
          if (kx >= 0 && kx < cfg.k_w && ky >= 0 && ky < cfg.k_h) begin
            k = ((e.c * cfg.out_f + f) * cfg.k_h + ky) * cfg.k_w + kx;
            n = (f * oh + oy) * ow + ox;
            exp_q.push_back({16'(k), 16'(n)});
          end
        end
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) model(in_ev);
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected k=%0d n=%0d", out_kaddr, out_naddr);
      end else begin
        logic [31:0] e;
        e = exp_q.pop_front();
        if (e != {out_kaddr, out_naddr}) begin
          failures++;
          $display("FAIL: got k=%0d n=%0d expected k=%0d n=%0d", out_kaddr, out_naddr, e[31:16], e[15:0]);
        end
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic send(event_t e);
    in_valid = 1'b1; in_ev = e;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    int first, last, n;
    cfg = '0; in_valid = 0; in_ev = '0; out_ready = 1; stall_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      @(negedge clk);
      cfg.k_w = KW'($urandom_range(1, 5)); cfg.k_h = KW'($urandom_range(1, 5));
      cfg.pad_x = 4'($urandom_range(0, 2)); cfg.pad_y = 4'($urandom_range(0, 2));
      cfg.in_w = DIMW'($urandom_range(1, 20)); cfg.in_h = DIMW'($urandom_range(1, 20));
      if (cfg.in_w + 2 * cfg.pad_x < cfg.k_w) cfg.in_w = DIMW'(cfg.k_w);
      if (cfg.in_h + 2 * cfg.pad_y < cfg.k_h) cfg.in_h = DIMW'(cfg.k_h);
      cfg.stride_x_log2 = 2'($urandom_range(0, 2)); cfg.stride_y_log2 = 2'($urandom_range(0, 2));
      cfg.in_c = CNTW'($urandom_range(1, 4)); cfg.out_f = CNTW'($urandom_range(1, 4));
      for (int i = 0; i < 20; i++)
        send('{c: CW'($urandom_range(0, 4)), x: XW'($urandom_range(0, 21)), y: XW'($urandom_range(0, 21))});
      while (busy || out_valid) @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d missing", exp_q.size()); exp_q.delete(); end
    end
    // rate: 3x3 kernel, stride 1, padding 1, 8 features: 72 pairs back to back
    stall_en = 0;
    @(negedge clk);
    cfg.in_w = 16; cfg.in_h = 16; cfg.k_w = 3; cfg.k_h = 3; cfg.pad_x = 1; cfg.pad_y = 1;
    cfg.stride_x_log2 = 0; cfg.stride_y_log2 = 0; cfg.in_c = 1; cfg.out_f = 8;
    @(negedge clk);
    n = 0; first = -1; last = -1;
    fork
      send('{c: 0, x: 7, y: 7});
      for (int i = 0; i < 100; i++) begin
        @(posedge clk); #1;
        if (out_valid) begin if (first < 0) first = i; last = i; n++; end
      end
    join
    checks++;
    if (n != 72 || last - first + 1 != 72) begin
      failures++; $display("FAIL: rate n=%0d span=%0d", n, last - first + 1);
    end
    checks++;
    if (first != 1) begin failures++; $display("FAIL: first pair after %0d cycles", first); end
    repeat (5) @(negedge clk);
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
