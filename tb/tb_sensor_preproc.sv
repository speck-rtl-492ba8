// tb_sensor_preproc: self-checking test of the sensor pre-processing pipeline.
//
// For a series of random configurations (pooling 1/2/4 per axis, random ROI
// windows, every flip/swap combination, all four polarity modes, one or two
// destinations) random sensor events are pushed through with random output
// stalls. A reference model written here from the stage definitions predicts
// the routed events; they must match in value and order. The pipeline latency
// (5 cycles with a free output) and the full rate are also checked.
module tb_sensor_preproc;
  import speck_pkg::*;

  logic clk = 0, rst_n = 0;
  preproc_cfg_t cfg;
  logic in_valid, in_ready, out_valid, out_ready;
  dvs_event_t in_ev;
  routed_event_t out_ev;
  int checks = 0, failures = 0;
  routed_event_t exp_q[$];
  logic stall_en;

  sensor_preproc dut (.*);
  always #5 clk = ~clk;

  function automatic void model(dvs_event_t e);
    int x, y, w, h, t, c;
    routed_event_t r;
    x = int'(e.x) >> cfg.pool_x_log2;
    y = int'(e.y) >> cfg.pool_y_log2;
    if (x < cfg.roi_x0 || x > cfg.roi_x1 || y < cfg.roi_y0 || y > cfg.roi_y1) return;
    x -= cfg.roi_x0; y -= cfg.roi_y0;
    w = cfg.roi_x1 - cfg.roi_x0; h = cfg.roi_y1 - cfg.roi_y0;
    if (cfg.flip_x) x = w - x;
    if (cfg.flip_y) y = h - y;
    if (cfg.swap_xy) begin t = x; x = y; y = t; end
    c = 0;
    case (cfg.pol_mode)
      POL_SEPARATE: c = e.p ? 1 : 0;
      POL_ONLY_OFF: if (e.p) return;
      POL_ONLY_ON:  if (!e.p) return;
      default: c = 0;
    endcase
    for (int d = 0; d < 2; d++)
      if (cfg.dest_en[d]) begin
        r.dest = cfg.dest_id[d];
        r.ev.c = CW'(c); r.ev.x = XW'(x); r.ev.y = XW'(y);
        exp_q.push_back(r);
      end
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) model(in_ev);
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected output %h", out_ev);
      end else begin
        routed_event_t e;
        e = exp_q.pop_front();
        if (e != out_ev) begin
          failures++; $display("FAIL: got %h expected %h", out_ev, e);
        end
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic send(dvs_event_t e);
    in_valid = 1'b1; in_ev = e;
    do @(posedge clk); while (!in_ready);
    #1 in_valid = 1'b0;
  endtask

  initial begin
    int lat, n, t0;
    cfg = '0; in_valid = 0; in_ev = '0; out_ready = 1; stall_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 40; round++) begin
      int a, b;
      @(negedge clk);
      cfg.pool_x_log2 = 2'($urandom_range(0, 2));
      cfg.pool_y_log2 = 2'($urandom_range(0, 2));
      a = $urandom_range(0, 60); b = $urandom_range(a, 127);
      cfg.roi_x0 = XW'(a); cfg.roi_x1 = XW'(b);
      a = $urandom_range(0, 60); b = $urandom_range(a, 127);
      cfg.roi_y0 = XW'(a); cfg.roi_y1 = XW'(b);
      {cfg.swap_xy, cfg.flip_y, cfg.flip_x} = 3'(round % 8);
      cfg.pol_mode = pol_mode_e'(round / 8 % 4);
      cfg.dest_en = (round % 5 == 0) ? 2'b11 : 2'(1 + $urandom_range(0, 1));
      cfg.dest_id[0] = 4'($urandom_range(0, 9));
      cfg.dest_id[1] = 4'($urandom_range(0, 9));
      for (int i = 0; i < 60; i++)
        send('{p: 1'($urandom), x: 7'($urandom), y: 7'($urandom)});
      repeat (20) @(negedge clk);   // drain before the configuration changes
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d events missing", exp_q.size()); exp_q.delete(); end
    end
    // latency and rate with a free output, pass-through configuration
    stall_en = 0;
    cfg = '0; cfg.roi_x1 = 127; cfg.roi_y1 = 127; cfg.pol_mode = POL_MERGE;
    cfg.dest_en = 2'b01; cfg.dest_id[0] = 4'd3;
    @(negedge clk);
    t0 = $time;
    send('{p: 1'b1, x: 7'd5, y: 7'd6});
    lat = 0;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != 4) begin failures++; $display("FAIL: latency %0d cycles after acceptance", lat); end
    repeat (5) @(negedge clk);
    fork
      for (int i = 0; i < 32; i++) send('{p: 1'b0, x: 7'(i), y: 7'(i)});
      begin
        n = 0;
        repeat (40) begin @(posedge clk); #1; if (out_valid) n++; end
      end
    join
    checks++;
    if (n != 32) begin failures++; $display("FAIL: rate %0d/32", n); end
    repeat (10) @(negedge clk);
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
