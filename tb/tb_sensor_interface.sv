// tb_sensor_interface: self-checking test of the sensor input merge and the
// monitor fork.
//
// Two random event streams (on-chip sensor, external) are offered with random
// stalls on both outputs. Every sensor event must reach the pipeline output
// and the monitor output exactly once, in order; every external event must
// reach the pipeline output once, in order. A second phase disables the
// monitor and the external input and checks that external events are drained
// and not forwarded.
module tb_sensor_interface;
  import speck_pkg::*;

  logic clk = 0, rst_n = 0;
  logic sensor_en, ext_en, monitor_en;
  logic sen_valid, sen_ready, ext_valid, ext_ready, mon_valid, mon_ready, out_valid, out_ready;
  dvs_event_t sen_ev, ext_ev, mon_ev, out_ev;
  int checks = 0, failures = 0;

  sensor_interface dut (.*);
  always #5 clk = ~clk;

  dvs_event_t sen_q[$], ext_q[$], sen_out_q[$], mon_q[$];
  logic sen_taken = 1'b0, ext_taken = 1'b0;
  int n_sen, n_ext, n_out_sen, n_out_ext, n_mon;
  localparam int N = 300;

  // sources
  always @(posedge clk) if (rst_n) begin
    if (sen_valid && sen_ready) begin n_sen++; sen_taken = 1'b1; end
    if (ext_valid && ext_ready) begin n_ext++; ext_taken = 1'b1; end
    // outputs: sensor events carry x < 64, external ones x >= 64
    if (out_valid && out_ready) begin
      dvs_event_t e;
      checks++;
      if (out_ev.x < 64) begin
        if (sen_q.size() == 0) begin failures++; $display("FAIL: unexpected sensor event"); end
        else begin
          e = sen_q.pop_front();
          mon_q.push_back(e);
          if (e != out_ev) begin failures++; $display("FAIL: sensor order"); end
        end
        n_out_sen++;
      end else begin
        if (ext_q.size() == 0) begin failures++; $display("FAIL: unexpected ext event"); end
        else begin
          e = ext_q.pop_front();
          if (e != out_ev) begin failures++; $display("FAIL: ext order"); end
        end
        n_out_ext++;
      end
    end
    if (mon_valid && mon_ready) begin
      checks++; n_mon++;
      if (!monitor_en) begin failures++; $display("FAIL: monitor while disabled"); end
      else if (mon_ev.x >= 64) begin failures++; $display("FAIL: external event on monitor"); end
      else sen_out_q.push_back(mon_ev);
    end
  end

  always @(negedge clk) begin
    dvs_event_t e;
    out_ready <= ($urandom_range(0, 3) != 0);
    mon_ready <= ($urandom_range(0, 2) != 0);
    if (!sen_valid || sen_taken) begin
      sen_taken = 1'b0;
      if (n_sen < N && $urandom_range(0, 1)) begin
        sen_valid <= 1'b1;
        e = '{p: 1'($urandom), x: 7'($urandom_range(0, 63)), y: 7'($urandom)};
        sen_ev <= e;
        sen_q.push_back(e);
      end else sen_valid <= 1'b0;
    end
    if (!ext_valid || ext_taken) begin
      ext_taken = 1'b0;
      if (n_ext < N && $urandom_range(0, 1)) begin
        ext_valid <= 1'b1;
        e = '{p: 1'($urandom), x: 7'($urandom_range(64, 127)), y: 7'($urandom)};
        ext_ev <= e;
        if (ext_en) ext_q.push_back(e);
      end else ext_valid <= 1'b0;
    end
  end

  initial begin
    sensor_en = 1; ext_en = 1; monitor_en = 1;
    sen_valid = 0; ext_valid = 0; out_ready = 0; mon_ready = 0;
    sen_ev = '0; ext_ev = '0;
    n_sen = 0; n_ext = 0; n_out_sen = 0; n_out_ext = 0; n_mon = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (n_sen == N && n_ext == N);
    repeat (50) @(negedge clk);
    checks++;
    if (n_out_sen != N || n_out_ext != N || n_mon != N) begin
      failures++; $display("FAIL: counts sen=%0d ext=%0d mon=%0d", n_out_sen, n_out_ext, n_mon);
    end
    // monitor copies equal the forwarded sensor events, in order
    checks++;
    if (sen_out_q.size() != mon_q.size()) begin failures++; $display("FAIL: monitor count"); end
    else foreach (mon_q[i]) if (mon_q[i] != sen_out_q[i]) begin
      failures++; $display("FAIL: monitor content %0d", i); break;
    end
    // phase 2: external disabled (drained), monitor off
    ext_en = 0; monitor_en = 0;
    n_sen = 0; n_ext = 0; n_out_sen = 0; n_out_ext = 0;
    wait (n_sen == N && n_ext == N);
    repeat (50) @(negedge clk);
    checks++;
    if (n_out_sen != N || n_out_ext != 0) begin
      failures++; $display("FAIL: phase2 sen=%0d ext=%0d", n_out_sen, n_out_ext);
    end
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
