// tb_evs_arbiter: self-checking test of the 2D sensor arbiter.
//
// A small pixel array (8x8) is modelled: each pixel holds a request per
// polarity until it sees its acknowledge. Random requests are raised, some
// pixels are killed. The test checks that every live request leaves exactly
// once with the right address and polarity, that killed pixels never do, that
// the output keeps its event while stalled, and that the arbiter serves one
// event per cycle when the output is always ready.
module tb_evs_arbiter;
  import speck_pkg::*;
  localparam int S = 8;

  logic clk = 0, rst_n = 0;
  logic [S-1:0][S-1:0][1:0] req, ack;
  logic [S-1:0][S-1:0]      kill;
  logic out_valid, out_ready;
  dvs_event_t out_ev;
  int checks = 0, failures = 0;
  int seen [S][S][2];
  logic [S-1:0][S-1:0][1:0] orig;
  int expected;

  evs_arbiter #(.SIZE(S)) dut (
    .clk, .rst_n, .pix_req(req), .pix_kill(kill), .pix_ack(ack),
    .out_valid, .out_ready, .out_ev
  );

  always #5 clk = ~clk;

  // pixel buffers clear on acknowledge
  always @(posedge clk)
    for (int y = 0; y < S; y++)
      for (int x = 0; x < S; x++)
        for (int p = 0; p < 2; p++)
          if (ack[y][x][p]) req[y][x][p] <= 1'b0;

  dvs_event_t held;
  logic       stalled;
  always @(posedge clk) if (rst_n) begin
    if (stalled) begin
      checks++;
      if (!out_valid || out_ev != held) begin
        failures++; $display("FAIL: event changed while stalled");
      end
    end
    stalled <= out_valid && !out_ready;
    held    <= out_ev;
    if (out_valid && out_ready) seen[out_ev.y][out_ev.x][out_ev.p]++;
  end

  task automatic run_round(input bit stall_some);
    int cyc;
    expected = 0;
    foreach (seen[y, x, p]) seen[y][x][p] = 0;
    @(negedge clk);
    for (int y = 0; y < S; y++)
      for (int x = 0; x < S; x++) begin
        kill[y][x] = ($urandom_range(0, 7) == 0);
        for (int p = 0; p < 2; p++) begin
          req[y][x][p] = ($urandom_range(0, 2) == 0);
          if (req[y][x][p] && !kill[y][x]) expected++;
        end
      end
    orig = req;
    cyc = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      out_ready = stall_some ? ($urandom_range(0, 2) != 0) : 1'b1;
      cyc++;
    end
    out_ready = 1'b1;
    repeat (4) @(negedge clk);
    req = '0;   // drop the requests of killed pixels
    for (int y = 0; y < S; y++)
      for (int x = 0; x < S; x++)
        for (int p = 0; p < 2; p++) begin
          checks++;
          if (kill[y][x]) begin
            if (seen[y][x][p] != 0) begin
              failures++; $display("FAIL: killed pixel %0d,%0d served", x, y);
            end
          end else if (seen[y][x][p] != int'(orig[y][x][p])) begin
            failures++;
            $display("FAIL: pixel %0d,%0d p%0d served %0d times", x, y, p, seen[y][x][p]);
          end
        end
  endtask

  initial begin
    int first, last, n;
    req = '0; kill = '0; out_ready = 1'b1; stalled = 1'b0; held = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_round(1'b0);
    run_round(1'b1);
    run_round(1'b1);
    // throughput: a full row of requests on an always-ready output
    @(negedge clk);
    kill = '0; req = '0;
    for (int x = 0; x < S; x++) req[3][x] = 2'b11;
    n = 0; first = -1; last = -1;
    for (int i = 0; i < 40; i++) begin
      @(posedge clk); #1;
      if (out_valid) begin
        if (first < 0) first = i;
        last = i; n++;
      end
    end
    checks++;
    if (n != 2 * S || (last - first + 1) != 2 * S) begin
      failures++; $display("FAIL: throughput n=%0d span=%0d", n, last - first + 1);
    end
    // every live request was acknowledged and cleared
    checks++;
    if (req != '0) begin failures++; $display("FAIL: requests left"); end
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
