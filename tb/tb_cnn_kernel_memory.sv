// tb_cnn_kernel_memory: self-checking test of the kernel weight memory.
//
// The memory (256 words here) is filled with random weights, about a quarter
// of them zero and some words killed. Random synapse requests are then sent
// with random output stalls; the output must be exactly the non-zero,
// non-killed weights, sign intact, each with its neuron address, in order.
// Full rate (one read per cycle) and the one-cycle read latency are checked.
module tb_cnn_kernel_memory;
  import speck_pkg::*;
  localparam int W = 256;

  logic clk = 0, rst_n = 0;
  logic cfg_we, cfg_kill;
  logic [15:0] cfg_addr;
  logic [7:0] cfg_wdata;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_kaddr, in_naddr, out_naddr;
  logic signed [7:0] out_w;
  int checks = 0, failures = 0;
  logic [8:0] ref_mem [W];
  logic [23:0] exp_q[$];
  logic stall_en;

  cnn_kernel_memory #(.WORDS(W)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      logic [8:0] m;
      m = ref_mem[in_kaddr[7:0]];
      if (!m[8] && m[7:0] != 0) exp_q.push_back({m[7:0], in_naddr});
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected weight"); end
      else begin
        logic [23:0] e;
        e = exp_q.pop_front();
        if (e != {out_w, out_naddr}) begin
          failures++; $display("FAIL: got w=%0d n=%0d expected w=%0d n=%0d", out_w, out_naddr,
                               $signed(e[23:16]), e[15:0]);
        end
      end
    end
  end

  always @(negedge clk) out_ready <= stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int n, first;
    cfg_we = 0; cfg_kill = 0; cfg_addr = 0; cfg_wdata = 0;
    in_valid = 0; in_kaddr = 0; in_naddr = 0; out_ready = 1; stall_en = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < W; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 16'(a);
      cfg_wdata = ($urandom_range(0, 3) == 0) ? 8'd0 : 8'($urandom);
      cfg_kill = ($urandom_range(0, 9) == 0);
      ref_mem[a] = {cfg_kill, cfg_wdata};
    end
    @(negedge clk); cfg_we = 0;
    for (int i = 0; i < 2000; i++) begin
      in_valid = 1; in_kaddr = 16'($urandom_range(0, W - 1)); in_naddr = 16'($urandom);
      do @(posedge clk); while (!in_ready);
      #1 in_valid = 0;
      if ($urandom_range(0, 3) == 0) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d missing", exp_q.size()); end
    // rate: 32 back-to-back reads of one non-zero weight
    stall_en = 0;
    @(negedge clk);
    cfg_we = 1; cfg_addr = 5; cfg_wdata = 8'hF3; cfg_kill = 0; ref_mem[5] = 9'h0F3;
    @(negedge clk); cfg_we = 0;
    @(negedge clk);
    n = 0; first = -1;
    fork
      for (int i = 0; i < 32; i++) begin
        in_valid = 1; in_kaddr = 5; in_naddr = 16'(i);
        do @(posedge clk); while (!in_ready);
        #1 in_valid = 0;
      end
      for (int i = 0; i < 40; i++) begin
        @(posedge clk); #1;
        if (out_valid) begin n++; if (first < 0) first = i; end
      end
    join
    checks++;
    if (n != 32 || first != 0) begin failures++; $display("FAIL: rate n=%0d first=%0d", n, first); end
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
