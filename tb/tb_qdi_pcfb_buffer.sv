// tb_qdi_pcfb_buffer: self-checking test of the dual-rail full buffer model.
//
// Two buffer stages are chained. A four-phase dual-rail sender with random
// delays pushes 300 random words; a receiver with random delays acknowledges
// them. Checked: every word arrives in order and unchanged; no pair ever has
// both rails high; the output only changes from neutral to valid and back
// (never from one value to another); the sender sees in_ack only after its
// word was taken. The full-buffer property is checked by stalling the
// receiver: with two stages, two words must be accepted from the sender
// before the chain blocks.
module tb_qdi_pcfb_buffer;
  localparam int N = 8;
  logic preset, sreset;
  logic [N-1:0] a_t, a_f, b_t, b_f, c_t, c_f;
  logic a_ack, b_ack, c_ack;
  logic v0, v1, ov0, ov1, en0, en1;
  int checks = 0, failures = 0;
  logic [N-1:0] exp_q[$];
  bit hold;
  int sent;

  qdi_pcfb_buffer #(.N(N)) s0 (.preset, .sreset, .in_t(a_t), .in_f(a_f), .in_ack(a_ack),
    .out_t(b_t), .out_f(b_f), .out_ack(b_ack), .in_valid(v0), .out_valid(ov0), .enable(en0));
  qdi_pcfb_buffer #(.N(N)) s1 (.preset, .sreset, .in_t(b_t), .in_f(b_f), .in_ack(b_ack),
    .out_t(c_t), .out_f(c_f), .out_ack(c_ack), .in_valid(v1), .out_valid(ov1), .enable(en1));

  // rail checks on every change of the output
  logic [N-1:0] last_t = '0, last_f = '0;
  always @(c_t or c_f) begin
    checks++;
    if (|(c_t & c_f)) begin failures++; $display("FAIL: both rails high"); end
    for (int i = 0; i < N; i++)
      if ((last_t[i] && c_f[i]) || (last_f[i] && c_t[i])) begin
        failures++; $display("FAIL: bit %0d changed value without passing neutral", i);
      end
    last_t = c_t; last_f = c_f;
  end

  // receiver
  initial begin
    c_ack = 0;
    forever begin
      wait (&(c_t | c_f));
      #($urandom_range(1, 6));
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected word"); end
      else begin
        logic [N-1:0] e;
        e = exp_q.pop_front();
        if (c_t != e || c_f != ~e) begin failures++; $display("FAIL: got %h expected %h", c_t, e); end
      end
      wait (!hold);
      c_ack = 1;
      wait (!(|(c_t | c_f)));
      #($urandom_range(1, 6));
      c_ack = 0;
    end
  end

  task automatic send(logic [N-1:0] w);
    #($urandom_range(0, 5));
    exp_q.push_back(w);
    a_t = w; a_f = ~w;
    wait (a_ack);
    #($urandom_range(1, 5));
    a_t = '0; a_f = '0;
    wait (!a_ack);
    sent++;
  endtask

  initial begin
    a_t = '0; a_f = '0; preset = 0; sreset = 0; hold = 0; sent = 0;
    #10 preset = 1; sreset = 1;
    for (int i = 0; i < 300; i++) send(N'($urandom));
    wait (exp_q.size() == 0);
    // full buffer: stall the receiver, two stages hold two tokens
    hold = 1;
    fork
      begin send(8'h5A); send(8'hC3); send(8'h0F); end
      #500;
    join_any
    checks++;
    if (sent != 300 + 2) begin failures++; $display("FAIL: %0d words taken while stalled", sent - 300); end
    hold = 0;
    wait (exp_q.size() == 0);
    #20;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
