// event_fifo: synchronous first-in first-out buffer for events.
//
// DEPTH entries of type T, valid/ready on both sides, registered output from
// the storage array. Used at the input of the readout core so that a slow
// reader never stalls the network on chip. Depth and type are parameters;
// the readout uses 16 entries (the depth is not given for the chip).
//
// Timing: an event written in one cycle can be read in the next; full
// throughput of one event per cycle.
module event_fifo #(
  parameter type         T     = logic [23:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T             mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic         push, pop;

  assign in_ready  = (count < ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
