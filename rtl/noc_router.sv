// noc_router: star-topology event router (network on chip).
//
// Every source (the pre-processing block and the nine sCNN cores) has its own
// input channel and every sink (the nine cores and the readout core) its own
// output channel. For each sink a merge picks, round-robin, one of the
// sources whose head event carries that sink's id in its routing header; the
// header is stripped and the payload {c,x,y} is delivered. Because each sink
// has a merge of its own, an event only ever waits for its own sink, so a
// feed-forward network never blocks on traffic to other sinks, as the paper
// requires. Events whose id names no sink are discarded.
//
// The star topology, header stripping and non-blocking behaviour follow the
// paper; the round-robin merge and the one register stage per sink are this
// design's (the chip uses asynchronous pre-charge full buffers).
//
// Interface: arrays of valid/ready channels. Timing: one cycle from source to
// sink, each sink takes one event per cycle.
module noc_router
  import speck_pkg::*;
#(
  parameter int unsigned N_SRC = NOC_PORTS,
  parameter int unsigned N_DST = NOC_PORTS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic          [N_SRC-1:0] src_valid,
  output logic          [N_SRC-1:0] src_ready,
  input  routed_event_t [N_SRC-1:0] src_ev,
  output logic          [N_DST-1:0] dst_valid,
  input  logic          [N_DST-1:0] dst_ready,
  output event_t        [N_DST-1:0] dst_ev
);
  localparam int unsigned SW = (N_SRC > 1) ? $clog2(N_SRC) : 1;

  logic [N_DST-1:0][N_SRC-1:0] want;
  logic [N_DST-1:0][N_SRC-1:0] grant;
  logic [N_DST-1:0][SW-1:0]    ptr;
  logic [N_DST-1:0]            free;
  logic [N_SRC-1:0]            drop;

  always_comb begin
    for (int s = 0; s < N_SRC; s++) begin
      drop[s] = src_valid[s] && (int'(src_ev[s].dest) >= N_DST);
      for (int d = 0; d < N_DST; d++)
        want[d][s] = src_valid[s] && (int'(src_ev[s].dest) == d);
    end
    for (int d = 0; d < N_DST; d++) begin
      free[d]  = !dst_valid[d] || dst_ready[d];
      grant[d] = '0;
      if (free[d]) begin
        // lowest requester at or above the pointer, else the lowest overall
        for (int s = N_SRC - 1; s >= 0; s--)
          if (want[d][s]) grant[d] = N_SRC'(1) << s;
        for (int s = N_SRC - 1; s >= 0; s--)
          if (want[d][s] && (SW'(s) >= ptr[d])) grant[d] = N_SRC'(1) << s;
      end
    end
    for (int s = 0; s < N_SRC; s++) begin
      src_ready[s] = drop[s];
      for (int d = 0; d < N_DST; d++)
        src_ready[s] |= grant[d][s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst_valid <= '0;
      dst_ev    <= '0;
      ptr       <= '0;
    end else begin
      for (int d = 0; d < N_DST; d++) begin
        if (dst_valid[d] && dst_ready[d]) dst_valid[d] <= 1'b0;
        for (int s = 0; s < N_SRC; s++)
          if (grant[d][s]) begin
            dst_valid[d] <= 1'b1;
            dst_ev[d]    <= src_ev[s].ev;
            ptr[d]       <= SW'(s) + 1'b1;
          end
      end
    end
  end

  // each grant vector is one-hot or zero
  for (genvar d = 0; d < N_DST; d++) begin : g_chk
    a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant[d]));
  end
endmodule
