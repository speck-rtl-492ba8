// cnn_output_stage: merge of the neuron unit spikes, address space
// decompression, sum pooling, channel shift and routing of an sCNN core.
//
// Spikes from the NU neuron units (unit u, local address a, i.e. compressed
// neuron address n = a*NU + u) are merged round-robin. The compressed address
// is unpacked to the output neuron {f, x, y} with
//     f = n / (OH*OW),  y = (n mod OH*OW) / OW,  x = n mod OW,
// the inverse of the packing in cnn_kernel_mapper. Sum pooling divides x and
// y by 1, 2 or 4 each (the spike keeps its weight, so the next layer sums the
// pooled neurons). Finally, for each enabled destination (up to two), the
// feature index is shifted by that destination's channel offset and a routed
// event {dest, f+shift, x, y} is sent to the network on chip.
// The stages follow the paper; the offset addition as the "arithmetic shift"
// of channels and the interleaving of neuron addresses over units by their
// low bits are this design's.
//
// Interface: NU spike inputs (valid/ready), routed_event_t output
// (valid/ready). Timing: three cycles from spike to routed event, one event
// per cycle per destination.
module cnn_output_stage
  import speck_pkg::*;
#(
  parameter int unsigned NU = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  cnn_cfg_t cfg,
  input  logic [NU-1:0]        in_valid,
  output logic [NU-1:0]        in_ready,
  input  logic [NU-1:0][15:0]  in_addr,
  output logic                 out_valid,
  input  logic                 out_ready,
  output routed_event_t        out_ev
);
  localparam int unsigned UW = (NU > 1) ? $clog2(NU) : 1;

  logic [UW-1:0]  ptr;
  logic [NU-1:0]  grant;
  logic           va, vb, ra, rb, sent0, consume_b, out_free;
  logic [31:0]    n_a;
  event_t         ev_b, ev_dec;
  logic [DIMW-1:0] ow, oh;
  logic [31:0]    plane, rem;

  assign ow = cnn_out_w(cfg);
  assign oh = cnn_out_h(cfg);

  // ---- merge -------------------------------------------------------------------
  always_comb begin
    grant = '0;
    if (ra) begin
      for (int u = NU - 1; u >= 0; u--)
        if (in_valid[u]) grant = NU'(1) << u;
      for (int u = NU - 1; u >= 0; u--)
        if (in_valid[u] && (UW'(u) >= ptr)) grant = NU'(1) << u;
    end
  end
  assign in_ready = grant;

  // ---- decompression and pooling -------------------------------------------------
  always_comb begin
    plane    = 32'(oh) * 32'(ow);
    ev_dec.c = CW'(n_a / plane);
    rem      = n_a % plane;
    ev_dec.y = XW'((rem / 32'(ow)) >> cfg.pool_y_log2);
    ev_dec.x = XW'((rem % 32'(ow)) >> cfg.pool_x_log2);
  end

  // ---- channel shift and routing --------------------------------------------------
  assign out_free = !out_valid || out_ready;
  always_comb begin
    consume_b = 1'b0;
    if (vb && out_free) begin
      if (cfg.dest_en[0] && !sent0) consume_b = !cfg.dest_en[1];
      else                          consume_b = 1'b1;
    end
  end
  assign rb = !vb || consume_b;
  assign ra = !va || rb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0; va <= 1'b0; vb <= 1'b0; n_a <= '0; ev_b <= '0;
      sent0 <= 1'b0; out_valid <= 1'b0; out_ev <= '0;
    end else begin
      if (ra) begin
        va <= |grant;
        for (int u = 0; u < NU; u++)
          if (grant[u]) begin
            n_a <= 32'(in_addr[u]) * NU + 32'(u);
            ptr <= UW'(u + 1);
          end
      end
      if (rb) begin
        vb   <= va;
        ev_b <= ev_dec;
      end
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (vb && out_free) begin
        if (cfg.dest_en[0] && !sent0) begin
          out_valid   <= 1'b1;
          out_ev.dest <= cfg.dest_id[0];
          out_ev.ev   <= '{c: ev_b.c + cfg.chan_shift[0], x: ev_b.x, y: ev_b.y};
          sent0       <= cfg.dest_en[1];
        end else if (cfg.dest_en[1]) begin
          out_valid   <= 1'b1;
          out_ev.dest <= cfg.dest_id[1];
          out_ev.ev   <= '{c: ev_b.c + cfg.chan_shift[1], x: ev_b.x, y: ev_b.y};
          sent0       <= 1'b0;
        end
      end
    end
  end
endmodule
