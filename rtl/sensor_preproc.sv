// sensor_preproc: sensor event pre-processing pipeline.
//
// Conforms the raw sensor address events to what the first network layer
// expects. Five registered stages, in the order the paper draws them:
//   1. pooling   - x and y are divided by 1, 2 or 4 each (sum pooling of the
//                  input address space: the event keeps its weight, only its
//                  address is coarsened);
//   2. ROI cut   - events outside the inclusive window [x0,x1]x[y0,y1] are
//                  dropped, the others are moved to window coordinates;
//   3. rotation and mirroring - x and/or y are flipped inside the window,
//                  then x and y may be swapped;
//   4. polarity  - the two polarities become channels 0 and 1, or one
//                  polarity is kept, or both are merged on channel 0;
//   5. routing   - one routed event per enabled destination (up to two),
//                  destination 0 first.
// The stages and their options follow the paper. Coordinates of the window
// are taken after pooling, flips are applied before the swap, and the
// polarity-to-channel mapping is this design's choice.
//
// Interface: dvs_event_t in, routed_event_t out, both valid/ready; static
// configuration. Timing: five cycles from input to output, one event per
// cycle, two cycles for an event sent to two destinations.
module sensor_preproc
  import speck_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  preproc_cfg_t  cfg,
  input  logic          in_valid,
  output logic          in_ready,
  input  dvs_event_t    in_ev,
  output logic          out_valid,
  input  logic          out_ready,
  output routed_event_t out_ev
);
  logic       v1, v2, v3, v4;
  dvs_event_t e1, e2, e3;
  event_t     e4;
  logic       r1, r2, r3, r4;
  logic       sent0, consume4, out_free;

  // ---- stage combinational functions ---------------------------------------
  dvs_event_t pooled, cut, turned;
  logic       in_roi, pol_keep;
  event_t     polled;
  logic [XW-1:0] wx, wy;

  always_comb begin
    pooled   = in_ev;
    pooled.x = in_ev.x >> cfg.pool_x_log2;
    pooled.y = in_ev.y >> cfg.pool_y_log2;

    in_roi = (e1.x >= cfg.roi_x0) && (e1.x <= cfg.roi_x1)
          && (e1.y >= cfg.roi_y0) && (e1.y <= cfg.roi_y1);
    cut   = e1;
    cut.x = e1.x - cfg.roi_x0;
    cut.y = e1.y - cfg.roi_y0;

    wx = cfg.roi_x1 - cfg.roi_x0;   // last column index of the window
    wy = cfg.roi_y1 - cfg.roi_y0;
    turned = e2;
    if (cfg.flip_x) turned.x = wx - e2.x;
    if (cfg.flip_y) turned.y = wy - e2.y;
    if (cfg.swap_xy) begin
      turned.x = cfg.flip_y ? (wy - e2.y) : e2.y;
      turned.y = cfg.flip_x ? (wx - e2.x) : e2.x;
    end

    polled.x = e3.x;
    polled.y = e3.y;
    polled.c = '0;
    pol_keep = 1'b1;
    unique case (cfg.pol_mode)
      POL_SEPARATE: polled.c = CW'(e3.p);
      POL_ONLY_OFF: pol_keep = !e3.p;
      POL_ONLY_ON:  pol_keep = e3.p;
      default:      pol_keep = 1'b1;   // POL_MERGE
    endcase
  end

  // ---- routing stage (source mapping) ---------------------------------------
  assign out_free = !out_valid || out_ready;
  always_comb begin
    consume4 = 1'b0;
    if (v4 && out_free) begin
      if (cfg.dest_en[0] && !sent0) consume4 = !cfg.dest_en[1];
      else                          consume4 = 1'b1;
    end
  end

  assign r4 = !v4 || consume4;
  assign r3 = !v3 || r4;
  assign r2 = !v2 || r3;
  assign r1 = !v1 || r2;
  assign in_ready = r1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
      e1 <= '0; e2 <= '0; e3 <= '0; e4 <= '0;
      sent0     <= 1'b0;
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      if (r1) begin v1 <= in_valid;        e1 <= pooled; end
      if (r2) begin v2 <= v1 && in_roi;    e2 <= cut;    end
      if (r3) begin v3 <= v2;              e3 <= turned; end
      if (r4) begin v4 <= v3 && pol_keep;  e4 <= polled; end

      if (out_valid && out_ready) out_valid <= 1'b0;
      if (v4 && out_free) begin
        if (cfg.dest_en[0] && !sent0) begin
          out_valid   <= 1'b1;
          out_ev.dest <= cfg.dest_id[0];
          out_ev.ev   <= e4;
          sent0       <= cfg.dest_en[1];
        end else if (cfg.dest_en[1]) begin
          out_valid   <= 1'b1;
          out_ev.dest <= cfg.dest_id[1];
          out_ev.ev   <= e4;
          sent0       <= 1'b0;
        end
      end
    end
  end
endmodule
