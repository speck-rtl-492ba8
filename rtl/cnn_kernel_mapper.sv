// cnn_kernel_mapper: zero padding, kernel anchor, kernel address sweep and
// address compression of an sCNN core.
//
// For one input event {c,x,y} it lists every synapse the event drives: all
// pairs (kernel position, output neuron) with  o*stride + k = x + pad  in x
// and in y, repeated for every output feature f.
//   padding:   xp = x + pad_x, yp = y + pad_y;
//   anchor:    the output neuron furthest right that the event reaches,
//              ox0 = min(xp >> sx, OW-1), and its kernel column
//              kx0 = xp - (ox0 << sx) (the same for y);
//   sweep:     from the anchor the kernel column moves up by the stride while
//              the neuron column moves down by one, until the kernel or the
//              output map ends; then the same in y; then the next feature f;
//   compression: the kernel address ((c*F + f)*KH + ky)*KW + kx and the
//              neuron address (f*OH + oy)*OW + ox are packed without gaps.
// This is the mapping of the paper's kernel anchor / inverse sweep scheme.
// Strides are powers of two (1,2,4,8) so the anchor needs only a shift;
// the sweep order (x innermost, f outermost) and the mixed-radix packing are
// this design's. Events outside the configured input size are dropped.
//
// Interface: event_t in (valid/ready), {kernel address, neuron address} out
// (valid/ready). Timing: an event is accepted when the mapper is idle; it
// then produces one synapse address pair per cycle, Z = F * nx * ny pairs,
// the first one cycle after acceptance.
module cnn_kernel_mapper
  import speck_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cnn_cfg_t    cfg,
  input  logic        in_valid,
  output logic        in_ready,
  input  event_t      in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_kaddr,
  output logic [15:0] out_naddr,
  output logic        busy
);
  logic [DIMW-1:0] ow, oh;
  logic [XW+4:0]   xp, yp;            // padded coordinate
  logic [XW+4:0]   ox_a, oy_a;        // anchor in neuron space
  logic [XW+4:0]   kx_a, ky_a;        // anchor in kernel space
  logic            in_range, hits;

  // sweep state
  logic [CW-1:0]   c_q, f_q;
  logic [XW+4:0]   kx0_q, ky0_q, ox0_q, oy0_q;
  logic [XW+4:0]   kx_q, ky_q, ox_q, oy_q;
  logic [3:0]      sx, sy;            // stride values
  logic            out_free, step, x_last, y_last, f_last;

  always_comb begin
    ow = cnn_out_w(cfg);
    oh = cnn_out_h(cfg);
    sx = 4'd1 << cfg.stride_x_log2;
    sy = 4'd1 << cfg.stride_y_log2;
    xp = (XW+5)'(in_ev.x) + (XW+5)'(cfg.pad_x);
    yp = (XW+5)'(in_ev.y) + (XW+5)'(cfg.pad_y);
    ox_a = xp >> cfg.stride_x_log2;
    oy_a = yp >> cfg.stride_y_log2;
    if (ox_a > (XW+5)'(ow - 1'b1)) ox_a = (XW+5)'(ow - 1'b1);
    if (oy_a > (XW+5)'(oh - 1'b1)) oy_a = (XW+5)'(oh - 1'b1);
    kx_a = xp - (ox_a << cfg.stride_x_log2);
    ky_a = yp - (oy_a << cfg.stride_y_log2);
    in_range = ((DIMW)'(in_ev.x) < cfg.in_w) && ((DIMW)'(in_ev.y) < cfg.in_h)
            && ((CNTW)'(in_ev.c) < cfg.in_c);
    hits = (kx_a < (XW+5)'(cfg.k_w)) && (ky_a < (XW+5)'(cfg.k_h));
  end

  assign out_free = !out_valid || out_ready;
  assign step     = busy && out_free;
  assign in_ready = !busy;
  assign x_last = (kx_q + (XW+5)'(sx) >= (XW+5)'(cfg.k_w)) || (ox_q == '0);
  assign y_last = (ky_q + (XW+5)'(sy) >= (XW+5)'(cfg.k_h)) || (oy_q == '0);
  assign f_last = ((CNTW)'(f_q) + 1'b1 >= cfg.out_f);

  // address compression of the current sweep point
  logic [31:0] kaddr_full, naddr_full;
  always_comb begin
    kaddr_full = ((32'(c_q) * 32'(cfg.out_f) + 32'(f_q)) * 32'(cfg.k_h) + 32'(ky_q))
                 * 32'(cfg.k_w) + 32'(kx_q);
    naddr_full = (32'(f_q) * 32'(oh) + 32'(oy_q)) * 32'(ow) + 32'(ox_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      c_q <= '0; f_q <= '0;
      kx0_q <= '0; ky0_q <= '0; ox0_q <= '0; oy0_q <= '0;
      kx_q  <= '0; ky_q  <= '0; ox_q  <= '0; oy_q  <= '0;
      out_valid <= 1'b0;
      out_kaddr <= '0;
      out_naddr <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (!busy && in_valid) begin
        // accept; events that reach no neuron are consumed silently
        busy  <= in_range && hits;
        c_q   <= in_ev.c;
        f_q   <= '0;
        kx0_q <= kx_a; ky0_q <= ky_a; ox0_q <= ox_a; oy0_q <= oy_a;
        kx_q  <= kx_a; ky_q  <= ky_a; ox_q  <= ox_a; oy_q  <= oy_a;
      end
      if (step) begin
        out_valid <= 1'b1;
        out_kaddr <= kaddr_full[15:0];
        out_naddr <= naddr_full[15:0];
        if (!x_last) begin
          kx_q <= kx_q + (XW+5)'(sx);
          ox_q <= ox_q - 1'b1;
        end else begin
          kx_q <= kx0_q;
          ox_q <= ox0_q;
          if (!y_last) begin
            ky_q <= ky_q + (XW+5)'(sy);
            oy_q <= oy_q - 1'b1;
          end else begin
            ky_q <= ky0_q;
            oy_q <= oy0_q;
            f_q  <= f_q + 1'b1;
            if (f_last) busy <= 1'b0;
          end
        end
      end
    end
  end
endmodule
