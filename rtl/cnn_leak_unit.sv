// cnn_leak_unit: bias/leak address sweep and bias memory of an sCNN core.
//
// Holds one signed 16-bit bias (or leak, when negative) per output feature
// map, each word with a kill bit. On a simulation tick, supplied from outside
// the chip, it sweeps over every neuron of the configured output space,
// n = 0 .. F*OH*OW-1, reads the bias of the neuron's feature f and sends
// {bias, n} to the neuron units, where it is added like a synaptic weight.
// This is the linear leak of the paper. Killed words and zero biases are
// skipped (skipping zero biases is this design's choice). A tick that comes
// while a sweep is running is remembered and starts the next sweep; further
// ticks in that time are merged into it.
//
// Interface: tick pulse, bias configuration write, {w, naddr} valid/ready
// output. Timing: one neuron per cycle while the output is free, first
// output two cycles after the tick.
module cnn_leak_unit
  import speck_pkg::*;
#(
  parameter int unsigned WORDS = BIAS_WORDS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cnn_cfg_t    cfg,
  input  logic        tick,
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic        cfg_kill,
  input  logic [STATEW-1:0] cfg_wdata,
  output logic        out_valid,
  input  logic        out_ready,
  output logic signed [STATEW-1:0] out_w,
  output logic [15:0] out_naddr,
  output logic        busy
);
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [STATEW:0] mem [WORDS];   // {kill, bias}
  logic [STATEW:0] rd_q;
  logic            v_q, skip, adv, issue, pending;
  logic [CW-1:0]   f_q;
  logic [DIMW-1:0] x_q, y_q, ow, oh;
  logic [15:0]     n_q;
  logic            x_last, y_last, f_last;

  assign ow = cnn_out_w(cfg);
  assign oh = cnn_out_h(cfg);
  assign x_last = (x_q + 1'b1 >= ow);
  assign y_last = (y_q + 1'b1 >= oh);
  assign f_last = ((CNTW)'(f_q) + 1'b1 >= cfg.out_f);

  assign skip      = rd_q[STATEW] || (rd_q[STATEW-1:0] == '0);
  assign out_valid = v_q && !skip;
  assign out_w     = rd_q[STATEW-1:0];
  assign adv       = !v_q || skip || out_ready;
  assign issue     = busy && adv && !cfg_we;

  always_ff @(posedge clk) begin
    if (cfg_we)     mem[AW'(cfg_addr)] <= {cfg_kill, cfg_wdata};
    else if (issue) rd_q <= mem[AW'(f_q)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pending <= 1'b0;
      f_q <= '0; x_q <= '0; y_q <= '0; n_q <= '0;
      v_q <= 1'b0; out_naddr <= '0;
    end else begin
      if (tick && cfg.leak_en) pending <= 1'b1;
      if (!busy && (pending || (tick && cfg.leak_en))) begin
        busy    <= 1'b1;
        pending <= 1'b0;
        f_q <= '0; x_q <= '0; y_q <= '0; n_q <= '0;
      end
      if (adv) begin
        v_q       <= issue;
        out_naddr <= n_q;
      end
      if (issue) begin
        n_q <= n_q + 1'b1;
        if (!x_last) x_q <= x_q + 1'b1;
        else begin
          x_q <= '0;
          if (!y_last) y_q <= y_q + 1'b1;
          else begin
            y_q <= '0;
            f_q <= f_q + 1'b1;
            if (f_last) busy <= 1'b0;
          end
        end
      end
    end
  end
endmodule
