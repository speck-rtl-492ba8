// cnn_neuron_unit: compute-in-memory controller for integrate-and-fire neurons.
//
// Holds WORDS signed 16-bit neuron states, each with a kill bit. Besides plain
// configuration write and read, it performs the read-add-check-write
// operation of the paper: read the state, add the signed synaptic weight or
// bias, compare with the threshold, write back. When the sum reaches the
// threshold (sum >= threshold) the neuron address is sent out as a spike and
// the written state is either sum - threshold or a fixed reset value. The
// written state never goes below the configured lower bound (it is clamped).
// A killed word is skipped: no write and no spike.
//
// The flow control at the input admits a new synaptic event only every
// second cycle, so the read-modify-write of one event finishes before the
// next read: there is always a bubble, as in the paper, and back-to-back
// events to the same neuron need no forwarding. The 16-bit adder saturates
// (the paper does not say what happens on overflow). Configuration accesses
// are meant for an idle unit.
//
// Interface: synaptic event {w, addr} valid/ready; spike {addr} valid/ready;
// configuration write and synchronous read. Timing: 2 cycles per synaptic
// event; the spike appears at the end of the second cycle.
module cnn_neuron_unit
  import speck_pkg::*;
#(
  parameter int unsigned WORDS = 32768
) (
  input  logic        clk,
  input  logic        rst_n,
  input  cnn_cfg_t    cfg,
  // configuration access
  input  logic        cfg_we,
  input  logic        cfg_re,
  input  logic [15:0] cfg_addr,
  input  logic        cfg_kill,
  input  logic [STATEW-1:0] cfg_wdata,
  output logic [STATEW:0]   cfg_rdata,   // {kill, state}
  // synaptic / bias event
  input  logic        in_valid,
  output logic        in_ready,
  input  logic signed [STATEW-1:0] in_w,
  input  logic [15:0] in_addr,
  // spike
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] out_addr,
  output logic        busy
);
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1;
  localparam logic signed [STATEW+1:0] SMAX = (STATEW+2)'(2**(STATEW-1) - 1);
  localparam logic signed [STATEW+1:0] SMIN = -(STATEW+2)'(2**(STATEW-1));

  logic [STATEW:0] mem [WORDS];        // {kill, state}
  logic [STATEW:0] rd_q;
  logic signed [STATEW-1:0] w_q;
  logic [15:0]     a_q;
  logic            phase;              // 0: read, 1: add-check-write

  logic signed [STATEW+1:0] sum, after;
  logic signed [STATEW-1:0] sum_sat, new_state;
  logic            spike, killed, finish;

  function automatic logic signed [STATEW-1:0] sat(logic signed [STATEW+1:0] v);
    if (v > SMAX) return SMAX[STATEW-1:0];
    if (v < SMIN) return SMIN[STATEW-1:0];
    return v[STATEW-1:0];
  endfunction

  always_comb begin
    killed  = rd_q[STATEW];
    sum     = (STATEW+2)'($signed(rd_q[STATEW-1:0])) + (STATEW+2)'(w_q);
    sum_sat = sat(sum);
    spike   = !killed && (sum_sat >= cfg.threshold);
    if (!spike)                   after = (STATEW+2)'(sum_sat);
    else if (cfg.reset_to_value)  after = (STATEW+2)'(cfg.reset_value);
    else                          after = (STATEW+2)'(sum_sat) - (STATEW+2)'(cfg.threshold);
    new_state = sat(after);
    if (new_state < cfg.lower_bound) new_state = cfg.lower_bound;
  end

  assign busy     = phase;
  assign in_ready = !phase && !cfg_we && !cfg_re;
  // a spike may only be produced when the spike register is free
  assign finish   = phase && !(spike && out_valid && !out_ready);

  always_ff @(posedge clk) begin
    if (finish) begin
      if (!killed) mem[AW'(a_q)] <= {1'b0, new_state};
    end else if (cfg_we) begin
      mem[AW'(cfg_addr)] <= {cfg_kill, cfg_wdata};
    end
    if (in_valid && in_ready) rd_q <= mem[AW'(in_addr)];
    if (cfg_re)               cfg_rdata <= mem[AW'(cfg_addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= 1'b0;
      w_q       <= '0;
      a_q       <= '0;
      out_valid <= 1'b0;
      out_addr  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        phase <= 1'b1;
        w_q   <= in_w;
        a_q   <= in_addr;
      end
      if (finish) begin
        phase <= 1'b0;
        if (spike) begin
          out_valid <= 1'b1;
          out_addr  <= a_q;
        end
      end
    end
  end

  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid && !out_ready |=> out_valid);
endmodule
