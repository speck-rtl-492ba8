// readout_core: decision readout of the network.
//
// Events arriving from the network on chip are buffered in a FIFO. Their
// channel c selects one of NCLASS class units (events with c >= NCLASS are
// ignored). Each unit counts its events in the current time bin. On every
// readout tick, supplied from outside, the bin count is pushed into a short
// history and a new bin starts; the unit's value is the mean of the last
// 2**avg_log2 bins (a sliding average over 1..16 ticks; with avg_log2 = 0 it
// is the plain count of the last bin). One cycle after the tick the values
// are compared with the threshold, the largest value and its class are found
// (lowest class wins a tie) and all results are held in output registers
// until the next tick, for a synchronous reader.
//
// The FIFO, the per-class sliding average units, the maximum and the
// threshold comparison follow the paper. On the chip the counting side is
// asynchronous and only the output side is clocked; here both share one
// clock. FIFO depth, counter widths, the power-of-two window lengths and
// the single shared threshold are this design's choices.
//
// Interface: event_t input (valid/ready), tick pulse, configuration; outputs
// values[NCLASS], above[NCLASS], max_class, max_value, max_above, out_valid
// (a one-cycle pulse when new results are presented).
// Timing: results appear 2 cycles after the tick.
module readout_core
  import speck_pkg::*;
#(
  parameter int unsigned NCLASS     = NUM_CLASSES,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned HIST       = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  readout_cfg_t cfg,
  input  logic         tick,
  input  logic         in_valid,
  output logic         in_ready,
  input  event_t       in_ev,
  output logic [NCLASS-1:0][15:0] values,
  output logic [NCLASS-1:0]       above,
  output logic [$clog2(NCLASS)-1:0] max_class,
  output logic [15:0]  max_value,
  output logic         max_above,
  output logic         out_valid
);
  localparam int unsigned CLW = $clog2(NCLASS);

  logic   f_valid, f_ready;
  event_t f_ev;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  logic [NCLASS-1:0][15:0]           bin;     // current time bin
  logic [NCLASS-1:0][HIST-1:0][15:0] hist;    // finished bins, [0] newest
  logic [NCLASS-1:0][15:0]           avg;
  logic                              tick_d;
  logic [NCLASS-1:0]                 hit;     // class of the event leaving the FIFO
  logic [CLW-1:0]                    mc;      // winning class of the averages
  logic [15:0]                       mv;

  event_fifo #(.T(event_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_ev),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_ev), .count(f_count)
  );
  assign f_ready = 1'b1;   // the class counters take one event per cycle

  // sliding average over the last 2**avg_log2 bins
  always_comb begin
    for (int k = 0; k < NCLASS; k++) begin
      logic [19:0] sum;
      sum = '0;
      for (int b = 0; b < HIST; b++)
        if (b < (1 << cfg.avg_log2)) sum += 20'(hist[k][b]);
      avg[k] = 16'(sum >> cfg.avg_log2);
    end
  end

  always_comb begin
    for (int k = 0; k < NCLASS; k++) hit[k] = f_valid && (int'(f_ev.c) == k);
    mc = '0;
    mv = avg[0];
    for (int k = 1; k < NCLASS; k++)
      if (avg[k] > mv) begin mc = CLW'(k); mv = avg[k]; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin <= '0; hist <= '0; tick_d <= 1'b0;
      values <= '0; above <= '0; max_class <= '0; max_value <= '0;
      max_above <= 1'b0; out_valid <= 1'b0;
    end else begin
      tick_d    <= tick;
      out_valid <= 1'b0;
      // counting side
      for (int k = 0; k < NCLASS; k++) begin
        if (tick) begin
          hist[k] <= {hist[k][HIST-2:0], bin[k]};
          bin[k]  <= hit[k] ? 16'd1 : 16'd0;
        end else if (hit[k] && bin[k] != 16'hFFFF) begin
          bin[k] <= bin[k] + 1'b1;
        end
      end
      // readout side: present results of the finished window
      if (tick_d) begin
        for (int k = 0; k < NCLASS; k++) begin
          values[k] <= avg[k];
          above[k]  <= (avg[k] >= cfg.threshold);
        end
        max_class <= mc;
        max_value <= mv;
        max_above <= (mv >= cfg.threshold);
        out_valid <= 1'b1;
      end
    end
  end
endmodule
