// sensor_interface: entry point of the sensor event pre-processing pipeline.
//
// It joins two sources of address events, the on-chip sensor arbiter and an
// external AER input from an off-chip sensor, into one stream, and it can copy
// every on-chip sensor event to an off-chip monitoring output. The copy is a
// non-conditional fork: a sensor event is retired only when every enabled
// branch has taken it, and each branch takes it at most once. The join is a
// merge that alternates between the two sources when both wait.
//
// The paper names these functions (receive from the built-in sensor and from
// off-chip, stream the sensor off-chip); the enable bits, the alternating
// merge and the valid/ready channels are this design's.
//
// Interface: three valid/ready inputs/outputs of dvs_event_t plus static
// enables. Timing: registered output, one event per cycle.
module sensor_interface
  import speck_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       sensor_en,    // forward on-chip sensor events
  input  logic       ext_en,       // forward external AER events
  input  logic       monitor_en,   // copy on-chip sensor events off chip
  // on-chip sensor
  input  logic       sen_valid,
  output logic       sen_ready,
  input  dvs_event_t sen_ev,
  // off-chip sensor input
  input  logic       ext_valid,
  output logic       ext_ready,
  input  dvs_event_t ext_ev,
  // off-chip monitor output
  output logic       mon_valid,
  input  logic       mon_ready,
  output dvs_event_t mon_ev,
  // to the pre-processing pipeline
  output logic       out_valid,
  input  logic       out_ready,
  output dvs_event_t out_ev
);
  logic mon_done, fwd_done;   // fork branches already served for this event
  logic out_free, last_ext;
  logic sen_fwd_want, ext_fwd_want, pick_ext, pick_sen;
  logic mon_take, sen_retire;

  assign out_free     = !out_valid || out_ready;
  assign sen_fwd_want = sen_valid && sensor_en && !fwd_done;
  assign ext_fwd_want = ext_valid && ext_en;
  // alternate when both want the output
  assign pick_ext = out_free && ext_fwd_want && (!sen_fwd_want || !last_ext);
  assign pick_sen = out_free && sen_fwd_want && !pick_ext;

  assign mon_valid = sen_valid && monitor_en && !mon_done;
  assign mon_ev    = sen_ev;
  assign mon_take  = mon_valid && mon_ready;

  // sensor event retires when both fork branches are (or become) done
  assign sen_retire = sen_valid
                   && (!sensor_en  || fwd_done || pick_sen)
                   && (!monitor_en || mon_done || mon_take);
  assign sen_ready = sen_retire;
  assign ext_ready = pick_ext || (ext_valid && !ext_en);  // disabled source is drained

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
      mon_done  <= 1'b0;
      fwd_done  <= 1'b0;
      last_ext  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (pick_ext) begin
        out_valid <= 1'b1;
        out_ev    <= ext_ev;
        last_ext  <= 1'b1;
      end else if (pick_sen) begin
        out_valid <= 1'b1;
        out_ev    <= sen_ev;
        last_ext  <= 1'b0;
      end
      if (sen_retire) begin
        mon_done <= 1'b0;
        fwd_done <= 1'b0;
      end else begin
        if (mon_take) mon_done <= 1'b1;
        if (pick_sen) fwd_done <= 1'b1;
      end
    end
  end
endmodule
