// speck_top: the Speck smart vision sensor SoC, digital part.
//
// Sensor pixels -> 2D arbiter -> sensor interface (merge with an external
// AER input, fork to a monitor output) -> pre-processing pipeline -> star
// network on chip -> nine sCNN cores, whose output events go back through the
// network to other cores or to the readout core, which presents class
// counts, averages, threshold flags and the winning class on plain outputs.
//
// The analog pixel array is not part of this RTL: its per-pixel request,
// acknowledge and kill signals are ports. The network ids are: core k has id
// k (0..8), the readout core id 9; NoC source 0 is the pre-processing block,
// source k+1 is core k. Each core's memories differ in size as set in
// speck_pkg (320 Ki neurons and 272 Ki kernel words in total, as on the chip).
//
// All blocks share one clock here; on the chip everything up to the readout
// averaging stage is asynchronous (quasi delay-insensitive pipelines).
// Configuration (static structs and one memory write port) is meant to be
// applied while no events flow.
module speck_top
  import speck_pkg::*;
#(
  parameter int unsigned SENSOR_SIZE = SENSOR_DIM,
  parameter int unsigned NU          = 2
) (
  input  logic clk,
  input  logic rst_n,
  // pixel array
  input  logic [SENSOR_SIZE-1:0][SENSOR_SIZE-1:0][1:0] pix_req,
  input  logic [SENSOR_SIZE-1:0][SENSOR_SIZE-1:0]      pix_kill,
  output logic [SENSOR_SIZE-1:0][SENSOR_SIZE-1:0][1:0] pix_ack,
  // external sensor input and monitor output
  input  logic       ext_valid,
  output logic       ext_ready,
  input  dvs_event_t ext_ev,
  output logic       mon_valid,
  input  logic       mon_ready,
  output dvs_event_t mon_ev,
  input  logic       sensor_en,
  input  logic       ext_en,
  input  logic       monitor_en,
  // configuration
  input  preproc_cfg_t             pre_cfg,
  input  cnn_cfg_t [NUM_CORES-1:0] core_cfg,
  input  readout_cfg_t             ro_cfg,
  input  mem_wr_t                  mem_wr,
  input  logic                     nrn_re,
  input  logic [3:0]               nrn_core,
  input  logic [15:0]              nrn_raddr,
  output logic [STATEW:0]          nrn_rdata,
  // time references
  input  logic sim_tick,
  input  logic readout_tick,
  // readout results
  output logic [NUM_CLASSES-1:0][15:0]       ro_values,
  output logic [NUM_CLASSES-1:0]             ro_above,
  output logic [$clog2(NUM_CLASSES)-1:0]     ro_max_class,
  output logic [15:0]                        ro_max_value,
  output logic                               ro_max_above,
  output logic                               ro_valid,
  output logic [NUM_CORES-1:0]               core_busy
);
  // sensor -> interface -> preproc
  logic       arb_valid, arb_ready, si_valid, si_ready;
  dvs_event_t arb_ev, si_ev;

  // NoC
  logic          [NOC_PORTS-1:0] src_valid, src_ready, dst_valid, dst_ready;
  routed_event_t [NOC_PORTS-1:0] src_ev;
  event_t        [NOC_PORTS-1:0] dst_ev;
  logic [NUM_CORES-1:0][STATEW:0] rdata;
  logic [3:0] rd_core_q;

  evs_arbiter #(.SIZE(SENSOR_SIZE)) u_arbiter (
    .clk, .rst_n, .pix_req, .pix_kill, .pix_ack,
    .out_valid(arb_valid), .out_ready(arb_ready), .out_ev(arb_ev)
  );

  sensor_interface u_sif (
    .clk, .rst_n, .sensor_en, .ext_en, .monitor_en,
    .sen_valid(arb_valid), .sen_ready(arb_ready), .sen_ev(arb_ev),
    .ext_valid, .ext_ready, .ext_ev,
    .mon_valid, .mon_ready, .mon_ev,
    .out_valid(si_valid), .out_ready(si_ready), .out_ev(si_ev)
  );

  sensor_preproc u_pre (
    .clk, .rst_n, .cfg(pre_cfg),
    .in_valid(si_valid), .in_ready(si_ready), .in_ev(si_ev),
    .out_valid(src_valid[0]), .out_ready(src_ready[0]), .out_ev(src_ev[0])
  );

  noc_router #(.N_SRC(NOC_PORTS), .N_DST(NOC_PORTS)) u_noc (
    .clk, .rst_n,
    .src_valid, .src_ready, .src_ev,
    .dst_valid, .dst_ready, .dst_ev
  );

  for (genvar k = 0; k < NUM_CORES; k++) begin : g_core
    mem_wr_t wr;
    always_comb begin
      wr    = mem_wr;
      wr.en = mem_wr.en && (mem_wr.core == 4'(k));
    end
    cnn_core #(
      .NEURON_WORDS(CORE_NEURON_WORDS[k]),
      .KERNEL_WORDS(CORE_KERNEL_WORDS[k]),
      .NU(NU)
    ) u_core (
      .clk, .rst_n, .cfg(core_cfg[k]), .tick(sim_tick),
      .mem_wr(wr),
      .nrn_re(nrn_re && (nrn_core == 4'(k))), .nrn_raddr, .nrn_rdata(rdata[k]),
      .in_valid(dst_valid[k]), .in_ready(dst_ready[k]), .in_ev(dst_ev[k]),
      .out_valid(src_valid[k+1]), .out_ready(src_ready[k+1]), .out_ev(src_ev[k+1]),
      .busy(core_busy[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rd_core_q <= '0;
    else if (nrn_re) rd_core_q <= nrn_core;
  end
  assign nrn_rdata = (rd_core_q < 4'(NUM_CORES)) ? rdata[rd_core_q] : '0;

  readout_core u_readout (
    .clk, .rst_n, .cfg(ro_cfg), .tick(readout_tick),
    .in_valid(dst_valid[READOUT_ID]), .in_ready(dst_ready[READOUT_ID]),
    .in_ev(dst_ev[READOUT_ID]),
    .values(ro_values), .above(ro_above), .max_class(ro_max_class),
    .max_value(ro_max_value), .max_above(ro_max_above), .out_valid(ro_valid)
  );
endmodule
