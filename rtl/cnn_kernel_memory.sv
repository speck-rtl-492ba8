// cnn_kernel_memory: kernel weight memory of an sCNN core.
//
// WORDS signed 8-bit weights, each with a kill bit that blacklists a faulty
// word. A synapse request {kernel address, neuron address} reads the weight;
// the weight and the neuron address go on to the neuron units. A weight of
// zero, or a killed word, produces nothing: the synapse is skipped, as the
// paper specifies. The memory is a synchronous single-port array (one read
// per cycle) with a separate configuration write port that takes priority;
// the chip uses a self-timed SRAM macro instead. The paper allows the kernel
// memory to be split into parallel banks; one bank is used here because the
// address sweep issues one read per cycle.
//
// Interface: request valid/ready, response valid/ready with {w, naddr},
// configuration write port. Timing: response one cycle after the request.
module cnn_kernel_memory
  import speck_pkg::*;
#(
  parameter int unsigned WORDS = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration write
  input  logic        cfg_we,
  input  logic [15:0] cfg_addr,
  input  logic        cfg_kill,
  input  logic [WEIGHTW-1:0] cfg_wdata,
  // synapse request
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [15:0] in_kaddr,
  input  logic [15:0] in_naddr,
  // weighted synaptic event
  output logic        out_valid,
  input  logic        out_ready,
  output logic signed [WEIGHTW-1:0] out_w,
  output logic [15:0] out_naddr
);
  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [WEIGHTW:0] mem [WORDS];   // {kill, weight}
  logic [WEIGHTW:0] rd_q;
  logic             v_q, skip, adv;

  assign skip      = rd_q[WEIGHTW] || (rd_q[WEIGHTW-1:0] == '0);
  assign out_valid = v_q && !skip;
  assign out_w     = rd_q[WEIGHTW-1:0];
  assign adv       = !v_q || skip || out_ready;
  assign in_ready  = adv && !cfg_we;   // configuration writes win the port

  always_ff @(posedge clk) begin
    if (cfg_we)
      mem[AW'(cfg_addr)] <= {cfg_kill, cfg_wdata};
    else if (in_valid && in_ready)
      rd_q <= mem[AW'(in_kaddr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q       <= 1'b0;
      out_naddr <= '0;
    end else if (adv) begin
      v_q       <= in_valid && in_ready;
      out_naddr <= in_naddr;
    end
  end
endmodule
