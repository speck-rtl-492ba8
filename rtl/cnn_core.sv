// cnn_core: one spiking convolution core (one convolution and one pooling
// layer).
//
// An input event {c,x,y} from the network on chip passes the kernel mapper
// (padding, anchor, sweep, compression), which lists every synapse the event
// drives; the kernel memory reads each synapse's weight and drops zero or
// killed weights; the weighted events, together with the bias/leak events
// that a simulation tick starts, are dealt to NU neuron units by the low bits
// of the neuron address; spikes of the units are merged, decompressed to
// {f,x,y}, pooled, channel-shifted and sent towards up to two destination
// cores. With a kernel as large as the input map and a 1x1 output map the core
// acts as a fully connected layer.
//
// The block chain is the paper's. The synchronous valid/ready pipeline, the
// alternating merge of kernel and leak events, the number of neuron units
// (NU, default 2, so that two units at one event per two cycles keep up with
// one synapse per cycle from the single kernel bank) and the memory
// configuration ports are this design's.
//
// Interface: event_t input, routed_event_t output (both valid/ready), a tick
// pulse, a static configuration, a memory write port (mem_wr_t, already
// selected for this core) and a neuron state read port.
// Timing: about 5 cycles from an input event to the first synapse update,
// then one synapse per cycle; spikes leave 4 cycles after their update.
module cnn_core
  import speck_pkg::*;
#(
  parameter int unsigned NEURON_WORDS = 65536,
  parameter int unsigned KERNEL_WORDS = 16384,
  parameter int unsigned NU           = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  cnn_cfg_t      cfg,
  input  logic          tick,
  input  mem_wr_t       mem_wr,
  input  logic          nrn_re,
  input  logic [15:0]   nrn_raddr,
  output logic [STATEW:0] nrn_rdata,
  input  logic          in_valid,
  output logic          in_ready,
  input  event_t        in_ev,
  output logic          out_valid,
  input  logic          out_ready,
  output routed_event_t out_ev,
  output logic          busy
);
  localparam int unsigned UW = (NU > 1) ? $clog2(NU) : 1;
  localparam int unsigned UNIT_WORDS = NEURON_WORDS / NU;

  // mapper -> kernel memory
  logic        m_valid, m_ready, m_busy;
  logic [15:0] m_kaddr, m_naddr;
  // kernel memory -> merge
  logic        k_valid, k_ready;
  logic signed [WEIGHTW-1:0] k_w;
  logic [15:0] k_naddr;
  // leak -> merge
  logic        l_valid, l_ready, l_busy;
  logic signed [STATEW-1:0] l_w;
  logic [15:0] l_naddr;
  // merged synaptic event
  logic        s_valid, s_ready, pick_leak, last_leak;
  logic signed [STATEW-1:0] s_w;
  logic [15:0] s_naddr;
  logic [UW-1:0] s_unit;
  // neuron units
  logic [NU-1:0]       u_in_ready, u_out_valid, u_out_ready, u_busy;
  logic [NU-1:0][15:0] u_out_addr;
  logic [NU-1:0][STATEW:0] u_rdata;
  logic [UW-1:0]       rd_unit_q;

  logic kern_we, nrn_we, bias_we;
  assign kern_we = mem_wr.en && (mem_wr.sel == MEM_KERNEL);
  assign nrn_we  = mem_wr.en && (mem_wr.sel == MEM_NEURON);
  assign bias_we = mem_wr.en && (mem_wr.sel == MEM_BIAS);

  cnn_kernel_mapper u_mapper (
    .clk, .rst_n, .cfg,
    .in_valid, .in_ready, .in_ev,
    .out_valid(m_valid), .out_ready(m_ready),
    .out_kaddr(m_kaddr), .out_naddr(m_naddr), .busy(m_busy)
  );

  cnn_kernel_memory #(.WORDS(KERNEL_WORDS)) u_kmem (
    .clk, .rst_n,
    .cfg_we(kern_we), .cfg_addr(mem_wr.addr), .cfg_kill(mem_wr.kill),
    .cfg_wdata(mem_wr.data[WEIGHTW-1:0]),
    .in_valid(m_valid), .in_ready(m_ready), .in_kaddr(m_kaddr), .in_naddr(m_naddr),
    .out_valid(k_valid), .out_ready(k_ready), .out_w(k_w), .out_naddr(k_naddr)
  );

  cnn_leak_unit u_leak (
    .clk, .rst_n, .cfg, .tick,
    .cfg_we(bias_we), .cfg_addr(mem_wr.addr), .cfg_kill(mem_wr.kill),
    .cfg_wdata(mem_wr.data),
    .out_valid(l_valid), .out_ready(l_ready), .out_w(l_w), .out_naddr(l_naddr),
    .busy(l_busy)
  );

  // merge of kernel and leak events, alternating when both wait
  always_comb begin
    pick_leak = l_valid && (!k_valid || !last_leak);
    s_valid   = k_valid || l_valid;
    s_w       = pick_leak ? l_w : STATEW'(k_w);
    s_naddr   = pick_leak ? l_naddr : k_naddr;
    s_unit    = UW'(s_naddr % NU);
    s_ready   = u_in_ready[s_unit];
    k_ready   = s_ready && !pick_leak;
    l_ready   = s_ready && pick_leak;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_leak <= 1'b0;
      rd_unit_q <= '0;
    end else begin
      if (s_valid && s_ready) last_leak <= pick_leak;
      if (nrn_re) rd_unit_q <= UW'(nrn_raddr % NU);
    end
  end

  for (genvar u = 0; u < NU; u++) begin : g_unit
    logic sel_cfg;
    assign sel_cfg = (UW'(mem_wr.addr % NU) == UW'(u));
    cnn_neuron_unit #(.WORDS(UNIT_WORDS)) u_neuron (
      .clk, .rst_n, .cfg,
      .cfg_we(nrn_we && sel_cfg),
      .cfg_re(nrn_re && (UW'(nrn_raddr % NU) == UW'(u))),
      .cfg_addr(nrn_we ? 16'(mem_wr.addr / NU) : 16'(nrn_raddr / NU)),
      .cfg_kill(mem_wr.kill), .cfg_wdata(mem_wr.data),
      .cfg_rdata(u_rdata[u]),
      .in_valid(s_valid && (s_unit == UW'(u))),
      .in_ready(u_in_ready[u]),
      .in_w(s_w), .in_addr(16'(s_naddr / NU)),
      .out_valid(u_out_valid[u]), .out_ready(u_out_ready[u]),
      .out_addr(u_out_addr[u]), .busy(u_busy[u])
    );
  end
  assign nrn_rdata = u_rdata[rd_unit_q];

  cnn_output_stage #(.NU(NU)) u_out (
    .clk, .rst_n, .cfg,
    .in_valid(u_out_valid), .in_ready(u_out_ready), .in_addr(u_out_addr),
    .out_valid, .out_ready, .out_ev
  );

  assign busy = m_busy || m_valid || k_valid || l_busy || l_valid || (|u_busy)
             || (|u_out_valid) || out_valid;
endmodule
