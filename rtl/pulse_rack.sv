// pulse_rack: a rack of PULSE memory nodes behind a programmable switch.
//
// NMN memory nodes, each with its own pulse_accel, hang off one switch port
// each; the CPU node's traffic enters and leaves through the cpu_* port.
// The switch routes a request to the node owning cur_ptr; when a node's
// traversal reaches a pointer it cannot translate, the accelerator sends the
// unchanged-format packet (status ST_NOT_LOCAL, scratch_pad up to date) back to
// the switch, which forwards it to the right node, where the traversal simply
// continues.  Finished traversals go to the CPU node.
//
// Outside this module: the Ethernet MACs/PHYs (packets here are 64 B beats),
// and each node's memory interconnect and DRAM (m_* ports, NMP per node,
// indexed node * NMP + pipeline).  Configuration: the switch's range map
// (rt_cfg_*) and every node's translation table (xl_cfg_*, with node select).
module pulse_rack
  import pulse_pkg::*;
#(
  parameter int NMN      = 4,
  parameter int NLP      = 3,
  parameter int NMP      = 4,
  parameter int NWS      = 7,
  parameter int NENT     = 16,
  parameter int NRANGE   = 8,
  parameter int MAX_ITER = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // CPU node
  input  logic                      cpu_in_valid,
  output logic                      cpu_in_ready,
  input  beat_t                     cpu_in_beat,
  output logic                      cpu_out_valid,
  input  logic                      cpu_out_ready,
  output beat_t                     cpu_out_beat,
  // configuration
  input  logic                      rt_cfg_we,
  input  logic [$clog2(NRANGE)-1:0] rt_cfg_idx,
  input  rt_entry_t                 rt_cfg_entry,
  input  logic [NMN-1:0]            xl_cfg_we,
  input  logic [$clog2(NENT)-1:0]   xl_cfg_idx,
  input  xl_entry_t                 xl_cfg_entry,
  // memory ports of all nodes
  output logic [NMN*NMP-1:0]        m_req_valid,
  input  logic [NMN*NMP-1:0]        m_req_ready,
  output mreq_t                     m_req    [NMN*NMP],
  output logic [NMN*NMP-1:0]        m_wvalid,
  input  logic [NMN*NMP-1:0]        m_wready,
  output logic [BEAT_W-1:0]         m_wdata  [NMN*NMP],
  output logic [NMN*NMP-1:0]        m_wlast,
  input  logic [NMN*NMP-1:0]        m_rvalid,
  input  logic [BEAT_W-1:0]         m_rdata  [NMN*NMP],
  input  logic [NMN*NMP-1:0]        m_rlast,
  // event counters
  output logic [31:0]               n_reroute,
  output logic [31:0]               n_invalid,
  output logic [31:0]               n_iters    [NMN],
  output logic [31:0]               n_mem_jobs [NMN]
);

  logic [NMN:0] sw_in_valid, sw_in_ready, sw_out_valid, sw_out_ready;
  beat_t        sw_in_beat [NMN+1];
  beat_t        sw_out_beat[NMN+1];

  assign sw_in_valid[0]  = cpu_in_valid;
  assign cpu_in_ready    = sw_in_ready[0];
  assign sw_in_beat[0]   = cpu_in_beat;
  assign cpu_out_valid   = sw_out_valid[0];
  assign sw_out_ready[0] = cpu_out_ready;
  assign cpu_out_beat    = sw_out_beat[0];

  switch_router #(.NMN(NMN), .NRANGE(NRANGE)) u_switch (
    .clk, .rst_n,
    .cfg_we(rt_cfg_we), .cfg_idx(rt_cfg_idx), .cfg_entry(rt_cfg_entry),
    .in_valid(sw_in_valid), .in_ready(sw_in_ready), .in_beat(sw_in_beat),
    .out_valid(sw_out_valid), .out_ready(sw_out_ready), .out_beat(sw_out_beat),
    .n_reroute, .n_invalid
  );

  for (genvar n = 0; n < NMN; n++) begin : g_node
    logic [NMP-1:0]    req_valid, req_ready, wvalid, wready, wlast, rvalid, rlast;
    mreq_t             req   [NMP];
    logic [BEAT_W-1:0] wdata [NMP];
    logic [BEAT_W-1:0] rdata [NMP];

    for (genvar p = 0; p < NMP; p++) begin : g_port
      assign m_req_valid[n*NMP+p] = req_valid[p];
      assign req_ready[p]         = m_req_ready[n*NMP+p];
      assign m_req[n*NMP+p]       = req[p];
      assign m_wvalid[n*NMP+p]    = wvalid[p];
      assign wready[p]            = m_wready[n*NMP+p];
      assign m_wdata[n*NMP+p]     = wdata[p];
      assign m_wlast[n*NMP+p]     = wlast[p];
      assign rvalid[p]            = m_rvalid[n*NMP+p];
      assign rdata[p]             = m_rdata[n*NMP+p];
      assign rlast[p]             = m_rlast[n*NMP+p];
    end

    pulse_accel #(.NLP(NLP), .NMP(NMP), .NWS(NWS), .NENT(NENT), .MAX_ITER(MAX_ITER),
                  .NODE_ID(8'(n))) u_accel (
      .clk, .rst_n,
      .rx_valid(sw_out_valid[n+1]), .rx_ready(sw_out_ready[n+1]), .rx_beat(sw_out_beat[n+1]),
      .tx_valid(sw_in_valid[n+1]),  .tx_ready(sw_in_ready[n+1]),  .tx_beat(sw_in_beat[n+1]),
      .cfg_we(xl_cfg_we[n]), .cfg_idx(xl_cfg_idx), .cfg_entry(xl_cfg_entry),
      .m_req_valid(req_valid), .m_req_ready(req_ready), .m_req(req),
      .m_wvalid(wvalid), .m_wready(wready), .m_wdata(wdata), .m_wlast(wlast),
      .m_rvalid(rvalid), .m_rdata(rdata), .m_rlast(rlast),
      .n_iters(n_iters[n]), .n_mem_jobs(n_mem_jobs[n])
    );
  end

endmodule
