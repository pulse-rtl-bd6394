// pulse_accel: one PULSE accelerator, serving one memory node.
//
// Logic and memory are disaggregated: NLP logic pipelines and NMP memory
// pipelines are separate units, and the scheduler multiplexes up to NWS
// in-flight iterators over them.  With eta = NLP/NMP at least as large as an
// iterator's compute-to-fetch time ratio, the memory pipelines can be kept
// busy while the fewer logic pipelines are shared.  The NWS workspaces are
// split over the logic pipelines' banks: workspace g lives in bank g % NLP at
// local index g / NLP (7 over 3 banks: 3, 2, 2).
//
//   rx packet -> net_stack -> workspace (scheduler allocates)
//   scheduler -> mem_pipeline (translate via range_xlate, load line) -> bank
//   scheduler -> logic_pipeline (executes on its bank) -> NEXT_ITER / RETURN
//   scheduler -> net_stack -> tx packet (done, or not local: to the switch)
//
// Memory ports m_* (one per memory pipeline) go to the node's DRAM through
// the memory interconnect, which is outside this module.  The translation
// table is written through cfg_*.  All of it runs on one clock.
module pulse_accel
  import pulse_pkg::*;
#(
  parameter int       NLP      = 3,
  parameter int       NMP      = 4,
  parameter int       NWS      = 7,
  parameter int       NENT     = 16,
  parameter int       MAX_ITER = 1024,
  parameter bit [7:0] NODE_ID  = 8'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  // packets
  input  logic              rx_valid,
  output logic              rx_ready,
  input  beat_t             rx_beat,
  output logic              tx_valid,
  input  logic              tx_ready,
  output beat_t             tx_beat,
  // translation table configuration
  input  logic              cfg_we,
  input  logic [$clog2(NENT)-1:0] cfg_idx,
  input  xl_entry_t         cfg_entry,
  // memory ports
  output logic [NMP-1:0]    m_req_valid,
  input  logic [NMP-1:0]    m_req_ready,
  output mreq_t             m_req    [NMP],
  output logic [NMP-1:0]    m_wvalid,
  input  logic [NMP-1:0]    m_wready,
  output logic [BEAT_W-1:0] m_wdata  [NMP],
  output logic [NMP-1:0]    m_wlast,
  input  logic [NMP-1:0]    m_rvalid,
  input  logic [BEAT_W-1:0] m_rdata  [NMP],
  input  logic [NMP-1:0]    m_rlast,
  // event counters
  output logic [31:0]       n_iters,
  output logic [31:0]       n_mem_jobs
);

  localparam int WSW = (NWS > 1) ? $clog2(NWS) : 1;

  // ---------------- scheduler <-> units ----------------
  logic              alloc_req, alloc_avail;
  logic [WSW-1:0]    alloc_ws;
  logic              rx_done;
  logic [WSW-1:0]    rx_ws;
  logic [63:0]       rx_req_id;
  logic [15:0]       rx_iter;
  logic [2:0]        rx_beats;
  logic [63:0]       cur [NWS];
  logic [NWS-1:0]    dirty;
  logic [NMP-1:0]    mj_ready, mj_valid, mj_load, mj_wb, md_valid;
  logic [WSW-1:0]    mj_ws [NMP], md_ws [NMP];
  logic [63:0]       mj_addr [NMP], mj_wb_addr [NMP];
  logic [2:0]        mj_beats [NMP];
  ms_e               md_status [NMP];
  logic [NLP-1:0]    lp_busy, lp_start, ld_valid;
  logic [WSW-1:0]    lp_ws [NLP], ld_ws [NLP];
  lp_done_e          ld_kind [NLP];
  logic              txs_valid, txs_ready, txs_done;
  logic [WSW-1:0]    txs_ws, txs_done_ws;
  logic [63:0]       txs_req_id;
  logic [15:0]       txs_iter;
  status_e           txs_status;

  // network <-> workspace
  logic              n_we;
  logic [WSW-1:0]    n_ws, n_rws;
  region_e           n_region, n_rregion;
  logic [2:0]        n_beat, n_rbeat;
  logic [BEAT_W-1:0] n_wdata, n_rdata;
  logic [BEAT_W-1:0] n_rdata_b [NLP];

  // memory pipelines <-> workspace / translation
  logic [NMP-1:0]    f_valid, c_valid, q_write, r_hit, r_ok;
  logic [WSW-1:0]    f_ws [NMP], r_ws [NMP], c_ws [NMP];
  logic [1:0]        f_beat [NMP], r_beat [NMP];
  logic [BEAT_W-1:0] f_data [NMP], r_data [NMP];
  logic [BEAT_W-1:0] r_data_b [NLP][NMP];
  logic [63:0]       q_addr [NMP], r_paddr [NMP];
  logic [15:0]       q_len [NMP];

  scheduler #(.NLP(NLP), .NMP(NMP), .NWS(NWS), .MAX_ITER(MAX_ITER), .WSW(WSW)) u_sched (
    .clk, .rst_n,
    .alloc_req, .alloc_avail, .alloc_ws,
    .rx_done, .rx_ws, .rx_req_id, .rx_iter, .rx_beats,
    .cur, .dirty,
    .mj_ready, .mj_valid, .mj_ws, .mj_load, .mj_addr, .mj_beats, .mj_wb, .mj_wb_addr,
    .md_valid, .md_ws, .md_status,
    .lp_busy, .lp_start, .lp_ws, .ld_valid, .ld_kind, .ld_ws,
    .tx_ready(txs_ready), .tx_valid(txs_valid), .tx_ws(txs_ws), .tx_req_id(txs_req_id),
    .tx_iter(txs_iter), .tx_status(txs_status), .tx_done(txs_done), .tx_done_ws(txs_done_ws),
    .n_iters, .n_mem_jobs
  );

  net_stack #(.WSW(WSW), .NODE_ID(NODE_ID)) u_net (
    .clk, .rst_n,
    .rx_valid, .rx_ready, .rx_beat,
    .alloc_req, .alloc_avail, .alloc_ws,
    .n_we, .n_ws, .n_region, .n_beat, .n_wdata,
    .rx_done, .rx_ws, .rx_req_id, .rx_iter, .rx_beats,
    .tx_valid(txs_valid), .tx_ready(txs_ready), .tx_ws(txs_ws), .tx_req_id(txs_req_id),
    .tx_iter(txs_iter), .tx_status(txs_status), .tx_done(txs_done), .tx_done_ws(txs_done_ws),
    .n_rws, .n_rregion, .n_rbeat, .n_rdata,
    .tx_out_valid(tx_valid), .tx_out_ready(tx_ready), .tx_out_beat(tx_beat)
  );

  range_xlate #(.NENT(NENT), .NPORTS(NMP)) u_xlate (
    .clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry,
    .q_addr, .q_len, .q_write, .r_hit, .r_ok, .r_paddr
  );

  assign n_rdata = n_rdata_b[int'(n_rws) % NLP];

  for (genvar p = 0; p < NMP; p++) begin : g_mp
    mem_pipeline #(.WSW(WSW)) u_mp (
      .clk, .rst_n,
      .job_valid(mj_valid[p]), .job_ready(mj_ready[p]), .job_ws(mj_ws[p]),
      .job_load(mj_load[p]), .job_addr(mj_addr[p]), .job_beats(mj_beats[p]),
      .job_wb(mj_wb[p]), .job_wb_addr(mj_wb_addr[p]),
      .done(md_valid[p]), .done_ws(md_ws[p]), .done_status(md_status[p]),
      .q_addr(q_addr[p]), .q_len(q_len[p]), .q_write(q_write[p]),
      .r_hit(r_hit[p]), .r_ok(r_ok[p]), .r_paddr(r_paddr[p]),
      .f_valid(f_valid[p]), .f_ws(f_ws[p]), .f_beat(f_beat[p]), .f_data(f_data[p]),
      .r_ws(r_ws[p]), .r_beat(r_beat[p]), .r_data(r_data[p]),
      .c_valid(c_valid[p]), .c_ws(c_ws[p]),
      .m_req_valid(m_req_valid[p]), .m_req_ready(m_req_ready[p]), .m_req(m_req[p]),
      .m_wvalid(m_wvalid[p]), .m_wready(m_wready[p]), .m_wdata(m_wdata[p]), .m_wlast(m_wlast[p]),
      .m_rvalid(m_rvalid[p]), .m_rdata(m_rdata[p]), .m_rlast(m_rlast[p])
    );
    assign r_data[p] = r_data_b[int'(r_ws[p]) % NLP][p];
  end

  for (genvar b = 0; b < NLP; b++) begin : g_lp
    localparam int NB = (NWS - b + NLP - 1) / NLP;   // workspaces in this bank

    logic [WSW-1:0]  x_ws;
    logic [5:0]      x_pc;
    instr_t          x_instr;
    operand_t        x_a_sel, x_b_sel, x_dst;
    logic [XLEN-1:0] x_a_val, x_b_val, x_wdata;
    logic            x_we;
    logic [NMP-1:0]  bf_valid, bc_valid;
    logic [WSW-1:0]  bf_ws [NMP], br_ws [NMP], bc_ws [NMP];
    logic [63:0]     bcur [NB];
    logic [NB-1:0]   bdirty;

    for (genvar p = 0; p < NMP; p++) begin : g_port
      assign bf_valid[p] = f_valid[p] && (int'(f_ws[p]) % NLP == b);
      assign bc_valid[p] = c_valid[p] && (int'(c_ws[p]) % NLP == b);
      assign bf_ws[p]    = WSW'(int'(f_ws[p]) / NLP);
      assign br_ws[p]    = WSW'(int'(r_ws[p]) / NLP);
      assign bc_ws[p]    = WSW'(int'(c_ws[p]) / NLP);
    end
    for (genvar l = 0; l < NB; l++) begin : g_ws
      assign cur[l * NLP + b]   = bcur[l];
      assign dirty[l * NLP + b] = bdirty[l];
    end

    workspace_bank #(.NWS(NB), .NMP(NMP), .WSW(WSW)) u_bank (
      .clk, .rst_n,
      .x_ws, .x_pc, .x_instr, .x_a_sel, .x_a_val, .x_b_sel, .x_b_val, .x_we, .x_dst, .x_wdata,
      .f_valid(bf_valid), .f_ws(bf_ws), .f_beat, .f_data,
      .r_ws(br_ws), .r_beat, .r_data(r_data_b[b]),
      .c_valid(bc_valid), .c_ws(bc_ws),
      .n_we(n_we && (int'(n_ws) % NLP == b)), .n_ws(WSW'(int'(n_ws) / NLP)),
      .n_region, .n_beat, .n_wdata,
      .n_rws(WSW'(int'(n_rws) / NLP)), .n_rregion, .n_rbeat, .n_rdata(n_rdata_b[b]),
      .cur(bcur), .dirty(bdirty)
    );

    logic_pipeline #(.WSW(WSW)) u_lp (
      .clk, .rst_n,
      .start(lp_start[b]), .start_ws(lp_ws[b]), .busy(lp_busy[b]),
      .done(ld_valid[b]), .done_kind(ld_kind[b]), .done_ws(ld_ws[b]),
      .x_ws, .x_pc, .x_instr, .x_a_sel, .x_a_val, .x_b_sel, .x_b_val, .x_we, .x_dst, .x_wdata
    );
  end

endmodule
