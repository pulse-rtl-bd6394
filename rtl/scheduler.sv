// scheduler: multiplexes up to NWS concurrent iterators over NLP logic and NMP
// memory pipelines.
//
// Every workspace w (global index; it belongs to logic pipeline w % NLP) is in
// one state:
//   FREE -> RX (network stack writing the request) -> WMEM (wants a memory job)
//   -> MEM -> WLOG (data loaded, wants its logic pipeline) -> LOG
//   -> WMEM again on NEXT_ITER, or -> WTX (result ready) -> TX -> FREE.
// Rules, following the paper's four scheduler steps:
//   1. a new request gets the lowest FREE workspace (alloc_avail says one is
//      free, alloc_req takes it), and when it is
//      fully received it wants a memory job;
//   2. a successful memory job makes its workspace ready for logic;
//   3. NEXT_ITER makes it want a memory job again (unless MAX_ITER iterations
//      have run, which ends it with ST_MAX_ITER);
//   4. RETURN, an illegal instruction, a translation miss (ST_NOT_LOCAL) or a
//      protection failure ends it: it waits for the network stack.
// An iterator ending with a dirty data line first gets a write-back-only
// memory job.  Dispatch is work-conserving: every idle memory pipeline takes
// a waiting workspace in the same cycle (round-robin start over workspaces),
// and every idle logic pipeline takes one of its own ready workspaces.
// Dispatch outputs are combinational from registered state; a job is taken
// when valid and the pipeline is idle, which the scheduler checks itself.
module scheduler
  import pulse_pkg::*;
#(
  parameter int NLP      = 3,
  parameter int NMP      = 4,
  parameter int NWS      = 7,
  parameter int MAX_ITER = 1024,
  parameter int WSW      = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // allocation for the network stack
  input  logic              alloc_req,
  output logic              alloc_avail,
  output logic [WSW-1:0]    alloc_ws,
  input  logic              rx_done,
  input  logic [WSW-1:0]    rx_ws,
  input  logic [63:0]       rx_req_id,
  input  logic [15:0]       rx_iter,
  input  logic [2:0]        rx_beats,
  // workspace state from the banks
  input  logic [63:0]       cur   [NWS],
  input  logic [NWS-1:0]    dirty,
  // memory pipelines
  input  logic [NMP-1:0]    mj_ready,
  output logic [NMP-1:0]    mj_valid,
  output logic [WSW-1:0]    mj_ws      [NMP],
  output logic [NMP-1:0]    mj_load,
  output logic [63:0]       mj_addr    [NMP],
  output logic [2:0]        mj_beats   [NMP],
  output logic [NMP-1:0]    mj_wb,
  output logic [63:0]       mj_wb_addr [NMP],
  input  logic [NMP-1:0]    md_valid,
  input  logic [WSW-1:0]    md_ws     [NMP],
  input  ms_e               md_status [NMP],
  // logic pipelines (workspace index local to the pipeline's bank)
  input  logic [NLP-1:0]    lp_busy,
  output logic [NLP-1:0]    lp_start,
  output logic [WSW-1:0]    lp_ws    [NLP],
  input  logic [NLP-1:0]    ld_valid,
  input  lp_done_e          ld_kind  [NLP],
  input  logic [WSW-1:0]    ld_ws    [NLP],
  // network stack, response side
  input  logic              tx_ready,
  output logic              tx_valid,
  output logic [WSW-1:0]    tx_ws,
  output logic [63:0]       tx_req_id,
  output logic [15:0]       tx_iter,
  output status_e           tx_status,
  input  logic              tx_done,
  input  logic [WSW-1:0]    tx_done_ws,
  // event counters (observability)
  output logic [31:0]       n_iters,
  output logic [31:0]       n_mem_jobs
);

  typedef enum logic [2:0] {W_FREE, W_RX, W_WMEM, W_MEM, W_WLOG, W_LOG, W_WTX, W_TX} ws_st_e;

  ws_st_e      wst      [NWS];
  logic [63:0] req_id   [NWS];
  logic [15:0] iter     [NWS];
  logic [2:0]  beats    [NWS];
  logic [63:0] ld_addr  [NWS];
  logic [NWS-1:0] fin;            // ending: write-back only, then respond
  status_e     status   [NWS];
  logic [$clog2(NWS)-1:0] rr;

  // ---- allocation ----
  always_comb begin
    alloc_avail = 1'b0;
    alloc_ws  = '0;
    for (int w = NWS - 1; w >= 0; w--)
      if (wst[w] == W_FREE) begin
        alloc_avail = 1'b1;
        alloc_ws  = WSW'(w);
      end
  end

  // ---- memory dispatch ----
  logic [NWS-1:0] mtaken;
  always_comb begin
    mtaken = '0;
    for (int p = 0; p < NMP; p++) begin
      mj_valid[p] = 1'b0; mj_ws[p] = '0; mj_load[p] = 1'b0; mj_addr[p] = '0;
      mj_beats[p] = '0; mj_wb[p] = 1'b0; mj_wb_addr[p] = '0;
      if (mj_ready[p]) begin
        for (int k = 0; k < NWS; k++) begin
          automatic int w = (int'(rr) + k) % NWS;
          if (!mj_valid[p] && wst[w] == W_WMEM && !mtaken[w]) begin
            mj_valid[p]   = 1'b1;
            mj_ws[p]      = WSW'(w);
            mj_load[p]    = !fin[w];
            mj_addr[p]    = cur[w];
            mj_beats[p]   = beats[w];
            mj_wb[p]      = dirty[w];
            mj_wb_addr[p] = ld_addr[w];
          end
        end
        if (mj_valid[p]) mtaken[mj_ws[p]] = 1'b1;
      end
    end
  end

  // ---- logic dispatch ----
  always_comb begin
    for (int l = 0; l < NLP; l++) begin
      lp_start[l] = 1'b0;
      lp_ws[l]    = '0;
      if (!lp_busy[l])
        for (int w = NWS - 1; w >= 0; w--)
          if (w % NLP == l && wst[w] == W_WLOG) begin
            lp_start[l] = 1'b1;
            lp_ws[l]    = WSW'(w / NLP);
          end
    end
  end

  // ---- response ----
  always_comb begin
    tx_valid = 1'b0; tx_ws = '0;
    for (int w = NWS - 1; w >= 0; w--)
      if (wst[w] == W_WTX) begin
        tx_valid = tx_ready;
        tx_ws    = WSW'(w);
      end
    tx_req_id = req_id[tx_ws];
    tx_iter   = iter[tx_ws];
    tx_status = status[tx_ws];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NWS; w++) begin
        wst[w] <= W_FREE; req_id[w] <= '0; iter[w] <= '0; beats[w] <= 3'd4;
        ld_addr[w] <= '0; status[w] <= ST_REQ;
      end
      fin <= '0; rr <= '0; n_iters <= '0; n_mem_jobs <= '0;
    end else begin
      if (alloc_req && alloc_avail) wst[alloc_ws] <= W_RX;
      if (rx_done) begin
        wst[rx_ws]    <= W_WMEM;
        req_id[rx_ws] <= rx_req_id;
        iter[rx_ws]   <= rx_iter;
        beats[rx_ws]  <= rx_beats;
        fin[rx_ws]    <= 1'b0;
        status[rx_ws] <= ST_REQ;
      end
      if (|mj_valid) rr <= (rr == $clog2(NWS)'(NWS - 1)) ? '0 : rr + 1'b1;
      for (int p = 0; p < NMP; p++) begin
        if (mj_valid[p]) begin
          wst[mj_ws[p]] <= W_MEM;
          if (mj_load[p]) ld_addr[mj_ws[p]] <= cur[mj_ws[p]];
        end
        if (md_valid[p]) begin
          if (md_status[p] == MS_OK)
            wst[md_ws[p]] <= fin[md_ws[p]] ? W_WTX : W_WLOG;
          else begin
            wst[md_ws[p]]    <= W_WTX;
            status[md_ws[p]] <= (md_status[p] == MS_MISS) ? ST_NOT_LOCAL : ST_PROT;
          end
        end
      end
      n_mem_jobs <= n_mem_jobs + 32'($countones(mj_valid));
      for (int l = 0; l < NLP; l++) begin
        if (lp_start[l]) wst[int'(lp_ws[l]) * NLP + l] <= W_LOG;
        if (ld_valid[l]) begin
          automatic int w = int'(ld_ws[l]) * NLP + l;
          automatic logic [15:0] it = iter[w] + 16'd1;
          iter[w] <= it;
          if (ld_kind[l] == LD_NEXT && int'(it) < MAX_ITER) begin
            wst[w] <= W_WMEM;
          end else begin
            status[w] <= (ld_kind[l] == LD_NEXT)   ? ST_MAX_ITER :
                         (ld_kind[l] == LD_RETURN) ? ST_DONE : ST_ILLEGAL;
            fin[w]    <= 1'b1;
            wst[w]    <= dirty[w] ? W_WMEM : W_WTX;
          end
        end
      end
      n_iters <= n_iters + 32'($countones(ld_valid));
      if (tx_valid) wst[tx_ws] <= W_TX;
      if (tx_done)  wst[tx_done_ws] <= W_FREE;
    end
  end

endmodule
