// tb_scheduler: drives the scheduler with timing models of its neighbours:
// memory pipelines that take TD cycles per job, logic pipelines that take TC
// cycles per iteration and end a request after its preset iteration count,
// and a network side that injects requests whenever a workspace is free.
// Checks: never more than NWS requests in flight; every request leaves after
// exactly its iteration count with ST_DONE; a request longer than MAX_ITER
// leaves with ST_MAX_ITER; a translation miss leaves with ST_NOT_LOCAL; a
// dirty workspace gets a write-back-only job before it leaves; logic work
// goes only to the owning pipeline; with TC/TD = NLP/NMP the memory
// pipelines stay busy (utilisation measured while the scheduler is full).
module tb_scheduler;
  import pulse_pkg::*;
  localparam int NLP = 3, NMP = 4, NWS = 7, WSW = 3, MAXI = 40, TD = 36, TC = 27, NREQ = 60;
  logic clk = 0, rst_n = 0;
  logic alloc_req = 0, alloc_avail; logic [WSW-1:0] alloc_ws;
  logic rx_done = 0; logic [WSW-1:0] rx_ws = 0; logic [63:0] rx_req_id = 0; logic [15:0] rx_iter = 0; logic [2:0] rx_beats = 4;
  logic [63:0] cur [NWS]; logic [NWS-1:0] dirty = 0;
  logic [NMP-1:0] mj_ready, mj_valid, mj_load, mj_wb, md_valid = 0;
  logic [WSW-1:0] mj_ws [NMP], md_ws [NMP]; logic [63:0] mj_addr [NMP], mj_wb_addr [NMP];
  logic [2:0] mj_beats [NMP]; ms_e md_status [NMP];
  logic [NLP-1:0] lp_busy, lp_start, ld_valid = 0; logic [WSW-1:0] lp_ws [NLP], ld_ws [NLP]; lp_done_e ld_kind [NLP];
  logic tx_ready, tx_valid, tx_done = 0; logic [WSW-1:0] tx_ws, tx_done_ws = 0; logic [63:0] tx_req_id;
  logic [15:0] tx_iter; status_e tx_status;
  logic [31:0] n_iters, n_mem_jobs;
  int checks = 0, failures = 0;

  scheduler #(.NLP(NLP), .NMP(NMP), .NWS(NWS), .MAX_ITER(MAXI), .WSW(WSW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // per-request plan
  int want_iter [NREQ];  bit want_miss [NREQ];  bit want_dirty [NREQ];
  int ws_req [NWS];      int rem [NWS];
  int done_cnt = 0, inflight = 0, max_inflight = 0, wb_only = 0;
  int full_cycles = 0, busy_cycles = 0;

  // memory pipeline models
  int mcnt [NMP]; int mws [NMP]; bit mld [NMP];
  for (genvar p = 0; p < NMP; p++) begin : g_m
    assign mj_ready[p] = (mcnt[p] == 0);
    always @(posedge clk) begin
      md_valid[p] <= 0;
      if (mj_valid[p]) begin
        mcnt[p] <= TD; mws[p] <= int'(mj_ws[p]); mld[p] <= mj_load[p];
        if (mj_wb[p] && !mj_load[p]) wb_only++;
        chk(!(mj_wb[p] && mj_wb_addr[p] != 64'h5000 + 64'(mj_ws[p])), "wb address is the last load address");
      end else if (mcnt[p] > 0) begin
        mcnt[p] <= mcnt[p] - 1;
        if (mcnt[p] == 1) begin
          md_valid[p] <= 1; md_ws[p] <= WSW'(mws[p]);
          md_status[p] <= (mld[p] && want_miss[ws_req[mws[p]]]) ? MS_MISS : MS_OK;
          if (!mld[p]) dirty[mws[p]] <= 0;
        end
      end
    end
  end
  // logic pipeline models
  int lcnt [NLP]; int lws [NLP];
  for (genvar l = 0; l < NLP; l++) begin : g_l
    assign lp_busy[l] = (lcnt[l] != 0);
    always @(posedge clk) begin
      ld_valid[l] <= 0;
      if (lp_start[l]) begin lcnt[l] <= TC; lws[l] <= int'(lp_ws[l]) * NLP + l; end
      else if (lcnt[l] > 0) begin
        lcnt[l] <= lcnt[l] - 1;
        if (lcnt[l] == 1) begin
          ld_valid[l] <= 1; ld_ws[l] <= WSW'(lws[l] / NLP);
          rem[lws[l]] = rem[lws[l]] - 1;
          ld_kind[l] <= (rem[lws[l]] == 0) ? LD_RETURN : LD_NEXT;
          if (rem[lws[l]] == 0 && want_dirty[ws_req[lws[l]]]) dirty[lws[l]] <= 1;
        end
      end
    end
  end
  // utilisation while every workspace is occupied
  always @(posedge clk) if (rst_n && inflight == NWS) begin
    full_cycles++;
    for (int p = 0; p < NMP; p++) if (mcnt[p] != 0 || md_valid[p]) busy_cycles++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // network side: inject
  initial begin
    for (int p = 0; p < NMP; p++) begin mcnt[p] = 0; md_ws[p] = 0; md_status[p] = MS_OK; end
    for (int l = 0; l < NLP; l++) begin lcnt[l] = 0; ld_ws[l] = 0; ld_kind[l] = LD_NEXT; end
    for (int w = 0; w < NWS; w++) cur[w] = 64'h5000 + 64'(w);
    for (int r = 0; r < NREQ; r++) begin
      want_iter[r] = 1 + ($urandom % 12); want_miss[r] = (r % 13 == 5); want_dirty[r] = (r % 7 == 3);
      if (r == 20) want_iter[r] = MAXI + 10;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NREQ; r++) begin
      @(negedge clk);
      while (!alloc_avail) @(negedge clk);
      alloc_req = 1;
      ws_req[alloc_ws] = r; rem[alloc_ws] = want_iter[r];
      rx_ws = alloc_ws;
      @(negedge clk); alloc_req = 0;
      inflight++; if (inflight > max_inflight) max_inflight = inflight;
      repeat (3) @(negedge clk);
      rx_done = 1; rx_req_id = 64'(r); rx_iter = 0;
      @(negedge clk); rx_done = 0;
    end
  end

  // network side: responses
  initial begin
    tx_ready = 0;
    wait (rst_n);
    forever begin
      @(negedge clk); tx_ready = 1;
      #1;
      if (tx_valid) begin
        automatic int r = int'(tx_req_id);
        automatic logic [WSW-1:0] w = tx_ws;
        automatic status_e st = tx_status;
        automatic logic [15:0] it = tx_iter;
        @(negedge clk); tx_ready = 0;
        if (want_miss[r]) chk(st == ST_NOT_LOCAL && it == 0, $sformatf("miss req %0d", r));
        else if (want_iter[r] > MAXI) chk(st == ST_MAX_ITER && it == 16'(MAXI), $sformatf("max iter req %0d", r));
        else chk(st == ST_DONE && it == 16'(want_iter[r]), $sformatf("req %0d iter %0d status %0d", r, it, st));
        chk(!dirty[w], "left clean");
        repeat (12) @(negedge clk);
        tx_done = 1; tx_done_ws = w;
        @(negedge clk); tx_done = 0;
        inflight--; done_cnt++;
        if (done_cnt == NREQ) begin
          chk(max_inflight == NWS, $sformatf("max in flight %0d", max_inflight));
          chk(wb_only > 0, "write-back-only jobs issued");
          chk(busy_cycles * 100 >= full_cycles * NMP * 80,
              $sformatf("memory utilisation %0d / %0d", busy_cycles, full_cycles * NMP));
          $display("memory pipeline utilisation while full: %0d%%", busy_cycles * 100 / (full_cycles * NMP));
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
