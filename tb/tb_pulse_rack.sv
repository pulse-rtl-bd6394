// tb_pulse_rack: end-to-end test of the rack at full size (default
// parameters: four memory nodes, each with 3 logic pipelines, 4 memory
// pipelines and 7 workspaces, MAX_ITER 1024), each node with its own DRAM
// model on its four memory ports.
//
// The rack address space gives 1 MB to each node: the switch maps range n to
// node n and node n's translation table maps the same range onto its DRAM.
// On node 0 a 64 KB window is read-only (a higher-priority table entry).
// Linked lists of 64 B nodes (key, value, next) are scattered over all four
// nodes, so traversals leave a node (NOT_LOCAL) and are re-routed by the switch.
// The CPU side sends back-to-back requests, more than the rack has workspaces,
// and accepts responses with random back-pressure.  Requests: finds (hits and
// misses), sums (ADD, DIV), updates (STORE and write-back, checked in DRAM),
// a backward-jump program (ILLEGAL), an update of read-only data
// (protection failure), a list that points outside every range (INVALID from
// the switch) and a list longer than MAX_ITER.  Every response is checked
// against results computed from the same lists.  The test also counts how
// often each mechanism happened and fails if one never did: request stall,
// response back-pressure, switch re-route, INVALID, MAX_ITER, write-back,
// ILLEGAL, protection failure, multi-node traversal.
module tb_pulse_rack;
  import pulse_pkg::*;
  import pulse_asm_pkg::*;
  localparam int NMN = 4, NMP = 4, LAT = 28, NB = 30, MAXI = 1024;
  localparam logic [63:0] VB = 64'h10_0000, MB = 64'h10_0000;
  localparam logic [63:0] RO_LO = VB + 64'h8_0000, RO_HI = VB + 64'h9_0000;
  logic clk = 0, rst_n = 0;
  logic cpu_in_valid = 0, cpu_in_ready, cpu_out_valid, cpu_out_ready = 1;
  beat_t cpu_in_beat = '0, cpu_out_beat;
  logic rt_cfg_we = 0; logic [2:0] rt_cfg_idx = 0; rt_entry_t rt_cfg_entry = '0;
  logic [NMN-1:0] xl_cfg_we = 0; logic [3:0] xl_cfg_idx = 0; xl_entry_t xl_cfg_entry = '0;
  logic [NMN*NMP-1:0] m_req_valid, m_req_ready, m_wvalid, m_wready, m_wlast, m_rvalid, m_rlast;
  mreq_t m_req [NMN*NMP];
  logic [BEAT_W-1:0] m_wdata [NMN*NMP], m_rdata [NMN*NMP];
  logic [31:0] n_reroute, n_invalid, n_iters [NMN], n_mem_jobs [NMN];
  int checks = 0, failures = 0;

  pulse_rack dut (.*);
  always #5 clk = ~clk;

  for (genvar n = 0; n < NMN; n++) begin : g_mem
    logic [NMP-1:0] rqv, rqr, wv, wr, wl, rv, rl;
    mreq_t rq [NMP]; logic [BEAT_W-1:0] wd [NMP], rd [NMP];
    for (genvar p = 0; p < NMP; p++) begin : g_p
      assign rqv[p] = m_req_valid[n*NMP+p];
      assign rq[p]  = m_req[n*NMP+p];
      assign wv[p]  = m_wvalid[n*NMP+p];
      assign wd[p]  = m_wdata[n*NMP+p];
      assign wl[p]  = m_wlast[n*NMP+p];
      assign m_req_ready[n*NMP+p] = rqr[p];
      assign m_wready[n*NMP+p]    = wr[p];
      assign m_rvalid[n*NMP+p]    = rv[p];
      assign m_rdata[n*NMP+p]     = rd[p];
      assign m_rlast[n*NMP+p]     = rl[p];
    end
    dram_model #(.NP(NMP), .LAT(LAT)) u_dram (
      .clk, .rst_n, .m_req_valid(rqv), .m_req_ready(rqr), .m_req(rq), .m_wvalid(wv), .m_wready(wr),
      .m_wdata(wd), .m_wlast(wl), .m_rvalid(rv), .m_rdata(rd), .m_rlast(rl)
    );
  end

  function automatic void poke(input logic [63:0] va, input logic [63:0] v);
    int n = int'((va - VB) / MB);
    logic [63:0] pa = (va - VB) % MB;
    case (n)
      0: g_mem[0].u_dram.poke(pa, v);
      1: g_mem[1].u_dram.poke(pa, v);
      2: g_mem[2].u_dram.poke(pa, v);
      default: g_mem[3].u_dram.poke(pa, v);
    endcase
  endfunction
  function automatic logic [63:0] peek(input logic [63:0] va);
    int n = int'((va - VB) / MB);
    logic [63:0] pa = (va - VB) % MB;
    case (n)
      0: return g_mem[0].u_dram.peek(pa);
      1: return g_mem[1].u_dram.peek(pa);
      2: return g_mem[2].u_dram.peek(pa);
      default: return g_mem[3].u_dram.peek(pa);
    endcase
  endfunction
  int wbeats = 0;                                  // write beats accepted by DRAM
  always @(posedge clk) wbeats += $countones(m_wvalid & m_wready);
  function automatic int dram_writes();
    return wbeats;
  endfunction

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- lists ----------------
  int len [NB]; logic [63:0] head [NB]; logic [63:0] nodes [NB][$];
  logic [63:0] keyv [logic [63:0]]; logic [63:0] valv [logic [63:0]];
  int slot [NMN] = '{default: 1};
  int ro_slot = 0;

  function automatic logic [63:0] alloc_node(input int n);
    logic [63:0] a = VB + 64'(n) * MB + 64'(slot[n]) * 192;
    slot[n]++;
    return a;
  endfunction

  function automatic void build(input int b, input int l, input int hop_pct, input logic ro);
    int n = $urandom % NMN;
    len[b] = l; nodes[b].delete();
    for (int j = 0; j < l; j++) begin
      if (ro) begin nodes[b].push_back(RO_LO + 64'(ro_slot) * 64); ro_slot++; end
      else begin
        if (int'($urandom % 100) < hop_pct) n = $urandom % NMN;
        nodes[b].push_back(alloc_node(n));
      end
    end
    head[b] = nodes[b][0];
    for (int j = 0; j < l; j++) begin
      automatic logic [63:0] a = nodes[b][j];
      keyv[a] = 64'(b * 10000 + j); valv[a] = 64'($urandom % 100000);
      poke(a, keyv[a]); poke(a + 8, valv[a]);
      poke(a + 16, (j == l - 1) ? 64'h0 : nodes[b][j+1]);
    end
  endfunction

  // ---------------- requests and expected responses ----------------
  typedef struct { status_e st; logic chk_cur; logic [63:0] cur; int iters;
                   logic chk_sp; logic [63:0] sp1, sp2, sp3, sp4; } exp_t;
  exp_t expq [int];
  int nreq = 0, nresp = 0;
  int c_stall = 0, c_bp = 0, c_maxit = 0, c_illegal = 0, c_prot = 0, c_invalid = 0;
  int c_multi = 0, c_done = 0;

  task automatic send(input pkt_t k);
    for (int i = 0; i < PKT_BEATS; i++) begin
      cpu_in_valid = 1; cpu_in_beat = k[i];
      #1; while (!cpu_in_ready) begin c_stall++; @(negedge clk); #1; end
      @(posedge clk); @(negedge clk);
    end
    cpu_in_valid = 0;
  endtask

  // kind: 0 find, 1 sum, 2 update, 3 backward jump
  task automatic request(input int kind, input int b, input logic [63:0] key);
    logic [63:0] sp [SP_WORDS]; prog_t code; exp_t e;
    for (int w = 0; w < SP_WORDS; w++) sp[w] = 0;
    sp[0] = key;
    e = '{st: ST_DONE, chk_cur: 1, cur: head[b], iters: 0, chk_sp: 1,
          sp1: 0, sp2: 0, sp3: 0, sp4: 0};
    case (kind)
      0: begin
        code = find_prog(); e.sp1 = '1;
        foreach (nodes[b][j]) begin
          e.iters++; e.cur = nodes[b][j];
          if (keyv[nodes[b][j]] == key) begin e.sp1 = valv[nodes[b][j]]; break; end
        end
      end
      1: begin
        code = sum_prog();
        foreach (nodes[b][j]) begin
          if (e.iters == MAXI) begin e.st = ST_MAX_ITER; e.cur = nodes[b][j]; e.chk_sp = 0; break; end
          e.sp2 += valv[nodes[b][j]]; e.sp3++; e.cur = nodes[b][j]; e.iters++;
        end
        if (e.sp3 != 0) e.sp4 = e.sp2 / e.sp3;
      end
      2: begin
        code = update_prog(); e.chk_sp = 0;
        foreach (nodes[b][j]) begin
          valv[nodes[b][j]] = valv[nodes[b][j]] * 3 + 1; e.cur = nodes[b][j]; e.iters++;
        end
      end
      default: begin
        code = bad_prog(); e.st = ST_ILLEGAL; e.iters = 1; e.chk_sp = 0;
      end
    endcase
    expq[nreq] = e;
    send(make_pkt(64'(nreq), head[b], sp, code));
    nreq++;
  endtask

  // ---------------- response sink ----------------
  always @(negedge clk) begin
    cpu_out_ready <= ($urandom % 8) != 0;
    if (cpu_out_valid && !cpu_out_ready) c_bp++;
  end

  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (cpu_out_valid && cpu_out_ready) begin
        automatic hdr_t h = hdr_t'(cpu_out_beat.data);
        automatic int r = int'(h.req_id);
        automatic logic [63:0] sp [SP_WORDS];
        for (int b = 0; b < SP_BEATS; b++) begin
          @(posedge clk); while (!(cpu_out_valid && cpu_out_ready)) @(posedge clk);
          for (int w = 0; w < 8; w++) sp[b*8+w] = cpu_out_beat.data[w*64 +: 64];
        end
        for (int b = 0; b < CODE_BEATS; b++) begin
          @(posedge clk); while (!(cpu_out_valid && cpu_out_ready)) @(posedge clk);
        end
        chk(cpu_out_beat.last, "last beat");
        chk(expq.exists(r), $sformatf("unknown response %0d", r));
        if (expq.exists(r)) begin
          automatic exp_t e = expq[r];
          chk(h.status == e.st, $sformatf("req %0d status %0d exp %0d", r, h.status, e.st));
          if (e.chk_cur)
            chk(h.cur_ptr == e.cur, $sformatf("req %0d cur %h exp %h", r, h.cur_ptr, e.cur));
          if (e.iters >= 0)
            chk(int'(h.iter_cnt) == e.iters, $sformatf("req %0d iters %0d exp %0d", r, h.iter_cnt, e.iters));
          if (e.chk_sp)
            chk(sp[1] == e.sp1 && sp[2] == e.sp2 && sp[3] == e.sp3 && sp[4] == e.sp4,
                $sformatf("req %0d scratch_pad %h %h %h %h", r, sp[1], sp[2], sp[3], sp[4]));
          case (h.status)
            ST_MAX_ITER: c_maxit++;
            ST_ILLEGAL:  c_illegal++;
            ST_PROT:     c_prot++;
            ST_INVALID:  c_invalid++;
            ST_DONE:     c_done++;
            default: ;
          endcase
          expq.delete(r);
        end
        nresp++;
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    for (int n = 0; n < NMN; n++) $display("node %0d iterations %0d", n, n_iters[n]);
    failures++;
    $display("watchdog: %0d of %0d responses", nresp, nreq);
    foreach (expq[r]) $display("no response to request %0d", r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- test sequence ----------------
  initial begin
    int t0, lat, wb0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < NMN; n++) begin
      @(negedge clk);
      rt_cfg_we = 1; rt_cfg_idx = 3'(n);
      rt_cfg_entry = '{valid: 1, base: VB + 64'(n) * MB, limit: VB + 64'(n + 1) * MB, node: 8'(n)};
      xl_cfg_we = '0; xl_cfg_we[n] = 1; xl_cfg_idx = 4'd1;
      xl_cfg_entry = '{valid: 1, rd: 1, wr: 1, vbase: VB + 64'(n) * MB,
                       vlimit: VB + 64'(n + 1) * MB, pbase: 64'h0};
    end
    @(negedge clk);
    rt_cfg_we = 0;
    xl_cfg_we = 4'b0001; xl_cfg_idx = 4'd0;
    xl_cfg_entry = '{valid: 1, rd: 1, wr: 0, vbase: RO_LO, vlimit: RO_HI, pbase: RO_LO - VB};
    @(negedge clk); xl_cfg_we = '0;

    for (int b = 0; b < NB - 3; b++) build(b, 1 + ($urandom % 12), 30, 0);
    build(0, 1, 0, 0);
    build(NB - 3, 2, 0, 1);                          // read-only list
    build(NB - 2, 3, 50, 0);                         // runs off into unmapped space
    poke(nodes[NB-2][2] + 16, 64'h4000_0000);
    nodes[NB-2].push_back(64'h4000_0000);
    build(NB - 1, MAXI + 8, 2, 0);                   // longer than MAX_ITER
    for (int b = 0; b < NB; b++) if (nodes[b].size() > 1) begin
      for (int j = 1; j < nodes[b].size(); j++)
        if ((nodes[b][j] - VB) / MB != (nodes[b][j-1] - VB) / MB) begin c_multi++; break; end
    end

    // 1) one-node find on an idle rack: switch, node, switch
    @(negedge clk);
    t0 = $time;
    request(0, 0, keyv[head[0]]);
    wait (nresp == 1);
    lat = int'(($time - t0) / 10);
    $display("one-iteration find through the switch: %0d cycles", lat);
    chk(lat <= 2 * PKT_BEATS + 3 + LAT + 1 + 6 + 8 + 2 * 4 + 10, $sformatf("latency %0d", lat));

    // 2) the long list first, then a stream
    @(negedge clk);
    request(1, NB - 1, 0);
    wb0 = dram_writes();
    for (int n = 0; n < 70; n++) begin
      automatic int b = 1 + ($urandom % (NB - 4));
      automatic int kind = (n % 4 == 3) ? 1 : 0;
      automatic logic [63:0] key = (n % 5 == 0) ? 64'd99 : 64'(b * 10000 + $urandom % len[b]);
      request(kind, b, key);
    end
    request(2, 5, 0);
    request(2, 6, 0);
    request(3, 7, 0);
    request(2, NB - 3, 0);                           // update of read-only data
    expq[nreq-1].st = ST_PROT; expq[nreq-1].chk_cur = 0; expq[nreq-1].iters = -1;
    valv[nodes[NB-3][0]] = (valv[nodes[NB-3][0]] - 1) / 3;
    valv[nodes[NB-3][1]] = (valv[nodes[NB-3][1]] - 1) / 3;
    request(0, NB - 2, 64'd12345);                   // leaves every range
    expq[nreq-1].st = ST_INVALID; expq[nreq-1].cur = 64'h4000_0000;
    expq[nreq-1].iters = 3; expq[nreq-1].chk_sp = 0;
    wait (nresp == nreq);
    repeat (20) @(posedge clk);

    foreach (nodes[5][j]) chk(peek(nodes[5][j] + 8) == valv[nodes[5][j]], "list 5 updated in DRAM");
    foreach (nodes[6][j]) chk(peek(nodes[6][j] + 8) == valv[nodes[6][j]], "list 6 updated in DRAM");
    foreach (nodes[NB-3][j]) chk(peek(nodes[NB-3][j] + 8) == valv[nodes[NB-3][j]], "read-only list unchanged");
    begin
      automatic int wb = dram_writes() - wb0;
      automatic int it = 0;
      for (int n = 0; n < NMN; n++) it += int'(n_iters[n]);
      $display("requests %0d done %0d, iterations %0d, DRAM writes %0d", nreq, c_done, it, wb);
      $display("stall %0d, back-pressure %0d, re-route %0d, invalid %0d, MAX_ITER %0d, ILLEGAL %0d, PROT %0d, multi-node lists %0d",
               c_stall, c_bp, n_reroute, n_invalid, c_maxit, c_illegal, c_prot, c_multi);
      chk(c_stall > 0, "request stall happened");
      chk(c_bp > 0, "response back-pressure happened");
      chk(n_reroute > 0, "switch re-route happened");
      chk(n_invalid > 0 && c_invalid > 0, "INVALID happened");
      chk(c_maxit > 0, "MAX_ITER happened");
      chk(wb > 0, "write-back happened");
      chk(c_illegal > 0, "ILLEGAL happened");
      chk(c_prot > 0, "protection failure happened");
      chk(c_multi > 0, "multi-node traversal happened");
      for (int n = 0; n < NMN; n++) chk(n_iters[n] > 0, $sformatf("node %0d did work", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
