// tb_pulse_accel: one accelerator with a DRAM model on its four memory ports.
// Builds hash buckets (linked lists of 64 B nodes: key, value, next) in DRAM,
// then sends a stream of requests, more than there are workspaces so that
// arrivals stall: list finds (hits and misses), whole-list sums (ADD, DIV),
// in-place updates (STORE, write-back), a backward-jump program, a list that
// leaves this node's address range, and one longer than MAX_ITER.  Each
// response is checked against results computed here from the same lists:
// status, final cur_ptr, iteration count and scratch_pad; DRAM is checked
// after the updates.  Also checks the one-node find latency.
module tb_pulse_accel;
  import pulse_pkg::*;
  import pulse_asm_pkg::*;
  localparam int NMP = 4, LAT = 28, NB = 24, MAXI = 64;
  localparam logic [63:0] VB = 64'h10_0000;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1; beat_t rx_beat = '0, tx_beat;
  logic cfg_we = 0; logic [3:0] cfg_idx = 0; xl_entry_t cfg_entry = '0;
  logic [NMP-1:0] m_req_valid, m_req_ready, m_wvalid, m_wready, m_wlast, m_rvalid, m_rlast;
  mreq_t m_req [NMP]; logic [BEAT_W-1:0] m_wdata [NMP], m_rdata [NMP];
  logic [31:0] n_iters, n_mem_jobs;
  int checks = 0, failures = 0;

  pulse_accel #(.MAX_ITER(MAXI)) dut (.*);
  dram_model #(.NP(NMP), .LAT(LAT)) u_dram (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // lists: bucket b has len[b] nodes at VB + 64*slot
  int len [NB]; logic [63:0] head [NB]; logic [63:0] nodes [NB][$];
  logic [63:0] keyv [logic [63:0]]; logic [63:0] valv [logic [63:0]];
  int next_slot = 1;

  function automatic logic [63:0] alloc_node();
    logic [63:0] a = VB + 64'(next_slot) * 64 * 3;   // spread out, 64 B aligned
    next_slot++;
    return a;
  endfunction

  // expected result per request
  typedef struct { status_e st; logic [63:0] cur; int iters; logic [63:0] sp1, sp2, sp3, sp4; } exp_t;
  exp_t expq [int];
  int nreq = 0, nresp = 0, stalls = 0;

  task automatic send(input pkt_t k);
    for (int i = 0; i < PKT_BEATS; i++) begin
      rx_valid = 1; rx_beat = k[i];
      #1; while (!rx_ready) begin if (i == 0) stalls++; @(negedge clk); #1; end
      @(posedge clk); @(negedge clk);
    end
    rx_valid = 0;
  endtask

  task automatic request(input int kind, input int b, input logic [63:0] key);
    logic [63:0] sp [SP_WORDS]; prog_t code; exp_t e; logic [63:0] p;
    int i, n;
    for (int w = 0; w < SP_WORDS; w++) sp[w] = 0;
    sp[0] = key;
    e.sp1 = 0; e.sp2 = 0; e.sp3 = 0; e.sp4 = 0; e.cur = head[b];
    case (kind)
      0: begin                                   // find
        code = find_prog();
        n = 0; e.st = ST_DONE; e.sp1 = '1;
        foreach (nodes[b][j]) begin
          n++; e.cur = nodes[b][j];
          if (keyv[nodes[b][j]] == key) begin e.sp1 = valv[nodes[b][j]]; break; end
        end
        e.iters = n;
      end
      1: begin                                   // sum / count / average
        code = sum_prog();
        foreach (nodes[b][j]) begin e.sp2 += valv[nodes[b][j]]; e.sp3++; e.cur = nodes[b][j]; end
        e.sp4 = e.sp2 / e.sp3; e.iters = len[b]; e.st = ST_DONE;
        e.sp1 = 0;
      end
      2: begin                                   // update in place
        code = update_prog();
        foreach (nodes[b][j]) begin
          e.sp1 = 0; valv[nodes[b][j]] = valv[nodes[b][j]] * 3 + 1; e.cur = nodes[b][j];
        end
        e.iters = len[b]; e.st = ST_DONE;
      end
      default: begin                             // backward jump
        code = bad_prog(); e.st = ST_ILLEGAL; e.iters = 1; e.sp2 = 1;
      end
    endcase
    if (kind == 2) begin
      // the last node's value ends up in sp[5]; not checked
    end
    expq[nreq] = e;
    send(make_pkt(64'(nreq), head[b], sp, code));
    nreq++;
  endtask

  // receiver
  initial begin
    wait (rst_n);
    forever begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        automatic hdr_t h = hdr_t'(tx_beat.data);
        automatic int r = int'(h.req_id);
        automatic logic [63:0] sp [SP_WORDS];
        for (int b = 0; b < SP_BEATS; b++) begin
          @(posedge clk); while (!tx_valid) @(posedge clk);
          for (int w = 0; w < 8; w++) sp[b*8+w] = tx_beat.data[w*64 +: 64];
        end
        for (int b = 0; b < CODE_BEATS; b++) begin @(posedge clk); while (!tx_valid) @(posedge clk); end
        chk(tx_beat.last, "last beat");
        chk(expq.exists(r), $sformatf("unknown response %0d", r));
        if (expq.exists(r)) begin
          automatic exp_t e = expq[r];
          chk(h.status == e.st, $sformatf("req %0d status %0d exp %0d", r, h.status, e.st));
          chk(h.cur_ptr == e.cur, $sformatf("req %0d cur %h exp %h", r, h.cur_ptr, e.cur));
          chk(int'(h.iter_cnt) == e.iters, $sformatf("req %0d iters %0d exp %0d", r, h.iter_cnt, e.iters));
          if (e.st == ST_DONE) begin
            chk(sp[1] == e.sp1 || r >= 1000, $sformatf("req %0d sp1 %h exp %h", r, sp[1], e.sp1));
            chk(sp[2] == e.sp2 && sp[3] == e.sp3 && sp[4] == e.sp4, $sformatf("req %0d aggregates", r));
          end
        end
        nresp++;
      end
    end
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, lat;
    repeat (2) @(negedge clk); rst_n = 1;
    // translation: VB.. VB+1 MB local, read/write
    @(negedge clk); cfg_we = 1; cfg_idx = 0;
    cfg_entry = '{valid: 1, rd: 1, wr: 1, vbase: VB, vlimit: VB + 64'h10_0000, pbase: 64'h0};
    @(negedge clk); cfg_we = 0;
    // build buckets
    for (int b = 0; b < NB; b++) begin
      len[b] = (b == NB - 1) ? MAXI + 6 : 1 + ($urandom % 10);
      if (b == 0) len[b] = 1;
      for (int j = 0; j < len[b]; j++) nodes[b].push_back(alloc_node());
      head[b] = nodes[b][0];
      for (int j = 0; j < len[b]; j++) begin
        automatic logic [63:0] a = nodes[b][j];
        keyv[a] = 64'(b * 100 + j); valv[a] = 64'($urandom % 100000);
        u_dram.poke(a - VB,      keyv[a]);
        u_dram.poke(a - VB + 8,  valv[a]);
        u_dram.poke(a - VB + 16, (j == len[b] - 1) ? 64'h0 : nodes[b][j+1]);
      end
    end
    // a bucket whose second node lives on another memory node
    nodes[1].delete(); len[1] = 2;
    nodes[1].push_back(head[1]); nodes[1].push_back(64'h90_0040);
    u_dram.poke(head[1] - VB + 16, 64'h90_0040);
    keyv[head[1]] = 64'd100;
    // 1) single-node find latency, nothing else in flight
    @(negedge clk);
    t0 = $time;
    request(0, 0, 64'd0);
    wait (nresp == 1);
    lat = int'(($time - t0) / 10);
    $display("one-iteration find: %0d cycles from first request beat to last response beat", lat);
    // 13 beats in + alloc/translate/DRAM/fill + 6 instructions + 13 beats out
    chk(lat <= PKT_BEATS + 3 + LAT + 1 + 6 + 8 + PKT_BEATS, $sformatf("latency %0d", lat));
    // 2) a stream of requests
    @(negedge clk);
    request(0, 1, 64'd999);                        // walks off this node
    expq[1].st = ST_NOT_LOCAL; expq[1].cur = 64'h90_0040; expq[1].iters = 1;
    for (int n = 0; n < 40; n++) begin
      automatic int b = 2 + ($urandom % (NB - 3));
      automatic int kind = (n % 5 == 4) ? 1 : 0;
      automatic logic [63:0] key = (n % 3 == 0) ? 64'd7777 : 64'(b * 100 + $urandom % len[b]);
      request(kind, b, key);
    end
    request(2, 3, 0);
    request(3, 4, 0);
    request(1, NB - 1, 0);                         // longer than MAX_ITER
    begin
      automatic int r = nreq - 1;
      expq[r].st = ST_MAX_ITER; expq[r].iters = MAXI; expq[r].cur = nodes[NB-1][MAXI];
    end
    wait (nresp == nreq);
    repeat (10) @(posedge clk);
    foreach (nodes[3][j]) chk(u_dram.peek(nodes[3][j] - VB + 8) == valv[nodes[3][j]], "updated value in DRAM");
    chk(stalls > 0, "arrivals stalled on full workspaces");
    chk(n_iters > 32'd100, "iterations counted");
    $display("requests %0d, iterations %0d, memory jobs %0d, stalls %0d", nreq, n_iters, n_mem_jobs, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
