// tb_switch_router: programs a range map for four memory nodes and sends
// packets from the CPU port and from node ports, several at once towards the
// same outputs with random output back-pressure.  Checks each packet arrives
// whole, in order and uninterleaved at the port the map (worked out in the
// testbench) names, with the status rewritten as specified: new and re-routed
// requests to the owning node as ST_REQ, finished traversals to the CPU,
// unmapped pointers or a pointer mapped to the returning node to the CPU as
// ST_INVALID.  Also checks the re-route and invalid counters.
module tb_switch_router;
  import pulse_pkg::*;
  localparam int NMN = 4, NP = NMN + 1, NPKT = 120, LEN = 5;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [2:0] cfg_idx = 0; rt_entry_t cfg_entry = '0;
  logic [NMN:0] in_valid = 0, in_ready, out_valid, out_ready = '1;
  beat_t in_beat [NP]; beat_t out_beat [NP];
  logic [31:0] n_reroute, n_invalid;
  int checks = 0, failures = 0;

  switch_router #(.NMN(NMN), .NRANGE(8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // packet plan
  int src [NPKT]; logic [63:0] ptr [NPKT]; status_e st [NPKT];
  int exp_port [NPKT]; status_e exp_st [NPKT];
  int got = 0, exp_rr = 0, exp_inv = 0;

  function automatic int owner(input logic [63:0] p);   // model of the range map
    if (p >= 64'h10_0000 && p < 64'h50_0000) return int'((p - 64'h10_0000) >> 20);
    return -1;
  endfunction

  // senders
  for (genvar i = 0; i < NP; i++) begin : g_src
    initial begin
      in_beat[i] = '0;
      wait (rst_n);
      repeat (20) @(negedge clk);
      for (int n = 0; n < NPKT; n++) if (src[n] == i) begin
        for (int b = 0; b < LEN; b++) begin
          automatic hdr_t h = '0;
          h.cur_ptr = ptr[n]; h.status = st[n]; h.req_id = 64'(n);
          in_valid[i] = 1;
          in_beat[i].data = (b == 0) ? BEAT_W'(h) : BEAT_W'({32'(n), 32'(b)});
          in_beat[i].last = (b == LEN - 1);
          #1; while (!in_ready[i]) begin @(negedge clk); #1; end
          @(posedge clk); @(negedge clk);
        end
        in_valid[i] = 0;
        if ($urandom % 2) @(negedge clk);
      end
    end
  end
  // receivers
  for (genvar o = 0; o < NP; o++) begin : g_dst
    int cur_pkt = -1, beat = 0;
    always @(negedge clk) out_ready[o] <= ($urandom % 4 != 0);
    always @(posedge clk) if (out_valid[o] && out_ready[o]) begin
      if (beat == 0) begin
        automatic hdr_t h = hdr_t'(out_beat[o].data);
        cur_pkt = int'(h.req_id);
        chk(exp_port[cur_pkt] == o, $sformatf("pkt %0d at port %0d, expected %0d", cur_pkt, o, exp_port[cur_pkt]));
        chk(h.status == exp_st[cur_pkt], $sformatf("pkt %0d status %0d", cur_pkt, h.status));
        chk(h.cur_ptr == ptr[cur_pkt], "cur_ptr kept");
      end else begin
        chk(out_beat[o].data[63:0] == {32'(cur_pkt), 32'(beat)}, $sformatf("beat %0d of pkt %0d", beat, cur_pkt));
      end
      chk(out_beat[o].last == (beat == LEN - 1), "last");
      beat = (beat == LEN - 1) ? 0 : beat + 1;
      if (beat == 0) got++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < NPKT; n++) begin
      automatic int ow;
      src[n] = n % NP;
      ptr[n] = 64'h8_0000 + 64'($urandom_range(0, 32'h4F_0000));
      if (src[n] == 0) st[n] = ST_REQ;
      else st[n] = (n % 3 == 0) ? ST_DONE : ST_NOT_LOCAL;
      ow = owner(ptr[n]);
      if (st[n] == ST_DONE) begin exp_port[n] = 0; exp_st[n] = ST_DONE; end
      else if (ow < 0 || (st[n] == ST_NOT_LOCAL && ow + 1 == src[n])) begin
        exp_port[n] = 0; exp_st[n] = ST_INVALID; exp_inv++;
      end else begin
        exp_port[n] = ow + 1; exp_st[n] = ST_REQ;
        if (src[n] != 0) exp_rr++;
      end
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < NMN; r++) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 3'(r);
      cfg_entry = '{valid: 1, base: 64'h10_0000 + 64'(r) * 64'h10_0000,
                    limit: 64'h20_0000 + 64'(r) * 64'h10_0000, node: 8'(r)};
    end
    @(negedge clk); cfg_we = 0;
    wait (got == NPKT);
    repeat (5) @(posedge clk);
    chk(n_reroute == 32'(exp_rr) && exp_rr > 5, $sformatf("reroutes %0d/%0d", n_reroute, exp_rr));
    chk(n_invalid == 32'(exp_inv) && exp_inv > 5, $sformatf("invalid %0d/%0d", n_invalid, exp_inv));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
