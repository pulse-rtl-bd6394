// tb_net_stack: sends request packets into the parser and checks every
// workspace write (cur_ptr, scratch_pad, code beats), the request fields and
// the LOAD size handed to the scheduler, and that a packet waits while no
// workspace is free.  Then has the deparser send workspaces out and checks
// the header (request ID, final cur_ptr, status, iterations, node) and the
// body beats, including under output back-pressure.
module tb_net_stack;
  import pulse_pkg::*;
  import pulse_asm_pkg::*;
  localparam int WSW = 3;
  logic clk = 0, rst_n = 0;
  logic rx_valid = 0, rx_ready; beat_t rx_beat = '0;
  logic alloc_req, alloc_avail = 0; logic [WSW-1:0] alloc_ws = 0;
  logic n_we; logic [WSW-1:0] n_ws; region_e n_region; logic [2:0] n_beat; logic [BEAT_W-1:0] n_wdata;
  logic rx_done; logic [WSW-1:0] rx_ws; logic [63:0] rx_req_id; logic [15:0] rx_iter; logic [2:0] rx_beats;
  logic tx_valid = 0, tx_ready; logic [WSW-1:0] tx_ws = 0; logic [63:0] tx_req_id = 0; logic [15:0] tx_iter = 0;
  status_e tx_status = ST_DONE; logic tx_done; logic [WSW-1:0] tx_done_ws;
  logic [WSW-1:0] n_rws; region_e n_rregion; logic [2:0] n_rbeat; logic [BEAT_W-1:0] n_rdata;
  logic tx_out_valid, tx_out_ready = 1; beat_t tx_out_beat;
  int checks = 0, failures = 0;

  logic [BEAT_W-1:0] sh_sp [8][SP_BEATS], sh_code [8][CODE_BEATS]; logic [63:0] sh_cur [8];
  int rxd = 0; logic [2:0] got_beats; logic [63:0] got_id;

  net_stack #(.WSW(WSW), .NODE_ID(8'd2)) dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (n_we) case (n_region)
      RG_CUR:  sh_cur[n_ws] <= n_wdata[63:0];
      RG_SP:   sh_sp[n_ws][n_beat] <= n_wdata;
      RG_CODE: sh_code[n_ws][n_beat] <= n_wdata;
      default: ;
    endcase
    if (rx_done) begin rxd++; got_beats <= rx_beats; got_id <= rx_req_id; end
  end
  always_comb begin
    case (n_rregion)
      RG_CUR:  n_rdata = BEAT_W'(sh_cur[n_rws]);
      RG_SP:   n_rdata = sh_sp[n_rws][n_rbeat];
      default: n_rdata = sh_code[n_rws][n_rbeat];
    endcase
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input pkt_t k);
    for (int i = 0; i < PKT_BEATS; i++) begin
      @(negedge clk); rx_valid = 1; rx_beat = k[i];
      #1; while (!rx_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); rx_valid = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] sp [SP_WORDS]; prog_t code; pkt_t k;
    for (int i = 0; i < SP_WORDS; i++) sp[i] = {$urandom, $urandom};
    code = find_prog();
    k = make_pkt(64'h0001_0000_0000_0007, 64'h1234_5678, sp, code);
    repeat (2) @(negedge clk); rst_n = 1;
    // no free workspace: header must wait
    fork send(k); join_none
    repeat (10) @(negedge clk);
    chk(rxd == 0 && !rx_ready, "stalls without a free workspace");
    alloc_avail = 1; alloc_ws = 3'd5;
    wait (rxd == 1); @(negedge clk);
    chk(got_id == 64'h0001_0000_0000_0007, "request id");
    chk(got_beats == 3'd1, $sformatf("LOAD 64 B -> 1 beat, got %0d", got_beats));
    chk(sh_cur[5] == 64'h1234_5678, "cur_ptr written");
    for (int i = 0; i < SP_WORDS; i++) chk(sh_sp[5][i/8][(i%8)*64 +: 64] == sp[i], "scratch_pad written");
    for (int i = 0; i < CODE_DEPTH; i++) chk(sh_code[5][i/8][(i%8)*64 +: 64] == code[i], "code written");
    // a second packet whose code does not start with LOAD -> full line
    code[0] = I(OP_NOP);
    k = make_pkt(64'h9, 64'h40, sp, code);
    alloc_ws = 3'd2;
    send(k);
    @(negedge clk);
    chk(rxd == 2 && got_beats == 3'(LINE_BEATS), "default full line");
    // transmit workspace 5 with back-pressure
    sh_cur[5] = 64'hCAFE;
    tx_valid = 1; tx_ws = 5; tx_req_id = 64'h77; tx_iter = 16'd9; tx_status = ST_NOT_LOCAL;
    #1; chk(tx_ready, "tx ready when idle");
    @(negedge clk); tx_valid = 0;
    for (int i = 0; i < PKT_BEATS; i++) begin
      tx_out_ready = (i % 3 != 1);
      #1;
      while (!(tx_out_valid && tx_out_ready)) begin @(negedge clk); tx_out_ready = 1; #1; end
      if (i == 0) begin
        automatic hdr_t h = hdr_t'(tx_out_beat.data);
        chk(h.req_id == 64'h77 && h.cur_ptr == 64'hCAFE && h.iter_cnt == 9 && h.status == ST_NOT_LOCAL && h.node == 2, "tx header");
      end else if (i <= SP_BEATS) chk(tx_out_beat.data == sh_sp[5][i-1], "tx sp beat");
      else chk(tx_out_beat.data == sh_code[5][i-1-SP_BEATS], "tx code beat");
      chk(tx_out_beat.last == (i == PKT_BEATS - 1), "tx last");
      chk(tx_done == (i == PKT_BEATS - 1), "tx_done on last beat");
      @(negedge clk);
    end
    #1; chk(!tx_out_valid && tx_ready, "tx idle after packet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
