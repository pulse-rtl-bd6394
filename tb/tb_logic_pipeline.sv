// tb_logic_pipeline: runs iterator programs on a logic pipeline attached to a
// workspace bank.  Each case loads code and scratch_pad through the bank's
// network port and a data line through a fill port, starts one iteration and
// checks the end kind, the workspace state and the cycle count (one cycle per
// instruction, DIV XLEN+2) against values worked out by hand.  'cycles' is
// counted from the clock edge that samples start, plus one.
module tb_logic_pipeline;
  import pulse_pkg::*;
  import pulse_asm_pkg::*;
  localparam int NWS = 3, NMP = 1, WSW = 3;
  logic clk = 0, rst_n = 0;
  logic start = 0; logic [WSW-1:0] start_ws = 0;
  logic busy, done; lp_done_e done_kind; logic [WSW-1:0] done_ws;
  logic [WSW-1:0] x_ws; logic [5:0] x_pc; instr_t x_instr;
  operand_t x_a_sel, x_b_sel, x_dst; logic [63:0] x_a_val, x_b_val, x_wdata; logic x_we;
  logic [NMP-1:0] f_valid = 0, c_valid = 0;
  logic [WSW-1:0] f_ws [NMP], r_ws [NMP], c_ws [NMP];
  logic [1:0] f_beat [NMP], r_beat [NMP];
  logic [BEAT_W-1:0] f_data [NMP], r_data [NMP];
  logic n_we = 0; logic [WSW-1:0] n_ws = 0, n_rws = 0; region_e n_region = RG_CUR, n_rregion = RG_CUR;
  logic [2:0] n_beat = 0, n_rbeat = 0; logic [BEAT_W-1:0] n_wdata = 0, n_rdata;
  logic [63:0] cur [NWS]; logic [NWS-1:0] dirty;
  int checks = 0, failures = 0;

  workspace_bank #(.NWS(NWS), .NMP(NMP), .WSW(WSW)) u_bank (.*);
  logic_pipeline #(.WSW(WSW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load_ws(input int w, input prog_t code, input logic [63:0] sp0, input logic [63:0] curp,
                         input logic [63:0] key, input logic [63:0] val, input logic [63:0] nxt);
    @(negedge clk); n_we = 1; n_ws = WSW'(w); n_region = RG_CUR; n_wdata = BEAT_W'(curp);
    for (int b = 0; b < SP_BEATS; b++) begin
      @(negedge clk); n_region = RG_SP; n_beat = 3'(b); n_wdata = (b == 0) ? BEAT_W'(sp0) : '0;
    end
    for (int b = 0; b < CODE_BEATS; b++) begin
      @(negedge clk); n_region = RG_CODE; n_beat = 3'(b);
      for (int k = 0; k < 8; k++) n_wdata[k*64 +: 64] = code[b*8+k];
    end
    @(negedge clk); n_we = 0;
    f_valid = 1; f_ws[0] = WSW'(w); f_beat[0] = 0; f_data[0] = '0;
    f_data[0][63:0] = key; f_data[0][127:64] = val; f_data[0][191:128] = nxt;
    @(negedge clk); f_valid = 0;
  endtask

  task automatic run(input int w, output lp_done_e kind, output int cycles);
    @(negedge clk); start = 1; start_ws = WSW'(w);
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    kind = done_kind;
    chk(done_ws == WSW'(w), "done_ws");
  endtask

  function automatic logic [63:0] spw(input int w, input int i);
    return u_bank.sp_m[w*4 + i/8][(i%8)*64 +: 64];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lp_done_e k; int cyc;
    f_ws[0] = 0; r_ws[0] = 0; c_ws[0] = 0; f_beat[0] = 0; r_beat[0] = 0; f_data[0] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // find: key matches -> RETURN, value in sp[1]; 5 instructions
    load_ws(0, find_prog(), 64'd42, 64'h1000, 64'd42, 64'd777, 64'h2000);
    run(0, k, cyc);
    chk(k == LD_RETURN, "find hit kind");
    chk(spw(0, 1) == 64'd777, $sformatf("find hit value %0d", spw(0, 1)));
    chk(cyc == 5 + 1, $sformatf("find hit cycles %0d", cyc));
    // find: key differs, next != 0 -> NEXT_ITER, cur_ptr = next; 7 instructions
    load_ws(1, find_prog(), 64'd42, 64'h1000, 64'd41, 64'd5, 64'h2040);
    run(1, k, cyc);
    chk(k == LD_NEXT && cur[1] == 64'h2040, "find next");
    chk(cyc == 7 + 1, $sformatf("find next cycles %0d", cyc));
    // find: end of list -> RETURN with -1
    load_ws(2, find_prog(), 64'd42, 64'h1000, 64'd40, 64'd5, 64'h0);
    run(2, k, cyc);
    chk(k == LD_RETURN && spw(2, 1) == '1, "find miss");
    chk(cyc == 7 + 1, $sformatf("find miss cycles %0d", cyc));
    // sum over a one-node list: ADD, ADD, then DIV 100/1
    load_ws(0, sum_prog(), 64'd0, 64'h1000, 64'd1, 64'd100, 64'h0);
    u_bank.sp_m[0][2*64 +: 64] = 64'd500; u_bank.sp_m[0][3*64 +: 64] = 64'd4;
    run(0, k, cyc);
    chk(k == LD_RETURN && spw(0, 2) == 64'd600 && spw(0, 3) == 64'd5 && spw(0, 4) == 64'd120,
        $sformatf("sum %0d %0d %0d", spw(0, 2), spw(0, 3), spw(0, 4)));
    chk(cyc == 6 + (XLEN + 2) + 1, $sformatf("sum cycles %0d", cyc));
    // update: MUL, ADD, STORE -> data[1] = 3v+1, dirty
    load_ws(1, update_prog(), 64'd0, 64'h1000, 64'd1, 64'd10, 64'h3000);
    run(1, k, cyc);
    chk(k == LD_NEXT && u_bank.data_m[4][64 +: 64] == 64'd31 && dirty[1] && cur[1] == 64'h3000, "update");
    // backward jump -> ILLEGAL
    load_ws(2, bad_prog(), 64'd0, 64'h1000, 64'd1, 64'd10, 64'h3000);
    run(2, k, cyc);
    chk(k == LD_ILLEGAL, "backward jump rejected");
    // running off the end of the code -> ILLEGAL
    load_ws(0, nop_prog(), 64'd0, 64'h1000, 64'd1, 64'd10, 64'h3000);
    run(0, k, cyc);
    chk(k == LD_ILLEGAL && cyc == CODE_DEPTH + 2, $sformatf("overrun %0d", cyc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
