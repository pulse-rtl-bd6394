// tb_workspace_bank: writes every region of every workspace through the
// network port and the fill ports, then reads them back through the execute,
// write-back and network read ports against a shadow copy; checks that a
// STORE-class write sets dirty, that a clear port and a new cur_ptr clear it.
module tb_workspace_bank;
  import pulse_pkg::*;
  localparam int NWS = 3, NMP = 4, WSW = 3;
  logic clk = 0, rst_n = 0;
  logic [WSW-1:0] x_ws = 0; logic [5:0] x_pc = 0; instr_t x_instr;
  operand_t x_a_sel = '0, x_b_sel = '0, x_dst = '0; logic [63:0] x_a_val, x_b_val, x_wdata = 0;
  logic x_we = 0;
  logic [NMP-1:0] f_valid = 0, c_valid = 0;
  logic [WSW-1:0] f_ws [NMP], r_ws [NMP], c_ws [NMP];
  logic [1:0] f_beat [NMP], r_beat [NMP];
  logic [BEAT_W-1:0] f_data [NMP], r_data [NMP];
  logic n_we = 0; logic [WSW-1:0] n_ws = 0, n_rws = 0; region_e n_region = RG_CUR, n_rregion = RG_CUR;
  logic [2:0] n_beat = 0, n_rbeat = 0; logic [BEAT_W-1:0] n_wdata = 0, n_rdata;
  logic [63:0] cur [NWS]; logic [NWS-1:0] dirty;
  int checks = 0, failures = 0;

  logic [63:0] s_sp [NWS][SP_WORDS], s_dt [NWS][DATA_WORDS], s_code [NWS][CODE_DEPTH], s_cur [NWS];

  workspace_bank #(.NWS(NWS), .NMP(NMP), .WSW(WSW)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [BEAT_W-1:0] rnd_beat();
    logic [BEAT_W-1:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NMP; p++) begin f_ws[p] = 0; r_ws[p] = 0; c_ws[p] = 0; f_beat[p] = 0; r_beat[p] = 0; f_data[p] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // network writes: cur, scratch_pad, code
    for (int w = 0; w < NWS; w++) begin
      logic [BEAT_W-1:0] v;
      @(negedge clk); n_we = 1; n_ws = WSW'(w); n_region = RG_CUR; v = rnd_beat(); n_wdata = v;
      s_cur[w] = v[63:0];
      for (int b = 0; b < SP_BEATS; b++) begin
        @(negedge clk); n_region = RG_SP; n_beat = 3'(b); v = rnd_beat(); n_wdata = v;
        for (int k = 0; k < 8; k++) s_sp[w][b*8+k] = v[k*64 +: 64];
      end
      for (int b = 0; b < CODE_BEATS; b++) begin
        @(negedge clk); n_region = RG_CODE; n_beat = 3'(b); v = rnd_beat(); n_wdata = v;
        for (int k = 0; k < 8; k++) s_code[w][b*8+k] = v[k*64 +: 64];
      end
    end
    @(negedge clk); n_we = 0;
    // fills: all four ports at once, each to a different workspace/beat
    for (int b = 0; b < LINE_BEATS; b++) begin
      @(negedge clk);
      for (int p = 0; p < NWS; p++) begin
        automatic logic [BEAT_W-1:0] v = rnd_beat();
        f_valid[p] = 1; f_ws[p] = WSW'(p); f_beat[p] = 2'(b); f_data[p] = v;
        for (int k = 0; k < 8; k++) s_dt[p][b*8+k] = v[k*64 +: 64];
      end
    end
    @(negedge clk); f_valid = 0;
    // execute port reads
    for (int w = 0; w < NWS; w++) begin
      for (int pc = 0; pc < CODE_DEPTH; pc += 5) begin
        x_ws = WSW'(w); x_pc = 6'(pc);
        x_a_sel = '{cls: OC_SP, idx: 6'(pc % 32)}; x_b_sel = '{cls: OC_DATA, idx: 6'((pc*7) % 32)};
        #1;
        chk(x_instr == instr_t'(s_code[w][pc]), "instr fetch");
        chk(x_a_val == s_sp[w][pc % 32], "sp read");
        chk(x_b_val == s_dt[w][(pc*7) % 32], "data read");
      end
      x_a_sel = '{cls: OC_CUR, idx: 0}; #1;
      chk(x_a_val == s_cur[w] && cur[w] == s_cur[w], "cur read");
    end
    chk(dirty == '0, "clean after fill");
    // execute writes: scratch_pad, cur, data (sets dirty)
    @(negedge clk); x_ws = 1; x_we = 1; x_dst = '{cls: OC_SP, idx: 6'd9}; x_wdata = 64'h1234; s_sp[1][9] = 64'h1234;
    @(negedge clk); x_dst = '{cls: OC_CUR, idx: 0}; x_wdata = 64'h4000; s_cur[1] = 64'h4000;
    @(negedge clk); x_ws = 2; x_dst = '{cls: OC_DATA, idx: 6'd17}; x_wdata = 64'hbeef; s_dt[2][17] = 64'hbeef;
    @(negedge clk); x_we = 0; #1;
    chk(dirty == 3'b100, "store sets dirty");
    chk(cur[1] == 64'h4000, "cur write");
    // write-back read ports and network read port
    for (int p = 0; p < NMP; p++) begin
      for (int w = 0; w < NWS; w++)
        for (int b = 0; b < LINE_BEATS; b++) begin
          r_ws[p] = WSW'(w); r_beat[p] = 2'(b); #1;
          for (int k = 0; k < 8; k++) chk(r_data[p][k*64 +: 64] == s_dt[w][b*8+k], "wb read");
        end
    end
    for (int w = 0; w < NWS; w++) begin
      n_rws = WSW'(w);
      n_rregion = RG_CUR; #1; chk(n_rdata[63:0] == s_cur[w], "net cur read");
      for (int b = 0; b < SP_BEATS; b++) begin
        n_rregion = RG_SP; n_rbeat = 3'(b); #1;
        for (int k = 0; k < 8; k++) chk(n_rdata[k*64 +: 64] == s_sp[w][b*8+k], "net sp read");
      end
      for (int b = 0; b < CODE_BEATS; b++) begin
        n_rregion = RG_CODE; n_rbeat = 3'(b); #1;
        for (int k = 0; k < 8; k++) chk(n_rdata[k*64 +: 64] == s_code[w][b*8+k], "net code read");
      end
    end
    // dirty clear
    @(negedge clk); c_valid[3] = 1; c_ws[3] = 2;
    @(negedge clk); c_valid = 0; #1;
    chk(dirty == 3'b000, "dirty cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
