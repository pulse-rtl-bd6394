// workspace_bank: the iterator workspaces owned by one logic pipeline.
//
// Each workspace holds the complete state of one in-flight iterator: cur_ptr,
// its scratch_pad (SP_WORDS words), the data line last loaded at cur_ptr
// (DATA_WORDS words), a dirty bit for that line, and the iterator's code
// (CODE_DEPTH instructions).  Because every iterator keeps its own workspace,
// the logic pipeline switches to another iterator with no save/restore.
//
// Ports (all reads combinational, all writes on the rising edge):
//   x_*  execute port of the owning logic pipeline: instruction fetch at x_pc,
//        two operand reads (scratch_pad, data or cur_ptr), one write.  A write
//        to a data word (STORE) sets the dirty bit.
//   f_*  one fill port per memory pipeline: writes a 64 B beat of the data line.
//   r_*  one read port per memory pipeline: reads a data beat for write-back;
//        c_* clears the dirty bit when the write-back has finished.
//   n_*  network-stack port: writes cur_ptr / scratch_pad / code beats of a new
//        request (a cur_ptr write also clears dirty) and reads them for the
//        response.
// The memory pipelines and the network stack never touch the workspace the
// logic pipeline is executing (the scheduler guarantees it), so port
// conflicts cannot occur; writes are applied in port order regardless.
module workspace_bank
  import pulse_pkg::*;
#(
  parameter int NWS = 3,               // workspaces in this bank
  parameter int NMP = 4,               // memory pipelines
  parameter int WSW = 3                // width of a workspace index
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // execute port
  input  logic [WSW-1:0]        x_ws,
  input  logic [5:0]            x_pc,
  output instr_t                x_instr,
  input  operand_t              x_a_sel,
  output logic [XLEN-1:0]       x_a_val,
  input  operand_t              x_b_sel,
  output logic [XLEN-1:0]       x_b_val,
  input  logic                  x_we,
  input  operand_t              x_dst,
  input  logic [XLEN-1:0]       x_wdata,
  // fill ports
  input  logic [NMP-1:0]        f_valid,
  input  logic [WSW-1:0]        f_ws   [NMP],
  input  logic [1:0]            f_beat [NMP],
  input  logic [BEAT_W-1:0]     f_data [NMP],
  // write-back read ports
  input  logic [WSW-1:0]        r_ws   [NMP],
  input  logic [1:0]            r_beat [NMP],
  output logic [BEAT_W-1:0]     r_data [NMP],
  input  logic [NMP-1:0]        c_valid,
  input  logic [WSW-1:0]        c_ws   [NMP],
  // network port
  input  logic                  n_we,
  input  logic [WSW-1:0]        n_ws,
  input  region_e               n_region,
  input  logic [2:0]            n_beat,
  input  logic [BEAT_W-1:0]     n_wdata,
  input  logic [WSW-1:0]        n_rws,
  input  region_e               n_rregion,
  input  logic [2:0]            n_rbeat,
  output logic [BEAT_W-1:0]     n_rdata,
  // state visible to the scheduler
  output logic [XLEN-1:0]       cur   [NWS],
  output logic [NWS-1:0]        dirty
);

  // Storage is organised in 512-bit beats, one memory per region, addressed
  // by {workspace, beat}.  Beat-wide ports keep the number of memory ports
  // small (fills and network writes are whole beats; the execute port writes
  // one 64-bit word of a beat).
  localparam int AW_SP = WSW + 2, AW_CD = WSW + 3;
  logic [BEAT_W-1:0] sp_m   [NWS*SP_BEATS];
  logic [BEAT_W-1:0] data_m [NWS*LINE_BEATS];
  logic [BEAT_W-1:0] code_m [NWS*CODE_BEATS];

  function automatic logic [XLEN-1:0] word(input logic [BEAT_W-1:0] b, input logic [2:0] k);
    return b[k*XLEN +: XLEN];
  endfunction

  function automatic logic [XLEN-1:0] rd_op(input operand_t s, input logic [WSW-1:0] w,
                                            input logic [XLEN-1:0] cur_w);
    unique case (s.cls)
      OC_SP:   return word(sp_m[AW_SP'({w, s.idx[4:3]})], s.idx[2:0]);
      OC_DATA: return word(data_m[AW_SP'({w, s.idx[4:3]})], s.idx[2:0]);
      OC_CUR:  return cur_w;
      default: return '0;
    endcase
  endfunction

  always_comb begin
    x_instr = instr_t'(word(code_m[AW_CD'({x_ws, x_pc[5:3]})], x_pc[2:0]));
    x_a_val = rd_op(x_a_sel, x_ws, cur[x_ws]);
    x_b_val = rd_op(x_b_sel, x_ws, cur[x_ws]);
  end

  always_comb begin
    for (int p = 0; p < NMP; p++)
      r_data[p] = data_m[AW_SP'({r_ws[p], r_beat[p]})];
  end

  always_comb begin
    unique case (n_rregion)
      RG_CUR:  n_rdata = {{(BEAT_W-XLEN){1'b0}}, cur[n_rws]};
      RG_SP:   n_rdata = sp_m[AW_SP'({n_rws, n_rbeat[1:0]})];
      RG_CODE: n_rdata = code_m[AW_CD'({n_rws, n_rbeat})];
      default: n_rdata = '0;
    endcase
  end

  // cur and dirty have several writers and a reset: flip-flops.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NWS; w++) cur[w] <= '0;
      dirty <= '0;
    end else begin
      if (x_we && x_dst.cls == OC_CUR)  cur[x_ws] <= x_wdata;
      if (x_we && x_dst.cls == OC_DATA) dirty[x_ws] <= 1'b1;
      for (int p = 0; p < NMP; p++)
        if (c_valid[p]) dirty[c_ws[p]] <= 1'b0;
      if (n_we && n_region == RG_CUR) begin
        cur[n_ws]   <= n_wdata[XLEN-1:0];
        dirty[n_ws] <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (x_we && x_dst.cls == OC_SP)
      sp_m[AW_SP'({x_ws, x_dst.idx[4:3]})][x_dst.idx[2:0]*XLEN +: XLEN] <= x_wdata;
    if (n_we && n_region == RG_SP)
      sp_m[AW_SP'({n_ws, n_beat[1:0]})] <= n_wdata;
  end

  always_ff @(posedge clk) begin
    if (x_we && x_dst.cls == OC_DATA)
      data_m[AW_SP'({x_ws, x_dst.idx[4:3]})][x_dst.idx[2:0]*XLEN +: XLEN] <= x_wdata;
    for (int p = 0; p < NMP; p++)
      if (f_valid[p]) data_m[AW_SP'({f_ws[p], f_beat[p]})] <= f_data[p];
  end

  always_ff @(posedge clk) begin
    if (n_we && n_region == RG_CODE)
      code_m[AW_CD'({n_ws, n_beat})] <= n_wdata;
  end

endmodule
