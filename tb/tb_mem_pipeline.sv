// tb_mem_pipeline: a memory pipeline with a translation table and a DRAM
// model.  Checks a full-line load (data and latency: accept, translate,
// request, DRAM latency, one cycle per beat), a short load, a translation
// miss and a protection failure (no memory access either way), and a
// write-back followed by a load (DRAM contents, dirty clear), plus a
// write-back refused by a read-only range.
module tb_mem_pipeline;
  import pulse_pkg::*;
  localparam int WSW = 3, LAT = 28;
  logic clk = 0, rst_n = 0;
  logic job_valid = 0, job_ready, job_load = 0, job_wb = 0;
  logic [WSW-1:0] job_ws = 0; logic [63:0] job_addr = 0, job_wb_addr = 0; logic [2:0] job_beats = 4;
  logic done; logic [WSW-1:0] done_ws; ms_e done_status;
  logic [63:0] q_addr; logic [15:0] q_len; logic q_write; logic r_hit, r_ok; logic [63:0] r_paddr;
  logic f_valid; logic [WSW-1:0] f_ws; logic [1:0] f_beat; logic [BEAT_W-1:0] f_data;
  logic [WSW-1:0] r_ws; logic [1:0] r_beat; logic [BEAT_W-1:0] r_data;
  logic c_valid; logic [WSW-1:0] c_ws;
  logic m_req_valid, m_req_ready, m_wvalid, m_wready, m_wlast, m_rvalid, m_rlast;
  mreq_t m_req; logic [BEAT_W-1:0] m_wdata, m_rdata;
  logic cfg_we = 0; logic [3:0] cfg_idx = 0; xl_entry_t cfg_entry = '0;
  logic [BEAT_W-1:0] line [8][LINE_BEATS];     // workspace data lines
  int checks = 0, failures = 0, fills = 0, clears = 0;

  mem_pipeline #(.WSW(WSW)) dut (.*);
  range_xlate #(.NENT(16), .NPORTS(1)) u_xl (.clk, .rst_n, .cfg_we, .cfg_idx, .cfg_entry,
    .q_addr('{q_addr}), .q_len('{q_len}), .q_write(q_write), .r_hit(r_hit), .r_ok(r_ok), .r_paddr('{r_paddr}));
  logic [0:0] dq_req_valid, dq_req_ready, dq_wvalid, dq_wready, dq_wlast, dq_rvalid, dq_rlast;
  mreq_t dq_req [1]; logic [BEAT_W-1:0] dq_wdata [1], dq_rdata [1];
  assign dq_req_valid = m_req_valid; assign m_req_ready = dq_req_ready[0]; assign dq_req[0] = m_req;
  assign dq_wvalid = m_wvalid; assign m_wready = dq_wready[0]; assign dq_wdata[0] = m_wdata; assign dq_wlast = m_wlast;
  assign m_rvalid = dq_rvalid[0]; assign m_rdata = dq_rdata[0]; assign m_rlast = dq_rlast[0];
  dram_model #(.NP(1), .LAT(LAT)) u_dram (.clk, .rst_n, .m_req_valid(dq_req_valid), .m_req_ready(dq_req_ready),
    .m_req(dq_req), .m_wvalid(dq_wvalid), .m_wready(dq_wready), .m_wdata(dq_wdata), .m_wlast(dq_wlast),
    .m_rvalid(dq_rvalid), .m_rdata(dq_rdata), .m_rlast(dq_rlast));

  assign r_data = line[r_ws][r_beat];
  always @(posedge clk) begin
    if (f_valid) begin line[f_ws][f_beat] <= f_data; fills++; end
    if (c_valid) clears++;
  end
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic job(input int ws, input logic ld, input logic [63:0] a, input int beats,
                     input logic wb, input logic [63:0] wa, output ms_e st, output int cyc);
    @(negedge clk);
    job_valid = 1; job_ws = WSW'(ws); job_load = ld; job_addr = a; job_beats = 3'(beats);
    job_wb = wb; job_wb_addr = wa;
    @(negedge clk); job_valid = 0; cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    st = done_status;
    chk(done_ws == WSW'(ws), "done_ws");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ms_e st; int cyc, f0, r0, w0;
    xl_entry_t e [3];
    e[0] = '{valid: 1, rd: 1, wr: 1, vbase: 64'h10_0000, vlimit: 64'h20_0000, pbase: 64'h4000};
    e[1] = '{valid: 1, rd: 0, wr: 0, vbase: 64'h20_0000, vlimit: 64'h20_1000, pbase: 64'h0};
    e[2] = '{valid: 1, rd: 1, wr: 0, vbase: 64'h30_0000, vlimit: 64'h30_1000, pbase: 64'h8_0000};
    for (int w = 0; w < 8; w++) for (int b = 0; b < LINE_BEATS; b++) line[w][b] = '0;
    for (int i = 0; i < 64; i++) u_dram.poke(64'h4000 + 64'h1000 + 8*i, 64'hA000 + i);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) begin @(negedge clk); cfg_we = 1; cfg_idx = 4'(i); cfg_entry = e[i]; end
    @(negedge clk); cfg_we = 0;
    // full-line load at a non-aligned pointer
    job(3, 1, 64'h10_1010, 4, 0, 0, st, cyc);
    chk(st == MS_OK, "load ok");
    chk(cyc == 3 + LAT + 4, $sformatf("load latency %0d", cyc));
    for (int i = 0; i < 32; i++) chk(line[3][i/8][(i%8)*64 +: 64] == 64'hA000 + i, "load data");
    // two-beat load
    f0 = fills;
    job(5, 1, 64'h10_1040, 2, 0, 0, st, cyc);
    chk(st == MS_OK && fills - f0 == 2 && cyc == 3 + LAT + 2, "short load");
    chk(line[5][1][63:0] == 64'hA000 + 16, "short load data");
    // miss and protection: no DRAM traffic
    r0 = u_dram.reads;
    job(1, 1, 64'h90_0000, 4, 0, 0, st, cyc);
    chk(st == MS_MISS, "miss");
    job(1, 1, 64'h20_0040, 4, 0, 0, st, cyc);
    chk(st == MS_PROT, "read protection");
    job(1, 1, 64'h1F_FFC0, 4, 0, 0, st, cyc);
    chk(st == MS_PROT, "range overrun");
    chk(u_dram.reads == r0, "no access on failure");
    // write-back then load
    for (int b = 0; b < LINE_BEATS; b++) line[3][b][63:0] = 64'hD00 + b;
    w0 = u_dram.writes;
    job(3, 1, 64'h10_1000, 4, 1, 64'h10_2000, st, cyc);
    chk(st == MS_OK && u_dram.writes == w0 + 1 && clears == 1, "write-back + load");
    for (int b = 0; b < LINE_BEATS; b++) chk(u_dram.peek(64'h4000 + 64'h2000 + 64*b) == 64'hD00 + b, "written data");
    chk(line[3][0][63:0] == 64'hA000, "reload after write-back");
    // write-back only, into a read-only range
    job(2, 0, 0, 4, 1, 64'h30_0000, st, cyc);
    chk(st == MS_PROT && clears == 1, "write protection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
