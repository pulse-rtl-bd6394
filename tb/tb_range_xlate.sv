// tb_range_xlate: programs a few ranges and checks hits, misses, read/write
// permissions, range-end overruns and the translated address on every port
// against a software model of the table, over random addresses.
module tb_range_xlate;
  import pulse_pkg::*;
  localparam int NENT = 16, NPORTS = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [3:0] cfg_idx = 0; xl_entry_t cfg_entry = '0;
  logic [63:0] q_addr [NPORTS]; logic [15:0] q_len [NPORTS]; logic [NPORTS-1:0] q_write = 0;
  logic [NPORTS-1:0] r_hit, r_ok; logic [63:0] r_paddr [NPORTS];
  xl_entry_t tbl [NENT];
  int checks = 0, failures = 0, nhit = 0, nmiss = 0, nprot = 0;

  range_xlate #(.NENT(NENT), .NPORTS(NPORTS)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NPORTS; p++) begin q_addr[p] = 0; q_len[p] = 64; end
    for (int i = 0; i < NENT; i++) tbl[i] = '0;
    tbl[0] = '{valid: 1, rd: 1, wr: 1, vbase: 64'h10_0000, vlimit: 64'h20_0000, pbase: 64'h0};
    tbl[1] = '{valid: 1, rd: 1, wr: 0, vbase: 64'h20_0000, vlimit: 64'h20_8000, pbase: 64'h10_0000};
    tbl[5] = '{valid: 1, rd: 0, wr: 0, vbase: 64'h30_0000, vlimit: 64'h30_1000, pbase: 64'h20_0000};
    tbl[7] = '{valid: 0, rd: 1, wr: 1, vbase: 64'h40_0000, vlimit: 64'h50_0000, pbase: 64'h0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < NENT; i++) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 4'(i); cfg_entry = tbl[i];
    end
    @(negedge clk); cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      for (int p = 0; p < NPORTS; p++) begin
        q_addr[p] = 64'h0F_0000 + 64'($urandom_range(0, 32'h45_0000));
        q_len[p] = 16'($urandom_range(1, 256));
        q_write[p] = 1'($urandom);
      end
      #1;
      for (int p = 0; p < NPORTS; p++) begin
        logic h, ok; logic [63:0] pa;
        h = 0; ok = 0; pa = 0;
        for (int i = NENT - 1; i >= 0; i--)
          if (tbl[i].valid && q_addr[p] >= tbl[i].vbase && q_addr[p] < tbl[i].vlimit) begin
            h = 1; pa = q_addr[p] - tbl[i].vbase + tbl[i].pbase;
            ok = (q_addr[p] + q_len[p] <= tbl[i].vlimit) && (q_write[p] ? tbl[i].wr : tbl[i].rd);
          end
        chk(r_hit[p] == h, $sformatf("hit %h", q_addr[p]));
        chk(r_ok[p] == ok, $sformatf("ok %h len %0d w %0d", q_addr[p], q_len[p], q_write[p]));
        if (h) chk(r_paddr[p] == pa, "paddr");
        if (!h) nmiss++; else if (!ok) nprot++; else nhit++;
      end
      @(negedge clk);
    end
    chk(nhit > 100 && nmiss > 100 && nprot > 20, $sformatf("coverage %0d %0d %0d", nhit, nmiss, nprot));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
