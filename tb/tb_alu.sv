// tb_alu: checks every ALU operation against SystemVerilog arithmetic on
// random and corner operands, the compare flags, and the DIV latency
// (XLEN + 1 cycles from start to done).
module tb_alu;
  import pulse_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  opcode_e op = OP_ADD;
  logic [63:0] a = 0, b = 0, result;
  logic done, busy, eq, lt, ltu;
  int checks = 0, failures = 0;

  alu dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [63:0] model(input opcode_e o, input logic [63:0] x, input logic [63:0] y);
    case (o)
      OP_ADD: return x + y;  OP_SUB: return x - y;  OP_MUL: return x * y;
      OP_AND: return x & y;  OP_OR:  return x | y;  OP_NOT: return ~x;
      OP_MOVE: return x;
      OP_DIV: return (y == 0) ? '1 : x / y;
      default: return 0;
    endcase
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    opcode_e ops [7] = '{OP_ADD, OP_SUB, OP_MUL, OP_AND, OP_OR, OP_NOT, OP_MOVE};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      op = ops[i % 7];
      a = {$urandom, $urandom}; b = (i % 5 == 0) ? a : {$urandom, $urandom};
      if (i % 11 == 0) b = 64'hffff_ffff_ffff_fff0;
      start = 1;
      #1;
      chk(done && result == model(op, a, b), $sformatf("op %s a=%h b=%h got %h", op.name(), a, b, result));
      chk(eq == (a == b) && lt == ($signed(a) < $signed(b)) && ltu == (a < b), "flags");
    end
    // division: latency and value
    for (int i = 0; i < 40; i++) begin
      int cyc;
      cyc = 0;
      @(negedge clk);
      op = OP_DIV;
      a = {$urandom, $urandom} >> (i % 40);
      b = (i == 3) ? 0 : ({$urandom, $urandom} >> (20 + i));
      if (i == 5) b = 1;
      start = 1;
      @(negedge clk);
      while (!done) begin @(negedge clk); cyc++; end
      chk(result == model(OP_DIV, a, b), $sformatf("div %0d / %0d got %0d", a, b, result));
      chk(cyc == XLEN, $sformatf("div latency %0d", cyc));
      start = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
