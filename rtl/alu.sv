// alu: arithmetic/logic unit of a PULSE logic pipeline.
//
// Executes ADD, SUB, MUL, AND, OR, NOT and MOVE combinationally: 'done' is high
// in the same cycle as 'start' and 'result' is valid then.  DIV is unsigned and
// iterative (restoring, one quotient bit per cycle): 'start' loads the divider,
// 'busy' stays high for XLEN cycles, and 'done' pulses with the quotient in the
// cycle after the last step.  Division by zero gives all ones.  The compare
// flags (eq, signed lt, unsigned ltu) are always driven from a and b for the
// COMPARE instruction.
//
// The paper names the ALU's operation set; latencies, the divider and the
// operand width are this design's choices.
module alu
  import pulse_pkg::*;
#(
  parameter int XW = XLEN
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  opcode_e       op,
  input  logic [XW-1:0] a,
  input  logic [XW-1:0] b,
  output logic [XW-1:0] result,
  output logic          done,
  output logic          busy,
  output logic          eq,
  output logic          lt,
  output logic          ltu
);

  localparam int CW = $clog2(XW + 1);

  logic [XW-1:0] q, divisor;
  logic [XW:0]   rem;
  logic [CW-1:0] cnt;
  logic          div_fin;

  assign eq  = (a == b);
  assign lt  = ($signed(a) < $signed(b));
  assign ltu = (a < b);
  assign busy = (cnt != '0);

  // One restoring-division step.
  logic [XW:0] trial;
  logic [XW:0] shifted;
  always_comb begin
    shifted = {rem[XW-1:0], q[XW-1]};
    trial   = shifted - {1'b0, divisor};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; rem <= '0; divisor <= '0; cnt <= '0; div_fin <= 1'b0;
    end else begin
      div_fin <= 1'b0;
      if (start && op == OP_DIV && !busy && !div_fin) begin
        q       <= a;
        rem     <= '0;
        divisor <= b;
        cnt     <= CW'(XW);
      end else if (busy) begin
        if (!trial[XW]) begin
          rem <= trial;
          q   <= {q[XW-2:0], 1'b1};
        end else begin
          rem <= shifted;
          q   <= {q[XW-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) div_fin <= 1'b1;
      end
    end
  end

  always_comb begin
    result = '0;
    done   = start && op != OP_DIV;
    unique case (op)
      OP_ADD:  result = a + b;
      OP_SUB:  result = a - b;
      OP_MUL:  result = a * b;
      OP_AND:  result = a & b;
      OP_OR:   result = a | b;
      OP_NOT:  result = ~a;
      OP_MOVE: result = a;
      OP_DIV: begin
        result = q;
        done   = div_fin;
      end
      default: result = '0;
    endcase
  end

endmodule
