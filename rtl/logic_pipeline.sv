// logic_pipeline: runs the compute part of one iteration of an iterator.
//
// The scheduler starts it on a workspace of its bank (start, start_ws) once
// that workspace's data line has been loaded.  It then executes the
// iterator's code from pc 0, one instruction per cycle (DIV takes XLEN+2
// cycles), reading operands from and writing results straight into the
// workspace through the bank's execute port.  The iteration ends at
// NEXT_ITER (cur_ptr now holds the next pointer; the scheduler issues the next
// load) or RETURN (traversal finished; the scratch_pad is the result).  A jump
// with a non-positive offset, a write to an operand class the instruction may
// not write, or running past the end of the code ends it as ILLEGAL, which
// keeps every iteration finite (only forward jumps exist).  'done' pulses
// for one cycle with the kind and the workspace; 'busy' is low when idle.
//
// LOAD is a no-op here: the memory pipeline performed the single aggregated
// load before the iteration started.  STORE writes a word of the data line,
// which the memory pipeline writes back after the iteration.
//
// Timing: start in cycle t, first instruction executes in t+1, an iteration of
// k single-cycle instructions signals done in cycle t+k.
module logic_pipeline
  import pulse_pkg::*;
#(
  parameter int WSW = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [WSW-1:0]  start_ws,
  output logic            busy,
  output logic            done,
  output lp_done_e        done_kind,
  output logic [WSW-1:0]  done_ws,
  // workspace execute port
  output logic [WSW-1:0]  x_ws,
  output logic [5:0]      x_pc,
  input  instr_t          x_instr,
  output operand_t        x_a_sel,
  input  logic [XLEN-1:0] x_a_val,
  output operand_t        x_b_sel,
  input  logic [XLEN-1:0] x_b_val,
  output logic            x_we,
  output operand_t        x_dst,
  output logic [XLEN-1:0] x_wdata
);

  typedef enum logic [0:0] {IDLE = 1'b0, RUN = 1'b1} st_e;
  st_e            st;
  logic [WSW-1:0] ws;
  logic [6:0]     pc;
  logic           f_eq, f_lt, f_ltu;

  instr_t          ins;
  logic [XLEN-1:0] a, b, imm_x;
  logic [XLEN-1:0] alu_res;
  logic            alu_done, alu_busy, c_eq, c_lt, c_ltu;
  logic            is_alu, take;

  assign ins     = x_instr;
  assign x_ws    = ws;
  assign x_pc    = pc[5:0];
  assign x_a_sel = ins.a;
  assign x_b_sel = ins.b;
  assign imm_x   = {{(XLEN-32){ins.imm[31]}}, ins.imm};
  assign a       = (ins.a.cls == OC_IMM) ? imm_x : x_a_val;
  assign b       = (ins.b.cls == OC_IMM) ? imm_x : x_b_val;
  assign busy    = (st != IDLE);

  assign is_alu = ins.op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_AND, OP_OR, OP_NOT, OP_MOVE};

  alu u_alu (
    .clk, .rst_n,
    .start (st == RUN && is_alu && !alu_busy),
    .op    (ins.op),
    .a, .b,
    .result(alu_res),
    .done  (alu_done),
    .busy  (alu_busy),
    .eq    (c_eq),
    .lt    (c_lt),
    .ltu   (c_ltu)
  );

  always_comb begin
    unique case (ins.cond)
      C_AL:    take = 1'b1;
      C_EQ:    take = f_eq;
      C_NE:    take = !f_eq;
      C_LT:    take = f_lt;
      C_GE:    take = !f_lt;
      C_LTU:   take = f_ltu;
      C_GEU:   take = !f_ltu;
      default: take = 1'b0;
    endcase
  end

  // Writes to the workspace.
  logic dst_ok;
  assign dst_ok = (ins.dst.cls == OC_SP) || (ins.dst.cls == OC_CUR);
  always_comb begin
    x_we    = 1'b0;
    x_dst   = ins.dst;
    x_wdata = alu_res;
    if (st == RUN && pc < 7'(CODE_DEPTH)) begin
      if (ins.op == OP_STORE && ins.dst.cls == OC_DATA) begin
        x_we    = 1'b1;
        x_wdata = a;
      end else if (is_alu && alu_done && dst_ok) begin
        x_we = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; ws <= '0; pc <= '0;
      f_eq <= 1'b0; f_lt <= 1'b0; f_ltu <= 1'b0;
      done <= 1'b0; done_kind <= LD_NEXT; done_ws <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        IDLE: if (start) begin
          st <= RUN; ws <= start_ws; pc <= '0;
        end
        RUN: begin
          if (pc >= 7'(CODE_DEPTH)) begin
            st <= IDLE; done <= 1'b1; done_kind <= LD_ILLEGAL; done_ws <= ws;
          end else begin
            unique case (ins.op)
              OP_NOP, OP_LOAD: pc <= pc + 1'b1;
              OP_STORE: begin
                if (ins.dst.cls == OC_DATA) pc <= pc + 1'b1;
                else begin st <= IDLE; done <= 1'b1; done_kind <= LD_ILLEGAL; done_ws <= ws; end
              end
              OP_COMPARE: begin
                f_eq <= c_eq; f_lt <= c_lt; f_ltu <= c_ltu;
                pc <= pc + 1'b1;
              end
              OP_JUMP: begin
                if (!take) pc <= pc + 1'b1;
                else if ($signed(ins.imm) > 0) pc <= (ins.imm >= 32'(CODE_DEPTH)) ? 7'(CODE_DEPTH) : pc + ins.imm[6:0];
                else begin st <= IDLE; done <= 1'b1; done_kind <= LD_ILLEGAL; done_ws <= ws; end
              end
              OP_RETURN: begin
                st <= IDLE; done <= 1'b1; done_kind <= LD_RETURN; done_ws <= ws;
              end
              OP_NEXT_ITER: begin
                st <= IDLE; done <= 1'b1; done_kind <= LD_NEXT; done_ws <= ws;
              end
              default: begin
                if (is_alu) begin
                  if (!dst_ok) begin
                    st <= IDLE; done <= 1'b1; done_kind <= LD_ILLEGAL; done_ws <= ws;
                  end else if (alu_done) pc <= pc + 1'b1;
                end else begin
                  st <= IDLE; done <= 1'b1; done_kind <= LD_ILLEGAL; done_ws <= ws;
                end
              end
            endcase
          end
        end
        default: st <= IDLE;
      endcase
    end
  end

endmodule
