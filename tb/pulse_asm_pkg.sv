// pulse_asm_pkg: helpers for testbenches - an assembler for the PULSE
// instruction encoding and a few iterator programs.
//
// Linked-list node layout used by the programs (one 64 B beat):
//   word 0 key, word 1 value, word 2 next pointer (0 ends the list).
package pulse_asm_pkg;
  import pulse_pkg::*;

  function automatic operand_t SP(input int i);  return '{cls: OC_SP,   idx: 6'(i)}; endfunction
  function automatic operand_t DT(input int i);  return '{cls: OC_DATA, idx: 6'(i)}; endfunction
  function automatic operand_t CUR();            return '{cls: OC_CUR,  idx: 6'd0}; endfunction
  function automatic operand_t IMM();            return '{cls: OC_IMM,  idx: 6'd0}; endfunction

  function automatic instr_t I(input opcode_e op, input operand_t dst = SP(0),
                               input operand_t a = SP(0), input operand_t b = SP(0),
                               input int imm = 0, input cond_e c = C_AL);
    instr_t x;
    x.op = op; x.cond = c; x.rsv = 1'b0; x.dst = dst; x.a = a; x.b = b; x.imm = 32'(imm);
    return x;
  endfunction

  typedef instr_t prog_t [CODE_DEPTH];

  function automatic prog_t nop_prog();
    prog_t p;
    for (int i = 0; i < CODE_DEPTH; i++) p[i] = I(OP_NOP);
    return p;
  endfunction

  // Hash-bucket / list find (unordered_map::find): scratch_pad[0] = key.
  // Result: scratch_pad[1] = value, or -1 if the key is not in the list.
  function automatic prog_t find_prog();
    prog_t p = nop_prog();
    p[0]  = I(OP_LOAD, SP(0), SP(0), SP(0), 64);
    p[1]  = I(OP_COMPARE, SP(0), DT(0), SP(0));
    p[2]  = I(OP_JUMP, SP(0), SP(0), SP(0), 5, C_EQ);      // -> 7
    p[3]  = I(OP_COMPARE, SP(0), DT(2), IMM(), 0);
    p[4]  = I(OP_JUMP, SP(0), SP(0), SP(0), 5, C_EQ);      // -> 9
    p[5]  = I(OP_MOVE, CUR(), DT(2));
    p[6]  = I(OP_NEXT_ITER);
    p[7]  = I(OP_MOVE, SP(1), DT(1));
    p[8]  = I(OP_RETURN);
    p[9]  = I(OP_MOVE, SP(1), IMM(), SP(0), -1);
    p[10] = I(OP_RETURN);
    return p;
  endfunction

  // Aggregation over a whole list (time-series style): sum of values in
  // scratch_pad[2], node count in [3], average (sum / count) in [4].
  function automatic prog_t sum_prog();
    prog_t p = nop_prog();
    p[0]  = I(OP_LOAD, SP(0), SP(0), SP(0), 64);
    p[1]  = I(OP_ADD, SP(2), SP(2), DT(1));
    p[2]  = I(OP_ADD, SP(3), SP(3), IMM(), 1);
    p[3]  = I(OP_COMPARE, SP(0), DT(2), IMM(), 0);
    p[4]  = I(OP_JUMP, SP(0), SP(0), SP(0), 3, C_EQ);      // -> 7
    p[5]  = I(OP_MOVE, CUR(), DT(2));
    p[6]  = I(OP_NEXT_ITER);
    p[7]  = I(OP_DIV, SP(4), SP(2), SP(3));
    p[8]  = I(OP_RETURN);
    return p;
  endfunction

  // In-place update of every node: value = value * 3 + 1 (STORE, write-back).
  function automatic prog_t update_prog();
    prog_t p = nop_prog();
    p[0]  = I(OP_LOAD, SP(0), SP(0), SP(0), 64);
    p[1]  = I(OP_MUL, SP(5), DT(1), IMM(), 3);
    p[2]  = I(OP_ADD, SP(5), SP(5), IMM(), 1);
    p[3]  = I(OP_STORE, DT(1), SP(5));
    p[4]  = I(OP_COMPARE, SP(0), DT(2), IMM(), 0);
    p[5]  = I(OP_JUMP, SP(0), SP(0), SP(0), 3, C_EQ);      // -> 8
    p[6]  = I(OP_MOVE, CUR(), DT(2));
    p[7]  = I(OP_NEXT_ITER);
    p[8]  = I(OP_RETURN);
    return p;
  endfunction

  // A program that jumps backwards: must be rejected (ST_ILLEGAL).
  function automatic prog_t bad_prog();
    prog_t p = nop_prog();
    p[0] = I(OP_LOAD, SP(0), SP(0), SP(0), 64);
    p[1] = I(OP_ADD, SP(2), SP(2), IMM(), 1);
    p[2] = I(OP_JUMP, SP(0), SP(0), SP(0), -1, C_AL);
    p[3] = I(OP_RETURN);
    return p;
  endfunction

  // Request packet beats.
  typedef beat_t pkt_t [PKT_BEATS];

  function automatic pkt_t make_pkt(input logic [63:0] req_id, input logic [63:0] cur_ptr,
                                    input logic [63:0] sp [SP_WORDS], input prog_t code);
    pkt_t k;
    hdr_t h = '0;
    h.req_id = req_id; h.cur_ptr = cur_ptr; h.status = ST_REQ;
    k[0].data = BEAT_W'(h); k[0].last = 1'b0;
    for (int b = 0; b < SP_BEATS; b++) begin
      for (int w = 0; w < BEAT_WORDS; w++) k[1+b].data[w*64 +: 64] = sp[b*BEAT_WORDS+w];
      k[1+b].last = 1'b0;
    end
    for (int b = 0; b < CODE_BEATS; b++) begin
      for (int w = 0; w < BEAT_WORDS; w++) k[1+SP_BEATS+b].data[w*64 +: 64] = code[b*BEAT_WORDS+w];
      k[1+SP_BEATS+b].last = (b == CODE_BEATS-1);
    end
    return k;
  endfunction

endpackage
