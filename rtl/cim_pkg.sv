// cim_pkg: types and constants shared by the CIM core, the interconnect and
// the testbenches.
//
// The instruction mnemonics (MVM, LOAD, STORE, MOV, CALL, WAIT for the core
// controller; ADD, MUL, SUB, DIV, MIN, MAX, SHIFT for the execution unit) and
// the ReLU/LeakyReLU activations follow the paper. The binary encoding, the
// 64-bit instruction word, the address map and the meaning of the 20 config
// registers are this design's own choices.
//
// Instruction word (64 bit):
//   [63:58] opcode      [57:46] a (12 b)   [45:34] b (12 b)   [33:0] c (34 b)
//   LOAD   a = data buffer byte offset, b = length in bytes, c[31:0] = bus address
//   STORE  a = data buffer byte offset, b = length in bytes, c[31:0] = bus address
//   MVM    a = data buffer byte offset of the N input bytes
//   MOV    a = data buffer byte offset, b = number of 32-bit output words
//   CALL   (no operand) increment SEQ_NR of the successor core (config SUCC_ADDR)
//   WAIT   c[31:0] = value SEQ_NR must reach
//   HALT   end of program, raises the core's done flag
//   GPEU   a = destination offset, b = source A offset, c[33:22] = source B
//          offset, c[21:10] = number of 32-bit words, c[9:0] = immediate
//
// Address map (32 bit, byte addresses):
//   addr[31] = 0 : shared memory
//   addr[31] = 1 : core space, addr[27:20] = core index, addr[19:16] = region
//       region 0 : config registers (word i at 4*i), SEQ_NR at 0x100,
//                  SEQ_NR increment port at 0x104
//       region 1 : instruction memory
//       region 2 : crossbar cells, byte (row*N + col)
package cim_pkg;

  typedef enum logic [5:0] {
    OP_NOP   = 6'd0,
    OP_LOAD  = 6'd1,
    OP_STORE = 6'd2,
    OP_MVM   = 6'd3,
    OP_MOV   = 6'd4,
    OP_CALL  = 6'd5,
    OP_WAIT  = 6'd6,
    OP_HALT  = 6'd7,
    OP_ADD   = 6'd8,
    OP_SUB   = 6'd9,
    OP_MUL   = 6'd10,
    OP_DIV   = 6'd11,
    OP_MIN   = 6'd12,
    OP_MAX   = 6'd13,
    OP_SHIFT = 6'd14,
    OP_RELU  = 6'd15,
    OP_LRELU = 6'd16
  } opcode_e;

  typedef enum logic [3:0] {
    ALU_ADD   = 4'd0,
    ALU_SUB   = 4'd1,
    ALU_MUL   = 4'd2,
    ALU_DIV   = 4'd3,
    ALU_MIN   = 4'd4,
    ALU_MAX   = 4'd5,
    ALU_SHIFT = 4'd6,
    ALU_RELU  = 4'd7,
    ALU_LRELU = 4'd8
  } alu_op_e;

  typedef struct packed {
    opcode_e     op;
    logic [11:0] a;
    logic [11:0] b;
    logic [33:0] c;
  } instr_t;

  localparam int unsigned INSTR_BYTES = 8;

  // ---- address map ----
  localparam int unsigned CORE_SPACE_BIT = 31;
  localparam int unsigned REGION_CFG     = 0;
  localparam int unsigned REGION_IM      = 1;
  localparam int unsigned REGION_XBAR    = 2;
  localparam int unsigned SEQ_NR_OFFSET  = 'h100;
  localparam int unsigned SEQ_INC_OFFSET = 'h104;

  // ---- config registers (20 words) ----
  localparam int unsigned NUM_CFG_REGS   = 20;
  localparam int unsigned CFG_CTRL       = 0;  // write bit0 = 1: start the core
  localparam int unsigned CFG_STATUS     = 1;  // read only: bit0 busy, bit1 done
  localparam int unsigned CFG_SUCC_ADDR  = 2;  // address of the successor's SEQ_NR increment port
  localparam int unsigned CFG_INSTR_BASE = 3;  // shared-memory address of this core's instruction section
  localparam int unsigned CFG_INSTR_LEN  = 4;  // instructions in that section; 0 = run from preloaded memory
  localparam int unsigned CFG_HG_ID      = 5;  // horizontal group ID (information for software)
  localparam int unsigned CFG_VG_ID      = 6;  // vertical group ID (information for software)

  function automatic logic [31:0] core_addr(input int unsigned core, input int unsigned region,
                                            input int unsigned offset);
    return 32'h8000_0000 | ((core & 32'hFF) << 20) | ((region & 32'hF) << 16) | (offset & 32'hFFFF);
  endfunction

  // ---- instruction builders (used by software and testbenches) ----
  function automatic instr_t mk_instr(input opcode_e op, input int unsigned a, input int unsigned b,
                                      input logic [33:0] c);
    instr_t i;
    i.op = op;
    i.a  = a[11:0];
    i.b  = b[11:0];
    i.c  = c;
    return i;
  endfunction

  function automatic instr_t mk_load(input int unsigned buf_off, input int unsigned len,
                                     input logic [31:0] addr);
    return mk_instr(OP_LOAD, buf_off, len, {2'b00, addr});
  endfunction

  function automatic instr_t mk_store(input int unsigned buf_off, input int unsigned len,
                                      input logic [31:0] addr);
    return mk_instr(OP_STORE, buf_off, len, {2'b00, addr});
  endfunction

  function automatic instr_t mk_alu(input opcode_e op, input int unsigned dst, input int unsigned src_a,
                                    input int unsigned src_b, input int unsigned words,
                                    input int unsigned imm);
    logic [33:0] c;
    c = {src_b[11:0], words[11:0], imm[9:0]};
    return mk_instr(op, dst, src_a, c);
  endfunction

  function automatic instr_t mk_wait(input logic [31:0] value);
    return mk_instr(OP_WAIT, 0, 0, {2'b00, value});
  endfunction

endpackage
