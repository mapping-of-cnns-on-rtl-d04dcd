// core_controller: instruction sequencer of a CIM core.
//
// Executes the core's program in the inference phase. The instruction set is
// the paper's: MVM, LOAD, STORE, MOV, CALL and WAIT, plus the GPEU operations
// (ADD, SUB, MUL, DIV, MIN, MAX, SHIFT, ReLU, LeakyReLU); HALT and NOP are
// added. Encoding: see cim_pkg.
//
//   LOAD   bus reads, one BUS_BYTES beat per cycle, into the data buffer
//   STORE  bus writes from the data buffer
//   MVM    copies N bytes from the data buffer into the MVMU input registers
//          (one word per cycle), starts the crossbar and waits for it
//   MOV    copies MVMU output registers into the data buffer, one word/cycle
//   GPEU   element-wise dst[i] = op(srcA[i], srcB[i]) over 32-bit words
//   CALL   one bus write to the successor's SEQ_NR increment port
//   WAIT   stalls until the core's own SEQ_NR >= the operand
//   HALT   stops and raises `done` (the paper's interrupt to the CPU)
//
// A LOAD/STORE/page fill is one locked bus burst: m_valid stays high from the
// first beat to the beat flagged m_last, and each beat completes in the cycle
// m_ready is high. Addresses and data buffer offsets of LOAD/STORE must be
// multiples of BUS_BYTES; a final partial beat uses byte strobes.
//
// Instruction paging (the paper keeps a per-core instruction section in the
// shared memory "in case not all instructions fit into the instruction
// memory"; how the core gets them is not described): if the config register
// INSTR_LEN is non-zero, the controller reads the first IM_BYTES of its section
// from INSTR_BASE at start, and the next IM_BYTES whenever the program counter
// crosses into the next page; running past INSTR_LEN ends the program like
// HALT. With INSTR_LEN = 0 the program is taken as preloaded in the
// instruction memory.
//
// Timing: each instruction spends one cycle in decode; multi-cycle
// instructions then take one cycle per beat, word or wait cycle.
//
// Lint note: rst_n appears in the `disable iff` of the handshake assertions
// as well as in the asynchronous reset; the logic uses it only as an
// asynchronous reset.
module core_controller
  import cim_pkg::*;
#(
  parameter int unsigned M         = 128,
  parameter int unsigned N         = 128,
  parameter int unsigned BUS_BYTES = 16,
  parameter int unsigned IM_BYTES  = 4096,
  localparam int unsigned BW       = BUS_BYTES * 8,
  localparam int unsigned BUF_BYTES = 8 * M,
  localparam int unsigned BAW      = $clog2(BUF_BYTES),
  localparam int unsigned IAW      = $clog2(IM_BYTES),
  localparam int unsigned IM_WORDS = IM_BYTES / 8,
  localparam int unsigned IW       = $clog2(IM_WORDS),
  localparam int unsigned IIW      = $clog2((N + 3) / 4 + 1),
  localparam int unsigned OIW      = $clog2(M + 1),
  localparam int unsigned LANES    = BUS_BYTES / 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 start,
  input  logic [31:0]          succ_addr,
  input  logic [31:0]          instr_base,
  input  logic [31:0]          instr_len,
  input  logic [31:0]          seq_nr,
  output logic                 busy,
  output logic                 done,
  // instruction memory
  output logic [IW-1:0]        im_raddr,
  input  logic [63:0]          im_rdata,
  output logic                 im_we,
  output logic [IAW-1:0]       im_waddr,
  output logic [BW-1:0]        im_wdata,
  output logic [BUS_BYTES-1:0] im_wstrb,
  // data buffer
  output logic                 buf_bus_we,
  output logic [BAW-1:0]       buf_bus_addr,
  output logic [BW-1:0]        buf_bus_wdata,
  output logic [BUS_BYTES-1:0] buf_bus_wstrb,
  input  logic [BW-1:0]        buf_bus_rdata,
  output logic [BAW-1:0]       buf_ra_addr,
  input  logic [31:0]          buf_ra_data,
  output logic [BAW-1:0]       buf_rb_addr,
  input  logic [31:0]          buf_rb_data,
  output logic                 buf_w_en,
  output logic [BAW-1:0]       buf_w_addr,
  output logic [31:0]          buf_w_data,
  // MVM unit
  output logic                 mvm_in_we,
  output logic [IIW-1:0]       mvm_in_idx,
  output logic [31:0]          mvm_in_wdata,
  output logic                 mvm_start,
  input  logic                 mvm_done,
  output logic [OIW-1:0]       mvm_out_idx,
  input  logic [31:0]          mvm_out_data,
  // GPEU
  output alu_op_e              alu_op,
  output logic [31:0]          alu_a,
  output logic [31:0]          alu_b,
  output logic [9:0]           alu_imm,
  input  logic [31:0]          alu_y,
  // bus initiator port
  output logic                 m_valid,
  output logic                 m_we,
  output logic                 m_last,
  output logic [31:0]          m_addr,
  output logic [BW-1:0]        m_wdata,
  output logic [BUS_BYTES-1:0] m_wstrb,
  input  logic                 m_ready,
  input  logic [BW-1:0]        m_rdata,
  // event strobes (performance counters, observation)
  output logic                 ev_call,
  output logic                 ev_wait_stall,
  output logic                 ev_fill
);

  typedef enum logic [3:0] {
    S_IDLE, S_FILL, S_EXEC, S_LOAD, S_STORE, S_MVM_FILL, S_MVM_RUN, S_MOV, S_ALU, S_CALL, S_DONE
  } state_e;

  localparam int unsigned IN_WORDS = (N + 3) / 4;

  state_e      state;
  instr_t      cur, dec;
  logic [31:0] pc, page;
  logic [15:0] cnt, nbeats;
  logic        mvm_issued;
  logic        paging;

  assign dec    = instr_t'(im_rdata);
  assign paging = (instr_len != 0);

  // ---- derived quantities ----
  logic [31:0] fill_bytes;
  logic [31:0] page_left;
  logic [15:0] fill_nbeats;
  always_comb begin
    page_left  = (instr_len - page * IM_WORDS) * 8;
    fill_bytes = (page_left > IM_BYTES) ? 32'(IM_BYTES) : page_left;
  end
  assign fill_nbeats = beats_of(fill_bytes);

  function automatic logic [15:0] beats_of(input logic [31:0] bytes);
    return 16'((bytes + BUS_BYTES - 1) / BUS_BYTES);
  endfunction

  function automatic alu_op_e alu_of(input opcode_e op);
    unique case (op)
      OP_ADD:   return ALU_ADD;
      OP_SUB:   return ALU_SUB;
      OP_MUL:   return ALU_MUL;
      OP_DIV:   return ALU_DIV;
      OP_MIN:   return ALU_MIN;
      OP_MAX:   return ALU_MAX;
      OP_SHIFT: return ALU_SHIFT;
      OP_RELU:  return ALU_RELU;
      OP_LRELU: return ALU_LRELU;
      default:  return ALU_ADD;
    endcase
  endfunction

  function automatic logic is_alu(input opcode_e op);
    return op inside {OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_MIN, OP_MAX, OP_SHIFT, OP_RELU, OP_LRELU};
  endfunction

  // byte strobes of beat `cnt` of a transfer of `len` bytes
  function automatic logic [BUS_BYTES-1:0] beat_strb(input logic [15:0] c, input logic [11:0] len);
    logic [BUS_BYTES-1:0] s;
    for (int j = 0; j < BUS_BYTES; j++) s[j] = (int'(c) * BUS_BYTES + j) < int'(len);
    return s;
  endfunction

  // ---- combinational outputs ----
  logic [31:0] beat_off;
  assign beat_off = 32'(cnt) * BUS_BYTES;

  assign im_raddr = IW'(pc);
  assign busy     = (state != S_IDLE) && (state != S_DONE);

  always_comb begin
    m_valid = 1'b0;
    m_we    = 1'b0;
    m_last  = 1'b0;
    m_addr  = '0;
    m_wdata = buf_bus_rdata;
    m_wstrb = '0;

    im_we    = 1'b0;
    im_waddr = IAW'(beat_off);
    im_wdata = m_rdata;
    im_wstrb = '1;

    buf_bus_we    = 1'b0;
    buf_bus_addr  = BAW'(32'(cur.a) + beat_off);
    buf_bus_wdata = m_rdata;
    buf_bus_wstrb = beat_strb(cnt, cur.b);

    buf_ra_addr = BAW'(cur.a) + BAW'(4 * 32'(cnt));
    buf_rb_addr = BAW'(cur.c[33:22]) + BAW'(4 * 32'(cnt));
    buf_w_en    = 1'b0;
    buf_w_addr  = BAW'(cur.a) + BAW'(4 * 32'(cnt));
    buf_w_data  = alu_y;

    mvm_in_we    = 1'b0;
    mvm_in_idx   = IIW'(cnt);
    mvm_in_wdata = buf_ra_data;
    mvm_start    = 1'b0;
    mvm_out_idx  = OIW'(cnt);

    alu_op  = alu_of(cur.op);
    alu_a   = buf_ra_data;
    alu_b   = buf_rb_data;
    alu_imm = cur.c[9:0];

    ev_call       = 1'b0;
    ev_wait_stall = 1'b0;
    ev_fill       = 1'b0;

    unique case (state)
      S_FILL: begin
        m_valid = 1'b1;
        m_addr  = instr_base + page * IM_BYTES + beat_off;
        m_last  = (cnt == fill_nbeats - 1);
        im_we   = m_ready;
        ev_fill = (cnt == 0) && m_ready;
      end
      S_EXEC: begin
        ev_wait_stall = (dec.op == OP_WAIT) && (seq_nr < dec.c[31:0]);
      end
      S_LOAD: begin
        m_valid    = 1'b1;
        m_addr     = cur.c[31:0] + beat_off;
        m_last     = (cnt == nbeats - 1);
        buf_bus_we = m_ready;
      end
      S_STORE: begin
        m_valid = 1'b1;
        m_we    = 1'b1;
        m_addr  = cur.c[31:0] + beat_off;
        m_last  = (cnt == nbeats - 1);
        m_wstrb = beat_strb(cnt, cur.b);
      end
      S_MVM_FILL: begin
        buf_ra_addr = BAW'(cur.a) + BAW'(4 * 32'(cnt));
        mvm_in_we   = 1'b1;
      end
      S_MVM_RUN: begin
        mvm_start = !mvm_issued;
      end
      S_MOV: begin
        buf_w_en   = 1'b1;
        buf_w_addr = BAW'(cur.a) + BAW'(4 * 32'(cnt));
        buf_w_data = mvm_out_data;
      end
      S_ALU: begin
        buf_ra_addr = BAW'(cur.b) + BAW'(4 * 32'(cnt));
        buf_w_en    = 1'b1;
      end
      S_CALL: begin
        m_valid = 1'b1;
        m_we    = 1'b1;
        m_last  = 1'b1;
        m_addr  = succ_addr;
        m_wdata = {LANES{32'd1}};
        m_wstrb = BUS_BYTES'(4'hF) << (4 * ((succ_addr % BUS_BYTES) / 4));
        ev_call = m_ready;
      end
      default: ;
    endcase
  end

  // ---- sequencing ----
  // next pc after the current instruction, with paging
  logic [31:0] pc_next;
  assign pc_next = pc + 1;

  // state after the current instruction completes: next page, end of the
  // instruction section, or the next instruction
  state_e adv_state;
  always_comb begin
    if (paging && pc_next >= instr_len)                adv_state = S_DONE;
    else if (paging && (pc_next % IM_WORDS) == 0)      adv_state = S_FILL;
    else                                               adv_state = S_EXEC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    logic adv;  // the current instruction completes this cycle
    if (!rst_n) begin
      adv        = 1'b0;
      state      <= S_IDLE;
      pc         <= '0;
      page       <= '0;
      cnt        <= '0;
      nbeats     <= '0;
      cur        <= '0;
      done       <= 1'b0;
      mvm_issued <= 1'b0;
    end else begin
      adv = 1'b0;
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            pc    <= '0;
            page  <= '0;
            cnt   <= '0;
            done  <= 1'b0;
            state <= paging ? S_FILL : S_EXEC;
          end
        end

        S_FILL: begin
          if (m_ready) begin
            cnt <= cnt + 1;
            if (cnt == fill_nbeats - 1) begin
              cnt   <= '0;
              state <= S_EXEC;
            end
          end
        end

        S_EXEC: begin
          cur        <= dec;
          cnt        <= '0;
          mvm_issued <= 1'b0;
          unique case (dec.op)
            OP_LOAD, OP_STORE: begin
              nbeats <= beats_of(32'(dec.b));
              if (dec.b == 0) adv = 1'b1;
              else            state <= (dec.op == OP_LOAD) ? S_LOAD : S_STORE;
            end
            OP_MVM:  state <= S_MVM_FILL;
            OP_MOV:  if (dec.b == 0) adv = 1'b1; else state <= S_MOV;
            OP_CALL: state <= S_CALL;
            OP_WAIT: if (seq_nr >= dec.c[31:0]) adv = 1'b1;
            OP_HALT: begin
              state <= S_DONE;
              done  <= 1'b1;
            end
            default: begin
              if (is_alu(dec.op) && dec.c[21:10] != 0) state <= S_ALU;
              else                                     adv = 1'b1;
            end
          endcase
        end

        S_LOAD, S_STORE: begin
          if (m_ready) begin
            cnt <= cnt + 1;
            if (cnt == nbeats - 1) adv = 1'b1;
          end
        end

        S_MVM_FILL: begin
          cnt <= cnt + 1;
          if (cnt == 16'(IN_WORDS - 1)) begin
            cnt   <= '0;
            state <= S_MVM_RUN;
          end
        end

        S_MVM_RUN: begin
          mvm_issued <= 1'b1;
          if (mvm_issued && mvm_done) adv = 1'b1;
        end

        S_MOV: begin
          cnt <= cnt + 1;
          if (cnt == 16'(cur.b) - 1) adv = 1'b1;
        end

        S_ALU: begin
          cnt <= cnt + 1;
          if (cnt == 16'(cur.c[21:10]) - 1) adv = 1'b1;
        end

        S_CALL: begin
          if (m_ready) adv = 1'b1;
        end

        default: state <= S_IDLE;
      endcase
      if (adv) begin
        pc    <= pc_next;
        cnt   <= '0;
        state <= adv_state;
        done  <= (adv_state == S_DONE);
        if (adv_state == S_FILL) page <= page + 1;
      end
    end
  end

  // ---- bus handshake rules ----
  // An initiator holds its request stable until it is accepted, and keeps a
  // burst going until the beat flagged last.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (m_valid && !m_ready) |=> (m_valid && $stable(m_addr) && $stable(m_we));
  endproperty
  a_hold: assert property (p_hold);

  property p_burst;
    @(posedge clk) disable iff (!rst_n)
      (m_valid && m_ready && !m_last) |=> m_valid;
  endproperty
  a_burst: assert property (p_burst);

endmodule
