// cim_core: one RRAM-based computing-in-memory core.
//
// Block structure after the paper's core diagram: config registers (20) plus
// the SEQ_NR synchronisation register, a 4 KB instruction memory, an 8*M byte
// data buffer, a general purpose execution unit (GPEU), a controller, and the
// MVM unit with its M x N crossbar, N bytes of input registers and 4*M bytes of
// output registers. The core is both a bus initiator (LOAD, STORE, CALL,
// instruction paging) and a bus target (config, SEQ_NR, instruction memory
// and crossbar programming in the setup phase; SEQ_NR increments from the
// predecessor core in the inference phase).
//
// Both bus ports use this design's simple handshake: a beat is transferred in
// the cycle where valid and ready are both high; `last` closes a burst.
// `done` stays high from HALT until the next start and serves as the core's
// completion interrupt.
//
// Lint note: rst_n appears in the `disable iff` of the assertion below as
// well as in the asynchronous resets of the sub-blocks; the logic uses it
// only as an asynchronous reset.
module cim_core
  import cim_pkg::*;
#(
  parameter int unsigned M         = 128,
  parameter int unsigned N         = 128,
  parameter int unsigned BUS_BYTES = 16,
  parameter int unsigned IM_BYTES  = 4096,
  parameter int unsigned XBAR_LAT  = 4,
  localparam int unsigned BW       = BUS_BYTES * 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // bus target port
  input  logic                 s_valid,
  input  logic                 s_we,
  input  logic [31:0]          s_addr,
  input  logic [BW-1:0]        s_wdata,
  input  logic [BUS_BYTES-1:0] s_wstrb,
  output logic                 s_ready,
  output logic [BW-1:0]        s_rdata,
  // bus initiator port
  output logic                 m_valid,
  output logic                 m_we,
  output logic                 m_last,
  output logic [31:0]          m_addr,
  output logic [BW-1:0]        m_wdata,
  output logic [BUS_BYTES-1:0] m_wstrb,
  input  logic                 m_ready,
  input  logic [BW-1:0]        m_rdata,
  // status and events
  output logic                 busy,
  output logic                 done,
  output logic                 ev_call,
  output logic                 ev_wait_stall,
  output logic                 ev_fill
);

  localparam int unsigned BUF_BYTES = 8 * M;
  localparam int unsigned BAW       = $clog2(BUF_BYTES);
  localparam int unsigned IAW       = $clog2(IM_BYTES);
  localparam int unsigned IW        = $clog2(IM_BYTES / 8);
  localparam int unsigned PAW       = $clog2(M * N);
  localparam int unsigned IIW       = $clog2((N + 3) / 4 + 1);
  localparam int unsigned OIW       = $clog2(M + 1);

  // config <-> controller
  logic        start;
  logic [31:0] succ_addr, instr_base, instr_len, seq_nr;
  // setup-phase write paths
  logic                 cfg_im_we, cfg_xb_we;
  logic [IAW-1:0]       cfg_im_waddr;
  logic [PAW-1:0]       cfg_xb_addr;
  logic [BW-1:0]        cfg_wdata;
  logic [BUS_BYTES-1:0] cfg_wstrb;
  // instruction memory
  logic [IW-1:0]        im_raddr;
  logic [63:0]          im_rdata;
  logic                 ctl_im_we;
  logic [IAW-1:0]       ctl_im_waddr;
  logic [BW-1:0]        ctl_im_wdata;
  logic [BUS_BYTES-1:0] ctl_im_wstrb;
  // data buffer
  logic                 buf_bus_we;
  logic [BAW-1:0]       buf_bus_addr;
  logic [BW-1:0]        buf_bus_wdata, buf_bus_rdata;
  logic [BUS_BYTES-1:0] buf_bus_wstrb;
  logic [BAW-1:0]       buf_ra_addr, buf_rb_addr, buf_w_addr;
  logic [31:0]          buf_ra_data, buf_rb_data, buf_w_data;
  logic                 buf_w_en;
  // MVMU
  logic                 mvm_in_we, mvm_start, mvm_busy, mvm_done;
  logic [IIW-1:0]       mvm_in_idx;
  logic [31:0]          mvm_in_wdata, mvm_out_data;
  logic [OIW-1:0]       mvm_out_idx;
  // GPEU
  alu_op_e              alu_op;
  logic [31:0]          alu_a, alu_b, alu_y;
  logic [9:0]           alu_imm;

  core_config #(
    .BUS_BYTES(BUS_BYTES), .IM_BYTES(IM_BYTES), .XB_CELLS(M * N)
  ) u_cfg (
    .clk, .rst_n,
    .s_valid, .s_we, .s_addr, .s_wdata, .s_wstrb, .s_ready, .s_rdata,
    .start, .succ_addr, .instr_base, .instr_len, .seq_nr, .busy, .done,
    .im_we   (cfg_im_we),
    .im_waddr(cfg_im_waddr),
    .xb_we   (cfg_xb_we),
    .xb_addr (cfg_xb_addr),
    .wdata   (cfg_wdata),
    .wstrb   (cfg_wstrb)
  );

  // The controller's page fill and the CPU's setup writes never overlap in
  // time; the controller has priority if they do.
  instr_mem #(
    .BYTES(IM_BYTES), .BUS_BYTES(BUS_BYTES)
  ) u_im (
    .clk,
    .we   (ctl_im_we || cfg_im_we),
    .waddr(ctl_im_we ? ctl_im_waddr : cfg_im_waddr),
    .wdata(ctl_im_we ? ctl_im_wdata : cfg_wdata),
    .wstrb(ctl_im_we ? ctl_im_wstrb : cfg_wstrb),
    .raddr(im_raddr),
    .rdata(im_rdata)
  );

  data_buffer #(
    .BYTES(BUF_BYTES), .BUS_BYTES(BUS_BYTES)
  ) u_buf (
    .clk,
    .bus_we   (buf_bus_we),
    .bus_addr (buf_bus_addr),
    .bus_wdata(buf_bus_wdata),
    .bus_wstrb(buf_bus_wstrb),
    .bus_rdata(buf_bus_rdata),
    .ra_addr  (buf_ra_addr),
    .ra_data  (buf_ra_data),
    .rb_addr  (buf_rb_addr),
    .rb_data  (buf_rb_data),
    .w_en     (buf_w_en),
    .w_addr   (buf_w_addr),
    .w_data   (buf_w_data)
  );

  gpeu u_gpeu (
    .op (alu_op),
    .a  (alu_a),
    .b  (alu_b),
    .imm(alu_imm),
    .y  (alu_y)
  );

  mvmu #(
    .M(M), .N(N), .BUS_BYTES(BUS_BYTES), .XBAR_LAT(XBAR_LAT)
  ) u_mvmu (
    .clk, .rst_n,
    .in_we     (mvm_in_we),
    .in_idx    (mvm_in_idx),
    .in_wdata  (mvm_in_wdata),
    .start     (mvm_start),
    .busy      (mvm_busy),
    .done      (mvm_done),
    .out_idx   (mvm_out_idx),
    .out_data  (mvm_out_data),
    .prog_we   (cfg_xb_we),
    .prog_addr (cfg_xb_addr),
    .prog_wdata(cfg_wdata),
    .prog_strb (cfg_wstrb)
  );

  core_controller #(
    .M(M), .N(N), .BUS_BYTES(BUS_BYTES), .IM_BYTES(IM_BYTES)
  ) u_ctl (
    .clk, .rst_n,
    .start, .succ_addr, .instr_base, .instr_len, .seq_nr, .busy, .done,
    .im_raddr, .im_rdata,
    .im_we   (ctl_im_we),
    .im_waddr(ctl_im_waddr),
    .im_wdata(ctl_im_wdata),
    .im_wstrb(ctl_im_wstrb),
    .buf_bus_we, .buf_bus_addr, .buf_bus_wdata, .buf_bus_wstrb, .buf_bus_rdata,
    .buf_ra_addr, .buf_ra_data, .buf_rb_addr, .buf_rb_data,
    .buf_w_en, .buf_w_addr, .buf_w_data,
    .mvm_in_we, .mvm_in_idx, .mvm_in_wdata, .mvm_start, .mvm_done,
    .mvm_out_idx, .mvm_out_data,
    .alu_op, .alu_a, .alu_b, .alu_imm, .alu_y,
    .m_valid, .m_we, .m_last, .m_addr, .m_wdata, .m_wstrb, .m_ready, .m_rdata,
    .ev_call, .ev_wait_stall, .ev_fill
  );

  // The controller only starts an MVM when the unit is idle.
  a_mvm_idle: assert property (@(posedge clk) disable iff (!rst_n) mvm_start |-> !mvm_busy);

endmodule
