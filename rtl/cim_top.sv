// cim_top: multi-core RRAM-based CIM system executing one CNN layer.
//
// NUM_CORES CIM cores and a shared memory hang on one multi-initiator,
// multi-target interconnect, with the host CPU as a further initiator (the
// CPU itself is outside this design: its bus port is a port of this module).
// This is the paper's reference system: the CPU loads the IFM, the bias
// values and the instruction sections into the shared memory and configures
// and programs the cores (setup phase); then the cores run autonomously,
// exchange partial sums through the OFM area of the shared memory and order
// their accesses with the decentralised CALL/WAIT scheme on their SEQ_NR
// registers (inference phase); when they are finished the CPU is
// interrupted.
//
// Defaults follow the example specification in the paper: 16 cores, 128x128
// crossbars, 16-byte bus. Shared memory size and crossbar latency are own
// choices.
//
// Interconnect numbering: initiator i < NUM_CORES is core i, initiator
// NUM_CORES is the CPU; target 0 is the shared memory, target 1+i is core i.
//
// irq is high while at least one core has finished (HALT) and none is busy,
// i.e. once every started core has completed. The per-core status and event
// outputs (CALL issued, WAIT stall cycle, instruction page fill, initiator
// stalled by arbitration) are for performance counters and observation.
//
// Lint notes: the interconnect's s_last outputs are left unread on
// purpose (the shared memory and the cores complete every beat in one cycle
// and need no burst marker). rst_n is reported as used both asynchronously
// and synchronously because the cores' assertions name it in `disable iff`;
// the logic uses it only as an asynchronous reset.
module cim_top #(
  parameter int unsigned NUM_CORES   = 16,
  parameter int unsigned M           = 128,
  parameter int unsigned N           = 128,
  parameter int unsigned BUS_BYTES   = 16,
  parameter int unsigned IM_BYTES    = 4096,
  parameter int unsigned SHMEM_BYTES = 4 * 1024 * 1024,
  parameter int unsigned XBAR_LAT    = 4,
  localparam int unsigned BW         = BUS_BYTES * 8,
  localparam int unsigned NI         = NUM_CORES + 1,
  localparam int unsigned NT         = NUM_CORES + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // CPU initiator port
  input  logic                 cpu_valid,
  input  logic                 cpu_we,
  input  logic                 cpu_last,
  input  logic [31:0]          cpu_addr,
  input  logic [BW-1:0]        cpu_wdata,
  input  logic [BUS_BYTES-1:0] cpu_wstrb,
  output logic                 cpu_ready,
  output logic [BW-1:0]        cpu_rdata,
  // interrupt to the CPU
  output logic                 irq,
  // status and events
  output logic [NUM_CORES-1:0] core_busy,
  output logic [NUM_CORES-1:0] core_done,
  output logic [NUM_CORES-1:0] ev_call,
  output logic [NUM_CORES-1:0] ev_wait_stall,
  output logic [NUM_CORES-1:0] ev_fill,
  output logic [NI-1:0]        bus_stall
);

  logic                 m_valid [NI];
  logic                 m_we    [NI];
  logic                 m_last  [NI];
  logic [31:0]          m_addr  [NI];
  logic [BW-1:0]        m_wdata [NI];
  logic [BUS_BYTES-1:0] m_wstrb [NI];
  logic                 m_ready [NI];
  logic [BW-1:0]        m_rdata [NI];

  logic                 s_valid [NT];
  logic                 s_we    [NT];
  logic                 s_last  [NT];
  logic [31:0]          s_addr  [NT];
  logic [BW-1:0]        s_wdata [NT];
  logic [BUS_BYTES-1:0] s_wstrb [NT];
  logic                 s_ready [NT];
  logic [BW-1:0]        s_rdata [NT];

  // CPU
  assign m_valid[NUM_CORES] = cpu_valid;
  assign m_we[NUM_CORES]    = cpu_we;
  assign m_last[NUM_CORES]  = cpu_last;
  assign m_addr[NUM_CORES]  = cpu_addr;
  assign m_wdata[NUM_CORES] = cpu_wdata;
  assign m_wstrb[NUM_CORES] = cpu_wstrb;
  assign cpu_ready          = m_ready[NUM_CORES];
  assign cpu_rdata          = m_rdata[NUM_CORES];

  bus_interconnect #(
    .NI(NI), .NT(NT), .BUS_BYTES(BUS_BYTES)
  ) u_bus (
    .clk, .rst_n,
    .m_valid, .m_we, .m_last, .m_addr, .m_wdata, .m_wstrb, .m_ready, .m_rdata,
    .s_valid, .s_we, .s_last, .s_addr, .s_wdata, .s_wstrb, .s_ready, .s_rdata,
    .stall(bus_stall)
  );

  shared_memory #(
    .BYTES(SHMEM_BYTES), .BUS_BYTES(BUS_BYTES)
  ) u_shmem (
    .clk,
    .s_valid(s_valid[0]),
    .s_we   (s_we[0]),
    .s_addr (s_addr[0]),
    .s_wdata(s_wdata[0]),
    .s_wstrb(s_wstrb[0]),
    .s_ready(s_ready[0]),
    .s_rdata(s_rdata[0])
  );

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    cim_core #(
      .M(M), .N(N), .BUS_BYTES(BUS_BYTES), .IM_BYTES(IM_BYTES), .XBAR_LAT(XBAR_LAT)
    ) u_core (
      .clk, .rst_n,
      .s_valid      (s_valid[c + 1]),
      .s_we         (s_we[c + 1]),
      .s_addr       (s_addr[c + 1]),
      .s_wdata      (s_wdata[c + 1]),
      .s_wstrb      (s_wstrb[c + 1]),
      .s_ready      (s_ready[c + 1]),
      .s_rdata      (s_rdata[c + 1]),
      .m_valid      (m_valid[c]),
      .m_we         (m_we[c]),
      .m_last       (m_last[c]),
      .m_addr       (m_addr[c]),
      .m_wdata      (m_wdata[c]),
      .m_wstrb      (m_wstrb[c]),
      .m_ready      (m_ready[c]),
      .m_rdata      (m_rdata[c]),
      .busy         (core_busy[c]),
      .done         (core_done[c]),
      .ev_call      (ev_call[c]),
      .ev_wait_stall(ev_wait_stall[c]),
      .ev_fill      (ev_fill[c])
    );
  end

  assign irq = (|core_done) && !(|core_busy);

endmodule
