// bus_interconnect: multi-initiator, multi-target interconnect joining the
// CPU, the CIM cores and the shared memory.
//
// The paper's system uses an AXI4 interconnect with several initiators and
// several targets, with a configurable data width (the bus width, 4 to 64
// bytes in its evaluation) that decides how many cores can be kept busy.
// This module keeps those properties: any initiator can reach any target,
// transfers to different targets proceed in parallel, and each target moves
// one beat of BUS_BYTES bytes per cycle. It does not implement the AXI4
// channel protocol, outstanding transactions or out-of-order completion; it
// uses one request/response handshake per initiator:
//
//   m_valid, m_we, m_addr, m_wdata, m_wstrb, m_last  ->  m_ready, m_rdata
//
// A beat is transferred in the cycle in which valid and ready are both high
// (read data arrives in that cycle). Beats up to and including the one
// flagged `last` form a burst: the target stays granted to that initiator
// until then. Each target has its own round-robin arbiter, so a busy shared
// memory does not block a CALL going to a core.
//
// Address decoding (own choice, see cim_pkg): addr[31] = 0 selects target 0,
// the shared memory; addr[31] = 1 selects core addr[27:20], i.e. target
// 1 + addr[27:20]. A beat to a core that does not exist completes at once,
// reads 0 and writes nothing.
module bus_interconnect #(
  parameter int unsigned NI        = 17,
  parameter int unsigned NT        = 17,
  parameter int unsigned BUS_BYTES = 16,
  localparam int unsigned BW       = BUS_BYTES * 8,
  localparam int unsigned IXW      = (NI > 1) ? $clog2(NI) : 1,
  localparam int unsigned TXW      = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // initiator side
  input  logic                 m_valid [NI],
  input  logic                 m_we    [NI],
  input  logic                 m_last  [NI],
  input  logic [31:0]          m_addr  [NI],
  input  logic [BW-1:0]        m_wdata [NI],
  input  logic [BUS_BYTES-1:0] m_wstrb [NI],
  output logic                 m_ready [NI],
  output logic [BW-1:0]        m_rdata [NI],
  // target side
  output logic                 s_valid [NT],
  output logic                 s_we    [NT],
  output logic                 s_last  [NT],
  output logic [31:0]          s_addr  [NT],
  output logic [BW-1:0]        s_wdata [NT],
  output logic [BUS_BYTES-1:0] s_wstrb [NT],
  input  logic                 s_ready [NT],
  input  logic [BW-1:0]        s_rdata [NT],
  // a requesting initiator that is not served this cycle
  output logic [NI-1:0]        stall
);

  logic [TXW-1:0] dst    [NI];
  logic           dst_ok [NI];
  logic [NI-1:0]  req    [NT];
  logic [IXW-1:0] gnt    [NT];
  logic           gnt_v  [NT];
  logic [IXW-1:0] owner  [NT];
  logic           locked [NT];
  logic [IXW-1:0] rr     [NT];

  // address decode
  always_comb begin
    for (int i = 0; i < NI; i++) begin
      if (!m_addr[i][31]) begin
        dst[i]    = '0;
        dst_ok[i] = 1'b1;
      end else begin
        dst[i]    = TXW'(32'(m_addr[i][27:20]) + 1);
        dst_ok[i] = (32'(m_addr[i][27:20]) + 1) < NT;
      end
    end
  end

  // per-target arbitration: a locked burst keeps its owner, otherwise the
  // first requester after the previous winner wins
  always_comb begin
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < NI; i++) req[t][i] = m_valid[i] && dst_ok[i] && (32'(dst[i]) == t);
      gnt[t]   = '0;
      gnt_v[t] = 1'b0;
      if (locked[t]) begin
        gnt[t]   = owner[t];
        gnt_v[t] = req[t][owner[t]];
      end else begin
        for (int k = 1; k <= NI; k++) begin
          automatic int unsigned idx = (32'(rr[t]) + k) % NI;
          if (!gnt_v[t] && req[t][idx]) begin
            gnt[t]   = IXW'(idx);
            gnt_v[t] = 1'b1;
          end
        end
      end
      s_valid[t] = gnt_v[t];
      s_we[t]    = m_we[gnt[t]];
      s_last[t]  = m_last[gnt[t]];
      s_addr[t]  = m_addr[gnt[t]];
      s_wdata[t] = m_wdata[gnt[t]];
      s_wstrb[t] = m_wstrb[gnt[t]];
    end
  end

  always_comb begin
    for (int i = 0; i < NI; i++) begin
      if (!dst_ok[i]) begin
        m_ready[i] = m_valid[i];
        m_rdata[i] = '0;
      end else begin
        m_ready[i] = m_valid[i] && gnt_v[dst[i]] && (32'(gnt[dst[i]]) == i) && s_ready[dst[i]];
        m_rdata[i] = s_rdata[dst[i]];
      end
      stall[i] = m_valid[i] && !m_ready[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NT; t++) begin
        owner[t]  <= '0;
        locked[t] <= 1'b0;
        rr[t]     <= IXW'(NI - 1);
      end
    end else begin
      for (int t = 0; t < NT; t++) begin
        if (gnt_v[t] && s_ready[t]) begin
          rr[t] <= gnt[t];
          if (m_last[gnt[t]]) locked[t] <= 1'b0;
          else begin
            locked[t] <= 1'b1;
            owner[t]  <= gnt[t];
          end
        end
      end
    end
  end

endmodule
