// core_config: bus target side of a CIM core: its 20 config registers, its
// sequence-number register SEQ_NR, and the write paths into its instruction
// memory and crossbar.
//
// From the paper: a core is a bus target that receives config parameters
// (20 registers), has its instructions loaded and its crossbar cells
// programmed by the CPU in the setup phase, and carries one 32-bit SEQ_NR
// register, initially 0, that other cores can write. A CALL of the
// predecessor core increments SEQ_NR; the WAIT instruction compares against
// it.
//
// Own choices: the register map (see cim_pkg), an increment port at
// SEQ_INC_OFFSET (any write there adds one, so a CALL is a single posted
// bus write that cannot race with another core's increment), a write of 1 to
// CTRL bit 0 giving a one-cycle start pulse, and a status register holding
// busy/done. The target answers every beat in the cycle it is presented
// (s_ready is always 1); reads of the instruction memory and crossbar regions
// return 0. A bus beat may cover several 32-bit registers; each 4-byte lane
// with any strobe set writes its register whole.
module core_config
  import cim_pkg::*;
#(
  parameter int unsigned BUS_BYTES = 16,
  parameter int unsigned IM_BYTES  = 4096,
  parameter int unsigned XB_CELLS  = 128 * 128,
  localparam int unsigned BW       = BUS_BYTES * 8,
  localparam int unsigned IAW      = $clog2(IM_BYTES),
  localparam int unsigned PAW      = $clog2(XB_CELLS),
  localparam int unsigned LANES    = BUS_BYTES / 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // bus target port
  input  logic             s_valid,
  input  logic             s_we,
  input  logic [31:0]      s_addr,
  input  logic [BW-1:0]    s_wdata,
  input  logic [BUS_BYTES-1:0] s_wstrb,
  output logic             s_ready,
  output logic [BW-1:0]    s_rdata,
  // to the controller
  output logic             start,
  output logic [31:0]      succ_addr,
  output logic [31:0]      instr_base,
  output logic [31:0]      instr_len,
  output logic [31:0]      seq_nr,
  input  logic             busy,
  input  logic             done,
  // instruction memory write (setup phase)
  output logic             im_we,
  output logic [IAW-1:0]   im_waddr,
  // crossbar programming (setup phase)
  output logic             xb_we,
  output logic [PAW-1:0]   xb_addr,
  // shared write data for both
  output logic [BW-1:0]    wdata,
  output logic [BUS_BYTES-1:0] wstrb
);

  logic [31:0] cfg [NUM_CFG_REGS];
  logic [3:0]  region;
  logic [15:0] offset;
  logic [15:0] base;

  assign region = s_addr[19:16];
  assign offset = s_addr[15:0];
  assign base   = offset & ~16'(BUS_BYTES - 1);
  assign s_ready = 1'b1;
  assign wdata   = s_wdata;
  assign wstrb   = s_wstrb;

  assign im_we    = s_valid && s_we && (region == 4'(REGION_IM))   && (int'(base) < IM_BYTES);
  assign im_waddr = IAW'(base);
  assign xb_we    = s_valid && s_we && (region == 4'(REGION_XBAR)) && (int'(base) < XB_CELLS);
  assign xb_addr  = PAW'(base);

  assign succ_addr  = cfg[CFG_SUCC_ADDR];
  assign instr_base = cfg[CFG_INSTR_BASE];
  assign instr_len  = cfg[CFG_INSTR_LEN];

  function automatic logic [31:0] reg_read(input int unsigned byte_off);
    int unsigned idx;
    idx = byte_off / 4;
    if (byte_off == SEQ_NR_OFFSET)     return seq_nr;
    else if (idx == CFG_STATUS)        return {30'd0, done, busy};
    else if (idx < NUM_CFG_REGS)       return cfg[idx];
    else                               return 32'd0;
  endfunction

  always_comb begin
    s_rdata = '0;
    if (region == 4'(REGION_CFG)) begin
      for (int l = 0; l < LANES; l++) s_rdata[32*l +: 32] = reg_read(int'(base) + 4 * l);
    end
  end

  logic cfg_we;
  assign cfg_we = s_valid && s_we && (region == 4'(REGION_CFG));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_CFG_REGS; i++) cfg[i] <= '0;
      seq_nr <= '0;
      start  <= 1'b0;
    end else begin
      start <= 1'b0;
      if (cfg_we) begin
        for (int l = 0; l < LANES; l++) begin
          automatic int unsigned off = int'(base) + 4 * l;
          if (|s_wstrb[4*l +: 4]) begin
            if (off == SEQ_NR_OFFSET)                                      seq_nr <= s_wdata[32*l +: 32];
            else if (off == SEQ_INC_OFFSET)                                seq_nr <= seq_nr + 32'd1;
            else if (off / 4 == CFG_CTRL)                                  start  <= s_wdata[32*l];
            else if (off / 4 < NUM_CFG_REGS && off / 4 != CFG_STATUS)      cfg[off / 4] <= s_wdata[32*l +: 32];
          end
        end
      end
    end
  end

endmodule
