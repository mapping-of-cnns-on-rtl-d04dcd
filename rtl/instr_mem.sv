// instr_mem: the 4 KB instruction memory of a CIM core.
//
// Holds 512 64-bit instructions. It is written a bus beat at a time, either by
// the CPU in the setup phase (through the core's bus target port) or by the
// core's own controller when it pages in the next part of its instruction
// section from shared memory. The controller reads one instruction per cycle.
// The 4 KB size is the paper's; the word format, the byte-strobed beat write
// port and the asynchronous read are this design's choices.
module instr_mem #(
  parameter int unsigned BYTES     = 4096,
  parameter int unsigned BUS_BYTES = 16,
  localparam int unsigned AW       = $clog2(BYTES),
  localparam int unsigned WORDS    = BYTES / 8,
  localparam int unsigned IW       = $clog2(WORDS)
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,   // byte address, beat aligned
  input  logic [BUS_BYTES*8-1:0] wdata,
  input  logic [BUS_BYTES-1:0]   wstrb,
  input  logic [IW-1:0]          raddr,   // instruction index
  output logic [63:0]            rdata
);

  logic [7:0] mem [BYTES];

  logic [AW-1:0] wbase;
  assign wbase = waddr & ~AW'(BUS_BYTES - 1);

  always_comb begin
    for (int j = 0; j < 8; j++) rdata[8*j +: 8] = mem[{raddr, 3'(j)}];
  end

  always_ff @(posedge clk) begin
    if (we) begin
      for (int j = 0; j < BUS_BYTES; j++)
        if (wstrb[j]) mem[AW'(wbase + AW'(j))] <= wdata[8*j +: 8];
    end
  end

endmodule
