// shared_memory: the memory shared by all cores and the CPU.
//
// In the paper the CPU loads the layer's IFM and each core's instruction
// section into it, and writes the bias values into the OFM area, which the
// cores then reuse to pass partial sums to each other before the final OFM
// is left there. The paper gives no size, width or timing for it.
//
// Own choices: BYTES bytes (default 4 MiB, enough for every layer in the
// evaluated MobileNet excerpt with 32-bit OFM values), organised as words of
// one bus beat (BUS_BYTES bytes) with byte strobes. It is a bus target that
// accepts a beat every cycle (s_ready = 1) with the read data returned in the
// same cycle; addresses are taken modulo the size and the low bits below a
// beat are ignored.
module shared_memory #(
  parameter int unsigned BYTES     = 4 * 1024 * 1024,
  parameter int unsigned BUS_BYTES = 16,
  localparam int unsigned BW       = BUS_BYTES * 8,
  localparam int unsigned WORDS    = BYTES / BUS_BYTES,
  localparam int unsigned WAW      = $clog2(WORDS),
  localparam int unsigned OFF      = $clog2(BUS_BYTES)
) (
  input  logic                 clk,
  input  logic                 s_valid,
  input  logic                 s_we,
  input  logic [31:0]          s_addr,
  input  logic [BW-1:0]        s_wdata,
  input  logic [BUS_BYTES-1:0] s_wstrb,
  output logic                 s_ready,
  output logic [BW-1:0]        s_rdata
);

  logic [BW-1:0]  mem [WORDS];
  logic [WAW-1:0] widx;

  assign widx    = s_addr[OFF +: WAW];
  assign s_ready = 1'b1;
  assign s_rdata = mem[widx];

  always_ff @(posedge clk) begin
    if (s_valid && s_we) begin
      for (int j = 0; j < BUS_BYTES; j++)
        if (s_wstrb[j]) mem[widx][8*j +: 8] <= s_wdata[8*j +: 8];
    end
  end

endmodule
