// data_buffer: the 8*M byte data buffer of a CIM core.
//
// The buffer sits between the bus, the MVM unit and the GPEU. IFM bytes
// arrive from the bus and are copied from here into the MVM input registers;
// MVM results are moved in from the output registers; partial OFM vectors are
// loaded, accumulated by the GPEU and stored back over the bus. Its size, 8*M
// bytes for an M-row crossbar, is the paper's (8*M = two vectors of M 32-bit
// words, or one word vector plus the N input bytes).
//
// Own choices: a byte array with
//   * a bus port: one beat of BUS_BYTES bytes, beat-aligned, byte strobes,
//     asynchronous read;
//   * a word port: two asynchronous 32-bit reads (GPEU operands, MVM input
//     fill) and one synchronous 32-bit write, 4-byte aligned.
// A bus write and a word write in the same cycle to the same byte resolve in
// favour of the bus write; the core controller never issues both.
module data_buffer #(
  parameter int unsigned BYTES     = 1024,
  parameter int unsigned BUS_BYTES = 16,
  localparam int unsigned AW       = $clog2(BYTES)
) (
  input  logic                   clk,
  // bus port
  input  logic                   bus_we,
  input  logic [AW-1:0]          bus_addr,
  input  logic [BUS_BYTES*8-1:0] bus_wdata,
  input  logic [BUS_BYTES-1:0]   bus_wstrb,
  output logic [BUS_BYTES*8-1:0] bus_rdata,
  // word port
  input  logic [AW-1:0]          ra_addr,
  output logic [31:0]            ra_data,
  input  logic [AW-1:0]          rb_addr,
  output logic [31:0]            rb_data,
  input  logic                   w_en,
  input  logic [AW-1:0]          w_addr,
  input  logic [31:0]            w_data
);

  logic [7:0] mem [BYTES];

  logic [AW-1:0] bus_base, ra_base, rb_base, w_base;
  assign bus_base = bus_addr & ~AW'(BUS_BYTES - 1);
  assign ra_base  = ra_addr & ~AW'(3);
  assign rb_base  = rb_addr & ~AW'(3);
  assign w_base   = w_addr & ~AW'(3);

  always_comb begin
    for (int j = 0; j < BUS_BYTES; j++) bus_rdata[8*j +: 8] = mem[AW'(bus_base + AW'(j))];
    for (int j = 0; j < 4; j++) begin
      ra_data[8*j +: 8] = mem[AW'(ra_base + AW'(j))];
      rb_data[8*j +: 8] = mem[AW'(rb_base + AW'(j))];
    end
  end

  always_ff @(posedge clk) begin
    if (w_en) begin
      for (int j = 0; j < 4; j++) mem[AW'(w_base + AW'(j))] <= w_data[8*j +: 8];
    end
    if (bus_we) begin
      for (int j = 0; j < BUS_BYTES; j++)
        if (bus_wstrb[j]) mem[AW'(bus_base + AW'(j))] <= bus_wdata[8*j +: 8];
    end
  end

endmodule
