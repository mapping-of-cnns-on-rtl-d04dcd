// rram_crossbar: behavioural model of an M x N RRAM crossbar together with its
// DACs on the N input lines and its ADCs with shift-and-add on the M outputs.
//
// This is a behavioural model, not synthesizable circuitry for the real part:
// the real crossbar stores each weight as a cell conductance and computes the
// matrix-vector product in the analog domain in one step. The model keeps the
// weights as signed 8-bit integers and computes the exact integer product
//     out[m] = sum_n w[m][n] * in[n]       (m < M, n < N)
// which is what an ideal crossbar with lossless DAC/ADC/shift-and-add would
// deliver. Device non-idealities and ADC resolution are not modelled (the
// paper does not give them).
//
// Interface and timing (own choices):
//   * cells are programmed a bus beat at a time: byte (m*N + n) holds w[m][n];
//   * a one-cycle pulse on `start` samples in_vec; out_vec is valid and
//     `out_valid` pulses LAT cycles later (LAT >= 1). The paper does not give
//     the MVM latency, so LAT is a parameter.
module rram_crossbar #(
  parameter int unsigned M         = 128,
  parameter int unsigned N         = 128,
  parameter int unsigned BUS_BYTES = 16,
  parameter int unsigned LAT       = 4,
  localparam int unsigned CELLS    = M * N,
  localparam int unsigned PAW      = $clog2(CELLS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // programming (setup phase)
  input  logic                   prog_we,
  input  logic [PAW-1:0]         prog_addr,
  input  logic [BUS_BYTES*8-1:0] prog_wdata,
  input  logic [BUS_BYTES-1:0]   prog_strb,
  // MVM
  input  logic                   start,
  input  logic [N*8-1:0]         in_vec,
  output logic [M*32-1:0]        out_vec,
  output logic                   out_valid
);

  logic signed [7:0] g [CELLS];
  logic [LAT-1:0]    pipe;

  logic [PAW-1:0] pbase;
  assign pbase = prog_addr & ~PAW'(BUS_BYTES - 1);

  always_ff @(posedge clk) begin
    if (prog_we) begin
      for (int j = 0; j < BUS_BYTES; j++)
        if (prog_strb[j] && (int'(pbase) + j < CELLS)) g[PAW'(pbase + PAW'(j))] <= prog_wdata[8*j +: 8];
    end
  end

  // ideal analog dot product of crossbar row m with the input vector
  function automatic logic signed [31:0] row_dot(input int m, input logic [N*8-1:0] x);
    logic signed [31:0] acc;
    acc = '0;
    for (int n = 0; n < N; n++) acc += 32'(g[m*N + n]) * 32'(signed'(x[8*n +: 8]));
    return acc;
  endfunction

  always_ff @(posedge clk) begin
    if (start) begin
      for (int m = 0; m < M; m++) out_vec[32*m +: 32] <= row_dot(m, in_vec);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pipe <= '0;
    else        pipe <= LAT'({pipe, start});
  end

  assign out_valid = pipe[LAT-1];

endmodule
