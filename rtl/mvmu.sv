// mvmu: matrix-vector multiplication unit of a CIM core.
//
// Follows the block structure the paper draws for the MVMU: N bytes of input
// registers feeding the crossbar's DACs, the M x N crossbar with ADC and
// shift-and-add, 4*M bytes of output registers (one 32-bit result per
// crossbar row) and a small control unit sequencing them.
//
// Operation: the core controller fills the input registers one 32-bit word
// (4 IFM bytes) per cycle through in_we/in_idx, then pulses `start`. The
// control unit launches the crossbar, waits for its result, latches all M
// results into the output registers and pulses `done`; `busy` is high in
// between. The controller then reads the output registers word by word
// through out_idx/out_data (MOV instruction). Crossbar cells are programmed
// through the prog_* port in the setup phase.
//
// Own choices: the word-wide fill and read ports and the start/busy/done
// handshake; the crossbar latency is the crossbar model's parameter.
module mvmu #(
  parameter int unsigned M         = 128,
  parameter int unsigned N         = 128,
  parameter int unsigned BUS_BYTES = 16,
  parameter int unsigned XBAR_LAT  = 4,
  localparam int unsigned PAW      = $clog2(M * N),
  localparam int unsigned IIW      = $clog2((N + 3) / 4 + 1),
  localparam int unsigned OIW      = $clog2(M + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // input registers
  input  logic                   in_we,
  input  logic [IIW-1:0]         in_idx,
  input  logic [31:0]            in_wdata,
  // control
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // output registers
  input  logic [OIW-1:0]         out_idx,
  output logic [31:0]            out_data,
  // crossbar programming
  input  logic                   prog_we,
  input  logic [PAW-1:0]         prog_addr,
  input  logic [BUS_BYTES*8-1:0] prog_wdata,
  input  logic [BUS_BYTES-1:0]   prog_strb
);

  logic [7:0]    in_regs  [N];
  logic [31:0]   out_regs [M];
  logic [N*8-1:0]  in_vec;
  logic [M*32-1:0] xb_out;
  logic            xb_start, xb_valid;

  typedef enum logic [1:0] {CT_IDLE, CT_RUN} ctrl_state_e;
  ctrl_state_e state;

  // input registers
  always_ff @(posedge clk) begin
    if (in_we) begin
      for (int j = 0; j < 4; j++)
        if (int'(in_idx) * 4 + j < N) in_regs[int'(in_idx) * 4 + j] <= in_wdata[8*j +: 8];
    end
  end

  always_comb begin
    for (int n = 0; n < N; n++) in_vec[8*n +: 8] = in_regs[n];
  end

  // Ctrl
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= CT_IDLE;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        CT_IDLE: if (start) state <= CT_RUN;
        CT_RUN:  if (xb_valid) begin
          state <= CT_IDLE;
          done  <= 1'b1;
        end
        default: state <= CT_IDLE;
      endcase
    end
  end

  assign xb_start = start && (state == CT_IDLE);
  assign busy     = (state != CT_IDLE);

  // output registers
  always_ff @(posedge clk) begin
    if (xb_valid && state == CT_RUN) begin
      for (int m = 0; m < M; m++) out_regs[m] <= xb_out[32*m +: 32];
    end
  end

  assign out_data = (int'(out_idx) < M) ? out_regs[$clog2(M)'(out_idx)] : '0;

  rram_crossbar #(
    .M(M), .N(N), .BUS_BYTES(BUS_BYTES), .LAT(XBAR_LAT)
  ) u_xbar (
    .clk       (clk),
    .rst_n     (rst_n),
    .prog_we   (prog_we),
    .prog_addr (prog_addr),
    .prog_wdata(prog_wdata),
    .prog_strb (prog_strb),
    .start     (xb_start),
    .in_vec    (in_vec),
    .out_vec   (xb_out),
    .out_valid (xb_valid)
  );

endmodule
