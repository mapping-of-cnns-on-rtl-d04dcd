// gpeu: general purpose execution unit of a CIM core.
//
// Works on one pair of signed 32-bit words per cycle, taken from the core's
// data buffer; the controller walks it over a vector one element at a time.
// The operation set ADD, SUB, MUL, DIV, MIN, MAX and SHIFT and the two
// activations ReLU and LeakyReLU are the paper's. It uses the GPEU to add the
// partial results of cores (and the bias) and to apply the activation.
//
// Own choices: the unit is purely combinational (result in the same cycle);
// arithmetic wraps at 32 bits; SHIFT shifts arithmetically right by imm[4:0],
// or left when imm[9] is set; LeakyReLU scales negative inputs by 2^-imm[4:0];
// division rounds toward zero, a division by zero saturates to the largest
// value of the dividend's sign, and -2^31 / -1 saturates to 2^31-1.
module gpeu
  import cim_pkg::*;
(
  input  alu_op_e            op,
  input  logic signed [31:0] a,
  input  logic signed [31:0] b,
  input  logic [9:0]         imm,
  output logic signed [31:0] y
);

  localparam logic signed [31:0] MAX_S = 32'sh7FFF_FFFF;
  localparam logic signed [31:0] MIN_S = 32'sh8000_0000;

  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_MUL:   y = a * b;
      ALU_DIV: begin
        if (b == 0)                      y = (a < 0) ? MIN_S : MAX_S;
        else if (a == MIN_S && b == -1)  y = MAX_S;
        else                             y = a / b;
      end
      ALU_MIN:   y = (a < b) ? a : b;
      ALU_MAX:   y = (a > b) ? a : b;
      ALU_SHIFT: y = imm[9] ? (a <<< imm[4:0]) : (a >>> imm[4:0]);
      ALU_RELU:  y = (a < 0) ? 32'sd0 : a;
      ALU_LRELU: y = (a < 0) ? (a >>> imm[4:0]) : a;
      default:   y = a;
    endcase
  end

endmodule
