// tb_gpeu: self-checking test of the GPEU. Drives every operation with
// corner values and random operands and compares with a reference computed
// here with 64-bit arithmetic.
module tb_gpeu;
  import cim_pkg::*;

  alu_op_e            op;
  logic signed [31:0] a, b, y;
  logic [9:0]         imm;
  int checks = 0, failures = 0;

  gpeu dut (.op, .a, .b, .imm, .y);

  function automatic logic signed [31:0] ref_model(alu_op_e o, logic signed [31:0] x, logic signed [31:0] z,
                                                   logic [9:0] im);
    longint lx, lz, r;
    lx = x; lz = z;
    case (o)
      ALU_ADD: r = lx + lz;
      ALU_SUB: r = lx - lz;
      ALU_MUL: r = lx * lz;
      ALU_DIV: begin
        if (lz == 0) r = (lx < 0) ? -2147483648 : 2147483647;
        else begin
          r = lx / lz;
          if (r > 2147483647) r = 2147483647;
        end
      end
      ALU_MIN: r = (lx < lz) ? lx : lz;
      ALU_MAX: r = (lx > lz) ? lx : lz;
      ALU_SHIFT: r = im[9] ? (lx * (64'sd1 <<< im[4:0])) : (lx >>> im[4:0]);
      ALU_RELU: r = (lx < 0) ? 0 : lx;
      ALU_LRELU: r = (lx < 0) ? (lx >>> im[4:0]) : lx;
      default: r = lx;
    endcase
    return r[31:0];
  endfunction

  task automatic check(alu_op_e o, logic signed [31:0] x, logic signed [31:0] z, logic [9:0] im);
    logic signed [31:0] exp;
    op = o; a = x; b = z; imm = im;
    #1;
    exp = ref_model(o, x, z, im);
    checks++;
    if (y !== exp) begin
      failures++;
      $display("FAIL op=%s a=%0d b=%0d imm=%0h y=%0d exp=%0d", o.name(), x, z, im, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e ops[9] = '{ALU_ADD, ALU_SUB, ALU_MUL, ALU_DIV, ALU_MIN, ALU_MAX, ALU_SHIFT, ALU_RELU, ALU_LRELU};
    // corner cases
    check(ALU_DIV, 100, 0, 0);
    check(ALU_DIV, -100, 0, 0);
    check(ALU_DIV, 32'sh8000_0000, -1, 0);
    check(ALU_DIV, -7, 2, 0);
    check(ALU_RELU, -5, 0, 0);
    check(ALU_RELU, 5, 0, 0);
    check(ALU_LRELU, -64, 0, 10'd3);
    check(ALU_LRELU, 64, 0, 10'd3);
    check(ALU_SHIFT, -1024, 0, 10'd4);
    check(ALU_SHIFT, 3, 0, 10'h200 | 10'd5);
    check(ALU_ADD, 32'sh7FFF_FFFF, 1, 0);
    check(ALU_MIN, -3, 2, 0);
    check(ALU_MAX, -3, 2, 0);
    for (int i = 0; i < 2000; i++) begin
      logic signed [31:0] x, z;
      x = $urandom;
      z = $urandom;
      if (i % 3 == 0) begin x = x >>> 16; z = z >>> 20; end
      check(ops[i % 9], x, z, 10'($urandom) & 10'h21F);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
