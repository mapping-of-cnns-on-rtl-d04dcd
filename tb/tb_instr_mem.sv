// tb_instr_mem: self-checking test of the instruction memory. Writes the
// whole 4 KB with bus beats (some with partial strobes) and reads back every
// 64-bit instruction.
module tb_instr_mem;
  localparam int unsigned BYTES = 4096;
  localparam int unsigned BB    = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic           we = 0;
  logic [11:0]    waddr = 0;
  logic [BB*8-1:0] wdata = 0;
  logic [BB-1:0]  wstrb = 0;
  logic [8:0]     raddr = 0;
  logic [63:0]    rdata;
  logic [7:0]     shadow [BYTES];
  int checks = 0, failures = 0;

  instr_mem #(.BYTES(BYTES), .BUS_BYTES(BB)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_beat(int unsigned addr, logic [BB-1:0] strb);
    @(negedge clk);
    we = 1; waddr = 12'(addr); wstrb = strb;
    for (int j = 0; j < BB; j++) begin
      wdata[8*j +: 8] = 8'($urandom);
      if (strb[j]) shadow[addr + j] = wdata[8*j +: 8];
    end
    @(negedge clk) we = 0;
  endtask

  initial begin
    for (int i = 0; i < BYTES / BB; i++) write_beat(i * BB, '1);
    for (int i = 0; i < 200; i++) write_beat(($urandom % (BYTES / BB)) * BB, BB'($urandom));
    for (int i = 0; i < BYTES / 8; i++) begin
      raddr = 9'(i);
      #1;
      checks++;
      for (int j = 0; j < 8; j++)
        if (rdata[8*j +: 8] !== shadow[8*i + j]) begin
          failures++;
          $display("FAIL instr %0d byte %0d", i, j);
          break;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
