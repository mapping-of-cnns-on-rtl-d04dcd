// tb_core_config: self-checking test of a core's bus target. Writes and reads
// back config registers (single lanes and whole beats), checks the read-only
// status register, the start pulse, SEQ_NR writes and increments, and that
// instruction-memory and crossbar writes are steered to the right ports.
module tb_core_config;
  import cim_pkg::*;
  localparam int unsigned BB = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            s_valid = 0, s_we = 0, s_ready;
  logic [31:0]     s_addr = 0;
  logic [BB*8-1:0] s_wdata = 0, s_rdata, wdata;
  logic [BB-1:0]   s_wstrb = 0, wstrb;
  logic            start, busy = 0, done = 0, im_we, xb_we;
  logic [31:0]     succ_addr, instr_base, instr_len, seq_nr;
  logic [11:0]     im_waddr;
  logic [13:0]     xb_addr;
  int checks = 0, failures = 0;
  int starts = 0, im_writes = 0, xb_writes = 0;

  core_config #(.BUS_BYTES(BB), .IM_BYTES(4096), .XB_CELLS(128 * 128)) dut (.*);

  always @(posedge clk) begin
    if (start) starts++;
    if (im_we) begin
      im_writes++;
      if (im_waddr != 12'h120 || wdata[31:0] != 32'hCAFE_0001) begin
        failures++; $display("FAIL im write %h", im_waddr);
      end
    end
    if (xb_we) begin
      xb_writes++;
      if (xb_addr != 14'h0230) begin failures++; $display("FAIL xb write %h", xb_addr); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [31:0] addr, logic [BB*8-1:0] data, logic [BB-1:0] strb);
    @(negedge clk);
    s_valid = 1; s_we = 1; s_addr = addr; s_wdata = data; s_wstrb = strb;
    @(negedge clk);
    s_valid = 0; s_we = 0;
  endtask

  task automatic wr32(int unsigned off, logic [31:0] v);
    int unsigned lane = (off % BB) / 4;
    wr(32'h8000_0000 | (off & ~(BB - 1)), (BB*8)'(v) << (32 * lane), BB'(4'hF) << (4 * lane));
  endtask

  task automatic rdchk(string what, int unsigned off, logic [31:0] exp);
    s_valid = 1; s_we = 0; s_addr = 32'h8000_0000 | (off & ~(BB - 1));
    #1;
    checks++;
    if (s_rdata[32 * ((off % BB) / 4) +: 32] !== exp) begin
      failures++;
      $display("FAIL %s got %h exp %h", what, s_rdata[32 * ((off % BB) / 4) +: 32], exp);
    end
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] vals [NUM_CFG_REGS];
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect32("seq reset", seq_nr, 0);
    rdchk("seq read", SEQ_NR_OFFSET, 0);
    s_valid = 0;
    for (int r = 2; r < NUM_CFG_REGS; r++) begin
      vals[r] = $urandom;
      wr32(4 * r, vals[r]);
    end
    @(negedge clk);
    for (int r = 2; r < NUM_CFG_REGS; r++) rdchk($sformatf("cfg%0d", r), 4 * r, vals[r]);
    s_valid = 0;
    expect32("succ", succ_addr, vals[CFG_SUCC_ADDR]);
    expect32("base", instr_base, vals[CFG_INSTR_BASE]);
    expect32("len", instr_len, vals[CFG_INSTR_LEN]);
    // full beat write to registers 4..7
    wr(32'h8000_0010, {32'h4444_4444, 32'h3333_3333, 32'h2222_2222, 32'h1111_1111}, '1);
    @(negedge clk);
    rdchk("beat r4", 16, 32'h1111_1111);
    rdchk("beat r7", 28, 32'h4444_4444);
    s_valid = 0;
    // status is read only
    busy = 1; done = 0;
    wr32(4 * CFG_STATUS, 32'hFFFF_FFFF);
    @(negedge clk);
    rdchk("status", 4 * CFG_STATUS, 32'h1);
    s_valid = 0; busy = 0; done = 1;
    rdchk("status2", 4 * CFG_STATUS, 32'h2);
    s_valid = 0;
    // start pulse
    wr32(4 * CFG_CTRL, 1);
    @(negedge clk);
    checks++;
    if (starts != 1) begin failures++; $display("FAIL starts=%0d", starts); end
    // SEQ_NR
    for (int i = 0; i < 7; i++) wr32(SEQ_INC_OFFSET, 32'hDEAD);
    @(negedge clk);
    expect32("seq inc", seq_nr, 7);
    wr32(SEQ_NR_OFFSET, 100);
    wr32(SEQ_INC_OFFSET, 0);
    @(negedge clk);
    expect32("seq set+inc", seq_nr, 101);
    rdchk("seq rd", SEQ_NR_OFFSET, 101);
    s_valid = 0;
    // instruction memory and crossbar regions
    wr(32'h8001_0120, (BB*8)'(32'hCAFE_0001), '1);
    wr(32'h8002_0230, (BB*8)'(32'h1234_5678), '1);
    @(negedge clk);
    checks += 2;
    if (im_writes != 1) begin failures++; $display("FAIL im_writes=%0d", im_writes); end
    if (xb_writes != 1) begin failures++; $display("FAIL xb_writes=%0d", xb_writes); end
    expect32("seq unaffected", seq_nr, 101);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
