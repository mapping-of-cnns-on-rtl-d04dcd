// tb_cim_core: self-checking test of one CIM core through its two bus ports,
// as the CPU and the shared memory see it.
//
// Target side: every configuration register is written with a random value
// and read back over the bus; STATUS is checked to read 0 before the first
// run, busy (1) while the core is held in a WAIT and done (2) after HALT;
// SEQ_NR is set and incremented over the bus and read back.
// Initiator side: the core runs a program of NV matrix-vector products
//   WAIT 1, { LOAD x_i, MVM, MOV, STORE y_i } x NV, HALT
// against a shared memory; the crossbar is then reprogrammed with new
// weights and the same program is started again. All NV*M results of both
// runs are compared with products computed here. The crossbar size (M x N
// = 8 x 24) is not a power of two in N, to exercise the general case.
module tb_cim_core;
  import cim_pkg::*;
  localparam int unsigned M   = 8;
  localparam int unsigned N   = 24;
  localparam int unsigned BB  = 8;
  localparam int unsigned IMB = 256;
  localparam int unsigned BW  = BB * 8;
  localparam int unsigned NV  = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          t_valid = 0, t_we = 0, t_ready;
  logic [31:0]   t_addr = 0;
  logic [BW-1:0] t_wdata = 0, t_rdata;
  logic [BB-1:0] t_wstrb = 0;
  logic          m_valid, m_we, m_last, m_ready;
  logic [31:0]   m_addr;
  logic [BW-1:0] m_wdata, m_rdata;
  logic [BB-1:0] m_wstrb;
  logic          busy, done, ev_call, ev_wait_stall, ev_fill;
  logic          tb_mem = 1, tb_valid = 0;
  logic [31:0]   tb_addr = 0;
  logic [BW-1:0] tb_wdata = 0;
  logic          sm_ready;
  logic [BW-1:0] sm_rdata;

  int checks = 0, failures = 0;

  cim_core #(.M(M), .N(N), .BUS_BYTES(BB), .IM_BYTES(IMB), .XBAR_LAT(3)) dut (
    .clk, .rst_n,
    .s_valid(t_valid), .s_we(t_we), .s_addr(t_addr), .s_wdata(t_wdata), .s_wstrb(t_wstrb),
    .s_ready(t_ready), .s_rdata(t_rdata),
    .m_valid, .m_we, .m_last, .m_addr, .m_wdata, .m_wstrb, .m_ready, .m_rdata,
    .busy, .done, .ev_call, .ev_wait_stall, .ev_fill
  );

  shared_memory #(.BYTES(4096), .BUS_BYTES(BB)) u_mem (
    .clk,
    .s_valid(tb_mem ? tb_valid : (m_valid && !m_addr[31])),
    .s_we   (tb_mem ? 1'b1 : m_we),
    .s_addr (tb_mem ? tb_addr : m_addr),
    .s_wdata(tb_mem ? tb_wdata : m_wdata),
    .s_wstrb(tb_mem ? '1 : m_wstrb),
    .s_ready(sm_ready),
    .s_rdata(sm_rdata)
  );

  assign m_ready = m_addr[31] ? m_valid : (m_valid && !tb_mem && sm_ready);
  assign m_rdata = sm_rdata;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one beat on the core's target port; returns the read data
  task automatic tgt(logic we, int unsigned region, int unsigned off, logic [BW-1:0] data,
                     logic [BB-1:0] strb, output logic [BW-1:0] rdata);
    @(negedge clk);
    t_valid = 1; t_we = we; t_addr = core_addr(0, region, off & ~(BB - 1)); t_wdata = data; t_wstrb = strb;
    #1;
    if (!t_ready) begin failures++; $display("FAIL target not ready"); end
    rdata = t_rdata;
    @(negedge clk);
    t_valid = 0; t_we = 0;
  endtask

  task automatic reg_wr(int unsigned off, logic [31:0] v);
    logic [BW-1:0] unused;
    int unsigned lane = (off % BB) / 4;
    tgt(1, REGION_CFG, off, BW'(v) << (32 * lane), BB'(4'hF) << (4 * lane), unused);
  endtask

  task automatic reg_chk(string what, int unsigned off, logic [31:0] exp);
    logic [BW-1:0] d;
    tgt(0, REGION_CFG, off, '0, '0, d);
    checks++;
    if (d[32 * ((off % BB) / 4) +: 32] !== exp) begin
      failures++; $display("FAIL %s got %h exp %h", what, d[32 * ((off % BB) / 4) +: 32], exp);
    end
  endtask

  task automatic mem_wr(int unsigned addr, logic [BW-1:0] data);
    @(negedge clk);
    tb_valid = 1; tb_addr = addr; tb_wdata = data;
    @(negedge clk);
    tb_valid = 0;
  endtask

  logic signed [7:0] w [M][N];
  logic signed [7:0] x [NV][N];

  task automatic program_xbar();
    logic [BW-1:0] unused;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) w[m][n] = 8'($urandom);
    for (int a = 0; a < M * N; a += BB) begin
      logic [BW-1:0] d;
      for (int j = 0; j < BB; j++) d[8*j +: 8] = w[(a + j) / N][(a + j) % N];
      tgt(1, REGION_XBAR, a, d, '1, unused);
    end
  endtask

  task automatic run_and_check(int run);
    for (int v = 0; v < NV; v++)
      for (int n = 0; n < N; n += BB) begin
        logic [BW-1:0] d;
        for (int j = 0; j < BB; j++) begin x[v][n + j] = 8'($urandom); d[8*j +: 8] = x[v][n + j]; end
        mem_wr('h100 + v * N + n, d);
      end
    reg_wr(SEQ_NR_OFFSET, 0);
    tb_mem = 0;
    reg_wr(4 * CFG_CTRL, 1);
    repeat (20) @(negedge clk);
    reg_chk("status while waiting", 4 * CFG_STATUS, 32'h1);
    reg_wr(SEQ_INC_OFFSET, 32'hdead);   // any write increments
    while (!done) @(negedge clk);
    tb_mem = 1;
    reg_chk("status after halt", 4 * CFG_STATUS, 32'h2);
    reg_chk("seq_nr after run", SEQ_NR_OFFSET, 1);
    for (int v = 0; v < NV; v++)
      for (int m = 0; m < M; m++) begin
        automatic int acc = 0;
        automatic int unsigned a = 'h400 + 4 * (v * M + m);
        for (int n = 0; n < N; n++) acc += int'(w[m][n]) * int'(x[v][n]);
        checks++;
        if (u_mem.mem[a / BB][32 * ((a % BB) / 4) +: 32] !== acc) begin
          failures++;
          $display("FAIL run %0d y[%0d][%0d] got %0d exp %0d", run, v, m,
                   $signed(u_mem.mem[a / BB][32 * ((a % BB) / 4) +: 32]), acc);
        end
      end
  endtask

  initial begin
    logic [31:0] rv [NUM_CFG_REGS];
    instr_t prog[$];
    logic [BW-1:0] unused;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // configuration registers
    reg_chk("status after reset", 4 * CFG_STATUS, 0);
    reg_chk("seq_nr after reset", SEQ_NR_OFFSET, 0);
    for (int i = 2; i < NUM_CFG_REGS; i++) begin rv[i] = $urandom; reg_wr(4 * i, rv[i]); end
    for (int i = 2; i < NUM_CFG_REGS; i++) reg_chk($sformatf("cfg[%0d]", i), 4 * i, rv[i]);
    reg_wr(4 * CFG_STATUS, 32'hffff_ffff);
    reg_chk("status is read-only", 4 * CFG_STATUS, 0);
    reg_wr(SEQ_NR_OFFSET, 40);
    for (int i = 0; i < 5; i++) reg_wr(SEQ_INC_OFFSET, 0);
    reg_chk("seq_nr set+5", SEQ_NR_OFFSET, 45);
    reg_wr(4 * CFG_INSTR_LEN, 0);   // program from the instruction memory

    // program
    prog.push_back(mk_wait(1));
    for (int v = 0; v < NV; v++) begin
      prog.push_back(mk_load(0, N, 'h100 + v * N));
      prog.push_back(mk_instr(OP_MVM, 0, 0, '0));
      prog.push_back(mk_instr(OP_MOV, 0, M, '0));
      prog.push_back(mk_store(0, 4 * M, 'h400 + 4 * v * M));
    end
    prog.push_back(mk_instr(OP_HALT, 0, 0, '0));
    for (int i = 0; i < prog.size(); i += BB / 8) begin
      logic [BW-1:0] d;
      for (int l = 0; l < BB / 8; l++) d[64*l +: 64] = (i + l < prog.size()) ? 64'(prog[i + l]) : 64'h0;
      tgt(1, REGION_IM, 8 * i, d, '1, unused);
    end

    program_xbar();
    run_and_check(0);
    program_xbar();
    run_and_check(1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
