// tb_core_controller: self-checking test of the core controller, run inside
// a complete core (cim_core) whose initiator port is connected to a shared
// memory; writes to core space (CALLs) go to a counter in this testbench.
//
// Program 1 (preloaded): one MVM step as the cores of a layer run it:
//   LOAD input, MVM, MOV, LOAD partial sums, ADD, RELU, STORE, CALL, WAIT, HALT
// The testbench releases the WAIT by incrementing SEQ_NR over the bus only
// after a delay, one increment at a time, and checks that the core stalled
// until the third.
// Program 2 (preloaded): every other GPEU operation on two vectors.
// Program 3 (paged from shared memory, three pages): a long ADD chain.
// All results are compared with values computed here; the cycle count of a
// LOAD burst is checked against one beat per cycle.
module tb_core_controller;
  import cim_pkg::*;
  localparam int unsigned M  = 16;
  localparam int unsigned N  = 16;
  localparam int unsigned BB = 8;
  localparam int unsigned IMB = 128;
  localparam int unsigned BW = BB * 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // core target port (driven here)
  logic          t_valid = 0, t_we = 0, t_ready;
  logic [31:0]   t_addr = 0;
  logic [BW-1:0] t_wdata = 0, t_rdata;
  logic [BB-1:0] t_wstrb = 0;
  // core initiator port
  logic          m_valid, m_we, m_last, m_ready;
  logic [31:0]   m_addr;
  logic [BW-1:0] m_wdata, m_rdata;
  logic [BB-1:0] m_wstrb;
  logic          busy, done, ev_call, ev_wait_stall, ev_fill;
  // shared memory port, shared between the core and this testbench
  logic          tb_mem = 1, tb_valid = 0, tb_we = 0;
  logic [31:0]   tb_addr = 0;
  logic [BW-1:0] tb_wdata = 0;
  logic          sm_ready;
  logic [BW-1:0] sm_rdata;

  int checks = 0, failures = 0;
  int calls = 0, stall_cycles = 0, fills = 0;
  logic [31:0] call_addr;

  cim_core #(.M(M), .N(N), .BUS_BYTES(BB), .IM_BYTES(IMB), .XBAR_LAT(2)) dut (
    .clk, .rst_n,
    .s_valid(t_valid), .s_we(t_we), .s_addr(t_addr), .s_wdata(t_wdata), .s_wstrb(t_wstrb),
    .s_ready(t_ready), .s_rdata(t_rdata),
    .m_valid, .m_we, .m_last, .m_addr, .m_wdata, .m_wstrb, .m_ready, .m_rdata,
    .busy, .done, .ev_call, .ev_wait_stall, .ev_fill
  );

  shared_memory #(.BYTES(4096), .BUS_BYTES(BB)) u_mem (
    .clk,
    .s_valid(tb_mem ? tb_valid : (m_valid && !m_addr[31])),
    .s_we   (tb_mem ? tb_we : m_we),
    .s_addr (tb_mem ? tb_addr : m_addr),
    .s_wdata(tb_mem ? tb_wdata : m_wdata),
    .s_wstrb(tb_mem ? '1 : m_wstrb),
    .s_ready(sm_ready),
    .s_rdata(sm_rdata)
  );

  assign m_ready = m_addr[31] ? m_valid : (m_valid && !tb_mem && sm_ready);
  assign m_rdata = sm_rdata;

  always @(posedge clk) begin
    if (m_valid && m_ready && m_addr[31] && m_we) begin
      calls++;
      call_addr = m_addr;
      if (m_wstrb != (BB'(4'hF) << (4 * ((m_addr % BB) / 4)))) begin
        failures++; $display("FAIL CALL strobes %b", m_wstrb);
      end
    end
    if (ev_wait_stall) stall_cycles++;
    if (ev_fill) fills++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- helpers ----
  task automatic cfg_wr(int unsigned region, int unsigned off, logic [BW-1:0] data, logic [BB-1:0] strb);
    @(negedge clk);
    t_valid = 1; t_we = 1; t_addr = core_addr(0, region, off & ~(BB - 1)); t_wdata = data; t_wstrb = strb;
    @(negedge clk);
    t_valid = 0; t_we = 0;
  endtask

  task automatic reg_wr(int unsigned off, logic [31:0] v);
    int unsigned lane = (off % BB) / 4;
    cfg_wr(REGION_CFG, off, BW'(v) << (32 * lane), BB'(4'hF) << (4 * lane));
  endtask

  task automatic mem_wr(int unsigned addr, logic [BW-1:0] data);
    @(negedge clk);
    tb_valid = 1; tb_we = 1; tb_addr = addr; tb_wdata = data;
    @(negedge clk);
    tb_valid = 0; tb_we = 0;
  endtask

  function automatic logic [31:0] mem_word(int unsigned addr);
    return u_mem.mem[addr / BB][32 * ((addr % BB) / 4) +: 32];
  endfunction

  task automatic load_program(instr_t prog[$]);
    foreach (prog[i]) cfg_wr(REGION_IM, 8 * i, BW'(prog[i]), '1);
  endtask

  task automatic run_core();
    tb_mem = 0;
    reg_wr(4 * CFG_CTRL, 1);
    @(negedge clk);
    while (!done) @(negedge clk);
    tb_mem = 1;
  endtask

  task automatic expect32(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, $signed(got), $signed(exp)); end
  endtask

  logic signed [7:0]  w [M][N];
  logic signed [7:0]  x [N];
  logic signed [31:0] bias [M];
  logic signed [31:0] va [2], vb [2];

  initial begin
    instr_t prog[$];
    int t0, t_load;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- program 1 ----------------
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) w[m][n] = 8'($urandom);
    for (int a = 0; a < M * N; a += BB) begin
      logic [BW-1:0] d;
      for (int j = 0; j < BB; j++) d[8*j +: 8] = w[(a + j) / N][(a + j) % N];
      cfg_wr(REGION_XBAR, a, d, '1);
    end
    for (int n = 0; n < N; n += BB) begin
      logic [BW-1:0] d;
      for (int j = 0; j < BB; j++) begin x[n + j] = 8'($urandom); d[8*j +: 8] = x[n + j]; end
      mem_wr('h100 + n, d);
    end
    for (int m = 0; m < M; m += 2) begin
      bias[m] = $signed($urandom) >>> 12; bias[m + 1] = $signed($urandom) >>> 12;
      mem_wr('h200 + 4 * m, {bias[m + 1], bias[m]});
    end
    reg_wr(4 * CFG_SUCC_ADDR, core_addr(5, REGION_CFG, SEQ_INC_OFFSET));
    reg_wr(4 * CFG_INSTR_LEN, 0);
    prog = {};
    prog.push_back(mk_load(0, N, 'h100));
    prog.push_back(mk_instr(OP_MVM, 0, 0, '0));
    prog.push_back(mk_instr(OP_MOV, 0, M, '0));
    prog.push_back(mk_load(4 * M, 4 * M, 'h200));
    prog.push_back(mk_alu(OP_ADD, 4 * M, 4 * M, 0, M, 0));
    prog.push_back(mk_alu(OP_RELU, 4 * M, 4 * M, 0, M, 0));
    prog.push_back(mk_store(4 * M, 4 * M, 'h300));
    prog.push_back(mk_instr(OP_CALL, 0, 0, '0));
    prog.push_back(mk_wait(3));
    prog.push_back(mk_store(4 * M, 4 * M, 'h400));
    prog.push_back(mk_instr(OP_HALT, 0, 0, '0));
    load_program(prog);
    // start; release the WAIT from here after a while
    tb_mem = 0;
    reg_wr(4 * CFG_CTRL, 1);
    t0 = $time;
    t_load = 0;
    fork
      begin
        // length of the first LOAD burst: N/BB beats, one per cycle
        int beats = 0;
        @(posedge clk);
        while (!m_valid) @(posedge clk);
        while (m_valid) begin beats++; @(posedge clk); end
        t_load = beats;
      end
      begin
        while (calls == 0) @(negedge clk);
        repeat (30) @(negedge clk);
        checks++;
        if (done) begin failures++; $display("FAIL core passed WAIT early"); end
        for (int i = 0; i < 3; i++) begin
          t_valid = 1; t_we = 1; t_addr = core_addr(0, REGION_CFG, SEQ_INC_OFFSET & ~(BB - 1));
          t_wstrb = BB'(4'hF) << (4 * ((SEQ_INC_OFFSET % BB) / 4));
          @(negedge clk);
          t_valid = 0; t_we = 0;
          @(negedge clk);
          if (i == 1) begin
            // two of the three CALLs: the WAIT must still hold
            repeat (20) @(negedge clk);
            checks++;
            if (done) begin failures++; $display("FAIL core passed WAIT at SEQ_NR 2 < 3"); end
          end
        end
      end
    join
    while (!done) @(negedge clk);
    tb_mem = 1;
    expect32("load burst cycles", t_load, N / BB);
    for (int m = 0; m < M; m++) begin
      automatic int acc = bias[m];
      for (int n = 0; n < N; n++) acc += int'(w[m][n]) * int'(x[n]);
      if (acc < 0) acc = 0;
      expect32($sformatf("mvm+bias+relu[%0d]", m), mem_word('h300 + 4 * m), acc);
      expect32($sformatf("after wait[%0d]", m), mem_word('h400 + 4 * m), acc);
    end
    expect32("calls", calls, 1);
    expect32("call address", call_addr, core_addr(5, REGION_CFG, SEQ_INC_OFFSET));
    checks++;
    if (stall_cycles < 30) begin failures++; $display("FAIL stall cycles %0d", stall_cycles); end

    // ---------------- program 2: GPEU operations ----------------
    va[0] = -1000; va[1] = 77777;
    vb[0] = 7;     vb[1] = -3;
    mem_wr('h500, {va[1], va[0]});
    mem_wr('h508, {vb[1], vb[0]});
    prog = {};
    prog.push_back(mk_load(0, 8, 'h500));
    prog.push_back(mk_load(8, 8, 'h508));
    prog.push_back(mk_alu(OP_SUB,   16, 0, 8, 2, 0));
    prog.push_back(mk_alu(OP_MUL,   24, 0, 8, 2, 0));
    prog.push_back(mk_alu(OP_DIV,   32, 0, 8, 2, 0));
    prog.push_back(mk_alu(OP_MIN,   40, 0, 8, 2, 0));
    prog.push_back(mk_alu(OP_MAX,   48, 0, 8, 2, 0));
    prog.push_back(mk_alu(OP_SHIFT, 56, 0, 8, 2, 3));
    prog.push_back(mk_alu(OP_LRELU, 64, 0, 8, 2, 2));
    prog.push_back(mk_instr(OP_NOP, 0, 0, '0));
    prog.push_back(mk_store(16, 56, 'h600));
    prog.push_back(mk_instr(OP_HALT, 0, 0, '0));
    load_program(prog);
    run_core();
    for (int i = 0; i < 2; i++) begin
      expect32("sub", mem_word('h600 + 4 * i), va[i] - vb[i]);
      expect32("mul", mem_word('h608 + 4 * i), va[i] * vb[i]);
      expect32("div", mem_word('h610 + 4 * i), va[i] / vb[i]);
      expect32("min", mem_word('h618 + 4 * i), (va[i] < vb[i]) ? va[i] : vb[i]);
      expect32("max", mem_word('h620 + 4 * i), (va[i] > vb[i]) ? va[i] : vb[i]);
      expect32("shift", mem_word('h628 + 4 * i), va[i] >>> 3);
      expect32("lrelu", mem_word('h630 + 4 * i), (va[i] < 0) ? (va[i] >>> 2) : va[i]);
    end

    // ---------------- program 3: paged instruction section ----------------
    prog = {};
    prog.push_back(mk_load(0, 8, 'h500));
    prog.push_back(mk_load(8, 8, 'h508));
    for (int i = 0; i < 36; i++) prog.push_back(mk_alu(OP_ADD, 0, 0, 8, 2, 0));
    prog.push_back(mk_store(0, 8, 'h700));
    prog.push_back(mk_instr(OP_HALT, 0, 0, '0));
    foreach (prog[i]) mem_wr('h800 + 8 * i, BW'(prog[i]));
    reg_wr(4 * CFG_INSTR_BASE, 'h800);
    reg_wr(4 * CFG_INSTR_LEN, prog.size());
    fills = 0;
    run_core();
    expect32("fills", fills, (prog.size() * 8 + IMB - 1) / IMB);
    for (int i = 0; i < 2; i++) expect32("paged add chain", mem_word('h700 + 4 * i), va[i] + 36 * vb[i]);

    $display("calls=%0d wait_stall_cycles=%0d page_fills=%0d", calls, stall_cycles, fills);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
