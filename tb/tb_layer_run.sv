// tb_layer_run: test harness that plays the host CPU and the layer compiler
// for cim_top, runs one 1x1 conv2D layer end to end and checks the result.
//
// Compiler part: the layer (OX*OY output vectors, K_Z input channels, K_NUM
// kernels) is split im2col-style over P_V = ceil(K_Z/N) vertical groups and
// P_H = ceil(K_NUM/M) horizontal groups; core C(hg,vg) = core hg*P_V+vg holds
// rows hg*M.. of the kernel matrix and input channels vg*N.. . For every
// output vector a core runs
//     LOAD ifm slice, MVM, MOV, [WAIT], LOAD ofm partials, ADD,
//     [RELU if it is the last owner], STORE ofm, [CALL if not last]
// and the WAIT/CALL pattern follows one of three schemes:
//   0 sequential: core vg waits once for core vg-1 to finish all vectors;
//   1 linear:     all cores walk the vectors in the same order, vg-1 -> vg;
//   2 cyclic:     in round r, step j, core vg handles vector
//                 r*P_V + (vg - j) mod P_V; successor is (vg+1) mod P_V.
// The WAIT threshold is the running count of CALLs the predecessor has made
// for this core so far. Bias values are pre-written into the OFM area, so
// the first owner of a vector adds them by the same LOAD/ADD.
//
// CPU part: programs the crossbars once, then for each scheme in SCHEMES
// writes IFM, bias, code sections and config registers, starts every core,
// waits for the interrupt, reads the OFM back and compares it with a
// reference computed here. It counts CALLs, WAIT stall cycles, instruction
// page fills and bus contention cycles, checks the CALL count against the
// formulas for linear and cyclic synchronisation and reports the speedup of
// the parallel schemes over the sequential one.
//
// With STANDALONE = 1 the harness prints TB_RESULT and ends the simulation;
// with STANDALONE = 0 it only sets `finished`, so that a testbench can run
// several systems side by side and add up their `checks` and `failures`.
module tb_layer_run
  import cim_pkg::*;
#(
  parameter int unsigned NUM_CORES = 6,
  parameter int unsigned M         = 16,
  parameter int unsigned N         = 16,
  parameter int unsigned BB        = 8,
  parameter int unsigned IMB       = 256,
  parameter int unsigned O_V       = 12,    // output vectors OX*OY
  parameter int unsigned K_Z       = 48,    // input channels
  parameter int unsigned K_NUM     = 32,    // kernels (output channels)
  parameter int unsigned SCHEMES   = 3'b111,
  parameter longint unsigned WATCHDOG = 2_000_000,
  parameter bit          STANDALONE = 1'b1,  // 0: report through `finished`, no $finish
  parameter string       NAME      = "layer",
  localparam int unsigned BW       = BB * 8,
  localparam int unsigned NI       = NUM_CORES + 1
) (
  input  logic                 clk,
  output logic                 rst_n,
  output logic                 cpu_valid,
  output logic                 cpu_we,
  output logic                 cpu_last,
  output logic [31:0]          cpu_addr,
  output logic [BW-1:0]        cpu_wdata,
  output logic [BB-1:0]        cpu_wstrb,
  input  logic                 cpu_ready,
  input  logic [BW-1:0]        cpu_rdata,
  input  logic                 irq,
  input  logic [NUM_CORES-1:0] core_busy,
  input  logic [NUM_CORES-1:0] core_done,
  input  logic [NUM_CORES-1:0] ev_call,
  input  logic [NUM_CORES-1:0] ev_wait_stall,
  input  logic [NUM_CORES-1:0] ev_fill,
  input  logic [NI-1:0]        bus_stall
);

  localparam int unsigned P_V = (K_Z + N - 1) / N;
  localparam int unsigned P_H = (K_NUM + M - 1) / M;
  localparam int unsigned USED = P_V * P_H;
  localparam int unsigned IFM_BASE  = 32'h0000_0000;
  localparam int unsigned OFM_BASE  = ((O_V * K_Z + 4095) / 4096) * 4096;
  localparam int unsigned CODE_BASE = OFM_BASE + ((O_V * K_NUM * 4 + 4095) / 4096) * 4096;
  localparam int unsigned CODE_STRIDE = ((O_V * 10 + 2) * 8 + 4095) / 4096 * 4096;

  int checks = 0, failures = 0;
  bit finished = 1'b0;
  longint cyc = 0;
  int calls = 0, stalls = 0, fills = 0, contention = 0, irqs = 0;
  logic irq_q = 0;

  logic signed [7:0]  wgt  [K_NUM][K_Z];
  logic signed [7:0]  ifm  [O_V][K_Z];
  logic signed [31:0] bias [K_NUM];
  logic signed [31:0] ref_ofm [O_V][K_NUM];

  always @(posedge clk) begin
    cyc++;
    calls      += $countones(ev_call);
    stalls     += $countones(ev_wait_stall);
    fills      += $countones(ev_fill);
    contention += $countones(bus_stall);
    irq_q      <= irq;
    if (irq && !irq_q) irqs++;
  end

  initial begin
    while (cyc < WATCHDOG) @(posedge clk);
    failures++;
    $display("%s: watchdog expired", NAME);
    finished = 1'b1;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ---- CPU bus access ----
  task automatic bus_beat(logic we, logic [31:0] addr, logic [BW-1:0] data, logic [BB-1:0] strb,
                          output logic [BW-1:0] rdata);
    @(negedge clk);
    cpu_valid = 1; cpu_we = we; cpu_last = 1; cpu_addr = addr; cpu_wdata = data; cpu_wstrb = strb;
    forever begin #1; if (cpu_ready) break; @(negedge clk); end
    rdata = cpu_rdata;
    @(posedge clk);
    #1 cpu_valid = 0;
  endtask

  task automatic wr(logic [31:0] addr, logic [BW-1:0] data);
    logic [BW-1:0] unused;
    bus_beat(1, addr, data, '1, unused);
  endtask

  task automatic wr32(logic [31:0] addr, logic [31:0] v);
    logic [BW-1:0] unused;
    int unsigned lane = (addr % BB) / 4;
    bus_beat(1, addr & ~(BB - 1), BW'(v) << (32 * lane), BB'(4'hF) << (4 * lane), unused);
  endtask

  task automatic rd(logic [31:0] addr, output logic [BW-1:0] data);
    bus_beat(0, addr, '0, '0, data);
  endtask

  // ---- compiler ----
  function automatic logic [31:0] ofm_addr(int v, int k);
    return OFM_BASE + 4 * (v * K_NUM + k);
  endfunction

  task automatic emit_vector(ref instr_t prog[$], input int hg, input int vg, input int v,
                             input bit first, input bit last, input int thr, input bit sync);
    int unsigned slice = (K_Z - vg * N < N) ? (K_Z - vg * N) : N;
    int unsigned rows  = (K_NUM - hg * M < M) ? (K_NUM - hg * M) : M;
    prog.push_back(mk_load(0, slice, IFM_BASE + v * K_Z + vg * N));
    prog.push_back(mk_instr(OP_MVM, 0, 0, '0));
    prog.push_back(mk_instr(OP_MOV, 0, rows, '0));
    if (sync && !first) prog.push_back(mk_wait(thr));
    prog.push_back(mk_load(4 * M, 4 * rows, ofm_addr(v, hg * M)));
    prog.push_back(mk_alu(OP_ADD, 4 * M, 4 * M, 0, rows, 0));
    if (last) prog.push_back(mk_alu(OP_RELU, 4 * M, 4 * M, 0, rows, 0));
    prog.push_back(mk_store(4 * M, 4 * rows, ofm_addr(v, hg * M)));
    if (sync && !last) prog.push_back(mk_instr(OP_CALL, 0, 0, '0));
  endtask

  task automatic compile_core(input int scheme, input int hg, input int vg, ref instr_t prog[$]);
    int waits = 0;
    prog = {};
    if (scheme == 0) begin
      if (vg > 0) prog.push_back(mk_wait(1));
      for (int v = 0; v < O_V; v++) emit_vector(prog, hg, vg, v, vg == 0, vg == P_V - 1, 0, 1'b0);
      // the sequential hand-over: one CALL after the last vector
      if (vg < P_V - 1) prog.push_back(mk_instr(OP_CALL, 0, 0, '0));
    end else if (scheme == 1) begin
      for (int v = 0; v < O_V; v++) begin
        if (vg > 0) waits++;
        emit_vector(prog, hg, vg, v, vg == 0, vg == P_V - 1, waits, 1'b1);
      end
    end else begin
      for (int r = 0; r < (O_V + P_V - 1) / P_V; r++)
        for (int j = 0; j < P_V; j++) begin
          // the vector this core takes in round r, step j (signed arithmetic)
          int d = vg - j;
          int v;
          if (d < 0) d += int'(P_V);
          v = r * int'(P_V) + d;
          if (v >= O_V) continue;
          if (j > 0) waits++;
          emit_vector(prog, hg, vg, v, j == 0, j == P_V - 1, waits, 1'b1);
        end
    end
    prog.push_back(mk_instr(OP_HALT, 0, 0, '0));
  endtask

  // ---- one layer run ----
  task automatic run_scheme(input int scheme, output longint cycles);
    instr_t prog[$];
    logic [BW-1:0] beat;
    int calls0;
    longint t0;
    // IFM and bias into shared memory (OFM placeholder)
    for (int a = 0; a < O_V * K_Z; a += BB) begin
      for (int j = 0; j < BB; j++) beat[8*j +: 8] = (a + j < O_V * K_Z) ? ifm[(a + j) / K_Z][(a + j) % K_Z] : 8'h0;
      wr(IFM_BASE + a, beat);
    end
    for (int v = 0; v < O_V; v++)
      for (int k = 0; k < K_NUM; k += BB / 4) begin
        for (int l = 0; l < BB / 4; l++) beat[32*l +: 32] = bias[k + l];
        wr(ofm_addr(v, k), beat);
      end
    // code sections and configuration
    for (int hg = 0; hg < P_H; hg++)
      for (int vg = 0; vg < P_V; vg++) begin
        int c = hg * P_V + vg;
        int succ = (scheme == 2) ? hg * P_V + (vg + 1) % P_V : c + 1;
        compile_core(scheme, hg, vg, prog);
        if (prog.size() * 8 > CODE_STRIDE) $fatal(1, "code section overflow");
        for (int i = 0; i < prog.size(); i += BB / 8) begin
          for (int l = 0; l < BB / 8; l++) beat[64*l +: 64] = (i + l < prog.size()) ? 64'(prog[i + l]) : 64'h0;
          wr(CODE_BASE + c * CODE_STRIDE + 8 * i, beat);
        end
        wr32(core_addr(c, REGION_CFG, 4 * CFG_SUCC_ADDR), core_addr(succ, REGION_CFG, SEQ_INC_OFFSET));
        wr32(core_addr(c, REGION_CFG, 4 * CFG_INSTR_BASE), CODE_BASE + c * CODE_STRIDE);
        wr32(core_addr(c, REGION_CFG, 4 * CFG_INSTR_LEN), prog.size());
        wr32(core_addr(c, REGION_CFG, 4 * CFG_HG_ID), hg);
        wr32(core_addr(c, REGION_CFG, 4 * CFG_VG_ID), vg);
        wr32(core_addr(c, REGION_CFG, SEQ_NR_OFFSET), 0);
      end
    // inference phase
    calls0 = calls;
    t0 = cyc;
    for (int c = 0; c < USED; c++) wr32(core_addr(c, REGION_CFG, 4 * CFG_CTRL), 1);
    @(posedge clk);
    while (!irq) @(posedge clk);
    cycles = cyc - t0;
    // status registers report done
    for (int c = 0; c < USED; c++) begin
      rd(core_addr(c, REGION_CFG, 4 * CFG_STATUS) & ~(BB - 1), beat);
      checks++;
      if (beat[32 * ((4 * CFG_STATUS % BB) / 4) +: 32] != 32'h2) begin
        failures++; $display("FAIL core %0d status %h", c, beat);
      end
    end
    // check the OFM
    for (int v = 0; v < O_V; v++)
      for (int k = 0; k < K_NUM; k += BB / 4) begin
        rd(ofm_addr(v, k), beat);
        for (int l = 0; l < BB / 4; l++) begin
          checks++;
          if ($signed(beat[32*l +: 32]) != ref_ofm[v][k + l]) begin
            failures++;
            if (failures < 10)
              $display("FAIL scheme %0d ofm[%0d][%0d] got %0d exp %0d", scheme, v, k + l,
                       $signed(beat[32*l +: 32]), ref_ofm[v][k + l]);
          end
        end
      end
    // CALL count
    begin
      int exp_calls;
      if (scheme == 0)      exp_calls = P_H * (P_V - 1);
      else if (scheme == 1) exp_calls = P_H * O_V * (P_V - 1);
      else                  exp_calls = P_H * ((O_V + P_V - 1) / P_V) * P_V * (P_V - 1);
      checks++;
      if (scheme != 2 || O_V % P_V == 0) begin
        if (calls - calls0 != exp_calls) begin
          failures++; $display("FAIL scheme %0d calls %0d exp %0d", scheme, calls - calls0, exp_calls);
        end
      end else if (calls - calls0 > exp_calls) begin
        failures++; $display("FAIL scheme %0d calls %0d above %0d", scheme, calls - calls0, exp_calls);
      end
    end
  endtask

  initial begin
    longint t [3];
    logic [BW-1:0] beat;
    int stalls_par;
    cpu_valid = 0; cpu_we = 0; cpu_last = 0; cpu_addr = 0; cpu_wdata = 0; cpu_wstrb = 0;
    rst_n = 0;
    if (USED > NUM_CORES) $fatal(1, "layer needs %0d cores", USED);
    // workload and reference
    for (int k = 0; k < K_NUM; k++) begin
      bias[k] = $signed($urandom % 20001) - 10000;
      for (int c = 0; c < K_Z; c++) wgt[k][c] = 8'($urandom);
    end
    for (int v = 0; v < O_V; v++)
      for (int c = 0; c < K_Z; c++) ifm[v][c] = 8'($urandom);
    for (int v = 0; v < O_V; v++)
      for (int k = 0; k < K_NUM; k++) begin
        automatic int acc = bias[k];
        for (int c = 0; c < K_Z; c++) acc += int'(wgt[k][c]) * int'(ifm[v][c]);
        ref_ofm[v][k] = (acc < 0) ? 0 : acc;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // setup phase: program the crossbars once (weights stay for all runs)
    for (int hg = 0; hg < P_H; hg++)
      for (int vg = 0; vg < P_V; vg++) begin
        automatic int c = hg * P_V + vg;
        for (int a = 0; a < M * N; a += BB) begin
          for (int j = 0; j < BB; j++) begin
            automatic int m = (a + j) / N, n = (a + j) % N;
            automatic int k = hg * M + m, ch = vg * N + n;
            beat[8*j +: 8] = (k < K_NUM && ch < K_Z) ? wgt[k][ch] : 8'h0;
          end
          wr(core_addr(c, REGION_XBAR, a), beat);
        end
      end
    stalls_par = 0;
    for (int s = 0; s < 3; s++) begin
      t[s] = 0;
      if (SCHEMES[s]) begin
        automatic int st0 = stalls;
        run_scheme(s, t[s]);
        $display("%s: scheme %0d (%s): %0d cycles, CALLs so far %0d, WAIT stall cycles %0d", NAME,
                 s, s == 0 ? "sequential" : s == 1 ? "linear" : "cyclic", t[s], calls, stalls - st0);
        if (s > 0) stalls_par += stalls - st0;
      end
    end
    if (SCHEMES[0] && SCHEMES[1]) $display("%s: speedup linear  %0.2f (limit P_V=%0d)", NAME, real'(t[0]) / real'(t[1]), P_V);
    if (SCHEMES[0] && SCHEMES[2]) $display("%s: speedup cyclic  %0.2f (limit P_V=%0d)", NAME, real'(t[0]) / real'(t[2]), P_V);
    $display("%s: events: calls=%0d wait_stall_cycles=%0d page_fills=%0d bus_contention_cycles=%0d irqs=%0d", NAME,
             calls, stalls, fills, contention, irqs);
    // every mechanism must have happened
    checks += 4;
    if (P_V > 1 && calls == 0)      begin failures++; $display("FAIL no CALL happened"); end
    if (P_V > 1 && stalls == 0)     begin failures++; $display("FAIL no WAIT stall happened"); end
    if (fills == 0)                 begin failures++; $display("FAIL no instruction page fill happened"); end
    if (USED > 1 && contention == 0) begin failures++; $display("FAIL no bus contention happened"); end
    checks++;
    if (irqs != $countones(SCHEMES)) begin failures++; $display("FAIL irqs %0d", irqs); end
    if (SCHEMES[0] && SCHEMES[1] && P_V > 1) begin
      checks++;
      if (t[1] >= t[0]) begin failures++; $display("FAIL linear not faster than sequential"); end
    end
    $display("%s: checks=%0d failures=%0d", NAME, checks, failures);
    finished = 1'b1;
    if (STANDALONE) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

endmodule
