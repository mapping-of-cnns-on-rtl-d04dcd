// tb_bus_interconnect: self-checking test of the interconnect with three
// initiators and three targets. Target models are small memories that accept
// beats at random. Each initiator writes bursts with its own tag into its own
// region of random targets, reads them back and checks the data. A monitor
// at each target checks that bursts are never interleaved. It also checks
// that requests to a non-existent core complete with zero data, that
// contention occurred and that every initiator finished.
module tb_bus_interconnect;
  localparam int unsigned NI = 3;
  localparam int unsigned NT = 3;
  localparam int unsigned BB = 4;
  localparam int unsigned BW = BB * 8;
  localparam int unsigned TWORDS = 64;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          m_valid [NI], m_we [NI], m_last [NI], m_ready [NI];
  logic [31:0]   m_addr  [NI];
  logic [BW-1:0] m_wdata [NI], m_rdata [NI];
  logic [BB-1:0] m_wstrb [NI];
  logic          s_valid [NT], s_we [NT], s_last [NT], s_ready [NT];
  logic [31:0]   s_addr  [NT];
  logic [BW-1:0] s_wdata [NT], s_rdata [NT];
  logic [BB-1:0] s_wstrb [NT];
  logic [NI-1:0] stall;

  logic [BW-1:0] tmem [NT][TWORDS];
  int checks = 0, failures = 0, stall_cycles = 0, finished = 0;
  int burst_owner [NT];

  bus_interconnect #(.NI(NI), .NT(NT), .BUS_BYTES(BB)) dut (.*);

  // target models
  for (genvar t = 0; t < NT; t++) begin : g_t
    always_comb s_rdata[t] = tmem[t][s_addr[t][2 +: 6]];
    always @(posedge clk) s_ready[t] <= ($urandom % 4) != 0;
    always @(posedge clk) if (rst_n && s_valid[t] && s_ready[t]) begin
      if (s_we[t]) begin
        tmem[t][s_addr[t][2 +: 6]] <= s_wdata[t];
        if (burst_owner[t] >= 0 && burst_owner[t] != int'(s_wdata[t][31:24])) begin
          failures++;
          $display("FAIL target %0d burst of %0d interleaved by %0d", t, burst_owner[t], s_wdata[t][31:24]);
        end
        burst_owner[t] = s_last[t] ? -1 : int'(s_wdata[t][31:24]);
      end
    end
  end

  always @(posedge clk) stall_cycles += $countones(stall);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] taddr(int t, int word);
    return (t == 0) ? 32'(word * BB) : (32'h8000_0000 | ((t - 1) << 20) | 32'(word * BB));
  endfunction

  for (genvar i = 0; i < NI; i++) begin : g_i
    initial begin
      m_valid[i] = 0; m_we[i] = 0; m_last[i] = 0; m_addr[i] = 0; m_wdata[i] = 0; m_wstrb[i] = '1;
      @(posedge rst_n);
      for (int n = 0; n < 40; n++) begin
        automatic int t = $urandom % NT;
        automatic int len = 1 + $urandom % 6;
        automatic int base = i * 20 + ($urandom % (20 - len));
        logic [BW-1:0] data [8];
        for (int b = 0; b < len; b++) data[b] = {8'(i), 24'($urandom)};
        // write burst
        for (int b = 0; b < len; b++) begin
          @(negedge clk);
          m_valid[i] = 1; m_we[i] = 1; m_addr[i] = taddr(t, base + b); m_wdata[i] = data[b];
          m_last[i] = (b == len - 1);
          forever begin #2; if (m_ready[i]) break; @(negedge clk); end
          @(posedge clk);
        end
        @(negedge clk) m_valid[i] = 0;
        // read back
        for (int b = 0; b < len; b++) begin
          @(negedge clk);
          m_valid[i] = 1; m_we[i] = 0; m_addr[i] = taddr(t, base + b); m_last[i] = (b == len - 1);
          forever begin #2; if (m_ready[i]) break; @(negedge clk); end
          checks++;
          if (m_rdata[i] !== data[b]) begin
            failures++;
            $display("FAIL init %0d target %0d word %0d got %h exp %h", i, t, base + b, m_rdata[i], data[b]);
          end
          @(posedge clk);
        end
        @(negedge clk) m_valid[i] = 0;
      end
      // non-existent core
      @(negedge clk);
      m_valid[i] = 1; m_we[i] = 0; m_addr[i] = 32'h8000_0000 | (32'd9 << 20); m_last[i] = 1;
      #1;
      checks++;
      if (!m_ready[i] || m_rdata[i] != 0) begin failures++; $display("FAIL decode error response"); end
      @(negedge clk) m_valid[i] = 0;
      finished++;
    end
  end

  initial begin
    for (int t = 0; t < NT; t++) burst_owner[t] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (finished == NI);
    repeat (2) @(posedge clk);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL no contention seen"); end
    $display("contention stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
