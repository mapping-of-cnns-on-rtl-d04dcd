// tb_mvmu: self-checking test of the MVM unit. Programs a non-square
// crossbar, fills the input registers word by word, starts the unit, checks
// busy/done timing and reads back all output registers against a reference
// product computed here.
module tb_mvmu;
  localparam int unsigned M   = 12;
  localparam int unsigned N   = 20;
  localparam int unsigned BB  = 16;
  localparam int unsigned LAT = 2;
  localparam int unsigned PAW = $clog2(M * N);
  localparam int unsigned IIW = $clog2((N + 3) / 4 + 1);
  localparam int unsigned OIW = $clog2(M + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            in_we = 0, start = 0, busy, done, prog_we = 0;
  logic [IIW-1:0]  in_idx = 0;
  logic [31:0]     in_wdata = 0, out_data;
  logic [OIW-1:0]  out_idx = 0;
  logic [PAW-1:0]  prog_addr = 0;
  logic [BB*8-1:0] prog_wdata = 0;
  logic [BB-1:0]   prog_strb = 0;
  logic signed [7:0] w [M][N];
  logic signed [7:0] x [N];
  int checks = 0, failures = 0;

  mvmu #(.M(M), .N(N), .BUS_BYTES(BB), .XBAR_LAT(LAT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) w[m][n] = 8'($urandom);
    for (int a = 0; a < M * N; a += BB) begin
      @(negedge clk);
      prog_we = 1; prog_addr = PAW'(a); prog_strb = '1;
      for (int j = 0; j < BB; j++) prog_wdata[8*j +: 8] = (a + j < M * N) ? w[(a + j) / N][(a + j) % N] : 8'h0;
    end
    @(negedge clk) prog_we = 0;
    for (int t = 0; t < 30; t++) begin
      int cyc;
      for (int n = 0; n < N; n++) x[n] = 8'($urandom);
      for (int i = 0; i < (N + 3) / 4; i++) begin
        @(negedge clk);
        in_we = 1; in_idx = IIW'(i);
        for (int j = 0; j < 4; j++) in_wdata[8*j +: 8] = (4 * i + j < N) ? x[4 * i + j] : 8'h0;
      end
      @(negedge clk) begin in_we = 0; start = 1; end
      @(negedge clk) start = 0;
      checks++;
      if (!busy) begin failures++; $display("FAIL busy not set"); end
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != LAT + 1) begin failures++; $display("FAIL done after %0d cycles", cyc); end
      for (int m = 0; m < M; m++) begin
        automatic int acc = 0;
        for (int n = 0; n < N; n++) acc += int'(w[m][n]) * int'(x[n]);
        out_idx = OIW'(m);
        #1;
        checks++;
        if ($signed(out_data) != acc) begin
          failures++;
          $display("FAIL out %0d got %0d exp %0d", m, $signed(out_data), acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
