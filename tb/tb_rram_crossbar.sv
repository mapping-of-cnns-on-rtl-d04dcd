// tb_rram_crossbar: self-checking test of the crossbar model. Programs random
// signed weights into a non-square crossbar through the beat-wide programming
// port, applies random input vectors and compares every output with an
// integer matrix-vector product computed here. Also checks the latency from
// start to out_valid.
module tb_rram_crossbar;
  localparam int unsigned M   = 8;
  localparam int unsigned N   = 24;
  localparam int unsigned BB  = 16;
  localparam int unsigned LAT = 3;
  localparam int unsigned PAW = $clog2(M * N);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            prog_we = 0, start = 0, out_valid;
  logic [PAW-1:0]  prog_addr = 0;
  logic [BB*8-1:0] prog_wdata = 0;
  logic [BB-1:0]   prog_strb = 0;
  logic [N*8-1:0]  in_vec = 0;
  logic [M*32-1:0] out_vec;
  logic signed [7:0] w [M][N];
  int checks = 0, failures = 0;

  rram_crossbar #(.M(M), .N(N), .BUS_BYTES(BB), .LAT(LAT)) dut (.*);

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
    for (int t = 0; t < 50; t++) begin
      int lat;
      for (int n = 0; n < N; n++) in_vec[8*n +: 8] = 8'($urandom);
      if (t == 0) for (int n = 0; n < N; n++) in_vec[8*n +: 8] = 8'h80;   // most negative input
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL latency %0d", lat); end
      for (int m = 0; m < M; m++) begin
        automatic int acc = 0;
        for (int n = 0; n < N; n++) acc += int'(w[m][n]) * int'($signed(in_vec[8*n +: 8]));
        checks++;
        if ($signed(out_vec[32*m +: 32]) != acc) begin
          failures++;
          $display("FAIL row %0d got %0d exp %0d", m, $signed(out_vec[32*m +: 32]), acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
