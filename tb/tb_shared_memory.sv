// tb_shared_memory: self-checking test of the shared memory: random strobed
// beat writes against a shadow copy, read back in the same cycle.
module tb_shared_memory;
  localparam int unsigned BYTES = 8192;
  localparam int unsigned BB    = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic            s_valid = 0, s_we = 0, s_ready;
  logic [31:0]     s_addr = 0;
  logic [BB*8-1:0] s_wdata = 0, s_rdata;
  logic [BB-1:0]   s_wstrb = 0;
  logic [7:0]      shadow [BYTES];
  int checks = 0, failures = 0;

  shared_memory #(.BYTES(BYTES), .BUS_BYTES(BB)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < BYTES; a += BB) begin
      @(negedge clk);
      s_valid = 1; s_we = 1; s_addr = a; s_wstrb = '1;
      for (int j = 0; j < BB; j++) begin s_wdata[8*j +: 8] = 8'($urandom); shadow[a + j] = s_wdata[8*j +: 8]; end
    end
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      s_valid = 1; s_addr = ($urandom % (BYTES / BB)) * BB;
      s_we = $urandom % 2;
      s_wstrb = BB'($urandom);
      if (!s_we) begin
        #1;
        checks++;
        if (!s_ready) failures++;
        for (int j = 0; j < BB; j++)
          if (s_rdata[8*j +: 8] !== shadow[s_addr + j]) begin
            failures++; $display("FAIL addr %0d byte %0d", s_addr, j); break;
          end
      end else begin
        for (int j = 0; j < BB; j++) begin
          s_wdata[8*j +: 8] = 8'($urandom);
          if (s_wstrb[j]) shadow[s_addr + j] = s_wdata[8*j +: 8];
        end
      end
    end
    @(negedge clk) s_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
