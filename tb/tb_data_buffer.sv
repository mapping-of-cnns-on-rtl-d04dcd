// tb_data_buffer: self-checking test of the core data buffer. Writes random
// bus beats with random strobes and random 32-bit words, keeps a byte-level
// shadow copy, and checks both read ports against it.
module tb_data_buffer;
  localparam int unsigned BYTES = 256;
  localparam int unsigned BB    = 16;
  localparam int unsigned AW    = $clog2(BYTES);

  logic clk = 0;
  always #5 clk = ~clk;

  logic            bus_we = 0, w_en = 0;
  logic [AW-1:0]   bus_addr = 0, ra_addr = 0, rb_addr = 0, w_addr = 0;
  logic [BB*8-1:0] bus_wdata = 0, bus_rdata;
  logic [BB-1:0]   bus_wstrb = 0;
  logic [31:0]     ra_data, rb_data, w_data = 0;
  logic [7:0]      shadow [BYTES];
  int checks = 0, failures = 0;

  data_buffer #(.BYTES(BYTES), .BUS_BYTES(BB)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill everything through the bus port
    for (int i = 0; i < BYTES / BB; i++) begin
      @(negedge clk);
      bus_we = 1; bus_addr = AW'(i * BB); bus_wstrb = '1;
      for (int j = 0; j < BB; j++) begin
        bus_wdata[8*j +: 8] = 8'($urandom);
        shadow[i * BB + j]  = bus_wdata[8*j +: 8];
      end
    end
    @(negedge clk) bus_we = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      bus_we = 0; w_en = 0;
      case ($urandom % 3)
        0: begin
          bus_we = 1; bus_addr = AW'(($urandom % (BYTES / BB)) * BB); bus_wstrb = BB'($urandom);
          for (int j = 0; j < BB; j++) begin
            bus_wdata[8*j +: 8] = 8'($urandom);
            if (bus_wstrb[j]) shadow[int'(bus_addr) + j] = bus_wdata[8*j +: 8];
          end
        end
        1: begin
          w_en = 1; w_addr = AW'(($urandom % (BYTES / 4)) * 4); w_data = $urandom;
          for (int j = 0; j < 4; j++) shadow[int'(w_addr) + j] = w_data[8*j +: 8];
        end
        default: ;
      endcase
      @(posedge clk);
      #1;
      bus_we = 0; w_en = 0;
      bus_addr = AW'(($urandom % (BYTES / BB)) * BB);
      ra_addr  = AW'(($urandom % (BYTES / 4)) * 4);
      rb_addr  = AW'(($urandom % (BYTES / 4)) * 4);
      #1;
      for (int j = 0; j < BB; j++) begin
        checks++;
        if (bus_rdata[8*j +: 8] !== shadow[int'(bus_addr) + j]) begin
          failures++;
          $display("FAIL bus read addr=%0d byte %0d", bus_addr, j);
        end
      end
      checks += 2;
      if (ra_data !== {shadow[ra_addr+3], shadow[ra_addr+2], shadow[ra_addr+1], shadow[ra_addr]}) begin
        failures++; $display("FAIL ra addr=%0d", ra_addr);
      end
      if (rb_data !== {shadow[rb_addr+3], shadow[rb_addr+2], shadow[rb_addr+1], shadow[rb_addr]}) begin
        failures++; $display("FAIL rb addr=%0d", rb_addr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
