// tb_cim_top: end-to-end test of the multi-core system at reduced size.
// Six cores with 16x16 crossbars, an 8-byte bus and 256-byte instruction
// memories run a 1x1 conv2D layer with 48 input channels, 32 kernels and 12
// output vectors (P_V = 3, P_H = 2), once with each synchronisation scheme:
// sequential, linear and cyclic. tb_layer_run plays CPU and compiler and
// does the checking.
module tb_cim_top;
  localparam int unsigned NC = 6;
  localparam int unsigned BB = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n, cpu_valid, cpu_we, cpu_last, cpu_ready, irq;
  logic [31:0]        cpu_addr;
  logic [BB*8-1:0]    cpu_wdata, cpu_rdata;
  logic [BB-1:0]      cpu_wstrb;
  logic [NC-1:0]      core_busy, core_done, ev_call, ev_wait_stall, ev_fill;
  logic [NC:0]        bus_stall;

  cim_top #(
    .NUM_CORES(NC), .M(16), .N(16), .BUS_BYTES(BB), .IM_BYTES(256),
    .SHMEM_BYTES(64 * 1024), .XBAR_LAT(4)
  ) dut (.*);

  tb_layer_run #(
    .NUM_CORES(NC), .M(16), .N(16), .BB(BB), .IMB(256),
    .O_V(12), .K_Z(48), .K_NUM(32), .SCHEMES(3'b111), .WATCHDOG(2_000_000)
  ) h (.*);
endmodule
