// tb_cim_top_full: end-to-end run of cim_top at its default size (16 cores,
// 128x128 crossbars, 16-byte bus, 4 KB instruction memories, 4 MiB shared
// memory), with no parameter overrides on the top.
//
// The workload is layer 5 of the MobileNet example used to evaluate the
// mapping (a 1x1 convolution with a 14x14x512 input and 512 kernels): it
// needs ceil(512/128) = 4 vertical and 4 horizontal groups, i.e. exactly the
// 16 cores of the system. Weights, inputs and biases are random; the harness
// (tb_layer_run) writes them, compiles the per-core programs for the
// sequential, linear and cyclic synchronisation schemes, runs the layer once
// with each and checks all 196 x 512 outputs against a reference computed in
// the testbench, and checks the number of CALLs against P_H * O * (P_V - 1)
// (linear) and P_H * ceil(O/P_V) * P_V * (P_V - 1) (cyclic).
module tb_cim_top_full;
  localparam int unsigned NC = 16;
  localparam int unsigned BB = 16;

  logic clk = 0;
  always #5 clk = ~clk;

  logic               rst_n, cpu_valid, cpu_we, cpu_last, cpu_ready, irq;
  logic [31:0]        cpu_addr;
  logic [BB*8-1:0]    cpu_wdata, cpu_rdata;
  logic [BB-1:0]      cpu_wstrb;
  logic [NC-1:0]      core_busy, core_done, ev_call, ev_wait_stall, ev_fill;
  logic [NC:0]        bus_stall;

  cim_top dut (.*);

  tb_layer_run #(
    .NUM_CORES(NC), .M(128), .N(128), .BB(BB), .IMB(4096),
    .O_V(196), .K_Z(512), .K_NUM(512), .SCHEMES(3'b111), .WATCHDOG(20_000_000)
  ) h (.*);
endmodule
