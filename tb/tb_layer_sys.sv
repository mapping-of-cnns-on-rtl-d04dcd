// tb_layer_sys: one default-size cim_top (no parameter overrides) driven by
// the tb_layer_run harness in non-standalone mode, for testbenches that run
// several layers side by side. The layer dimensions and the synchronisation
// schemes to run are parameters; the harness's `checks`, `failures` and
// `finished` are read hierarchically by the enclosing testbench
// (instance name `h`).
module tb_layer_sys #(
  parameter string       NAME    = "layer",
  parameter int unsigned O_V     = 196,
  parameter int unsigned K_Z     = 512,
  parameter int unsigned K_NUM   = 512,
  parameter int unsigned SCHEMES = 3'b010
);
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
    .O_V(O_V), .K_Z(K_Z), .K_NUM(K_NUM), .SCHEMES(SCHEMES),
    .WATCHDOG(8_000_000), .STANDALONE(1'b0), .NAME(NAME)
  ) h (.*);
endmodule
