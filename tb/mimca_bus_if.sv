// mimca_bus_if: testbench model of the microcontroller side of the local bus.
//
// Bundles the bus signals of mimca_top and provides the two bus cycles the
// microcontroller performs. Signals change on the falling clock edge and the
// design samples them on the rising edge. write() holds a write for one clock.
// read() holds a read request for one clock and returns the data presented
// with lb_rvalid one clock later, together with the value of lb_rvalid, so the
// caller can check the read latency.
interface mimca_bus_if
  import mimca_pkg::*;
(
  input logic clk
);
  logic             cs = 1'b0;
  logic             wr = 1'b0;
  logic             rd = 1'b0;
  logic [LB_AW-1:0] addr = '0;
  logic [LB_DW-1:0] wdata = '0;
  logic [LB_DW-1:0] rdata;
  logic             rvalid;

  task automatic write(logic [LB_AW-1:0] a, logic [LB_DW-1:0] d);
    @(negedge clk);
    cs = 1'b1; wr = 1'b1; addr = a; wdata = d;
    @(negedge clk);
    cs = 1'b0; wr = 1'b0;
  endtask

  task automatic read(logic [LB_AW-1:0] a, output logic [LB_DW-1:0] d, output logic valid);
    @(negedge clk);
    cs = 1'b1; rd = 1'b1; addr = a;
    @(negedge clk);
    cs = 1'b0; rd = 1'b0;
    d = rdata;
    valid = rvalid;
  endtask

  // Address of register `offs` of input `ch`, of bin `bin` of input `ch`,
  // and of a register written to all inputs at once.
  function automatic logic [LB_AW-1:0] reg_addr(int ch, logic [3:0] offs);
    return LB_AW'((ch << A_INPUT_LSB) | offs);
  endfunction

  function automatic logic [LB_AW-1:0] bin_addr(int ch, int bin);
    return LB_AW'((ch << A_INPUT_LSB) | (1 << A_SPECTRUM) | bin);
  endfunction

  function automatic logic [LB_AW-1:0] bcast_addr(logic [3:0] offs);
    return LB_AW'((1 << A_BCAST) | offs);
  endfunction
endinterface
