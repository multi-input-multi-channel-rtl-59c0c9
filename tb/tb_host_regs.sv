// tb_host_regs: self-checking test of the local-bus register file.
//
// The four MCA inputs are replaced by testbench models: status words the test
// sets directly, and spectrum memories whose registered read port returns a
// value computed from input number and bin. The test checks per-input and
// broadcast writes of every setting, the one-clock clear pulse, the CTRL run
// bit, read-back of settings, status, event and counters, the one-clock
// read latency, the interrupt acknowledge on event reads (and only on those),
// the OR of the interrupt flags, and spectrum window reads for every input.
module tb_host_regs;
  import mimca_pkg::*;

  localparam int NI = N_INPUTS;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             lb_cs = 1'b0, lb_wr = 1'b0, lb_rd = 1'b0;
  logic [LB_AW-1:0] lb_addr = '0;
  logic [LB_DW-1:0] lb_wdata = '0;
  logic [LB_DW-1:0] lb_rdata;
  logic             lb_rvalid;
  logic             irq;
  pha_cfg_t         cfg         [NI];
  logic             run         [NI];
  logic             clear_start [NI];
  logic             irq_ack     [NI];
  logic [CH_W-1:0]  spec_addr;
  logic [CNT_W-1:0] spec_data   [NI];
  ch_status_t       status      [NI];

  host_regs dut (.*);

  always #5 clk = ~clk;

  function automatic logic [CNT_W-1:0] spec_val(int i, logic [CH_W-1:0] b);
    return CNT_W'(32'h1000_0000 * (i + 1) + b * 7 + 3);
  endfunction

  for (genvar i = 0; i < NI; i++) begin : g_mem
    always @(posedge clk) spec_data[i] <= spec_val(i, spec_addr);
  end

  int checks = 0, failures = 0;
  int clr_pulses [NI];
  int ack_pulses [NI];

  always @(posedge clk) begin
    for (int i = 0; i < NI; i++) begin
      if (clear_start[i]) clr_pulses[i]++;
      if (irq_ack[i])     ack_pulses[i]++;
    end
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic bus_write(logic [LB_AW-1:0] a, logic [LB_DW-1:0] d);
    @(negedge clk);
    lb_cs = 1'b1; lb_wr = 1'b1; lb_addr = a; lb_wdata = d;
    @(negedge clk);
    lb_cs = 1'b0; lb_wr = 1'b0;
  endtask

  task automatic bus_read(logic [LB_AW-1:0] a, output logic [LB_DW-1:0] d);
    @(negedge clk);
    lb_cs = 1'b1; lb_rd = 1'b1; lb_addr = a;
    check("rvalid low before the edge", int'(lb_rvalid), 0);
    @(negedge clk);
    lb_cs = 1'b0; lb_rd = 1'b0;
    check("rvalid one clock after the request", int'(lb_rvalid), 1);
    d = lb_rdata;
  endtask

  function automatic logic [LB_AW-1:0] ra(int i, logic [3:0] o);
    return LB_AW'((i << A_INPUT_LSB) | o);
  endfunction

  logic [LB_DW-1:0] d;

  initial begin
    foreach (status[i]) begin
      status[i] = '0;
      clr_pulses[i] = 0;
      ack_pulses[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // reset values
    check("reset ul", int'(cfg[2].ul), int'(12'hFFF));
    check("reset run", int'(run[1]), 0);
    // broadcast then individual writes
    bus_write(LB_AW'((1 << A_BCAST) | REG_LL), 32'd300);
    bus_write(LB_AW'((1 << A_BCAST) | REG_MAXLEN), 32'd77);
    for (int i = 0; i < NI; i++) begin
      bus_write(ra(i, REG_LLL), 32'(100 + i));
      bus_write(ra(i, REG_UL),  32'(3000 + i));
    end
    for (int i = 0; i < NI; i++) begin
      check("ll broadcast", int'(cfg[i].ll), 300);
      check("max_len broadcast", int'(cfg[i].max_len), 77);
      check("lll", int'(cfg[i].lll), int'(100 + i));
      check("ul", int'(cfg[i].ul), int'(3000 + i));
      bus_read(ra(i, REG_LLL), d);    check("read lll", int'(d), int'(100 + i));
      bus_read(ra(i, REG_UL), d);     check("read ul", int'(d), int'(3000 + i));
      bus_read(ra(i, REG_MAXLEN), d); check("read max_len", int'(d), 77);
    end
    // run and clear
    bus_write(ra(2, REG_CTRL), 32'h3);
    @(negedge clk);   // the one-clock clear pulse is counted at the next edge
    check("run[2]", int'(run[2]), 1);
    check("run[1]", int'(run[1]), 0);
    check("clear pulse count [2]", int'(clr_pulses[2]), 1);
    check("clear pulse count [0]", int'(clr_pulses[0]), 0);
    bus_read(ra(2, REG_CTRL), d); check("read ctrl", int'(d), 1);
    bus_write(LB_AW'((1 << A_BCAST) | REG_CTRL), 32'h2);
    @(negedge clk);
    foreach (run[i]) check("broadcast stop", int'(run[i]), 0);
    foreach (clr_pulses[i]) check("broadcast clear", int'(clr_pulses[i]), int'((i == 2) ? 2 : 1));
    // status, event, counters and interrupt
    for (int i = 0; i < NI; i++) begin
      status[i].running   = 1'b1;
      status[i].busy      = 1'b1;
      status[i].event_max = ADC_W'(1000 + i);
      status[i].accepted  = 32'(50000 + i);
      status[i].discarded = 32'(70 + i);
    end
    status[3].irq = 1'b1;
    #1;
    check("irq OR", int'(irq), 1);
    bus_read(ra(3, REG_STATUS), d);    check("status", int'(d), int'(4'b1101));
    bus_read(ra(1, REG_ACCEPTED), d);  check("accepted", int'(d), 50001);
    bus_read(ra(0, REG_DISCARDED), d); check("discarded", int'(d), 70);
    check("no ack from other reads", int'(ack_pulses[3]), 0);
    bus_read(ra(3, REG_EVENT), d);     check("event", int'(d), 1003);
    check("ack on event read", int'(ack_pulses[3]), 1);
    check("no ack elsewhere", int'(ack_pulses[0] + ack_pulses[1] + ack_pulses[2]), 0);
    status[3].irq = 1'b0;
    #1;
    check("irq OR low", int'(irq), 0);
    bus_read(ra(2, 4'hF), d);          check("unused offset", int'(d), 0);
    // spectrum window
    for (int k = 0; k < 40; k++) begin
      int i;
      logic [CH_W-1:0] b;
      i = $urandom_range(0, NI - 1);
      b = CH_W'($urandom);
      bus_read(LB_AW'((i << A_INPUT_LSB) | (1 << A_SPECTRUM) | b), d);
      check($sformatf("spectrum %0d/%0d", i, b), int'(d), int'(spec_val(i, b)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
