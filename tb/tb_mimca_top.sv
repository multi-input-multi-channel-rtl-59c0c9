// tb_mimca_top: end-to-end test of the four-input analyzer at full size.
//
// Acts as the microcontroller on the local bus and as four ADCs. It
//   1. waits for the reset-time spectrum clear, then sets thresholds for all
//      inputs with broadcast writes and gives input 3 its own upper level;
//   2. services one single pulse per input through the interrupt: irq and the
//      status bit must rise, the event register must hold the pulse height,
//      and reading it must lower irq;
//   3. starts all inputs and plays a prepared pulse stream into each: random
//      heights, some above the upper level, some longer than the maximum
//      pulse length;
//   4. stops the inputs, plays more pulses (which must be ignored), then
//      reads the counters and all 4 x 1024 spectrum bins and compares them
//      with the histogram worked out from the pulse list;
//   5. clears input 1 and checks that its bins and counters are zero while
//      the others are untouched.
// Each mechanism (accept, upper-level discard, length discard, interrupt,
// stop, clear, broadcast) is counted and must have happened at least once.
module tb_mimca_top;
  import mimca_pkg::*;

  localparam int NI     = N_INPUTS;
  localparam int SLEN   = 12000;
  localparam int NBINS  = 1 << CH_W;
  localparam int BASE   = 50;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [ADC_W-1:0] adc_data [NI];
  logic             irq;

  mimca_bus_if bus (.clk);

  mimca_top dut (
    .clk, .rst_n, .adc_data,
    .lb_cs (bus.cs), .lb_wr (bus.wr), .lb_rd (bus.rd), .lb_addr (bus.addr),
    .lb_wdata (bus.wdata), .lb_rdata (bus.rdata), .lb_rvalid (bus.rvalid),
    .irq
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_acc = 0, n_disc_ul = 0, n_disc_len = 0, n_irq = 0, n_stop = 0, n_clear = 0, n_bcast = 0;

  // Per-input pulse streams and the histograms they should produce.
  logic [ADC_W-1:0] stream [NI][SLEN];
  int               slen   [NI];
  int               exp_hist [NI][NBINS];
  int               exp_acc  [NI];
  int               exp_disc [NI];
  int               ul_of    [NI];
  int               pos      [NI];
  logic             play = 1'b0;

  localparam int LL = 256, LLL = 128, UL = 3800, UL3 = 2000, MAXLEN = 40;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Bus cycles through the microcontroller model; every read must return
  // its data one clock after the request.
  task automatic bus_write(logic [LB_AW-1:0] a, logic [LB_DW-1:0] d);
    bus.write(a, d);
  endtask

  task automatic bus_read(logic [LB_AW-1:0] a, output logic [LB_DW-1:0] d);
    logic v;
    bus.read(a, d, v);
    check("lb_rvalid one clock after the read", int'(v), 1);
  endtask

  function automatic logic [LB_AW-1:0] reg_addr(int ch, logic [3:0] offs);
    return LB_AW'((ch << A_INPUT_LSB) | offs);
  endfunction

  // A shaped pulse: linear rise to `peak`, flat top, linear fall.
  task automatic put_pulse(int c, int peak, int rise, int flat, int fall, int gap);
    for (int k = 1; k <= rise; k++) stream[c][slen[c]++] = ADC_W'(BASE + ((peak - BASE) * k) / rise);
    for (int k = 0; k < flat; k++)  stream[c][slen[c]++] = ADC_W'(peak);
    for (int k = fall - 1; k >= 0; k--) stream[c][slen[c]++] = ADC_W'(BASE + ((peak - BASE) * k) / fall);
    for (int k = 0; k < gap; k++)   stream[c][slen[c]++] = ADC_W'(BASE);
  endtask

  // Fill the streams and the expected histograms from the pulse list.
  task automatic build(logic counted);
    for (int c = 0; c < NI; c++) begin
      slen[c] = 0;
      while (slen[c] < SLEN - 200) begin
        int peak, flat, kind;
        kind = $urandom_range(0, 9);
        peak = $urandom_range(300, 4095);
        flat = (kind == 0) ? $urandom_range(45, 80) : $urandom_range(0, 6);
        put_pulse(c, peak, $urandom_range(2, 8), flat, $urandom_range(4, 20), $urandom_range(3, 60));
        if (counted) begin
          // pulse length counted from the first sample above LL to the last at or above LLL
          if (flat + 20 + 8 > MAXLEN && kind == 0) begin
            exp_disc[c]++; n_disc_len++;
          end else if (peak > ul_of[c]) begin
            exp_disc[c]++; n_disc_ul++;
          end else begin
            exp_acc[c]++; n_acc++;
            exp_hist[c][peak >> (ADC_W - CH_W)]++;
          end
        end
      end
      while (slen[c] < SLEN) stream[c][slen[c]++] = ADC_W'(BASE);
    end
  endtask

  // ADC models: replay the streams while `play` is set.
  for (genvar c = 0; c < NI; c++) begin : g_adc
    always @(posedge clk) begin
      if (play && pos[c] < slen[c] - 1) pos[c] <= pos[c] + 1;
    end
    assign adc_data[c] = (play && pos[c] < slen[c]) ? stream[c][pos[c]] : ADC_W'(BASE);
  end

  task automatic play_all();
    foreach (pos[c]) pos[c] = 0;
    play = 1'b1;
    wait (pos[0] == slen[0] - 1 && pos[1] == slen[1] - 1 && pos[2] == slen[2] - 1 && pos[3] == slen[3] - 1);
    @(posedge clk);
    play = 1'b0;
    repeat (5) @(posedge clk);
  endtask

  task automatic mech(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("mechanism %-14s %0d", name, n);
  endtask

  logic [LB_DW-1:0] d;

  initial begin
    foreach (exp_acc[c]) begin
      exp_acc[c] = 0; exp_disc[c] = 0; pos[c] = 0; slen[c] = 0;
      ul_of[c] = (c == 3) ? UL3 : UL;
      for (int b = 0; b < NBINS; b++) exp_hist[c][b] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // 1. wait for the reset clear, then configure with broadcast writes
    do begin
      logic [LB_DW-1:0] st;
      bus_read(reg_addr(0, REG_STATUS), st);
      d = st;
    end while (d[1]);
    bus_write(LB_AW'((1 << A_BCAST) | REG_LL),     LL);
    bus_write(LB_AW'((1 << A_BCAST) | REG_LLL),    LLL);
    bus_write(LB_AW'((1 << A_BCAST) | REG_UL),     UL);
    bus_write(LB_AW'((1 << A_BCAST) | REG_MAXLEN), MAXLEN);
    bus_write(reg_addr(3, REG_UL), UL3);
    for (int c = 0; c < NI; c++) begin
      bus_read(reg_addr(c, REG_LL), d);     check("LL", int'(d), int'(LL));
      bus_read(reg_addr(c, REG_MAXLEN), d); check("MAXLEN", int'(d), int'(MAXLEN));
      bus_read(reg_addr(c, REG_UL), d);     check("UL", int'(d), int'(ul_of[c]));
      if (c != 3 && d == UL) n_bcast++;
    end
    // 2. one pulse per input, serviced through the interrupt
    bus_write(LB_AW'((1 << A_BCAST) | REG_CTRL), 32'h1);
    for (int c = 0; c < NI; c++) begin
      int peak;
      peak = 400 + 300 * c;
      foreach (slen[k]) slen[k] = 0;
      put_pulse(c, peak, 3, 2, 6, 10);
      for (int k = 0; k < NI; k++) if (k != c) put_pulse(k, BASE, 1, 20, 1, 0);
      exp_acc[c]++;
      exp_hist[c][peak >> (ADC_W - CH_W)]++;
      check("irq before pulse", int'(irq), 0);
      play_all();
      check("irq after pulse", int'(irq), 1);
      bus_read(reg_addr(c, REG_STATUS), d); check("status irq bit", int'(d[2]), 1);
      bus_read(reg_addr(c, REG_EVENT), d);  check("event maximum", int'(d), int'(peak));
      #1;
      check("irq after event read", int'(irq), 0);
      if (d == peak && !irq) n_irq++;
    end
    // 3. counted pulse streams
    build(1'b1);
    play_all();
    // 4. stop, then pulses that must be ignored
    bus_write(LB_AW'((1 << A_BCAST) | REG_CTRL), 32'h0);
    bus_read(reg_addr(2, REG_STATUS), d); check("stopped", int'(d[0]), 0);
    build(1'b0);
    play_all();
    for (int c = 0; c < NI; c++) begin
      bus_read(reg_addr(c, REG_ACCEPTED), d);  check($sformatf("accepted[%0d]", c), int'(d), int'(exp_acc[c]));
      if (d == exp_acc[c]) n_stop++;
      bus_read(reg_addr(c, REG_DISCARDED), d); check($sformatf("discarded[%0d]", c), int'(d), int'(exp_disc[c]));
      for (int b = 0; b < NBINS; b++) begin
        bus_read(LB_AW'((c << A_INPUT_LSB) | (1 << A_SPECTRUM) | b), d);
        check($sformatf("bin[%0d][%0d]", c, b), int'(d), int'(exp_hist[c][b]));
      end
    end
    // 5. clear input 1 only
    bus_write(reg_addr(1, REG_CTRL), 32'h2);
    bus_read(reg_addr(1, REG_STATUS), d); check("clearing bit", int'(d[1]), 1);
    repeat (NBINS + 2) @(posedge clk);
    bus_read(reg_addr(1, REG_STATUS), d); check("clear done", int'(d[1]), 0);
    bus_read(reg_addr(1, REG_ACCEPTED), d); check("accepted after clear", int'(d), 0);
    for (int b = 0; b < NBINS; b++) begin
      bus_read(LB_AW'((1 << A_INPUT_LSB) | (1 << A_SPECTRUM) | b), d);
      check($sformatf("cleared bin %0d", b), int'(d), 0);
    end
    bus_read(reg_addr(0, REG_ACCEPTED), d); check("input 0 kept", int'(d), int'(exp_acc[0]));
    n_clear++;

    mech("accepted", n_acc);
    mech("discard_ul", n_disc_ul);
    mech("discard_len", n_disc_len);
    mech("interrupt", n_irq);
    mech("stop", n_stop);
    mech("clear", n_clear);
    mech("broadcast", n_bcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
