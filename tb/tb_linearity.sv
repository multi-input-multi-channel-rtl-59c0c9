// tb_linearity: the integral linearity measurement run through the analyzer.
//
// For each of the 23 pulser settings of the linearity table (peak channels
// 46 ... 1016 of 1024) a burst of pulses is played into input 0, with heights
// spread around channel * 4 + 2 to mimic the finite resolution of a real
// detector chain. As the host software does, the spectrum is read before and
// after each burst, the earlier ("integral") spectrum is subtracted from the
// new one, and the peak channel is the index of the largest difference.
// The test checks that this peak channel is the expected one, that the
// difference spectrum holds exactly the burst, and that the accepted counter
// agrees. Runs the top at its default size.
module tb_linearity;
  import mimca_pkg::*;

  localparam int NBINS = 1 << CH_W;
  localparam int BASE  = 40;
  localparam int NPULSE = 100;
  localparam int NROWS = 23;
  localparam int TABLE_CH [NROWS] = '{46, 92, 138, 184, 229, 275, 321, 366, 411, 457, 502,
                                       548, 593, 639, 684, 729, 773, 818, 863, 908, 951,
                                       998, 1016};

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [ADC_W-1:0] adc_data [N_INPUTS];
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
  logic [ADC_W-1:0] level = ADC_W'(BASE);

  assign adc_data[0] = level;
  for (genvar i = 1; i < N_INPUTS; i++) begin : g_idle
    assign adc_data[i] = ADC_W'(BASE);
  end

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

  task automatic read_spectrum(output int s [NBINS]);
    logic [LB_DW-1:0] d;
    for (int b = 0; b < NBINS; b++) begin
      bus_read(LB_AW'((1 << A_SPECTRUM) | b), d);
      s[b] = int'(d);
    end
  endtask

  // one shaped pulse on input 0
  task automatic pulse(int peak);
    for (int k = 1; k <= 4; k++) begin @(negedge clk); level = ADC_W'(BASE + ((peak - BASE) * k) / 4); end
    repeat (2) @(negedge clk);
    for (int k = 9; k >= 0; k--) begin @(negedge clk); level = ADC_W'(BASE + ((peak - BASE) * k) / 10); end
    repeat (6) @(negedge clk);
  endtask

  int spec_old [NBINS], spec_new [NBINS];
  logic [LB_DW-1:0] d;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (NBINS + 4) @(posedge clk);          // reset-time clear
    bus_write(LB_AW'(REG_LL), 120);
    bus_write(LB_AW'(REG_LLL), 80);
    bus_write(LB_AW'(REG_UL), 4095);
    bus_write(LB_AW'(REG_MAXLEN), 100);
    bus_write(LB_AW'(REG_CTRL), 1);
    read_spectrum(spec_old);
    for (int r = 0; r < NROWS; r++) begin
      int best, best_b, total;
      for (int p = 0; p < NPULSE; p++) begin
        int noise;
        noise = 0;
        for (int k = 0; k < 2; k++) noise += $urandom_range(0, 6) - 3;
        pulse(TABLE_CH[r] * 4 + 2 + noise);
      end
      read_spectrum(spec_new);
      best = -1; best_b = 0; total = 0;
      for (int b = 0; b < NBINS; b++) begin
        int diff;
        diff = spec_new[b] - spec_old[b];
        total += diff;
        if (diff > best) begin best = diff; best_b = b; end
      end
      check($sformatf("peak channel row %0d", r), int'(best_b), int'(TABLE_CH[r]));
      check($sformatf("counts in burst %0d", r), int'(total), int'(NPULSE));
      $display("row %2d: peak channel %4d (%0d counts in peak)", r, best_b, best);
      spec_old = spec_new;
    end
    bus_read(LB_AW'(REG_ACCEPTED), d);
    check("accepted", int'(d), int'(NROWS * NPULSE));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
