// tb_count_rate: the count-rate measurement run through the analyzer.
//
// A random pulse generator is imitated by pulses of one fixed height whose
// arrival times are exponentially distributed (Poisson process) at a chosen
// mean rate. Each pulse has the CR-RC shape A * (t/tau) * exp(1 - t/tau) of a
// spectroscopy amplifier, with tau = 1 us or 4 us at the 40 MHz sample rate;
// overlapping pulses add up (pile-up). The height is chosen so that an
// isolated pulse lands in channel 689. For each shaping time and rate, on
// input 0 (1 us) or input 1 (4 us), the spectrum is read, the earlier one
// subtracted, and the test checks that the peak channel is still 689 and that
// no more pulses were stored than generated. The upper level is set below
// full scale so that piled-up pulses clipped by the ADC are rejected. It reports how many pulses ended
// in the peak channel and how many were rejected. Rates up to 39 kcps (1 us)
// and 30 kcps (4 us) are used. Runs the top at its default size.
module tb_count_rate;
  import mimca_pkg::*;

  localparam int  NBINS  = 1 << CH_W;
  localparam int  BASE   = 40;
  localparam int  PEAK_CH = 689;
  localparam int  NPULSE = 120;
  localparam real FS_MHZ = 40.0;
  localparam int  NPTS   = 6;
  localparam int  SHAPE_US [NPTS] = '{1, 1, 1, 4, 4, 4};
  localparam real RATE_K   [NPTS] = '{5.0, 20.0, 39.0, 5.0, 20.0, 30.0};

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
  logic [ADC_W-1:0] level [N_INPUTS];

  for (genvar i = 0; i < N_INPUTS; i++) begin : g_in
    assign adc_data[i] = level[i];
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

  task automatic read_spectrum(int ch, output int s [NBINS]);
    logic [LB_DW-1:0] d;
    for (int b = 0; b < NBINS; b++) begin
      bus_read(LB_AW'((ch << A_INPUT_LSB) | (1 << A_SPECTRUM) | b), d);
      s[b] = int'(d);
    end
  endtask

  // Play NPULSE Poisson-spaced CR-RC pulses into input `ch`.
  task automatic play(int ch, real tau, real rate_k);
    real amp, mean_gap, t_next;
    int  arrivals [$];
    int  n_started, t;
    amp      = real'(PEAK_CH * 4 + 2 - BASE);
    mean_gap = FS_MHZ * 1000.0 / rate_k;                 // samples between pulses
    t_next   = 10.0;
    n_started = 0;
    t = 0;
    while (n_started < NPULSE || arrivals.size() > 0) begin
      real v;
      if (n_started < NPULSE && real'(t) >= t_next) begin
        arrivals.push_back(t);
        n_started++;
        t_next = t_next + 1.0 - mean_gap * $ln(1.0 - real'($urandom_range(0, 999999)) / 1.0e6);
      end
      v = real'(BASE);
      foreach (arrivals[k]) begin
        real x;
        x = real'(t - arrivals[k]) / tau;
        v += amp * x * $exp(1.0 - x);
      end
      while (arrivals.size() > 0 && real'(t - arrivals[0]) > 12.0 * tau) void'(arrivals.pop_front());
      @(negedge clk);
      level[ch] = (v > 4095.0) ? 12'hFFF : ADC_W'(int'(v));
      t++;
    end
    repeat (20) @(negedge clk);
  endtask

  int spec_old [2][NBINS], spec_new [NBINS];
  logic [LB_DW-1:0] d;
  int acc_old [2], disc_old [2];

  initial begin
    foreach (level[i]) level[i] = ADC_W'(BASE);
    acc_old = '{0, 0};
    disc_old = '{0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (NBINS + 4) @(posedge clk);
    bus_write(LB_AW'((1 << A_BCAST) | REG_LL), 120);
    bus_write(LB_AW'((1 << A_BCAST) | REG_LLL), 80);
    bus_write(LB_AW'((1 << A_BCAST) | REG_UL), 3900);
    bus_write(LB_AW'((1 << A_BCAST) | REG_MAXLEN), 4000);
    bus_write(LB_AW'((1 << A_BCAST) | REG_CTRL), 1);
    read_spectrum(0, spec_old[0]);
    read_spectrum(1, spec_old[1]);
    for (int p = 0; p < NPTS; p++) begin
      int ch, best, best_b, total, acc, disc;
      ch = (SHAPE_US[p] == 1) ? 0 : 1;
      play(ch, FS_MHZ * real'(SHAPE_US[p]), RATE_K[p]);
      read_spectrum(ch, spec_new);
      best = -1; best_b = 0; total = 0;
      for (int b = 0; b < NBINS; b++) begin
        int diff;
        diff = spec_new[b] - spec_old[ch][b];
        total += diff;
        if (diff > best) begin best = diff; best_b = b; end
      end
      spec_old[ch] = spec_new;
      bus_read(LB_AW'((ch << A_INPUT_LSB) | REG_ACCEPTED), d);  acc = int'(d) - acc_old[ch];  acc_old[ch] = int'(d);
      bus_read(LB_AW'((ch << A_INPUT_LSB) | REG_DISCARDED), d); disc = int'(d) - disc_old[ch]; disc_old[ch] = int'(d);
      check($sformatf("peak channel, %0d us, %0.1f kcps", SHAPE_US[p], RATE_K[p]), int'(best_b), int'(PEAK_CH));
      check("spectrum total equals accepted counter", int'(total), int'(acc));
      checks++;
      if (acc + disc > NPULSE || acc == 0) begin
        failures++;
        $display("FAIL pulse accounting: accepted %0d discarded %0d of %0d", acc, disc, NPULSE);
      end
      $display("shaping %0d us, %5.1f kcps: peak channel %0d holds %0d of %0d pulses; stored %0d, rejected %0d",
               SHAPE_US[p], RATE_K[p], best_b, best, NPULSE, acc, disc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
