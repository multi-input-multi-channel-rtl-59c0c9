// tb_dnl_sweep: the differential linearity measurement run through the
// analyzer.
//
// A sliding pulser is imitated by pulses whose height steps through every
// ADC code from just above the lower level up to full scale and back down,
// so each code occurs exactly twice. With ideal channel widths every channel
// fully above the lower level collects the same count (2 sweeps x 4 codes per
// channel = 8). The test reads the spectrum of input 0, checks every such
// channel, and reports the mean, standard deviation and DNL = sigma / mean,
// which must be zero for the digital part of the chain (the analog front end
// is not modelled). Runs the top at its default size.
module tb_dnl_sweep;
  import mimca_pkg::*;

  localparam int NBINS = 1 << CH_W;
  localparam int BASE  = 40;
  localparam int LL    = 120;
  localparam int FULL  = (1 << ADC_W) - 1;
  localparam int SHIFT = ADC_W - CH_W;

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

  task automatic pulse(int peak);
    for (int k = 1; k <= 3; k++) begin @(negedge clk); level = ADC_W'(BASE + ((peak - BASE) * k) / 3); end
    @(negedge clk);
    for (int k = 5; k >= 0; k--) begin @(negedge clk); level = ADC_W'(BASE + ((peak - BASE) * k) / 6); end
    repeat (3) @(negedge clk);
  endtask

  logic [LB_DW-1:0] d;
  int first_full;
  real sum, sum2, mean, sigma;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    repeat (NBINS + 4) @(posedge clk);
    bus_write(LB_AW'(REG_LL), LL);
    bus_write(LB_AW'(REG_LLL), 80);
    bus_write(LB_AW'(REG_UL), FULL);
    bus_write(LB_AW'(REG_MAXLEN), 50);
    bus_write(LB_AW'(REG_CTRL), 1);
    for (int h = LL + 1; h <= FULL; h++) pulse(h);
    for (int h = FULL; h > LL; h--) pulse(h);
    repeat (5) @(negedge clk);
    first_full = (LL + 1 + (1 << SHIFT) - 1) >> SHIFT;   // first channel with all codes above LL
    sum = 0.0; sum2 = 0.0;
    for (int b = 0; b < NBINS; b++) begin
      bus_read(LB_AW'((1 << A_SPECTRUM) | b), d);
      if (b >= first_full) begin
        check($sformatf("channel %0d", b), int'(d), int'(2 << SHIFT));
        sum  += real'(d);
        sum2 += real'(d) * real'(d);
      end else if (b < (LL >> SHIFT)) begin
        check($sformatf("channel %0d below LL", b), int'(d), 0);
      end
    end
    mean  = sum / real'(NBINS - first_full);
    sigma = $sqrt(sum2 / real'(NBINS - first_full) - mean * mean);
    $display("channels %0d..%0d: mean %0.2f counts, sigma %0.3f, DNL %0.3f %%",
             first_full, NBINS - 1, mean, sigma, 100.0 * sigma / mean);
    bus_read(LB_AW'(REG_ACCEPTED), d);
    check("accepted", int'(d), int'(2 * (FULL - LL)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (150000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
