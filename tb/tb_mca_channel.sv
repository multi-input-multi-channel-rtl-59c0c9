// tb_mca_channel: self-checking test of one MCA input.
//
// Plays a prepared stream of shaped pulses (random heights, some above the
// upper level, some longer than the maximum pulse length) into the channel
// and compares the accepted/discarded counters and every one of the 1024
// spectrum bins with the histogram worked out from the pulse list (bin =
// height / 4). It also checks the event register and its interrupt (set by a
// pulse, lowered by irq_ack), that a pulse ending during a clear sweep is
// neither stored nor counted, and that clear zeroes bins and counters.
module tb_mca_channel;
  import mimca_pkg::*;

  localparam int SLEN  = 20000;
  localparam int NBINS = 1 << CH_W;
  localparam int BASE  = 40;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic [ADC_W-1:0] sample;
  pha_cfg_t         cfg;
  logic             run = 1'b0;
  logic             clear_start = 1'b0;
  logic             irq_ack = 1'b0;
  logic [CH_W-1:0]  rd_addr = '0;
  logic [CNT_W-1:0] rd_data;
  ch_status_t       status;

  mca_channel dut (.*);

  always #5 clk = ~clk;

  logic [ADC_W-1:0] stream [SLEN];
  int slen = 0, pos = 0;
  logic play = 1'b0;
  int exp_hist [NBINS];
  int exp_acc = 0, exp_disc = 0, last_peak = 0;
  int checks = 0, failures = 0;

  assign sample = (play && pos < slen) ? stream[pos] : ADC_W'(BASE);
  always @(posedge clk) if (play && pos < slen) pos <= pos + 1;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic put_pulse(int peak, int rise, int flat, int fall, int gap);
    for (int k = 1; k <= rise; k++) stream[slen++] = ADC_W'(BASE + ((peak - BASE) * k) / rise);
    for (int k = 0; k < flat; k++)  stream[slen++] = ADC_W'(peak);
    for (int k = fall - 1; k >= 0; k--) stream[slen++] = ADC_W'(BASE + ((peak - BASE) * k) / fall);
    for (int k = 0; k < gap; k++)   stream[slen++] = ADC_W'(BASE);
  endtask

  task automatic play_stream();
    pos = 0;
    play = 1'b1;
    wait (pos == slen);
    @(posedge clk);
    play = 1'b0;
    repeat (4) @(posedge clk);
    #1;
  endtask

  task automatic read_bins(string tag);
    for (int b = 0; b < NBINS; b++) begin
      @(negedge clk);
      rd_addr = CH_W'(b);
      @(negedge clk);
      check($sformatf("%s bin %0d", tag, b), int'(rd_data), int'(exp_hist[b]));
    end
  endtask

  initial begin
    cfg.ll = 12'd200; cfg.lll = 12'd100; cfg.ul = 12'd3500; cfg.max_len = 16'd30;
    foreach (exp_hist[b]) exp_hist[b] = 0;
    // pulses
    while (slen < SLEN - 200) begin
      int peak, flat;
      logic long_p;
      long_p = ($urandom_range(0, 9) == 0);
      peak = $urandom_range(250, 4095);
      flat = long_p ? $urandom_range(35, 60) : $urandom_range(0, 4);
      put_pulse(peak, $urandom_range(2, 6), flat, $urandom_range(4, 15), $urandom_range(3, 40));
      if (long_p || peak > cfg.ul) exp_disc++;
      else begin
        exp_acc++;
        exp_hist[peak >> (ADC_W - CH_W)]++;
        last_peak = peak;
      end
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (!status.clearing);
    @(posedge clk);
    run = 1'b1;
    play_stream();
    check("accepted", int'(status.accepted), int'(exp_acc));
    check("discarded", int'(status.discarded), int'(exp_disc));
    check("irq set", int'(status.irq), 1);
    check("event max", int'(status.event_max), int'(last_peak));
    @(negedge clk); irq_ack = 1'b1; @(negedge clk); irq_ack = 1'b0;
    check("irq acknowledged", int'(status.irq), 0);
    read_bins("run");
    // clear, with one pulse ending during the sweep
    @(negedge clk); clear_start = 1'b1; @(negedge clk); clear_start = 1'b0;
    check("clearing", int'(status.clearing), 1);
    check("accepted zeroed", int'(status.accepted), 0);
    slen = 0;
    put_pulse(2000, 3, 2, 5, 10);
    play_stream();
    check("pulse during clear not counted", int'(status.accepted), 0);
    check("no irq during clear", int'(status.irq), 0);
    wait (!status.clearing);
    foreach (exp_hist[b]) exp_hist[b] = 0;
    read_bins("cleared");
    $display("accepted=%0d discarded=%0d", exp_acc, exp_disc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
