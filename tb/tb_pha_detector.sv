// tb_pha_detector: self-checking test of the pulse height detector.
//
// A stream of synthetic shaper pulses (linear rise, flat top, linear fall,
// random heights, widths and gaps, some overlong, some above the upper level,
// some back-to-back, some while acquisition is stopped) is built in advance.
// A reference walk over that stream, written from the algorithm's
// description, predicts for every pulse whether it is accepted or discarded,
// its maximum and the clock at which the strobe must appear. The detector's
// strobes are compared with that list one by one, including their timing.
module tb_pha_detector;
  import mimca_pkg::*;

  localparam int N = 6000;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             run;
  logic [ADC_W-1:0] sample;
  pha_cfg_t         cfg;
  logic             event_valid, discard, busy;
  logic [ADC_W-1:0] event_max;

  pha_detector dut (.*);

  always #5 clk = ~clk;

  logic [ADC_W-1:0] stream [N];
  logic             run_s  [N];
  int               cyc = 0;

  // expected strobes
  int               exp_cyc [$];
  logic             exp_acc [$];
  logic [ADC_W-1:0] exp_max [$];

  int checks = 0, failures = 0;
  int n_acc = 0, n_disc_ul = 0, n_disc_len = 0;

  assign sample = (cyc < N) ? stream[cyc] : 12'd50;
  assign run    = (cyc < N) ? run_s[cyc]  : 1'b0;

  function automatic logic [ADC_W-1:0] lerp(int base, int top, int k, int n);
    return ADC_W'(base + ((top - base) * k) / n);
  endfunction

  task automatic build_stream();
    int i = 0;
    while (i < N - 200) begin
      int peak, rise, flat, fall, gap, kind;
      kind = $urandom_range(0, 9);
      peak = $urandom_range(300, 4095);
      rise = $urandom_range(2, 10);
      flat = (kind == 0) ? $urandom_range(40, 70) : $urandom_range(0, 5);
      fall = $urandom_range(3, 25);
      gap  = (kind == 1) ? 1 : $urandom_range(2, 30);
      for (int k = 1; k <= rise; k++) stream[i++] = lerp(50, peak, k, rise);
      for (int k = 0; k < flat; k++)  stream[i++] = ADC_W'(peak);
      for (int k = fall - 1; k >= 0; k--) stream[i++] = lerp(50, peak, k, fall);
      for (int k = 0; k < gap; k++)   stream[i++] = 12'd50;
    end
    while (i < N) stream[i++] = 12'd50;
    for (int j = 0; j < N; j++) run_s[j] = !(j >= 2000 && j < 2400);
  endtask

  // Reference walk over the stream.
  task automatic predict();
    int j = 0;
    while (j < N - 100) begin
      if (run_s[j] && stream[j] > cfg.ll) begin
        int len = 1, mx = int'(stream[j]), dec = 0;
        logic tl = 1'b0;
        j++;
        forever begin
          if (stream[j] < cfg.lll) begin dec = j + 1; break; end
          if (int'(stream[j]) > mx) mx = int'(stream[j]);
          len++;
          if (len > cfg.max_len) begin tl = 1'b1; dec = j + 1; break; end
          j++;
        end
        exp_cyc.push_back(dec + 1);
        exp_acc.push_back(!tl && mx <= cfg.ul);
        exp_max.push_back(ADC_W'(mx));
        j = dec + 1;
        if (tl) begin
          while (stream[j] >= cfg.lll) j++;
          j++;
        end
      end else j++;
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) cyc <= cyc + 1;
  end

  // Compare strobes with the prediction.
  always @(posedge clk) begin
    if (rst_n && (event_valid || discard)) begin
      checks++;
      if (exp_cyc.size() == 0) begin
        failures++;
        $display("FAIL unexpected strobe at %0d", cyc);
      end else begin
        int ec;
        logic ea;
        logic [ADC_W-1:0] em;
        ec = exp_cyc.pop_front();
        ea = exp_acc.pop_front();
        em = exp_max.pop_front();
        if (ec != cyc || ea != event_valid || em != event_max) begin
          failures++;
          $display("FAIL at %0d: got acc=%0b max=%0d, expected at %0d acc=%0b max=%0d",
                   cyc, event_valid, event_max, ec, ea, em);
        end
        if (event_valid) n_acc++;
        else if (em > cfg.ul) n_disc_ul++;
        else n_disc_len++;
      end
    end
  end

  initial begin
    cfg.ll = 12'd256; cfg.lll = 12'd128; cfg.ul = 12'd3000; cfg.max_len = 16'd40;
    build_stream();
    predict();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (cyc == N + 5);
    checks++;
    if (exp_cyc.size() != 0) begin
      failures++;
      $display("FAIL %0d predicted strobes missing", exp_cyc.size());
    end
    checks++;
    if (n_acc == 0 || n_disc_ul == 0 || n_disc_len == 0) begin
      failures++;
      $display("FAIL a case never happened: acc=%0d ul=%0d len=%0d", n_acc, n_disc_ul, n_disc_len);
    end
    $display("accepted=%0d discarded_ul=%0d discarded_len=%0d", n_acc, n_disc_ul, n_disc_len);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (N + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
