// tb_spectrum_memory: self-checking test of the histogram memory.
//
// Runs the memory at 16 bins of 6 bits so that saturation is reached quickly.
// Random increments, often back-to-back on the same bin, are mirrored in a
// saturating reference array; every bin is then read through the host port
// and compared. The test also checks that reset and `clear_start` zero every
// bin in exactly 2**CH_W clocks, and that increments during the sweep are
// dropped.
module tb_spectrum_memory;

  localparam int unsigned CH_W  = 4;
  localparam int unsigned CNT_W = 6;
  localparam int unsigned NB    = 1 << CH_W;

  logic             clk = 1'b0;
  logic             rst_n = 1'b0;
  logic             inc_valid = 1'b0;
  logic [CH_W-1:0]  inc_bin = '0;
  logic             clear_start = 1'b0;
  logic             clearing;
  logic [CH_W-1:0]  rd_addr = '0;
  logic [CNT_W-1:0] rd_data;

  spectrum_memory #(.CH_W(CH_W), .CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  int ref_cnt [NB];
  int checks = 0, failures = 0;
  int n_fwd = 0, n_sat = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic wait_clear(logic check_len);
    int n = 0;
    #1;
    while (clearing) begin @(posedge clk); #1; n++; end
    if (check_len) check("clear sweep length", n, NB);
    foreach (ref_cnt[b]) ref_cnt[b] = 0;
  endtask

  task automatic incs(int n, logic during_clear);
    logic [CH_W-1:0] prev = '0;
    logic prev_v = 1'b0;
    for (int k = 0; k < n; k++) begin
      logic v;
      logic [CH_W-1:0] b;
      v = ($urandom_range(0, 3) != 0);
      b = ($urandom_range(0, 2) == 0) ? 4'd3 : (($urandom_range(0, 1) == 0) ? prev : CH_W'($urandom));
      inc_valid <= v;
      inc_bin   <= b;
      if (v && !during_clear) begin
        if (prev_v && prev == b) n_fwd++;
        if (ref_cnt[b] == (1 << CNT_W) - 1) n_sat++;
        else ref_cnt[b]++;
      end
      prev = b; prev_v = v;
      @(posedge clk);
    end
    inc_valid <= 1'b0;
    repeat (3) @(posedge clk);
  endtask

  task automatic read_all();
    for (int b = 0; b < NB; b++) begin
      rd_addr <= CH_W'(b);
      @(posedge clk);
      @(negedge clk);
      check($sformatf("bin %0d", b), int'(rd_data), ref_cnt[b]);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    wait_clear(1'b0);
    read_all();
    incs(400, 1'b0);
    read_all();
    // clear with increments arriving during the sweep
    clear_start <= 1'b1;
    @(posedge clk);
    clear_start <= 1'b0;
    fork
      wait_clear(1'b1);
      incs(10, 1'b1);
    join
    read_all();
    incs(100, 1'b0);
    read_all();
    checks++;
    if (n_fwd == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL forwarding (%0d) or saturation (%0d) never exercised", n_fwd, n_sat);
    end
    $display("forwarded=%0d saturated=%0d", n_fwd, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
