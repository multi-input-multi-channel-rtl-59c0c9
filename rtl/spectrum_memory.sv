// spectrum_memory: the 1024-bin pulse height histogram of one MCA input.
//
// Each `inc_valid` adds one to bin `inc_bin`. The increment is a two-stage
// read-modify-write: the bin is read in the cycle of the request and the
// incremented count is written one cycle later. A request for the bin that
// is being written in the same cycle takes the freshly written value, so one
// increment per clock is accepted without loss. Counts saturate at their
// maximum instead of wrapping.
//
// `clear_start` (and reset) start a sweep that writes zero to every bin, one
// bin per clock, for 2**CH_W cycles; `clearing` is high meanwhile and
// increments arriving during the sweep are dropped. The host reads bin
// `rd_addr` through a second read port; `rd_data` follows one clock later.
//
// The 1024-bin size follows the described MCA. The memory's structure, the
// count width, saturation, the clear sweep and clear-on-reset are this
// design's own choices.
module spectrum_memory #(
  parameter int unsigned CH_W  = 10,
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             inc_valid,
  input  logic [CH_W-1:0]  inc_bin,
  input  logic             clear_start,
  output logic             clearing,
  input  logic [CH_W-1:0]  rd_addr,
  output logic [CNT_W-1:0] rd_data
);

  localparam int unsigned NBINS = 1 << CH_W;

  logic [CNT_W-1:0] mem [NBINS];

  // Stage 1 of the increment pipeline.
  logic             s1_valid;
  logic [CH_W-1:0]  s1_bin;
  logic [CNT_W-1:0] s1_rdata;    // bin value read in stage 0
  logic             s1_fwd;      // stage 0 read raced a write to the same bin
  logic [CNT_W-1:0] last_wdata;  // value written in the previous cycle

  logic [CH_W-1:0]  clr_addr;

  logic             we;
  logic [CH_W-1:0]  waddr;
  logic [CNT_W-1:0] wdata;
  logic [CNT_W-1:0] cur;

  always_comb begin
    cur = s1_fwd ? last_wdata : s1_rdata;
    if (clearing) begin
      we    = 1'b1;
      waddr = clr_addr;
      wdata = '0;
    end else begin
      we    = s1_valid;
      waddr = s1_bin;
      wdata = (&cur) ? cur : cur + 1'b1;
    end
  end

  // Memory array: one write port, two synchronous read ports.
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    s1_rdata <= mem[inc_bin];
    rd_data  <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_bin     <= '0;
      s1_fwd     <= 1'b0;
      last_wdata <= '0;
      clearing   <= 1'b1;          // reset clears the spectrum
      clr_addr   <= '0;
    end else begin
      s1_valid   <= inc_valid && !clearing && !clear_start;
      s1_bin     <= inc_bin;
      s1_fwd     <= s1_valid && !clearing && (s1_bin == inc_bin);
      last_wdata <= wdata;
      if (clear_start) begin
        clearing <= 1'b1;
        clr_addr <= '0;
      end else if (clearing) begin
        clr_addr <= clr_addr + 1'b1;
        if (&clr_addr) clearing <= 1'b0;
      end
    end
  end

  // No increment is ever in flight while the clear sweep owns the write port.
  a_no_inc_while_clearing: assert property (@(posedge clk) disable iff (!rst_n)
                                            s1_valid |-> !clearing);

endmodule
