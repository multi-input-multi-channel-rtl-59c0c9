// mimca_pkg: types and constants shared by the multi-input MCA.
//
// Sample width (12 bit) and spectrum size (1024 bins) follow the described
// system: a 12-bit, 40 MHz ADC per input and 1K-channel spectra. The count
// width, pulse-length counter width, number of inputs (4) and the local-bus
// register map are this design's own choices.
package mimca_pkg;

  localparam int unsigned ADC_W    = 12;  // ADC sample width
  localparam int unsigned CH_W     = 10;  // spectrum address width, 1024 bins
  localparam int unsigned CNT_W    = 32;  // bin / pulse counter width
  localparam int unsigned LEN_W    = 16;  // pulse length counter width (samples)
  localparam int unsigned N_INPUTS = 4;   // MCA inputs
  localparam int unsigned LB_AW    = 16;  // local-bus address width
  localparam int unsigned LB_DW    = 32;  // local-bus data width

  // Thresholds of one pulse height detector, named after the signal names
  // of the original firmware (sMcaLL, sMcaLLL, sMcaUL, sMaxPulsLen).
  typedef struct packed {
    logic [ADC_W-1:0] ll;        // lower level: a pulse starts above it
    logic [ADC_W-1:0] lll;       // lowest lower level: a pulse ends below it
    logic [ADC_W-1:0] ul;        // upper level: maxima above it are discarded
    logic [LEN_W-1:0] max_len;   // longest accepted pulse, in samples
  } pha_cfg_t;

  // Pulse height detector states.
  typedef enum logic [1:0] {
    PHA_IDLE     = 2'd0,  // waiting for a sample above LL
    PHA_SAMPLING = 2'd1,  // tracking the maximum
    PHA_DECIDE   = 2'd2,  // compare maximum with UL, emit or discard
    PHA_WAIT_LOW = 2'd3   // overlong pulse: wait until it falls below LLL
  } pha_state_t;

  // What one input reports to the register file.
  typedef struct packed {
    logic             running;
    logic             clearing;
    logic             busy;        // detector is inside a pulse
    logic             irq;         // event register holds an unread event
    logic [ADC_W-1:0] event_max;   // last accepted pulse maximum
    logic [CNT_W-1:0] accepted;    // pulses stored since the last clear
    logic [CNT_W-1:0] discarded;   // pulses rejected since the last clear
  } ch_status_t;

  // Local-bus register offsets inside one input's register page
  // (address bits [3:0] when address bit 12 is 0).
  localparam logic [3:0] REG_CTRL      = 4'h0;  // W: bit0 run, bit1 clear (self-clearing)
  localparam logic [3:0] REG_LL        = 4'h1;
  localparam logic [3:0] REG_LLL       = 4'h2;
  localparam logic [3:0] REG_UL        = 4'h3;
  localparam logic [3:0] REG_MAXLEN    = 4'h4;
  localparam logic [3:0] REG_STATUS    = 4'h5;  // R: bit0 run, bit1 clearing, bit2 irq, bit3 busy
  localparam logic [3:0] REG_EVENT     = 4'h6;  // R: event maximum, reading acknowledges irq
  localparam logic [3:0] REG_ACCEPTED  = 4'h7;
  localparam logic [3:0] REG_DISCARDED = 4'h8;

  // Address fields: [15:14] input, [13] broadcast write, [12] spectrum window,
  // [CH_W-1:0] bin inside the window, [3:0] register inside a page.
  localparam int unsigned A_INPUT_LSB = 14;
  localparam int unsigned A_BCAST     = 13;
  localparam int unsigned A_SPECTRUM  = 12;

endpackage
