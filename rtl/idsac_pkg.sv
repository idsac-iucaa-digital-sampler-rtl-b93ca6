// idsac_pkg: types and constants shared by the single-board-controller (SBC)
// firmware of the IDSAC CCD controller.
//
// The numbers that come from the controller's description are the four video
// channels, the 16-bit ADCs sampling at 10 MSPS, the 0.5 Mpixel/s per-channel
// pixel rate, 10 bi-level serial clocks, 10 tri-level parallel clocks, one
// high-voltage clock and 17 bias outputs. The system clock of 160 MHz, the
// table sizes, the command format and the register map are this design's own
// choices, made so that one serial ADC bit arrives per system clock.
package idsac_pkg;

  localparam int unsigned SBC_CHANNELS        = 4;    // video channels per SBC
  localparam int unsigned SBC_ADC_BITS    = 16;   // ADC resolution
  localparam int unsigned SBC_SERIAL_CLOCKS    = 10;   // bi-level serial clocks
  localparam int unsigned SBC_PAR_CLOCKS       = 10;   // tri-level parallel clocks
  localparam int unsigned SBC_BIASES      = 17;   // 12 unipolar + 4 bipolar + 1 HV bias
  localparam int unsigned SBC_WF_ENTRIES        = 16;   // entries in the pixel waveform table
  localparam int unsigned SBC_PSTATES   = 8;    // entries in the parallel-state table
  // Static DAC channels: biases, two rails per serial clock, two HV clock rails.
  localparam int unsigned SBC_STATIC_DACS    = SBC_BIASES + 2 * SBC_SERIAL_CLOCKS + 2;

  // Timing at the default system clock.
  localparam int unsigned SYS_CLK_HZ      = 160_000_000;
  localparam int unsigned ADC_SPS         = 10_000_000;
  localparam int unsigned CLK_PER_SAMPLE  = SYS_CLK_HZ / ADC_SPS;   // 16
  localparam int unsigned PIXEL_RATE      = 500_000;
  localparam int unsigned CLK_PER_PIXEL   = SYS_CLK_HZ / PIXEL_RATE; // 320

  // Bits of one waveform-table entry (what the pixel timing drives).
  localparam int unsigned WB_HV   = 10;  // high-voltage (EM) clock
  localparam int unsigned WB_AAF  = 11;  // anti-aliasing filter reset switch
  localparam int unsigned WB_REF  = 12;  // DCDS reference (reset level) window
  localparam int unsigned WB_SIG  = 13;  // DCDS signal level window

  typedef logic [15:0] wf_bits_t;

  typedef struct packed {
    logic [15:0] dur;    // entry lasts dur+1 system clocks
    wf_bits_t    bits;
  } wf_entry_t;

  // Parallel clock levels: tri-level clocking.
  typedef enum logic [1:0] {
    LVL_LOW  = 2'd0,
    LVL_MID  = 2'd1,
    LVL_HIGH = 2'd2
  } par_level_e;

  typedef logic [SBC_PAR_CLOCKS-1:0][1:0] par_state_t;

  typedef struct packed {
    par_state_t  levels;
    logic [15:0] dwell;  // clocks to hold the state after LDAC
  } pstate_t;

  // Frame geometry, in rows (parallel transfers) and serial pixels.
  typedef struct packed {
    logic [15:0] rows_skip;
    logic [15:0] rows_read;
    logic [15:0] cols_skip;
    logic [15:0] cols_read;
    logic [15:0] cols_over;
    logic [3:0]  n_pstates;   // parallel states per row transfer (1..SBC_PSTATES)
    logic [4:0]  n_wf;        // waveform entries per pixel (1..SBC_WF_ENTRIES)
    wf_bits_t    idle_bits;   // waveform outputs between pixels
  } geom_t;

  // DAC serial frame: 8-bit channel address + 16-bit code.
  typedef struct packed {
    logic [7:0]  addr;
    logic [15:0] code;
  } dac_word_t;

  // Host commands: word 0 = {opcode, address}, word 1 = data.
  typedef enum logic [3:0] {
    OP_NOP     = 4'h0,
    OP_WRITE   = 4'h1,
    OP_START   = 4'h2,
    OP_ABORT   = 4'h3,
    OP_REFRESH = 4'h4
  } opcode_e;

  // Register map (12-bit address space).
  localparam logic [11:0] RA_WF_BASE    = 12'h000; // 2 words per entry: dur, bits
  localparam logic [11:0] RA_PS_BASE    = 12'h040; // 4 words per state: lev[15:0], lev[19:16], dwell, -
  localparam logic [11:0] RA_GEOM_BASE  = 12'h070; // rows_skip..idle_bits
  localparam logic [11:0] RA_PCODE_BASE = 12'h080; // 4 words per clock: low, mid, high, -
  localparam logic [11:0] RA_STAT_BASE  = 12'h100; // static DAC channels

endpackage
