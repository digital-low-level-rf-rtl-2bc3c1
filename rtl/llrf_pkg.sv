// llrf_pkg: word widths, the conveyor-belt stream word and the configuration
// records shared by the ALS storage-ring digital LLRF blocks.
//
// Converter widths follow the hardware (14-bit ADCs, 16-bit DACs) and the
// channel counts follow the system: 14 I/Q channels on the LLRF chassis
// (2 fast cavity-probe channels plus 12 monitor channels), 28 on the RF
// monitor chassis, 16 arc detectors and 16 arc-power inputs. The 18-bit
// internal I/Q and phase words are a choice of this design.
//
// Phase words are unsigned binary fractions of one turn: 2^PH_W = 360 deg.
// All stream traffic is in a single DSP clock domain (f_dsp = 229 MHz).
package llrf_pkg;

  localparam int ADC_W      = 14;
  localparam int DAC_W      = 16;
  localparam int IQ_W       = 18;
  localparam int PH_W       = 18;
  localparam int N_LLRF_CH  = 14;
  localparam int N_RFMON_CH = 28;
  localparam int N_ARC      = 16;
  localparam int SLOT_W     = 6;     // up to 64 slots (2 x 28 needed)
  localparam int MODE_W     = 4;     // RF drive mode word carried with the stream
  localparam int PWR_W      = 2 * IQ_W + 1;

  typedef logic signed [IQ_W-1:0] iq_t;
  typedef logic        [PH_W-1:0] phase_t;

  // One word of the conveyor belt: one slot per DSP clock. Slots of a frame
  // are I1..IN followed by Q1..QN.
  typedef struct packed {
    logic              valid;
    logic              first;     // slot 0 of a frame
    logic [SLOT_W-1:0] slot;
    logic [MODE_W-1:0] mode;
    iq_t               data;
  } iq_stream_t;

  // Which cavity probe amplitude a klystron's amplitude loop regulates.
  typedef enum logic [1:0] {
    SRC_CAV1 = 2'd0,
    SRC_CAV2 = 2'd1,
    SRC_AVG  = 2'd2      // weighted average of both cavities (one klystron, two cavities)
  } amp_src_e;

  // Per-klystron feedback configuration (host registers).
  typedef struct packed {
    amp_src_e          amp_src;
    logic              ph_cav;      // 0: phase loop follows cavity 1, 1: cavity 2
    logic [15:0]       w1;          // weight of cavity 1 amplitude, 2^-16 units
    logic [15:0]       w2;          // weight of cavity 2 amplitude, 2^-16 units
    iq_t               amp_sp;      // amplitude set point, CORDIC magnitude units
    iq_t               ph_sp;       // phase set point (2^18 = one turn)
    iq_t               kp_amp;      // gains: kp in 2^-12, ki in 2^-16 units
    iq_t               ki_amp;
    iq_t               kp_ph;
    iq_t               ki_ph;
    iq_t               ff_amp;      // feed-forward into the integrators
    iq_t               ff_ph;
    iq_t               sat_amp;     // PI saturation limits (positive)
    iq_t               sat_ph;
    phase_t            ph_offset;   // loop phase offset (group delay compensation)
    iq_t               clip;        // drive clip level on X and Y (positive)
  } fb_cfg_t;

  // Host control of one waveform buffer.
  typedef struct packed {
    logic [(1<<SLOT_W)-1:0] skip;   // channel selection: slots not recorded
    logic        trig;       // software trigger
    logic        ack;        // release the frozen bank being read
    logic [14:0] rd_addr;    // address inside the frozen bank
  } wave_ctl_t;

  // Status and read data of one waveform buffer.
  typedef struct packed {
    logic              ready;      // a frozen bank is available
    logic              fault;      // it was frozen by an RF permit drop
    logic [47:0]       t_stamp;    // cycle count at the trigger
    logic [14:0]       trig_ptr;   // write address at the trigger
    logic [SLOT_W-1:0] rd_slot;
    iq_t               rd_data;
  } wave_sts_t;

  function automatic iq_t sat_iq(input logic signed [63:0] v);
    if (v > 64'sd131071)       return iq_t'(18'sh1ffff);
    else if (v < -64'sd131072) return iq_t'(18'sh20000);
    else                       return iq_t'(v);
  endfunction

endpackage
