// booster_pkg: constants and table-entry types shared by the Booster transverse
// damper and tune monitor.
//
// The machine numbers follow the Booster: harmonic number 84 (one RF bucket per
// clock, 84 clocks per turn), 12-bit ADCs, 14-bit DACs, a 128-point FFT, up to 64
// excitations/measurements per Booster cycle and the three highest peaks kept per
// spectrum. Internal word widths, gain formats and the layout of the table
// entries are this design's own choices.
package booster_pkg;

  // ---- machine and converter numbers --------------------------------------
  localparam int HARMONIC = 84;            // RF buckets per turn
  localparam int ADC_W    = 12;            // AD9430 sample width
  localparam int DAC_W    = 14;            // AD9736 word width
  localparam int SPB      = 4;             // ADC samples per RF bucket (212 Msps / 52.8 MHz)

  // ---- timing counters -------------------------------------------------------
  localparam int BUNCH_W  = 7;             // 0..83
  localparam int TURN_W   = 16;            // turns since cycle start (about 20000 per cycle)

  // ---- damper datapath -------------------------------------------------------
  localparam int POS_W     = ADC_W + 1;    // I or Q: difference of two samples
  localparam int GAIN_W    = 16;           // signed gains, GAIN_FRAC fractional bits
  localparam int GAIN_FRAC = 14;           // 1.0 = 16384
  localparam int FILT_W    = 18;           // five-turn filter output
  localparam int KICK_W    = 18;           // kick before DAC saturation
  localparam int DLY_W     = 8;            // output delay, RF buckets (0..255)

  // ---- tune monitor ------------------------------------------------------------
  localparam int FFT_N     = 128;
  localparam int FFT_LOG   = 7;
  localparam int N_BINS    = FFT_N / 2;    // bins kept for a real input (0 .. N/2-1)
  localparam int BIN_W     = 6;
  localparam int WIN_W     = 16;           // window coefficient, unsigned, 1.0 = 65535
  localparam int FFT_IN_W  = POS_W;        // windowed sample
  localparam int FFT_W     = FFT_IN_W + FFT_LOG + 1; // N*max|x| plus twiddle rounding
  localparam int MAG_W     = 2 * FFT_W;    // Re^2 + Im^2
  localparam int N_MEAS    = 64;           // excitations / measurements per cycle
  localparam int MEAS_W    = 6;
  localparam int N_PEAKS   = 3;
  localparam int N_SEG     = 16;           // gain/delay segments through the cycle
  localparam int SEG_W     = 4;
  localparam int NOISE_W   = 16;           // noise amplitude, 1.0 = 32768 LSB of kick

  // Position of one bucket, tagged with where it came from.
  typedef struct packed {
    logic [BUNCH_W-1:0] bunch;
    logic [TURN_W-1:0]  turn;
  } tag_t;

  // One excitation / measurement of the tune monitor.
  typedef struct packed {
    logic [TURN_W-1:0]        start_turn;   // turn of the cycle the measurement starts
    logic [7:0]               noise_turns;  // turns of random-noise excitation
    logic [7:0]               ad_turns;     // turns of anti-damping
    logic signed [GAIN_W-1:0] ad_gain;      // anti-damping gain
  } meas_entry_t;

  // One segment of the damper settings through the Booster cycle.
  typedef struct packed {
    logic [TURN_W-1:0]        start_turn;
    logic signed [GAIN_W-1:0] gain0;      // x[n]
    logic signed [GAIN_W-1:0] gain1;      // x[n-1 turn]
    logic signed [GAIN_W-1:0] gain2;      // x[n-2 turns]
    logic signed [GAIN_W-1:0] gain3;      // x[n-4 turns]
    logic signed [GAIN_W-1:0] out_gain;
    logic [DLY_W-1:0]         delay;
  } ramp_entry_t;

  typedef struct packed {
    logic [BIN_W-1:0] bin;
    logic [MAG_W-1:0] mag;
  } peak_t;

  // Saturate a signed value to a narrower signed width.
  function automatic logic signed [KICK_W-1:0] sat_kick(input logic signed [47:0] v);
    if (v > 48'sd131071)       return 18'sd131071;
    else if (v < -48'sd131072) return -18'sd131072;
    else                       return v[KICK_W-1:0];
  endfunction

endpackage
