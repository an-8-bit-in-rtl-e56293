// cim_pkg: sizes, fixed-point formats, phase and switch types shared by the
// resistive-memory computing core.
//
// The core computes 256 dot products of 8-bit unsigned inputs with 8-bit
// weights held as binary LRS/HRS cells, one weight bit per bit line. Sizes
// follow the 256x256, 8-bit configuration the core was designed for. The
// fixed-point formats (6 fractional bits for a cell's normalised conductance)
// and the tick timing are this implementation's choices.
//
// Timing unit: one "tick" of the phase clock. At 100 MHz six ticks make one
// period of the 16.7 MHz system clock; one input bit takes one system-clock
// period (reset 1 tick, integration 2 ticks = 20 ns, redistribution 3 ticks),
// and the conversion one more, so an 8-bit MAC takes 54 ticks = 540 ns,
// i.e. 1.85 M operations per second.
package cim_pkg;

  // Array and word sizes
  parameter int unsigned ROWS    = 256;           // word lines (input lines)
  parameter int unsigned COLS    = 256;           // bit lines
  parameter int unsigned NBITS   = 8;             // input and weight bits (n)
  parameter int unsigned NEURONS = COLS / NBITS;  // one neuron per n bit lines

  // Normalised LRS conductance of a cell: unsigned, GFRAC fractional bits,
  // so the nominal LRS cell is 1 << GFRAC.
  parameter int unsigned GW      = 8;
  parameter int unsigned GFRAC   = 6;

  parameter int unsigned ADC_BITS = 8;

  // Width of the neuron's charge accumulator. It must hold
  // ROWS * (2^GW-1) * READ_INT_TICKS * 2^(2*NBITS-1) (read mode) and
  // ROWS * (2^GW-1) * INT_TICKS * (2^NBITS-1)^2 * 2^NBITS (MAC mode).
  parameter int unsigned ACC_W   = 56;

  // Phase timing in ticks
  parameter int unsigned RST_TICKS      = 1;
  parameter int unsigned INT_TICKS      = 2;
  parameter int unsigned RED_TICKS      = 3;
  parameter int unsigned READ_INT_TICKS = 11;
  parameter int unsigned ADC_LAT        = 6;

  typedef enum logic [2:0] {
    PH_IDLE     = 3'd0,
    PH_RESET    = 3'd1,  // integrating capacitors back to V_init
    PH_INTEG    = 3'd2,  // bit-line current charges the integrators
    PH_REDIST   = 3'd3,  // charge redistribution onto C_S (MAC)
    PH_SAMPLE   = 3'd4,  // C_S samples one integrator (resistance read)
    PH_CONVERT  = 3'd5   // ADC conversion
  } phase_e;

  typedef enum logic {
    MODE_MAC  = 1'b0,
    MODE_READ = 1'b1
  } mode_e;

  // Switch controls of the integral multiplier (1 = closed)
  typedef struct packed {
    logic s1;
    logic s2;
    logic s3;
    logic s4;
  } sw_t;

endpackage
