// neurram_pkg: types and constants shared by the compute-in-memory core.
//
// The core drives every bit-line (BL), word-line (WL) and source-line (SL)
// of a 256x256 RRAM array from a per-line register, runs matrix-vector
// multiplications (MVM) in either direction through the array and converts
// the result with one voltage-mode neuron per BL/SL pair. This package
// holds what the blocks agree on: the per-line register word, the driver
// pass-gate selections, the operating modes, the activation functions and
// the command a core executes.
//
// Register word (this design's choice): sign-magnitude, bit 7 the sign,
// bits 6:0 the magnitude. Following the paper's convention a sign bit of 1
// means positive: an input magnitude bit of 1 with sign 1 gives a "+1"
// pulse, and the neuron writes sign 1 when its integrated charge is
// positive. The 8-bit width matches the largest output precision the paper
// gives (1 sign bit + 7 magnitude bits, N_max = 128).
package neurram_pkg;

  localparam int unsigned REG_W     = 8;   // per-line register word
  localparam int unsigned MAG_W     = 7;   // magnitude bits of the word
  localparam int unsigned G_W       = 6;   // RRAM conductance code, 1 uS per LSB
  localparam int unsigned V_W       = 10;  // analog voltage code (relative to Vref)
  localparam int unsigned Q_W       = 24;  // neuron integrated-charge accumulator

  // Pass gate a line driver turns on (Extended Data Fig. 1 supplies).
  typedef enum logic [2:0] {
    DRV_FLOAT  = 3'd0,  // high-Z, line is an output / sensed
    DRV_VREF   = 3'd1,  // V_ref (precharge, or input "0")
    DRV_VPLUS  = 3'd2,  // V_ref + V_read (input "+1")
    DRV_VMINUS = 3'd3,  // V_ref - V_read (input "-1")
    DRV_WR_SEL = 3'd4,  // SET/RESET/READ voltage on the selected line
    DRV_WR_UNS = 3'd5,  // inhibit voltage on unselected lines
    DRV_LFSR_P = 3'd6,  // V_ref + V_LFSR (noise injection, SL side only)
    DRV_LFSR_M = 3'd7   // V_ref - V_LFSR (noise injection, SL side only)
  } drive_e;

  // Core operating modes (Methods: "mainly three operating modes").
  typedef enum logic [1:0] {
    MODE_MVM   = 2'd0,
    MODE_NTEST = 2'd1,  // neuron testing: WLs at GND, neurons read drivers
    MODE_PROG  = 2'd2   // weight programming: SET / RESET / READ one cell
  } mode_e;

  typedef enum logic [1:0] {
    PROG_READ  = 2'd0,
    PROG_SET   = 2'd1,
    PROG_RESET = 2'd2
  } prog_op_e;

  // Neuron activation implemented inside the charge-decrement process.
  typedef enum logic [1:0] {
    ACT_LINEAR  = 2'd0,  // signed output, decrement for both signs
    ACT_RELU    = 2'd1,  // decrement only when sign bit is 1
    ACT_TANH    = 2'd2,  // piecewise-linear step schedule
    ACT_SIGMOID = 2'd3   // tanh schedule, offset by the full-scale count
  } act_e;

  // Which side of the array a vector lives on.
  typedef enum logic { SIDE_BL = 1'b0, SIDE_SL = 1'b1 } side_e;

  // One command to a core. Forward MVM: in_side=BL, out_side=SL.
  // Backward: in_side=SL, out_side=BL. Recurrent: in_side=BL, out_side=BL.
  typedef struct packed {
    mode_e      mode;
    side_e      in_side;     // registers/drivers that hold the input vector
    side_e      out_side;    // registers that receive the neuron outputs
    logic [2:0] in_mag_bits; // input magnitude bits (1..7); n-bit signed = n-1
    logic [7:0] in_len;      // WLs activated for BL-to-SL MVM: rows 0..in_len
    logic [7:0] n_max;       // maximum charge-decrement steps (0 = sign only)
    act_e       act;
    logic [3:0] noise_cyc;   // LFSR noise sample+integrate cycles
    prog_op_e   prog_op;
  } cmd_t;

  // Controller phase signals to drivers, array and neurons.
  typedef struct packed {
    logic precharge;   // initialisation: lines and C_sample to V_ref, C_integ discharged
    logic drive_in;    // input lines driven from the pulse code registers
    logic load_pulse;  // load next pulse code into the driver 2-bit registers
    logic wl_fire;     // trigger the WL pulse generator
    logic sample;      // SAMPLE switch: line charge to C_sample
    logic integ;       // INTEG switch: C_sample charge onto C_integ
    logic noise;       // SL drivers drive V_LFSR levels for noise injection
    logic compare;     // comparator mode, latch the sign bit
    logic out_start;   // start of the magnitude conversion (readout init)
    logic decr;        // one charge-decrement step
    logic writeback;   // neuron outputs to the peripheral registers
    logic prog_pulse;  // apply the SET/RESET/READ pulse to the selected cell
    logic [2:0] bit_idx; // magnitude bit the current input pulse encodes
  } ctrl_t;

  // One register-file access from the host (random-access port or SPI).
  typedef struct packed {
    logic       we;     // write wdata to line addr of the chosen side
    logic       clr;    // clear every register of the chosen side
    side_e      side;
    logic [7:0] addr;
    logic [7:0] wdata;
  } bus_req_t;

endpackage
