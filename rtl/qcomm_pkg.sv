// qcomm_pkg -- types and constants shared by the FPGA layer of the
// quantum-communication controller.
//
// The fabric moves 32-bit words between block RAMs and the custom blocks.
// In the transmitter every qubit takes two bits from the polarization memory
// and two bits from the decoy (intensity) memory, so one word carries sixteen
// qubits. The 32-bit word and the 2+2 bit split follow the published
// architecture; the numeric codes given to the states below are this design's
// own choice.
package qcomm_pkg;

  // Width of one BRAM word (the memory manager moves 32-bit arrays).
  localparam int unsigned WORD_W = 32;

  // Bits per symbol in each of the two transmitter streams.
  localparam int unsigned SYM_W = 2;

  // Qubits carried by one word of each stream.
  localparam int unsigned SYMS_PER_WORD = WORD_W / SYM_W;

  // Shortest qubit slot in clock cycles: the polarization pulse can sit in
  // three positions of one clock each (0-5, 5-10, 10-15 ns at 200 MHz).
  localparam int unsigned MIN_SLOT = 3;

  // Polarization symbol: the position (clock cycle inside the slot) of the
  // pulse that drives the polarization modulator. Code 3 is unused and
  // produces no polarization pulse.
  typedef enum logic [SYM_W-1:0] {
    POL_POS0 = 2'd0,
    POL_POS1 = 2'd1,
    POL_POS2 = 2'd2,
    POL_NONE = 2'd3
  } pol_sym_e;

  // Decoy symbol: three intensity levels. Two are set by the position of the
  // intensity-modulator pulse (first or second clock of the slot), the third
  // switches the laser off for the slot. Code 3 is unused and treated like
  // DEC_OFF.
  typedef enum logic [SYM_W-1:0] {
    DEC_POS0 = 2'd0,
    DEC_POS1 = 2'd1,
    DEC_OFF  = 2'd2,
    DEC_RSVD = 2'd3
  } dec_sym_e;

  // Direction of a memory manager: towards the pins (read BRAM) or from the
  // pins (write BRAM).
  typedef enum logic {
    DIR_TOP_DOWN  = 1'b0,
    DIR_BOTTOM_UP = 1'b1
  } dir_e;

  // Transmitter configuration, written by the CPU through GPIO registers.
  // period : qubit slot length in clock cycles (values below MIN_SLOT are
  //          raised to MIN_SLOT); 4 gives 50 MHz at a 200 MHz clock.
  // length : number of qubits to send; 0 means stream without end.
  // off_*  : extra delay, in clock cycles, of each output.
  typedef struct packed {
    logic [7:0]  period;
    logic [31:0] length;
    logic [3:0]  off_laser;
    logic [3:0]  off_pol;
    logic [3:0]  off_decoy;
  } tx_cfg_t;

endpackage
