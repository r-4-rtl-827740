// r4_pkg: parameters, derived geometry and types shared by the racetrack
// register file.
//
// The register file stores NUM_REGS registers of REG_BITS bits in NUM_TRACKS
// skyrmion nanotracks of TRACK_POS usable positions each.  Every nanotrack has
// NUM_AP access ports at the same positions.  The defaults are the "intuitive"
// configuration of the design (64-position tracks, 32 tracks, 2 access ports,
// recommendation window of 100 instructions) serving 32 registers of 64 bits.
//
// Derived quantities used throughout (all dimensions are powers of two):
//   AP_SPAN  S   = TRACK_POS / NUM_AP        positions served by one port
//   OVERFLOW     = S / 2                     spare positions at each track end
//   SEG_BITS     = REG_BITS / NUM_AP         bits in one buffer segment
//   REGS_PER_TRACK  RPT = TRACK_POS / REG_BITS (>= 1, horizontal)
//   TRACKS_PER_REG  TPR = REG_BITS / TRACK_POS (>= 1, horizontal)
//   V_GROUPS     G   = NUM_AP * NUM_TRACKS / REG_BITS  registers that share
//                      one vertical offset
// Horizontal allocation needs NUM_AP >= RPT, vertical allocation needs
// NUM_AP * NUM_TRACKS >= REG_BITS, and the tracks must hold all registers.
//
// Timing: none (constants, a type and functions only).
// From the paper: R=32, B=64, 32 tracks of 64 positions, 2 access ports and a
// window of 100 instructions (the evaluation's starting configuration).  Own
// choices: the mode encoding (1 = vertical) and TEXT_INSNS, the number of
// instructions the recommendation memory covers (the paper gives only the
// 1/32 ratio to the text segment).
package r4_pkg;

  parameter int unsigned NUM_REGS   = 32;
  parameter int unsigned REG_BITS   = 64;
  parameter int unsigned NUM_TRACKS = 32;
  parameter int unsigned TRACK_POS  = 64;
  parameter int unsigned NUM_AP     = 2;
  parameter int unsigned WINDOW     = 100;
  // Instructions covered by the recommendation memory (one bit each).  The
  // text-segment size is not fixed by the architecture; 262144 instructions
  // (a 1 MiB text segment of 32-bit code, 32 KiB of recommendation bits) is
  // this implementation's choice, enough for a small statically linked
  // program together with its C library.
  parameter int unsigned TEXT_INSNS = 262144;

  // Allocation mode, supplied by the mode bit of the system configuration
  // register.  A recommendation bit uses the same encoding.
  typedef enum logic {
    MODE_HORIZONTAL = 1'b0,  // register bits along one nanotrack
    MODE_VERTICAL   = 1'b1   // register bits across nanotracks
  } alloc_mode_e;

  // Width of an index that must be at least one bit wide.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  function automatic int unsigned max1(input int unsigned n);
    return (n > 1) ? n : 1;
  endfunction

endpackage
