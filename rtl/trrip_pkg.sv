// trrip_pkg: types and constants shared by the TRRIP memory-side hardware.
//
// Code temperature travels from the page table entry (PTE) through the MMU to the
// L2 cache as a two-bit hint next to the physical address. The four values
// (none, hot, warm, cold) are the ones the replacement algorithm distinguishes;
// their binary encoding, like the placement of the hint in the PTE, is this
// design's own choice, since the paper only says that at most two of the four
// implementation-defined PTE bits (ARM PBHA) carry it.
//
// Geometry, address widths and the PTE layout are parameters of the modules
// that use them.
//
// RRPV names follow RRIP: immediate (0), near (1), intermediate (MAX-1) and
// distant (MAX). With the 2-bit RRPV used throughout, these are 0, 1, 2 and 3.
package trrip_pkg;

  // Temperature hint carried with a memory request.
  typedef enum logic [1:0] {
    TEMP_NONE = 2'b00,   // no temperature information: default RRIP behaviour
    TEMP_HOT  = 2'b01,
    TEMP_WARM = 2'b10,
    TEMP_COLD = 2'b11
  } temp_e;

  // Policy mode of the L2 replacement. TRRIP can be switched off at run time,
  // which leaves plain SRRIP.
  typedef enum logic [1:0] {
    MODE_SRRIP  = 2'b00,   // TRRIP disabled, temperature ignored
    MODE_TRRIP1 = 2'b01,   // variant 1: hot lines only
    MODE_TRRIP2 = 2'b10    // variant 2: hot, warm and cold lines
  } mode_e;

endpackage
