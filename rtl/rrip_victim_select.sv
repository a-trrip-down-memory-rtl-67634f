// rrip_victim_select: RRIP eviction (GetEvictionLine), unchanged by TRRIP.
//
// Purely combinational. RRIP evicts a line whose RRPV is distant (the maximum);
// if none is, it increments every RRPV in the set and looks again. Repeating
// the increment k times is the same as adding k = MAX - max(RRPV) once, so this
// block finds the largest RRPV in the set, adds the difference to every way and
// picks the lowest-numbered way that then holds MAX. The aged RRPVs are returned
// for the caller to write back; the victim's own entry is overwritten by the
// insertion value.
//
// Invalid ways are filled before any valid line is evicted, and then no ageing
// takes place; the paper does not discuss empty ways, so this, and the
// lowest-index tie break, are this design's choices.
module rrip_victim_select #(
  parameter int unsigned WAYS      = 8,
  parameter int unsigned RRPV_BITS = 2
) (
  input  logic [WAYS-1:0]                 valid_i,
  input  logic [WAYS-1:0][RRPV_BITS-1:0]  rrpv_i,
  output logic [$clog2(WAYS)-1:0]         victim_o,     // way to replace
  output logic                            victim_valid_o, // the victim holds a valid line
  output logic [WAYS-1:0][RRPV_BITS-1:0]  rrpv_aged_o,  // RRPVs after ageing
  output logic                            aged_o        // at least one increment happened
);

  localparam logic [RRPV_BITS-1:0] RRPV_MAX = '1;
  localparam int unsigned WBITS = $clog2(WAYS);

  logic                  any_invalid;
  logic [WBITS-1:0]      first_invalid;
  logic [RRPV_BITS-1:0]  max_rrpv;
  logic [RRPV_BITS-1:0]  delta;
  logic [WBITS-1:0]      first_max;

  always_comb begin
    any_invalid   = 1'b0;
    first_invalid = '0;
    max_rrpv      = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!valid_i[w]) begin
        any_invalid   = 1'b1;
        first_invalid = WBITS'(w);
      end
    end
    for (int w = 0; w < WAYS; w++)
      if (rrpv_i[w] > max_rrpv) max_rrpv = rrpv_i[w];
    delta     = RRPV_MAX - max_rrpv;
    first_max = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (rrpv_i[w] == max_rrpv) first_max = WBITS'(w);

    if (any_invalid) begin
      victim_o       = first_invalid;
      victim_valid_o = 1'b0;
      rrpv_aged_o    = rrpv_i;
      aged_o         = 1'b0;
    end else begin
      victim_o       = first_max;
      victim_valid_o = 1'b1;
      for (int w = 0; w < WAYS; w++) rrpv_aged_o[w] = rrpv_i[w] + delta;
      aged_o         = (delta != '0);
    end
  end

endmodule
