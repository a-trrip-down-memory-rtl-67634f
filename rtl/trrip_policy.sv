// trrip_policy: TRRIP insertion and promotion rule (the paper's Algorithm 1).
//
// Purely combinational. Given whether the access hit, the line's current RRPV,
// whether the request is an instruction fetch, its temperature hint and the
// policy mode, it returns the RRPV to write back into the set.
//
//   hit,  hot instruction (variant 1 and 2)      -> immediate (0)
//   hit,  warm/cold instruction (variant 2 only) -> max(RRPV-1, immediate)
//   hit,  anything else                          -> immediate (0)       [SRRIP]
//   fill, hot instruction (variant 1 and 2)      -> immediate (0)
//   fill, warm instruction (variant 2 only)      -> near (1)
//   fill, anything else                          -> intermediate (MAX-1) [SRRIP]
//
// The rule follows the paper. Restricting the temperature cases to instruction
// requests with a valid hint also follows the paper ("features only trigger on
// instruction memory requests containing valid temperature information").
// The run-time mode input, selecting SRRIP, variant 1 or variant 2, is this
// design's own way of offering the on/off switch and both variants.
module trrip_policy
  import trrip_pkg::*;
#(
  parameter int unsigned RRPV_BITS = 2
) (
  input  logic                 hit_i,       // 1: promotion on hit, 0: insertion on fill
  input  logic [RRPV_BITS-1:0] rrpv_i,      // current RRPV of the hit line (ignored on fill)
  input  logic                 is_instr_i,  // request is an instruction fetch
  input  temp_e                temp_i,      // temperature hint of the request
  input  mode_e                mode_i,      // SRRIP / TRRIP-1 / TRRIP-2
  output logic [RRPV_BITS-1:0] rrpv_o       // new RRPV
);

  localparam logic [RRPV_BITS-1:0] RRPV_IMMEDIATE    = '0;
  localparam logic [RRPV_BITS-1:0] RRPV_NEAR         = RRPV_BITS'(1);
  localparam logic [RRPV_BITS-1:0] RRPV_INTERMEDIATE = RRPV_BITS'((1 << RRPV_BITS) - 2);

  logic v1_or_v2, v2;
  assign v1_or_v2 = is_instr_i && (mode_i == MODE_TRRIP1 || mode_i == MODE_TRRIP2);
  assign v2       = is_instr_i && (mode_i == MODE_TRRIP2);

  always_comb begin
    if (hit_i) begin
      if (v1_or_v2 && temp_i == TEMP_HOT)
        rrpv_o = RRPV_IMMEDIATE;
      else if (v2 && (temp_i == TEMP_WARM || temp_i == TEMP_COLD))
        rrpv_o = (rrpv_i == RRPV_IMMEDIATE) ? RRPV_IMMEDIATE : rrpv_i - 1'b1;
      else
        rrpv_o = RRPV_IMMEDIATE;
    end else begin
      if (v1_or_v2 && temp_i == TEMP_HOT)
        rrpv_o = RRPV_IMMEDIATE;
      else if (v2 && temp_i == TEMP_WARM)
        rrpv_o = RRPV_NEAR;
      else
        rrpv_o = RRPV_INTERMEDIATE;
    end
  end

endmodule
