// trrip_policy_tb: exhaustive check of the TRRIP insertion/promotion rule.
//
// Every combination of hit/fill, current RRPV, instruction/data, temperature
// and mode is applied; the expected RRPV comes from a table written out case
// by case from the algorithm (hot: immediate on hit and fill in both variants;
// warm/cold hits decrement in variant 2; warm fills go to near in variant 2;
// everything else behaves like SRRIP: immediate on hit, intermediate on fill).
module trrip_policy_tb;
  import trrip_pkg::*;

  int checks = 0, failures = 0;
  logic       hit, is_instr;
  logic [1:0] rrpv, rrpv_o;
  temp_e      temp;
  mode_e      mode;

  trrip_policy #(.RRPV_BITS(2)) dut (
    .hit_i(hit), .rrpv_i(rrpv), .is_instr_i(is_instr),
    .temp_i(temp), .mode_i(mode), .rrpv_o(rrpv_o)
  );

  function automatic logic [1:0] expected(logic h, logic [1:0] r, logic i, temp_e t, mode_e m);
    bit trrip = i && (m == MODE_TRRIP1 || m == MODE_TRRIP2);
    bit v2    = i && (m == MODE_TRRIP2);
    if (h) begin
      if (trrip && t == TEMP_HOT)                      return 2'd0;
      if (v2 && (t == TEMP_WARM || t == TEMP_COLD))    return (r == 0) ? 2'd0 : r - 2'd1;
      return 2'd0;
    end else begin
      if (trrip && t == TEMP_HOT)                      return 2'd0;
      if (v2 && t == TEMP_WARM)                        return 2'd1;
      return 2'd2;
    end
  endfunction

  initial begin
    for (int h = 0; h < 2; h++)
      for (int r = 0; r < 4; r++)
        for (int i = 0; i < 2; i++)
          for (int t = 0; t < 4; t++)
            for (int m = 0; m < 3; m++) begin
              hit = h[0]; rrpv = r[1:0]; is_instr = i[0];
              temp = temp_e'(t); mode = mode_e'(m);
              #1;
              checks++;
              if (rrpv_o !== expected(hit, rrpv, is_instr, temp, mode)) begin
                failures++;
                $display("FAIL hit=%0d rrpv=%0d instr=%0d temp=%s mode=%s got=%0d exp=%0d",
                         h, r, i, temp.name(), mode.name(), rrpv_o,
                         expected(hit, rrpv, is_instr, temp, mode));
              end
            end
    // a few named cases from the paper's description, spelled out
    hit = 0; is_instr = 1; temp = TEMP_HOT;  mode = MODE_TRRIP1; rrpv = 2'd3; #1;
    checks++; if (rrpv_o !== 2'd0) failures++;   // hot fill -> immediate
    hit = 0; is_instr = 1; temp = TEMP_WARM; mode = MODE_TRRIP1; #1;
    checks++; if (rrpv_o !== 2'd2) failures++;   // variant 1 ignores warm
    hit = 1; is_instr = 1; temp = TEMP_COLD; mode = MODE_TRRIP2; rrpv = 2'd2; #1;
    checks++; if (rrpv_o !== 2'd1) failures++;   // cold hit decrements
    hit = 0; is_instr = 0; temp = TEMP_HOT;  mode = MODE_TRRIP2; #1;
    checks++; if (rrpv_o !== 2'd2) failures++;   // data ignores temperature
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
