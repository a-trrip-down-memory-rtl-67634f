// rrip_victim_select_tb: random and directed check of RRIP victim selection.
//
// The reference repeats RRIP's loop literally: look for the first way at the
// maximum RRPV, and if there is none increment every RRPV and look again.
// Sets with invalid ways must return the first invalid way without ageing.
module rrip_victim_select_tb;
  localparam int WAYS = 8;

  int checks = 0, failures = 0;
  logic [WAYS-1:0]            valid;
  logic [WAYS-1:0][1:0]       rrpv, aged_rrpv;
  logic [2:0]                 victim;
  logic                       victim_valid, aged;

  rrip_victim_select #(.WAYS(WAYS), .RRPV_BITS(2)) dut (
    .valid_i(valid), .rrpv_i(rrpv), .victim_o(victim), .victim_valid_o(victim_valid),
    .rrpv_aged_o(aged_rrpv), .aged_o(aged)
  );

  task automatic check_one();
    logic [WAYS-1:0][1:0] r = rrpv;
    int exp_victim = -1;
    int steps = 0;
    bit inv = 0;
    for (int w = 0; w < WAYS; w++)
      if (!valid[w] && !inv) begin inv = 1; exp_victim = w; end
    if (!inv) begin
      while (exp_victim < 0) begin
        for (int w = 0; w < WAYS; w++)
          if (r[w] == 2'd3 && exp_victim < 0) exp_victim = w;
        if (exp_victim < 0) begin
          for (int w = 0; w < WAYS; w++) r[w] = r[w] + 2'd1;
          steps++;
        end
      end
    end
    #1;
    checks++;
    if (victim != exp_victim[2:0] || victim_valid != !inv || aged_rrpv != r || aged != (steps > 0)) begin
      failures++;
      $display("FAIL valid=%b rrpv=%h victim=%0d exp=%0d aged=%h exp=%h", valid, rrpv,
               victim, exp_victim, aged_rrpv, r);
    end
  endtask

  initial begin
    // directed: all immediate -> three ageing steps, way 0
    valid = '1; rrpv = '0; check_one();
    // directed: distant line in way 5
    valid = '1; rrpv = '0; rrpv[5] = 2'd3; rrpv[6] = 2'd3; check_one();
    // directed: invalid way 4
    valid = 8'b1110_1111; rrpv = '1; check_one();
    for (int n = 0; n < 5000; n++) begin
      valid = ($urandom_range(0, 3) == 0) ? 8'($urandom) : '1;
      rrpv  = 16'($urandom);
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
