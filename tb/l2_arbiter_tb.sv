// l2_arbiter_tb: checks the round-robin arbiter against a reference model.
//
// Random request patterns and random downstream ready are applied for four
// requesters. The reference keeps its own pointer and grants the first
// requester at or after it; the test also checks that the grant is one-hot and
// that no continuously requesting core waits for more than three other grants.
module l2_arbiter_tb;
  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req, grant;
  logic         ready, valid;
  logic [1:0]   idx;
  int           ref_ptr = 0;
  int           waited [N];

  l2_arbiter #(.N(N)) dut (.clk, .rst_n, .req_i(req), .ready_i(ready), .valid_o(valid),
                           .grant_o(grant), .grant_idx_o(idx));

  initial begin
    req = '0; ready = 0;
    foreach (waited[c]) waited[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      int exp;
      @(negedge clk);
      req   = N'($urandom);
      ready = ($urandom_range(0, 3) != 0);
      #1;
      exp = -1;
      for (int k = 0; k < N; k++)
        if (exp < 0 && req[(ref_ptr + k) % N]) exp = (ref_ptr + k) % N;
      checks++;
      if (exp < 0) begin
        if (valid || grant != '0) begin failures++; $display("FAIL grant without request"); end
      end else if (!valid || idx != exp[1:0] || grant != (N'(1) << exp)) begin
        failures++; $display("FAIL req=%b ptr=%0d grant=%b exp=%0d", req, ref_ptr, grant, exp);
      end
      if (exp >= 0 && ready) begin
        ref_ptr = (exp + 1) % N;
        for (int c = 0; c < N; c++)
          if (c != exp && req[c]) waited[c]++;
          else waited[c] = 0;
        for (int c = 0; c < N; c++) begin
          checks++;
          if (waited[c] > N - 1) begin failures++; $display("FAIL core %0d starved", c); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
