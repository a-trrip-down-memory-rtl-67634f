// l2_arbiter: round-robin arbiter for the request port of the shared L2.
//
// The L2 is shared by the cores of a cluster (four by default). Each cycle the
// arbiter grants the first requesting core at or after its priority pointer;
// the grant is a plain function of the requests, so the caller can use it to
// select the request fields. When the granted request is accepted downstream
// (ready_i), the pointer moves to the core after the winner, so a core that
// keeps requesting cannot starve the others: each waits at most N-1 grants.
// The paper states only that the L2 is shared; the arbitration scheme is this
// design's choice.
module l2_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [N-1:0]          req_i,
  input  logic                  ready_i,     // downstream accepts this cycle
  output logic                  valid_o,     // some core is granted
  output logic [N-1:0]          grant_o,     // one-hot grant
  output logic [$clog2(N)-1:0]  grant_idx_o
);

  localparam int unsigned IBITS = $clog2(N);

  logic [IBITS-1:0] ptr_q;

  always_comb begin
    valid_o     = 1'b0;
    grant_idx_o = '0;
    for (int k = N - 1; k >= 0; k--) begin
      logic [IBITS-1:0] c;
      c = IBITS'((int'(ptr_q) + k) % N);
      if (req_i[c]) begin
        valid_o     = 1'b1;
        grant_idx_o = c;
      end
    end
    grant_o = valid_o ? (N'(1) << grant_idx_o) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ptr_q <= '0;
    else if (valid_o && ready_i) ptr_q <= (grant_idx_o == IBITS'(N - 1)) ? '0 : grant_idx_o + 1'b1;
  end

endmodule
