// l2_size_sweep_tb: the replacement effect of TRRIP across L2 sizes and
// associativities.
//
// Five L2 geometries are built side by side: 128, 256 and 512 kB at 8 ways,
// and 128 kB at 4 and at 16 ways. The 512 kB, 8-way cache is the default. The
// same access pattern runs on each of them under SRRIP, TRRIP-1 and TRRIP-2,
// with a reset (and so an empty cache) before each mode.
//
// The pattern models hot code with a long reuse distance. In each of 16 sets,
// spread over the whole index range, every round does three things:
//   1. fetch one hot instruction line;
//   2. fetch one warm instruction line;
//   3. read WAYS new data lines that are never reused.
// There are six rounds.
//
// Every access is checked against a reference model of the set, giving hit or
// miss and the returned line. The model repeats RRIP's ageing loop literally.
// The end result must show the expected effect:
//   * SRRIP loses the code between rounds, so it never hits on it.
//   * TRRIP-1 keeps the hot line, so every later round hits on it.
//   * TRRIP-2 also keeps the hot line, and it keeps the warm line at least
//     part of the time.
// The next-level memory is a read-only behavioural model with random delays.
// Line contents are a function of the address.
module l2_size_sweep_tb;
  import trrip_pkg::*;

  localparam int NCFG  = 5;
  localparam int CFG_KB   [NCFG] = '{128, 256, 512, 128, 128};
  localparam int CFG_WAYS [NCFG] = '{8, 8, 8, 4, 16};
  localparam int NSETS = 16;     // sets used per geometry
  localparam int ROUNDS = 6;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  bit cfg_done [NCFG];

  function automatic logic [511:0] pattern(logic [39:0] a);
    return {16{a[37:6] ^ 32'h9E37_79B9}};
  endfunction

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    localparam int W    = CFG_WAYS[g];
    localparam int SIZE = CFG_KB[g] * 1024;
    localparam int SETS = SIZE / (W * 64);
    localparam int IDXB = $clog2(SETS);

    logic         rst_n;
    mode_e        mode;
    logic         req_valid, req_ready, req_write, req_instr;
    temp_e        req_temp;
    logic [39:0]  req_addr;
    logic [511:0] req_wdata;
    logic         resp_valid, resp_hit;
    logic [511:0] resp_rdata;
    logic         inv_valid;
    logic [39:0]  inv_addr;
    logic         mem_req_valid, mem_req_ready, mem_req_write;
    logic [39:0]  mem_req_addr;
    logic [511:0] mem_req_wdata;
    logic         mem_resp_valid;
    logic [511:0] mem_resp_rdata;

    l2_cache #(.SIZE_BYTES(SIZE), .WAYS(W)) dut (
      .clk, .rst_n, .mode_i(mode),
      .req_valid_i(req_valid), .req_ready_o(req_ready), .req_addr_i(req_addr),
      .req_write_i(req_write), .req_instr_i(req_instr), .req_temp_i(req_temp),
      .req_wdata_i(req_wdata),
      .resp_valid_o(resp_valid), .resp_hit_o(resp_hit), .resp_rdata_o(resp_rdata),
      .inv_valid_o(inv_valid), .inv_addr_o(inv_addr),
      .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
      .mem_req_write_o(mem_req_write), .mem_req_addr_o(mem_req_addr),
      .mem_req_wdata_o(mem_req_wdata), .mem_resp_valid_i(mem_resp_valid),
      .mem_resp_rdata_i(mem_resp_rdata)
    );

    // next level: random ready, random response delay, read only
    int          delay = -1;
    logic [39:0] pend;
    always @(posedge clk) begin
      mem_resp_valid <= 1'b0;
      mem_req_ready  <= ($urandom_range(0, 2) != 0);
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req_write) begin
          failures++; $display("FAIL cfg %0d: write-back of a clean line", g);
        end
        pend  = mem_req_addr;
        delay = $urandom_range(0, 8);
      end else if (delay == 0) begin
        mem_resp_valid <= 1'b1;
        mem_resp_rdata <= pattern(pend);
        delay = -1;
      end else if (delay > 0) delay--;
    end

    // reference model of the used sets
    bit          m_valid [NSETS][W];
    logic [39:0] m_line  [NSETS][W];
    int          m_rrpv  [NSETS][W];

    function automatic bit model(int s, logic [39:0] a, bit instr, temp_e t, mode_e md);
      int way;
      way = -1;
      for (int w = 0; w < W; w++) if (m_valid[s][w] && m_line[s][w] == a) way = w;
      if (way >= 0) begin
        if (instr && t == TEMP_HOT && md != MODE_SRRIP)                         m_rrpv[s][way] = 0;
        else if (instr && (t == TEMP_WARM || t == TEMP_COLD) && md == MODE_TRRIP2)
          m_rrpv[s][way] = (m_rrpv[s][way] > 0) ? m_rrpv[s][way] - 1 : 0;
        else                                                                    m_rrpv[s][way] = 0;
        return 1'b1;
      end
      for (int w = 0; w < W; w++) if (!m_valid[s][w] && way < 0) way = w;
      while (way < 0) begin
        for (int w = 0; w < W; w++) if (m_rrpv[s][w] == 3 && way < 0) way = w;
        if (way < 0) for (int w = 0; w < W; w++) m_rrpv[s][w]++;
      end
      m_valid[s][way] = 1'b1;
      m_line[s][way]  = a;
      if (instr && t == TEMP_HOT && md != MODE_SRRIP)       m_rrpv[s][way] = 0;
      else if (instr && t == TEMP_WARM && md == MODE_TRRIP2) m_rrpv[s][way] = 1;
      else                                                  m_rrpv[s][way] = 2;
      return 1'b0;
    endfunction

    // set index of used set s: spread over the index range, top bit included
    function automatic logic [IDXB-1:0] set_of(int s);
      return IDXB'(s * (SETS / NSETS) + s);
    endfunction

    function automatic logic [39:0] line_addr(int s, int tag);
      return {(40 - IDXB - 6)'(tag), set_of(s), 6'd0};
    endfunction

    task automatic access(int s, int tag, bit instr, temp_e t, output bit hit);
      logic [39:0] a;
      bit exp_hit;
      int lat;
      a = line_addr(s, tag);
      lat = 0;
      exp_hit = model(s, a, instr, t, mode);
      @(negedge clk);
      req_valid = 1'b1; req_addr = a; req_instr = instr; req_temp = t;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 1'b0;
      while (!resp_valid && lat < 2000) begin @(posedge clk); lat++; end
      hit = resp_hit;
      checks++;
      if (resp_hit !== exp_hit || resp_rdata !== pattern(a)) begin
        failures++;
        $display("FAIL cfg %0d %s set %0d tag %0d: hit %0d exp %0d", g, mode.name(), s, tag,
                 resp_hit, exp_hit);
      end
      @(posedge clk);
    endtask

    int hot_hits [3], warm_hits [3];

    initial begin
      bit h;
      int dtag;
      rst_n = 1'b0; mode = MODE_SRRIP;
      req_valid = 1'b0; req_addr = '0; req_write = 1'b0; req_instr = 1'b0;
      req_temp = TEMP_NONE; req_wdata = '0;
      mem_resp_valid = 1'b0; mem_req_ready = 1'b0; mem_resp_rdata = '0;
      for (int m = 0; m < 3; m++) begin
        mode = mode_e'(m);
        hot_hits[m] = 0; warm_hits[m] = 0;
        for (int s = 0; s < NSETS; s++)
          for (int w = 0; w < W; w++) begin m_valid[s][w] = 0; m_rrpv[s][w] = 0; end
        rst_n = 1'b0;
        repeat (3) @(posedge clk);
        rst_n = 1'b1;
        while (!req_ready) @(posedge clk);
        dtag = 100;
        for (int r = 0; r < ROUNDS; r++)
          for (int s = 0; s < NSETS; s++) begin
            access(s, 1, 1'b1, TEMP_HOT, h);  if (r > 0 && h) hot_hits[m]++;
            access(s, 2, 1'b1, TEMP_WARM, h); if (r > 0 && h) warm_hits[m]++;
            for (int d = 0; d < W; d++) begin access(s, dtag, 1'b0, TEMP_NONE, h); dtag++; end
          end
      end
      $display("cfg %0d: %0d kB %0d-way (%0d sets): hot hits S/T1/T2 = %0d/%0d/%0d, warm hits = %0d/%0d/%0d",
               g, CFG_KB[g], W, SETS, hot_hits[0], hot_hits[1], hot_hits[2],
               warm_hits[0], warm_hits[1], warm_hits[2]);
      checks++;
      if (hot_hits[0] != 0 || hot_hits[1] != NSETS * (ROUNDS - 1) ||
          hot_hits[2] != NSETS * (ROUNDS - 1) || warm_hits[1] != 0 || warm_hits[2] == 0) begin
        failures++; $display("FAIL cfg %0d: replacement effect not as expected", g);
      end
      cfg_done[g] = 1'b1;
    end
  end

  initial begin
    for (int g = 0; g < NCFG; g++) wait (cfg_done[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
