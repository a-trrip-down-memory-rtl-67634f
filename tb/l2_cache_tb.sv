// l2_cache_tb: self-checking test of the TRRIP L2 against a reference model.
//
// A small geometry (8 ways as in the paper, 4 sets) is used so that the random
// traffic, drawn from 80 line addresses, keeps evicting. The reference model
// keeps its own valid/dirty/tag/RRPV/data arrays and applies the algorithm
// step by step: promotion or insertion by temperature and mode, RRIP victim
// search by repeated ageing, invalid ways first. For every request it predicts
// hit or miss, the returned line, the back-invalidated address and the
// written-back line, and compares them with the cache. The next-level memory is
// a behavioural model in this file, with random ready and response delays.
// Hit latency is checked against TAG_LAT + DATA_LAT = 8 + 12 cycles.
module l2_cache_tb;
  import trrip_pkg::*;

  localparam int WAYS = 8, SETS = 4, LINE_BYTES = 64, PA_BITS = 40;
  localparam int LB = LINE_BYTES * 8;
  localparam int TAG_LAT = 8, DATA_LAT = 12;

  int checks = 0, failures = 0;
  int n_hits = 0, n_misses = 0, n_wb = 0, n_inv = 0, n_aged_misses = 0;
  int n_hot_ins = 0, n_warm_ins = 0, n_dec_hits = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e             mode;
  logic              req_valid, req_ready, req_write, req_instr;
  logic [PA_BITS-1:0] req_addr;
  temp_e             req_temp;
  logic [LB-1:0]     req_wdata;
  logic              resp_valid, resp_hit;
  logic [LB-1:0]     resp_rdata;
  logic              inv_valid;
  logic [PA_BITS-1:0] inv_addr;
  logic              mem_req_valid, mem_req_ready, mem_req_write;
  logic [PA_BITS-1:0] mem_req_addr;
  logic [LB-1:0]     mem_req_wdata;
  logic              mem_resp_valid;
  logic [LB-1:0]     mem_resp_rdata;

  l2_cache #(.SIZE_BYTES(WAYS * SETS * LINE_BYTES), .WAYS(WAYS), .LINE_BYTES(LINE_BYTES),
             .PA_BITS(PA_BITS), .RRPV_BITS(2), .TAG_LAT(TAG_LAT), .DATA_LAT(DATA_LAT)) dut (
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

  // ---------------------------------------------------------------- memory model
  logic [LB-1:0] mem [logic [PA_BITS-1:0]];
  function automatic logic [LB-1:0] mem_read(logic [PA_BITS-1:0] a);
    if (mem.exists(a)) return mem[a];
    return {16{a[31:0] ^ 32'h5a5a_0000}};
  endfunction

  logic [PA_BITS-1:0] wb_addr_q[$];
  logic [LB-1:0]      wb_data_q[$];
  logic [PA_BITS-1:0] inv_q[$];
  int                 resp_delay = -1;
  logic [PA_BITS-1:0] rd_addr;
  bit                 mem_hold = 0, mem_hold_write;
  logic [PA_BITS-1:0] mem_hold_addr;

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= ($urandom_range(0, 2) != 0);
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_write) begin
        wb_addr_q.push_back(mem_req_addr);
        wb_data_q.push_back(mem_req_wdata);
        mem[mem_req_addr] = mem_req_wdata;
      end else begin
        rd_addr    = mem_req_addr;
        resp_delay = $urandom_range(0, 15);
      end
    end else if (resp_delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= mem_read(rd_addr);
      resp_delay = -1;
    end else if (resp_delay > 0) begin
      resp_delay--;
    end
    if (inv_valid) inv_q.push_back(inv_addr);
    // handshake rule: a next-level request that is not accepted stays unchanged
    if (mem_hold) begin
      checks++;
      assert (mem_req_valid && mem_req_addr == mem_hold_addr && mem_req_write == mem_hold_write)
      else begin failures++; $error("next-level request dropped or changed before acceptance"); end
    end
    mem_hold       = mem_req_valid && !mem_req_ready;
    mem_hold_addr  = mem_req_addr;
    mem_hold_write = mem_req_write;
  end

  // ---------------------------------------------------------------- reference model
  bit            m_valid [SETS][WAYS];
  bit            m_dirty [SETS][WAYS];
  logic [PA_BITS-1:0] m_line [SETS][WAYS];   // line address
  int            m_rrpv  [SETS][WAYS];
  logic [LB-1:0] m_data  [SETS][WAYS];

  function automatic int ins_rrpv(bit instr, temp_e t, mode_e m);
    if (instr && m != MODE_SRRIP && t == TEMP_HOT) return 0;
    if (instr && m == MODE_TRRIP2 && t == TEMP_WARM) return 1;
    return 2;
  endfunction
  function automatic int hit_rrpv(int r, bit instr, temp_e t, mode_e m);
    if (instr && m != MODE_SRRIP && t == TEMP_HOT) return 0;
    if (instr && m == MODE_TRRIP2 && (t == TEMP_WARM || t == TEMP_COLD)) return (r > 0) ? r - 1 : 0;
    return 0;
  endfunction

  task automatic do_request(logic [PA_BITS-1:0] a, bit wr, bit instr, temp_e t);
    int set = int'(a[7:6]);
    int way = -1, lat = 0;
    bit exp_hit = 0, exp_inv = 0, exp_wb = 0;
    logic [PA_BITS-1:0] exp_inv_addr, exp_wb_addr;
    logic [LB-1:0] exp_data, exp_wb_data, wdata;
    bit eff_instr = instr && !wr;

    wdata = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
             $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    // ---- model
    for (int w = 0; w < WAYS; w++)
      if (m_valid[set][w] && m_line[set][w] == a) way = w;
    if (way >= 0) begin
      exp_hit  = 1;
      exp_data = m_data[set][way];
      if (eff_instr && mode == MODE_TRRIP2 && (t == TEMP_WARM || t == TEMP_COLD)) n_dec_hits++;
      m_rrpv[set][way] = hit_rrpv(m_rrpv[set][way], eff_instr, t, mode);
      if (wr) begin m_data[set][way] = wdata; m_dirty[set][way] = 1; end
    end else begin
      for (int w = 0; w < WAYS; w++) if (!m_valid[set][w] && way < 0) way = w;
      if (way < 0) begin
        int steps = 0;
        while (way < 0) begin
          for (int w = 0; w < WAYS; w++) if (m_rrpv[set][w] == 3 && way < 0) way = w;
          if (way < 0) begin for (int w = 0; w < WAYS; w++) m_rrpv[set][w]++; steps++; end
        end
        if (steps > 0) n_aged_misses++;
        exp_inv = 1; exp_inv_addr = m_line[set][way];
        if (m_dirty[set][way]) begin
          exp_wb = 1; exp_wb_addr = m_line[set][way]; exp_wb_data = m_data[set][way];
        end
      end
      exp_data = wr ? wdata : (exp_wb && exp_wb_addr == a ? exp_wb_data : mem_read(a));
      m_valid[set][way] = 1; m_dirty[set][way] = wr; m_line[set][way] = a;
      m_data[set][way] = exp_data;
      m_rrpv[set][way] = ins_rrpv(eff_instr, t, mode);
      if (m_rrpv[set][way] == 0) n_hot_ins++;
      if (m_rrpv[set][way] == 1) n_warm_ins++;
    end

    // ---- drive
    req_valid <= 1; req_addr <= a; req_write <= wr; req_instr <= instr; req_temp <= t;
    req_wdata <= wdata;
    do @(posedge clk); while (!req_ready);
    req_valid <= 0;
    do begin @(posedge clk); lat++; end while (!resp_valid && lat < 2000);

    checks++;
    if (resp_hit !== exp_hit) begin
      failures++; $display("FAIL %h hit=%0d exp=%0d", a, resp_hit, exp_hit);
    end
    if (!wr) begin
      checks++;
      if (resp_rdata !== exp_data) begin failures++; $display("FAIL %h data mismatch", a); end
    end
    if (exp_hit) begin
      n_hits++;
      checks++;
      if (lat != TAG_LAT + DATA_LAT) begin
        failures++; $display("FAIL hit latency %0d, expected %0d", lat, TAG_LAT + DATA_LAT);
      end
    end else n_misses++;
    checks++;
    if (exp_inv) begin
      n_inv++;
      if (inv_q.size() != 1 || inv_q[0] != exp_inv_addr) begin
        failures++; $display("FAIL %h back-invalidation %p exp %h", a, inv_q, exp_inv_addr);
      end
    end else if (inv_q.size() != 0) begin
      failures++; $display("FAIL %h unexpected back-invalidation", a);
    end
    checks++;
    if (exp_wb) begin
      n_wb++;
      if (wb_addr_q.size() != 1 || wb_addr_q[0] != exp_wb_addr || wb_data_q[0] != exp_wb_data) begin
        failures++; $display("FAIL %h write-back mismatch", a);
      end
    end else if (wb_addr_q.size() != 0) begin
      failures++; $display("FAIL %h unexpected write-back", a);
    end
    inv_q.delete(); wb_addr_q.delete(); wb_data_q.delete();
    // the model's RRPVs of the set must equal the cache's
    @(posedge clk);
    checks++;
    for (int w = 0; w < WAYS; w++)
      if (m_valid[set][w] && dut.rrpv_mem[set][w] != 2'(m_rrpv[set][w])) begin
        failures++; $display("FAIL set %0d way %0d rrpv %0d exp %0d", set, w, dut.rrpv_mem[set][w], m_rrpv[set][w]);
        break;
      end
  endtask

  initial begin
    req_valid = 0; req_addr = '0; req_write = 0; req_instr = 0; req_temp = TEMP_NONE;
    req_wdata = '0; mode = MODE_TRRIP2; mem_resp_valid = 0; mem_req_ready = 0;
    mem_resp_rdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed: a hot instruction line survives a stream of data lines in one set
    mode = MODE_TRRIP1;
    do_request(40'h1000_0040, 0, 1, TEMP_HOT);
    for (int k = 0; k < 20; k++) do_request(40'h2000_0040 + 40'(k) * 40'h100, 0, 0, TEMP_NONE);
    do_request(40'h1000_0040, 0, 1, TEMP_HOT);
    checks++;
    if (!resp_hit) begin failures++; $display("FAIL hot line was evicted by data"); end
    // random traffic, all modes
    for (int n = 0; n < 3000; n++) begin
      logic [PA_BITS-1:0] a;
      if (n % 500 == 0) mode = mode_e'($urandom_range(0, 2));
      a = {20'h00030, 14'($urandom_range(0, 79)), 6'h00};
      do_request(a, ($urandom_range(0, 4) == 0), ($urandom_range(0, 1) == 0),
                 temp_e'($urandom_range(0, 3)));
    end
    $display("hits=%0d misses=%0d inv=%0d wb=%0d aged=%0d hot_ins=%0d warm_ins=%0d dec_hits=%0d",
             n_hits, n_misses, n_inv, n_wb, n_aged_misses, n_hot_ins, n_warm_ins, n_dec_hits);
    checks++;
    if (n_hits == 0 || n_wb == 0 || n_aged_misses == 0 || n_warm_ins == 0 || n_dec_hits == 0) failures++;
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
