// trrip_top_tb: end-to-end test of the TRRIP memory path (four cores -> their
// MMUs -> arbiter -> shared L2 -> next level), at a reduced L2 of 8 ways x 16
// sets.
//
// The behavioural next-level memory in this file holds a four-level page table
// (built with pt_builder) and the program's lines. Virtual pages 0-3 are hot
// code, 4-7 warm code, 8-11 cold code, 12-15 code without a temperature, 16-23
// execute-never data, and page 24 is unmapped.
//
// All cores share one page table. Phase 1 runs random fetches, loads and
// full-line stores from all four cores at once, switching the mode from
// TRRIP-2 to SRRIP (after 600 requests) to TRRIP-1 (after 1200), and checks every returned line
// against a shadow copy of memory kept by the test, independent of the cache
// (each core loads and stores only its own two data pages, so the shadow is
// well defined); forbidden fetches and unmapped pages must fault. Fetches
// use only the first eight lines of each code page, so code is reused. Phase 2 and
// 3 use core 0 alone.
// Phase 2 is the paper's central case: one instruction line followed by 16
// data lines of the same set, then the instruction line again. Under SRRIP the
// line must have been evicted; marked hot under TRRIP-1 it must still hit.
// Phase 3 flushes the TLB and checks that translation walks again. Phase 4
// fetches from two 4 kB pages of a 2 MB hot-code block: one walk must serve
// both, and both lines must be inserted as hot. Latency of
// a TLB hit plus L2 hit is checked (2 + 8 + 12 cycles). Each mechanism
// (TLB hit, walk, L2 hit, miss, ageing, back-invalidation, write-back, hot and
// warm insertion, warm/cold decrement, fault, flush, each mode, two cores
// competing for the L2) is counted, and
// one that never happened counts as a failure.
module trrip_top_tb;
  import trrip_pkg::*;
  import pt_builder::*;

  localparam int WAYS = 8, SETS = 16, LB = 512, NC = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e       mode;
  logic [NC-1:0][39:0] ptbr;
  logic [NC-1:0]       flush;
  logic [NC-1:0]       cpu_req_valid, cpu_req_ready, cpu_req_instr, cpu_req_write;
  logic [NC-1:0][47:0] cpu_req_vaddr;
  logic [NC-1:0][LB-1:0] cpu_req_wdata;
  logic [LB-1:0]       cpu_resp_rdata;
  logic [NC-1:0]       cpu_resp_valid, cpu_resp_hit, cpu_resp_fault;
  logic        inv_valid;
  logic [39:0] inv_addr;
  logic        mem_req_valid, mem_req_ready, mem_req_write;
  logic [39:0] mem_req_addr;
  logic [LB-1:0] mem_req_wdata, mem_resp_rdata;
  logic        mem_resp_valid;

  trrip_top #(.NUM_CORES(NC), .L2_SIZE_BYTES(WAYS * SETS * 64), .L2_WAYS(WAYS)) dut (
    .clk, .rst_n, .mode_i(mode), .ptbr_i(ptbr), .tlb_flush_i(flush),
    .cpu_req_valid_i(cpu_req_valid), .cpu_req_ready_o(cpu_req_ready),
    .cpu_req_vaddr_i(cpu_req_vaddr), .cpu_req_instr_i(cpu_req_instr),
    .cpu_req_write_i(cpu_req_write), .cpu_req_wdata_i(cpu_req_wdata),
    .cpu_resp_valid_o(cpu_resp_valid), .cpu_resp_hit_o(cpu_resp_hit),
    .cpu_resp_fault_o(cpu_resp_fault), .cpu_resp_rdata_o(cpu_resp_rdata),
    .inv_valid_o(inv_valid), .inv_addr_o(inv_addr),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
    .mem_req_write_o(mem_req_write), .mem_req_addr_o(mem_req_addr),
    .mem_req_wdata_o(mem_req_wdata), .mem_resp_valid_i(mem_resp_valid),
    .mem_resp_rdata_i(mem_resp_rdata)
  );

  page_table pt;

  // ------------------------------------------------------------ next-level memory
  logic [LB-1:0] mem [logic [39:0]];
  function automatic logic [LB-1:0] pattern(logic [39:0] line);
    return {16{line[31:0] ^ 32'hc0de_0000}};
  endfunction
  function automatic logic [LB-1:0] mem_read(logic [39:0] line);
    logic [LB-1:0] d;
    if (mem.exists(line)) return mem[line];
    d = pattern(line);
    for (int w = 0; w < 8; w++)
      if (pt.words.exists(line + 40'(w * 8))) d[w * 64 +: 64] = pt.words[line + 40'(w * 8)];
    return d;
  endfunction

  int          delay = -1;
  logic [39:0] pend;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_req_ready  <= ($urandom_range(0, 3) != 0);
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_write) mem[mem_req_addr] = mem_req_wdata;
      else begin pend = mem_req_addr; delay = $urandom_range(2, 30); end
    end else if (delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= mem_read(pend);
      delay = -1;
    end else if (delay > 0) delay--;
  end

  // ------------------------------------------------------------ mechanism counters
  int n_tlb_hit, n_walk, n_l2_hit, n_l2_miss, n_aged, n_inv, n_wb, n_hot_ins, n_warm_ins;
  int n_dec_hit, n_fault, n_flush, n_mode[3], n_contend;

  bit dbg = 0;
  for (genvar c = 0; c < NC; c++) begin : g_cnt
    always @(posedge clk) if (rst_n) begin
      if (dut.g_core[c].u_mmu.state_q.name() == "S_LOOKUP" && dut.g_core[c].u_mmu.tlb_hit) n_tlb_hit++;
      if (dut.g_core[c].u_mmu.walk_req_valid_o && dut.g_core[c].u_mmu.walk_req_ready_i &&
          dut.g_core[c].u_mmu.level_q == 0) n_walk++;
      if (cpu_resp_valid[c] && cpu_resp_fault[c]) n_fault++;
      if (flush[c]) n_flush++;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.u_l2.tag_done) begin
      if (dut.u_l2.hit) begin
        n_l2_hit++;
        n_mode[int'(mode)]++;
        if (dut.u_l2.policy_rrpv != 0) n_dec_hit++;
      end else begin
        n_l2_miss++;
        if (dut.u_l2.aged) n_aged++;
        if (dut.u_l2.policy_rrpv == 0) n_hot_ins++;
        if (dut.u_l2.policy_rrpv == 1) n_warm_ins++;
      end
    end
    if (inv_valid) n_inv++;
    if (mem_req_valid && mem_req_ready && mem_req_write) n_wb++;
    if (dut.u_l2.req_ready_o && $countones(dut.slot_valid) > 1) n_contend++;
    if (dbg && dut.u_l2.req_valid_i && dut.u_l2.req_ready_o) $display("%0t L2 accept core %0d addr %h wr=%0d instr=%0d walk=%0d", $time, dut.grant_idx, dut.l2_req.addr, dut.l2_req.write, dut.l2_req.instr, dut.walk_owner_q);
    if (dbg && dut.u_l2.resp_valid_o) $display("%0t L2 resp owner %0d data %h hit %0d", $time, dut.owner_q, dut.u_l2.resp_rdata_o[31:0], dut.u_l2.resp_hit_o);
  end

  // ------------------------------------------------------------ shadow memory
  logic [LB-1:0] shadow [logic [39:0]];
  bit           page_xn [32];
  bit           page_map[32];

  // VA 2 MB .. 4 MB is one 2 MB block of hot code at PA 1 GB; the rest are 4 kB pages
  function automatic bit in_block(logic [47:0] va);
    return va[47:21] == 27'd1;
  endfunction
  function automatic logic [39:0] pa_of(logic [47:0] va);
    if (in_block(va)) return {19'h0_0200, va[20:0]};
    return {28'h0_2000 + 28'(va[47:12]), va[11:0]};
  endfunction

  int last_lat;
  bit last_hit, last_fault;
  task automatic access(int c, logic [47:0] va, bit instr, bit wr);
    logic [LB-1:0] wdata = {16{$urandom}} ^ {$urandom, 448'd0, $urandom};
    int  page = in_block(va) ? 0 : int'(va[47:12]);
    bit  exp_fault = !in_block(va) && (page >= 32 || !page_map[page] || (instr && page_xn[page]));
    logic [39:0] line = {pa_of(va)[39:6], 6'd0};
    int lat = 0;
    // Drive at the falling edge with blocking assignments: several cores'
    // processes write bits of the same packed vectors.
    @(negedge clk);
    cpu_req_valid[c] = 1; cpu_req_vaddr[c] = va; cpu_req_instr[c] = instr;
    cpu_req_write[c] = wr; cpu_req_wdata[c] = wdata;
    do @(posedge clk); while (!cpu_req_ready[c]);
    @(negedge clk);
    cpu_req_valid[c] = 0;
    do begin @(posedge clk); lat++; end while (!cpu_resp_valid[c] && lat < 5000);
    last_lat = lat; last_hit = cpu_resp_hit[c]; last_fault = cpu_resp_fault[c];
    checks++;
    if (cpu_resp_fault[c] !== exp_fault) begin
      failures++; $display("FAIL core %0d va %h fault=%0d exp=%0d", c, va, cpu_resp_fault[c], exp_fault);
    end else if (!exp_fault) begin
      if (wr) shadow[line] = wdata;
      else begin
        logic [LB-1:0] exp = shadow.exists(line) ? shadow[line] : pattern(line);
        checks++;
        if (cpu_resp_rdata !== exp) begin failures++; $display("FAIL core %0d va %h data mismatch t=%0t got %h exp %h", c, va, $time, cpu_resp_rdata[31:0], exp[31:0]); end
      end
    end
  endtask

  // random virtual address inside page p, avoiding sets 8 and 9 (kept for
  // phase 2); code fetches use only the first 8 lines of a page, so they reuse
  function automatic logic [47:0] rand_va(int p, bit few_lines = 0);
    logic [5:0] l;
    if (few_lines) l = 6'($urandom_range(0, 7));
    else do l = 6'($urandom); while (l[3:0] == 4'd8 || l[3:0] == 4'd9);
    return {36'(p), l, 6'($urandom)};
  endfunction

  int n_done = 0;

  initial begin
    cpu_req_valid = '0; cpu_req_vaddr = '0; cpu_req_instr = '0; cpu_req_write = '0;
    cpu_req_wdata = '0; flush = '0; mem_resp_valid = 0; mem_req_ready = 0; mem_resp_rdata = '0;
    mode = MODE_TRRIP2;
    ptbr = {NC{40'h00_0010_0000}};
    pt = new(40'h00_0010_0000);
    for (int p = 0; p < 32; p++) begin
      temp_e h;
      h = (p < 4) ? TEMP_HOT : (p < 8) ? TEMP_WARM : (p < 12) ? TEMP_COLD : TEMP_NONE;
      page_xn[p]  = (p >= 16);
      page_map[p] = (p < 24);
      if (page_map[p]) pt.map(36'(p), 28'h0_2000 + 28'(p), h, page_xn[p]);
    end
    pt.map_block(36'h200, 28'h4_0000, TEMP_HOT, 1'b0);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // latency of a TLB hit + L2 hit
    access(0, 48'h0000_0000_0040, 1, 0);
    access(0, 48'h0000_0000_0040, 1, 0);
    checks++;
    if (!last_hit || last_lat != 2 + 8 + 12) begin
      failures++; $display("FAIL hit path latency %0d (hit=%0d)", last_lat, last_hit);
    end

    // phase 1: random traffic from all cores at once
    fork
      begin
        wait (n_done >= 600);  mode = MODE_SRRIP;     // run-time mode switches
        wait (n_done >= 1200); mode = MODE_TRRIP1;
      end
    join_none
    for (int c = 0; c < NC; c++) begin
      fork
        automatic int cc = c;
        for (int n = 0; n < 400; n++) begin
          int r;
          r = $urandom_range(0, 99);
          n_done++;
          if (r < 55)      access(cc, rand_va($urandom_range(0, 15), 1), 1, 0);        // fetch
          else if (r < 75) access(cc, rand_va(16 + 2 * cc + $urandom_range(0, 1)), 0, 0); // load
          else if (r < 93) access(cc, rand_va(16 + 2 * cc + $urandom_range(0, 1)), 0, 1); // store
          else if (r < 97) access(cc, rand_va($urandom_range(16, 23)), 1, 0);        // fetch, XN page
          else             access(cc, rand_va(24), 1'($urandom_range(0, 1)), 0);         // unmapped
        end
      join_none
    end
    wait fork;

    // phase 2: one instruction line against 16 data lines of its set
    mode = MODE_SRRIP;
    access(0, {36'd0, 6'd8, 6'd0}, 1, 0);                                        // hot page, set 8
    for (int k = 0; k < 16; k++) access(0, {36'd16 + 36'(k) / 36'd2, 2'(k % 2), 4'd8, 6'd0}, 0, 0);
    access(0, {36'd0, 6'd8, 6'd0}, 1, 0);
    checks++;
    if (last_hit) begin failures++; $display("FAIL SRRIP kept the instruction line"); end
    mode = MODE_TRRIP1;
    access(0, {36'd1, 6'd9, 6'd0}, 1, 0);                                        // hot page, set 9
    for (int k = 0; k < 16; k++) access(0, {36'd16 + 36'(k) / 36'd2, 2'(k % 2), 4'd9, 6'd0}, 0, 0);
    access(0, {36'd1, 6'd9, 6'd0}, 1, 0);
    checks++;
    if (!last_hit) begin failures++; $display("FAIL TRRIP-1 lost the hot instruction line"); end

    // phase 3: TLB flush forces a new walk
    begin
      int w0;
      w0 = n_walk;
      @(posedge clk); flush[0] <= 1; @(posedge clk); flush[0] <= 0;
      access(0, {36'd2, 12'h100}, 1, 0);
      checks++;
      if (n_walk != w0 + 1) begin failures++; $display("FAIL no walk after flush"); end
    end

    // phase 4: a 2 MB block of hot code: one walk (three reads) serves two of
    // its 4 kB pages, and its lines are inserted as hot
    begin
      int w0, h0;
      mode = MODE_TRRIP1;
      w0 = n_walk; h0 = n_hot_ins;
      access(0, 48'h0000_0020_5040, 1, 0);
      access(0, 48'h0000_0021_7080, 1, 0);
      checks++;
      if (n_walk != w0 + 1 || n_hot_ins != h0 + 2) begin
        failures++; $display("FAIL 2 MB block: walks %0d hot inserts %0d", n_walk - w0, n_hot_ins - h0);
      end
    end

    $display("contention=%0d", n_contend);
    checks++;
    if (n_contend == 0) begin failures++; $display("FAIL cores never competed for the L2"); end
    $display("tlb_hit=%0d walk=%0d l2_hit=%0d l2_miss=%0d aged=%0d inv=%0d wb=%0d hot_ins=%0d warm_ins=%0d dec_hit=%0d fault=%0d flush=%0d hits_by_mode=%0d/%0d/%0d",
             n_tlb_hit, n_walk, n_l2_hit, n_l2_miss, n_aged, n_inv, n_wb, n_hot_ins, n_warm_ins,
             n_dec_hit, n_fault, n_flush, n_mode[0], n_mode[1], n_mode[2]);
    foreach (n_mode[m]) begin checks++; if (n_mode[m] == 0) failures++; end
    checks++;
    if (n_tlb_hit == 0 || n_walk == 0 || n_l2_hit == 0 || n_l2_miss == 0 || n_aged == 0 ||
        n_inv == 0 || n_wb == 0 || n_hot_ins == 0 || n_warm_ins == 0 || n_dec_hit == 0 ||
        n_fault == 0 || n_flush == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
