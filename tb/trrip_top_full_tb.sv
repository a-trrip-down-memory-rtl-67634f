// trrip_top_full_tb: the TRRIP memory path at full size (512 kB, 8-way L2,
// 1024 sets, 32-entry TLB, 8/12-cycle tag/data latency), all defaults.
//
// After the L2's 1024-cycle initialisation sweep, it checks a cold fetch
// (page walk and L2 miss), a repeated fetch (TLB and L2 hit in 22 cycles), a
// store and load to a data page, and then the replacement behaviour on one set:
// an instruction line followed by 16 data lines that map to the same set (64 kB
// apart) is evicted under SRRIP and kept under TRRIP-1 when its page is hot,
// and in TRRIP-2 a warm fetch is inserted at RRPV 1 (near). Finally all four
// cores fetch at once, twice, so that the arbiter and the per-core MMUs work
// at full size too. All returned data is checked against a shadow memory kept
// by the test.
module trrip_top_full_tb;
  import trrip_pkg::*;
  import pt_builder::*;

  localparam int LB = 512;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mode_e       mode;
  logic [39:0] ptbr;
  logic        flush;
  logic        cpu_req_valid, cpu_req_ready, cpu_req_instr, cpu_req_write;
  logic [47:0] cpu_req_vaddr;
  logic [LB-1:0] cpu_req_wdata, cpu_resp_rdata;
  logic        cpu_resp_valid, cpu_resp_hit, cpu_resp_fault;
  logic        inv_valid;
  logic [39:0] inv_addr;
  logic        mem_req_valid, mem_req_ready, mem_req_write;
  logic [39:0] mem_req_addr;
  logic [LB-1:0] mem_req_wdata, mem_resp_rdata;
  logic        mem_resp_valid;

  // the top has four core ports; core 0 runs the main sequence, cores 1-3
  // only join the final burst (their responses must match a request)
  logic [3:0]  ready_all, resp_valid_all, resp_hit_all, resp_fault_all;
  logic        x_valid [1:3];
  logic [47:0] x_vaddr [1:3];
  bit          x_busy  [1:3];
  assign cpu_req_ready  = ready_all[0];
  assign cpu_resp_valid = resp_valid_all[0];
  assign cpu_resp_hit   = resp_hit_all[0];
  assign cpu_resp_fault = resp_fault_all[0];

  trrip_top dut (
    .clk, .rst_n, .mode_i(mode), .ptbr_i({4{ptbr}}), .tlb_flush_i({3'b000, flush}),
    .cpu_req_valid_i({x_valid[3], x_valid[2], x_valid[1], cpu_req_valid}),
    .cpu_req_ready_o(ready_all),
    .cpu_req_vaddr_i({x_vaddr[3], x_vaddr[2], x_vaddr[1], cpu_req_vaddr}),
    .cpu_req_instr_i({3'b111, cpu_req_instr}),
    .cpu_req_write_i({3'b000, cpu_req_write}), .cpu_req_wdata_i({{3*LB{1'b0}}, cpu_req_wdata}),
    .cpu_resp_valid_o(resp_valid_all), .cpu_resp_hit_o(resp_hit_all),
    .cpu_resp_fault_o(resp_fault_all), .cpu_resp_rdata_o(cpu_resp_rdata),
    .inv_valid_o(inv_valid), .inv_addr_o(inv_addr),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
    .mem_req_write_o(mem_req_write), .mem_req_addr_o(mem_req_addr),
    .mem_req_wdata_o(mem_req_wdata), .mem_resp_valid_i(mem_resp_valid),
    .mem_resp_rdata_i(mem_resp_rdata)
  );

  int n_contend = 0;
  always @(posedge clk)
    if (rst_n) begin
      for (int c = 1; c < 4; c++)
        if (resp_valid_all[c] && !x_busy[c]) begin
          failures++; $display("FAIL core %0d got a response it did not ask for", c);
        end
      if ($countones(dut.slot_valid) > 1) n_contend++;
    end

  // instruction fetch by core c (1-3); returns the cycles to the response
  task automatic side_fetch(int c, logic [47:0] va, output int lat);
    logic [39:0] line;
    line = {28'h0_2000 + 28'(va[47:12]), va[11:6], 6'd0};
    lat = 0;
    x_busy[c] = 1;
    x_valid[c] <= 1; x_vaddr[c] <= va;
    do @(posedge clk); while (!ready_all[c]);
    x_valid[c] <= 0;
    do begin @(posedge clk); lat++; end while (!resp_valid_all[c] && lat < 5000);
    checks++;
    if (resp_fault_all[c] || cpu_resp_rdata !== pattern(line)) begin
      failures++; $display("FAIL core %0d va %h fault=%0d or data mismatch", c, va, resp_fault_all[c]);
    end
    @(negedge clk);
    x_busy[c] = 0;
  endtask

  page_table pt;

  logic [LB-1:0] mem [logic [39:0]];
  function automatic logic [LB-1:0] pattern(logic [39:0] line);
    return {16{line[31:0] ^ 32'hfeed_0000}};
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
    mem_req_ready  <= 1'b1;
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_write) mem[mem_req_addr] = mem_req_wdata;
      else begin pend = mem_req_addr; delay = 40; end
    end else if (delay == 0) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= mem_read(pend);
      delay = -1;
    end else if (delay > 0) delay--;
  end

  logic [LB-1:0] shadow [logic [39:0]];
  int  last_lat;
  bit  last_hit;
  task automatic access(logic [47:0] va, bit instr, bit wr);
    logic [LB-1:0] wdata = {16{$urandom}};
    logic [39:0] line = {28'h0_2000 + 28'(va[47:12]), va[11:6], 6'd0};
    int lat = 0;
    cpu_req_valid <= 1; cpu_req_vaddr <= va; cpu_req_instr <= instr; cpu_req_write <= wr;
    cpu_req_wdata <= wdata;
    do @(posedge clk); while (!cpu_req_ready);
    cpu_req_valid <= 0;
    do begin @(posedge clk); lat++; end while (!cpu_resp_valid && lat < 5000);
    last_lat = lat; last_hit = cpu_resp_hit;
    checks++;
    if (cpu_resp_fault) begin failures++; $display("FAIL va %h faulted", va); end
    if (wr) shadow[line] = wdata;
    else begin
      checks++;
      if (cpu_resp_rdata !== (shadow.exists(line) ? shadow[line] : pattern(line))) begin
        failures++; $display("FAIL va %h data mismatch", va);
      end
    end
  endtask

  // virtual page of the k-th data line that maps to the same L2 set (64 kB apart)
  function automatic logic [35:0] data_page(int k);
    return 36'(16 + 16 * k);
  endfunction

  initial begin
    cpu_req_valid = 0; cpu_req_vaddr = '0; cpu_req_instr = 0; cpu_req_write = 0;
    for (int c = 1; c < 4; c++) begin x_valid[c] = 0; x_vaddr[c] = '0; x_busy[c] = 0; end
    cpu_req_wdata = '0; flush = 0; mem_resp_valid = 0; mem_req_ready = 0; mem_resp_rdata = '0;
    mode = MODE_TRRIP2;
    ptbr = 40'h00_0010_0000;
    pt = new(ptbr);
    pt.map(36'd0, 28'h0_2000, TEMP_HOT, 0);
    pt.map(36'd1, 28'h0_2001, TEMP_WARM, 0);
    for (int k = 0; k < 16; k++) pt.map(data_page(k), 28'h0_2000 + 28'(data_page(k)), TEMP_NONE, 1);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // cold fetch, then the same line again: TLB hit and L2 hit
    access(48'h0000_0000_0100, 1, 0);
    checks++; if (last_hit) begin failures++; $display("FAIL cold fetch hit"); end
    access(48'h0000_0000_0100, 1, 0);
    checks++;
    if (!last_hit || last_lat != 22) begin
      failures++; $display("FAIL repeated fetch hit=%0d latency %0d", last_hit, last_lat);
    end
    // store and load back
    access({data_page(0), 12'h040}, 0, 1);
    access({data_page(0), 12'h040}, 0, 0);
    checks++; if (!last_hit) begin failures++; $display("FAIL load after store missed"); end

    // SRRIP: the instruction line is pushed out by 16 data lines of its set
    mode = MODE_SRRIP;
    access(48'h0000_0000_0200, 1, 0);
    for (int k = 0; k < 16; k++) access({data_page(k), 12'h200}, 0, 0);
    access(48'h0000_0000_0200, 1, 0);
    checks++; if (last_hit) begin failures++; $display("FAIL SRRIP kept the line"); end

    // TRRIP-1: the hot instruction line survives the same stream
    mode = MODE_TRRIP1;
    access(48'h0000_0000_0240, 1, 0);
    for (int k = 0; k < 16; k++) access({data_page(k), 12'h240}, 0, 0);
    access(48'h0000_0000_0240, 1, 0);
    checks++; if (!last_hit) begin failures++; $display("FAIL TRRIP-1 lost the hot line"); end

    // TRRIP-2: a warm fetch is inserted at near (RRPV 1)
    mode = MODE_TRRIP2;
    access(48'h0000_0000_1280, 1, 0);
    @(posedge clk);
    checks++;
    begin
      bit found;
      found = 0;
      for (int w = 0; w < 8; w++)
        if (dut.u_l2.valid_mem[74][w] && dut.u_l2.tag_mem[74][w] == 24'h0_0200 &&
            dut.u_l2.rrpv_mem[74][w] == 2'd1) found = 1;   // PA 0x2001280: set 74, tag 0x200
      if (!found) begin failures++; $display("FAIL warm line not inserted at near"); end
    end

    // all four cores fetch hot code at once, twice: the first time cores 1-3
    // walk their own (empty) TLBs, the second time every fetch hits
    for (int round = 0; round < 2; round++) begin
      int lat [1:3];
      fork
        access(48'h0000_0000_0300, 1, 0);
        side_fetch(1, 48'h0000_0000_0340, lat[1]);
        side_fetch(2, 48'h0000_0000_0380, lat[2]);
        side_fetch(3, 48'h0000_0000_03c0, lat[3]);
      join
      // all hits: the L2 serves them back to back, one every 21 cycles (20 for
      // the hit plus the cycle it takes to return to idle), so the four cores
      // see 22, 43, 64 and 85 cycles in the order the arbiter chose
      if (round == 1) begin
        int l [4];
        l = '{last_lat, lat[1], lat[2], lat[3]};
        l.sort();
        checks++;
        if (l[0] != 22 || l[1] != 43 || l[2] != 64 || l[3] != 85) begin
          failures++;
          $display("FAIL burst latencies %0d %0d %0d %0d", last_lat, lat[1], lat[2], lat[3]);
        end
      end
    end
    checks++;
    if (n_contend == 0) begin failures++; $display("FAIL cores never competed for the L2"); end
    $display("cycles with several cores requesting the L2: %0d", n_contend);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
