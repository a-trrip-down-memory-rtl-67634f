// mmu_tb: self-checking test of the temperature-forwarding MMU.
//
// A four-level page table is built in a behavioural memory (pt_builder). Random
// requests over 48 mapped 4 kB pages (more than the 32 TLB entries), some
// unmapped pages, some execute-never pages and random 4 kB pages inside eight
// 2 MB block mappings are translated, and the physical address,
// temperature, fault flag, payload and the number of table reads are checked
// against a reference: a 32-entry round-robin TLB model and the page table
// itself. A TLB hit must answer two cycles after the request handshake; a miss
// must read exactly four PTEs for a page, three for a block (or stop at the
// first invalid one); one TLB entry must serve a whole block. A TLB flush
// in the middle must force walks again.
module mmu_tb;
  import trrip_pkg::*;
  import pt_builder::*;

  localparam int ENTRIES = 32;

  int checks = 0, failures = 0, n_tlb_hit = 0, n_walks = 0, n_faults = 0, n_blk_walks = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [39:0] ptbr;
  logic        flush, req_valid, req_ready, req_instr;
  logic [47:0] req_vaddr;
  logic [7:0]  req_user, out_user;
  logic        out_valid, out_ready, out_instr, out_fault;
  logic [39:0] out_paddr;
  temp_e       out_temp;
  logic        walk_valid, walk_ready, walk_resp_valid;
  logic [39:0] walk_addr;
  logic [63:0] walk_pte;

  mmu #(.TLB_ENTRIES(ENTRIES), .USER_BITS(8)) dut (
    .clk, .rst_n, .ptbr_i(ptbr), .flush_i(flush),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_vaddr_i(req_vaddr),
    .req_instr_i(req_instr), .req_user_i(req_user),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_paddr_o(out_paddr),
    .out_temp_o(out_temp), .out_instr_o(out_instr), .out_fault_o(out_fault),
    .out_user_o(out_user),
    .walk_req_valid_o(walk_valid), .walk_req_ready_i(walk_ready),
    .walk_req_addr_o(walk_addr), .walk_resp_valid_i(walk_resp_valid),
    .walk_resp_pte_i(walk_pte)
  );

  page_table pt;

  // walk memory: random ready, random response delay
  int          walk_reads = 0, delay = -1;
  logic [39:0] pend_addr;
  always @(posedge clk) begin
    walk_resp_valid <= 1'b0;
    walk_ready      <= ($urandom_range(0, 1) == 0);
    if (walk_valid && walk_ready) begin
      walk_reads++;
      pend_addr = walk_addr;
      delay     = $urandom_range(0, 6);
    end else if (delay == 0) begin
      walk_resp_valid <= 1'b1;
      walk_pte        <= pt.read(pend_addr);
      delay = -1;
    end else if (delay > 0) delay--;
  end

  // reference TLB: round-robin over ENTRIES slots
  logic [35:0] ref_vpn [ENTRIES];
  bit          ref_v   [ENTRIES];
  bit          ref_big [ENTRIES];   // entry maps a 2 MB block
  int          ref_rr = 0;

  // reference attributes of each test page
  logic [27:0] pg_ppn  [64];
  temp_e       pg_heat [64];
  bit          pg_xn   [64];
  bit          pg_map  [64];
  localparam logic [35:0] VPN_BASE = 36'h7_0012_3400;

  // 2 MB blocks: test pages 64..71 stand for random 4 kB pages inside block p-64
  logic [27:0] blk_ppn  [8];
  temp_e       blk_heat [8];
  bit          blk_xn   [8];
  localparam logic [35:0] BLK_BASE = 36'h3_4560_0000;

  task automatic translate(int p, bit instr);
    logic [35:0] vpn;
    logic [11:0] off;
    logic [7:0]  user;
    logic [27:0] exp_ppn;
    temp_e       exp_heat;
    int  slot, lat, reads0, exp_reads;
    bit  exp_fault, big;
    off = 12'($urandom); user = 8'($urandom); slot = -1; lat = 0;
    big = (p >= 64);
    if (big) begin
      vpn       = BLK_BASE + 36'(p - 64) * 36'h4_0200 + 36'($urandom_range(0, 511));
      exp_ppn   = {blk_ppn[p - 64][27:9], vpn[8:0]};
      exp_heat  = blk_heat[p - 64];
      exp_fault = blk_xn[p - 64] && instr;
      exp_reads = 3;
    end else begin
      vpn       = VPN_BASE + 36'(p) * 36'h201;   // spread over the upper levels
      exp_ppn   = pg_ppn[p];
      exp_heat  = pg_heat[p];
      exp_fault = !pg_map[p] || (pg_xn[p] && instr);
      exp_reads = pg_map[p] ? 4 : -1;
    end
    for (int e = 0; e < ENTRIES; e++)
      if (ref_v[e] && (ref_big[e] ? ref_vpn[e][35:9] == vpn[35:9] : ref_vpn[e] == vpn)) slot = e;
    reads0 = walk_reads;
    req_valid <= 1; req_vaddr <= {vpn, off}; req_instr <= instr; req_user <= user;
    do @(posedge clk); while (!req_ready);
    req_valid <= 0;
    do begin @(posedge clk); lat++; end while (!out_valid && lat < 1000);
    checks++;
    if (out_fault !== exp_fault || out_user !== user || out_instr !== instr) begin
      failures++; $display("FAIL page %0d fault=%0d exp=%0d", p, out_fault, exp_fault);
    end
    if (!exp_fault) begin
      checks++;
      if (out_paddr !== {exp_ppn, off} || out_temp !== exp_heat) begin
        failures++;
        $display("FAIL page %0d paddr %h exp %h temp %s exp %s", p, out_paddr, {exp_ppn, off},
                 out_temp.name(), exp_heat.name());
      end
    end else begin
      n_faults++;
      checks++;
      if (out_temp !== TEMP_NONE) begin failures++; $display("FAIL fault with temperature"); end
    end
    checks++;
    if (slot >= 0) begin
      n_tlb_hit++;
      if (lat != 2 || walk_reads != reads0) begin
        failures++; $display("FAIL page %0d TLB hit latency %0d reads %0d", p, lat, walk_reads - reads0);
      end
    end else begin
      n_walks++;
      if (big) n_blk_walks++;
      if (exp_reads > 0 && walk_reads - reads0 != exp_reads) begin
        failures++; $display("FAIL page %0d walk read %0d PTEs", p, walk_reads - reads0);
      end
      if (exp_reads > 0) begin
        ref_vpn[ref_rr] = vpn; ref_v[ref_rr] = 1; ref_big[ref_rr] = big;
        ref_rr = (ref_rr + 1) % ENTRIES;
      end
    end
    // consumer back-pressure
    repeat ($urandom_range(0, 2)) @(posedge clk);
    out_ready <= 1; @(posedge clk); out_ready <= 0;
  endtask

  initial begin
    flush = 0; req_valid = 0; req_vaddr = '0; req_instr = 0; req_user = '0; out_ready = 0;
    walk_resp_valid = 0; walk_ready = 0; walk_pte = '0;
    ptbr = 40'h00_8000_0000;
    pt = new(ptbr);
    for (int p = 0; p < 64; p++) begin
      pg_ppn[p]  = 28'h0_0100 + 28'(p) * 28'h13;
      pg_heat[p] = temp_e'(p % 4);
      pg_xn[p]   = (p % 11 == 5);
      pg_map[p]  = (p < 48);
      if (pg_map[p]) pt.map(VPN_BASE + 36'(p) * 36'h201, pg_ppn[p], pg_heat[p], pg_xn[p]);
    end
    for (int b = 0; b < 8; b++) begin
      blk_ppn[b]  = 28'h10_0000 + 28'(b) * 28'h600;   // 2 MB aligned
      blk_heat[b] = temp_e'((b + 1) % 4);
      blk_xn[b]   = (b == 6);
      pt.map_block(BLK_BASE + 36'(b) * 36'h4_0200, blk_ppn[b], blk_heat[b], blk_xn[b]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < 1500; n++) begin
      int r;
      if (n == 800) begin
        flush <= 1; @(posedge clk); flush <= 0;
        for (int e = 0; e < ENTRIES; e++) ref_v[e] = 0;
      end
      r = $urandom_range(0, 63);
      translate((n < 40) ? n % 8 : (r < 56) ? r : 64 + r - 56, 1'($urandom_range(0, 1)));
    end
    $display("tlb_hits=%0d walks=%0d block_walks=%0d faults=%0d", n_tlb_hit, n_walks,
             n_blk_walks, n_faults);
    checks++;
    if (n_tlb_hit == 0 || n_walks == 0 || n_faults == 0 || n_blk_walks == 0) failures++;
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
