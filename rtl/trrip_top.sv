// trrip_top: the hardware half of TRRIP, from the cores' requests to memory.
//
// A cluster of NUM_CORES cores (four by default) shares one L2. A request from
// a core (an instruction fetch or a data access that missed its L1, or an L1
// write-back) arrives with its virtual address. The core's MMU translates it
// and attaches the temperature bits of the page's PTE; the shared L2 then
// serves the request and, for instruction fetches, uses the temperature to
// choose the line's RRPV. This is the hardware path of the paper's Fig. 4:
// Processor -vAddr-> MMU -pAddr(+temperature)-> Caches/Memory, with the MMU's
// page-table reads (PTEA out, PTE back) also going to the caches.
//
// Per core, the MMU's table walks are sent into the L2 as ordinary data reads
// of the line that holds the PTE; the 64-bit PTE is picked out of the returned
// line by bits [5:3] of its address. An MMU handles one request at a time, so
// its walk and its translated request never compete: a walk, when present,
// takes the core's slot, and a per-core flag remembers whose response is coming
// back. The cores' slots are then arbitrated round robin (l2_arbiter) into the
// blocking L2, and the L2's response is returned to the core that was granted.
//
// A request whose translation faults is answered with cpu_resp_fault_o once
// that core has nothing outstanding in the L2 (so responses stay in order),
// and never reaches the L2. Everything outside the cores' ports is brought
// out: the configuration (replacement mode, per-core page-table base and TLB
// flush), the next-level memory port of the L2 (the system level cache and
// DRAM are not part of this design) and the L2's back-invalidation notice,
// which goes to the inner caches of all cores.
//
// Timing: no buffering is added between the blocks. The MMU presents a
// translated request two cycles after accepting it (TLB hit), the L2 takes it
// in that cycle when idle and no other core wins, and answers a hit
// TAG_LAT+DATA_LAT cycles later: 2 + 8 + 12 = 22 cycles from request handshake
// to response without contention. While the L2 serves one request, each MMU
// can already accept and translate its core's next one. NUM_CORES must be at
// least 2.
module trrip_top
  import trrip_pkg::*;
#(
  parameter int unsigned NUM_CORES     = 4,
  parameter int unsigned L2_SIZE_BYTES = 512 * 1024,
  parameter int unsigned L2_WAYS       = 8,
  parameter int unsigned LINE_BYTES    = 64,
  parameter int unsigned RRPV_BITS     = 2,
  parameter int unsigned TAG_LAT       = 8,
  parameter int unsigned DATA_LAT      = 12,
  parameter int unsigned VA_BITS       = 48,
  parameter int unsigned PA_BITS       = 40,
  parameter int unsigned TLB_ENTRIES   = 32
) (
  input  logic                                    clk,
  input  logic                                    rst_n,

  // configuration
  input  mode_e                                   mode_i,
  input  logic [NUM_CORES-1:0][PA_BITS-1:0]       ptbr_i,
  input  logic [NUM_CORES-1:0]                    tlb_flush_i,

  // core side, one port per core
  input  logic [NUM_CORES-1:0]                    cpu_req_valid_i,
  output logic [NUM_CORES-1:0]                    cpu_req_ready_o,
  input  logic [NUM_CORES-1:0][VA_BITS-1:0]       cpu_req_vaddr_i,
  input  logic [NUM_CORES-1:0]                    cpu_req_instr_i,
  input  logic [NUM_CORES-1:0]                    cpu_req_write_i,
  input  logic [NUM_CORES-1:0][LINE_BYTES*8-1:0]  cpu_req_wdata_i,
  output logic [NUM_CORES-1:0]                    cpu_resp_valid_o,
  output logic [NUM_CORES-1:0]                    cpu_resp_hit_o,
  output logic [NUM_CORES-1:0]                    cpu_resp_fault_o,
  output logic [LINE_BYTES*8-1:0]                 cpu_resp_rdata_o,   // shared by all cores

  // back-invalidation towards the inner caches (all cores)
  output logic                                    inv_valid_o,
  output logic [PA_BITS-1:0]                      inv_addr_o,

  // next level (system level cache / DRAM)
  output logic                                    mem_req_valid_o,
  input  logic                                    mem_req_ready_i,
  output logic                                    mem_req_write_o,
  output logic [PA_BITS-1:0]                      mem_req_addr_o,
  output logic [LINE_BYTES*8-1:0]                 mem_req_wdata_o,
  input  logic                                    mem_resp_valid_i,
  input  logic [LINE_BYTES*8-1:0]                 mem_resp_rdata_i
);

  localparam int unsigned LINE_BITS = LINE_BYTES * 8;
  localparam int unsigned OFF_BITS  = $clog2(LINE_BYTES);
  localparam int unsigned USER_BITS = LINE_BITS + 1;
  localparam int unsigned CBITS     = $clog2(NUM_CORES);

  // per-core request slot towards the arbiter
  typedef struct packed {
    logic [PA_BITS-1:0]   addr;
    logic                 write;
    logic                 instr;
    temp_e                temp;
    logic [LINE_BITS-1:0] wdata;
  } l2_req_t;

  l2_req_t [NUM_CORES-1:0] slot_req;
  logic    [NUM_CORES-1:0] slot_valid, grant;
  logic    [CBITS-1:0]     grant_idx;
  logic                    arb_valid;

  logic                    l2_req_ready, l2_resp_valid, l2_resp_hit;
  logic [LINE_BITS-1:0]    l2_resp_rdata;
  logic [CBITS-1:0]        owner_q;          // core whose request the L2 is serving

  logic [NUM_CORES-1:0]    walk_owner_q;     // that core's outstanding request is a walk
  logic [NUM_CORES-1:0]    outstanding_q;    // core has a request in the L2
  logic [NUM_CORES-1:0][2:0] pte_word_q;     // which 64-bit word of the line is the PTE

  logic [NUM_CORES-1:0]    fault_resp;

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic                 out_valid, out_ready, out_instr, out_fault;
    logic [PA_BITS-1:0]   paddr;
    temp_e                temp;
    logic [USER_BITS-1:0] user;
    logic                 walk_valid, walk_ready, walk_resp_valid;
    logic [PA_BITS-1:0]   walk_addr;
    logic [63:0]          walk_pte;
    logic                 granted;

    mmu #(
      .VA_BITS     (VA_BITS),
      .PA_BITS     (PA_BITS),
      .TLB_ENTRIES (TLB_ENTRIES),
      .USER_BITS   (USER_BITS)
    ) u_mmu (
      .clk               (clk),
      .rst_n             (rst_n),
      .ptbr_i            (ptbr_i[c]),
      .flush_i           (tlb_flush_i[c]),
      .req_valid_i       (cpu_req_valid_i[c]),
      .req_ready_o       (cpu_req_ready_o[c]),
      .req_vaddr_i       (cpu_req_vaddr_i[c]),
      .req_instr_i       (cpu_req_instr_i[c]),
      .req_user_i        ({cpu_req_write_i[c], cpu_req_wdata_i[c]}),
      .out_valid_o       (out_valid),
      .out_ready_i       (out_ready),
      .out_paddr_o       (paddr),
      .out_temp_o        (temp),
      .out_instr_o       (out_instr),
      .out_fault_o       (out_fault),
      .out_user_o        (user),
      .walk_req_valid_o  (walk_valid),
      .walk_req_ready_i  (walk_ready),
      .walk_req_addr_o   (walk_addr),
      .walk_resp_valid_i (walk_resp_valid),
      .walk_resp_pte_i   (walk_pte)
    );

    // the core's slot: a table walk has priority over a translated request
    always_comb begin
      if (walk_valid) begin
        slot_valid[c]       = 1'b1;
        slot_req[c].addr    = {walk_addr[PA_BITS-1:OFF_BITS], OFF_BITS'(0)};
        slot_req[c].write   = 1'b0;
        slot_req[c].instr   = 1'b0;
        slot_req[c].temp    = TEMP_NONE;
      end else begin
        slot_valid[c]       = out_valid && !out_fault;
        slot_req[c].addr    = {paddr[PA_BITS-1:OFF_BITS], OFF_BITS'(0)};
        slot_req[c].write   = user[LINE_BITS];
        slot_req[c].instr   = out_instr;
        slot_req[c].temp    = temp;
      end
      slot_req[c].wdata = user[LINE_BITS-1:0];
    end

    assign granted    = grant[c] && l2_req_ready;
    assign walk_ready = granted;
    assign out_ready  = (granted && !walk_valid) || fault_resp[c];

    // A faulting request is answered only while the core has nothing in the
    // L2, so that it cannot overtake or collide with an earlier response.
    assign fault_resp[c] = out_valid && out_fault && !walk_valid && !outstanding_q[c];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        walk_owner_q[c] <= 1'b0;
        pte_word_q[c]   <= '0;
      end else if (granted) begin
        walk_owner_q[c] <= walk_valid;
        pte_word_q[c]   <= walk_addr[5:3];
      end
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                             outstanding_q[c] <= 1'b0;
      else if (granted)                                       outstanding_q[c] <= 1'b1;
      else if (l2_resp_valid && owner_q == CBITS'(c))         outstanding_q[c] <= 1'b0;
    end

    logic mine;
    assign mine            = l2_resp_valid && owner_q == CBITS'(c);
    assign walk_resp_valid = mine && walk_owner_q[c];
    assign walk_pte        = l2_resp_rdata[pte_word_q[c] * 64 +: 64];

    assign cpu_resp_valid_o[c] = (mine && !walk_owner_q[c]) || fault_resp[c];
    assign cpu_resp_fault_o[c] = fault_resp[c];
    assign cpu_resp_hit_o[c]   = mine && !walk_owner_q[c] && l2_resp_hit;
  end

  // ------------------------------------------------------------------ arbitration
  l2_arbiter #(.N(NUM_CORES)) u_arb (
    .clk         (clk),
    .rst_n       (rst_n),
    .req_i       (slot_valid),
    .ready_i     (l2_req_ready),
    .valid_o     (arb_valid),
    .grant_o     (grant),
    .grant_idx_o (grant_idx)
  );

  l2_req_t l2_req;
  assign l2_req = slot_req[grant_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                          owner_q <= '0;
    else if (arb_valid && l2_req_ready)  owner_q <= grant_idx;
  end

  l2_cache #(
    .SIZE_BYTES (L2_SIZE_BYTES),
    .WAYS       (L2_WAYS),
    .LINE_BYTES (LINE_BYTES),
    .PA_BITS    (PA_BITS),
    .RRPV_BITS  (RRPV_BITS),
    .TAG_LAT    (TAG_LAT),
    .DATA_LAT   (DATA_LAT)
  ) u_l2 (
    .clk              (clk),
    .rst_n            (rst_n),
    .mode_i           (mode_i),
    .req_valid_i      (arb_valid),
    .req_ready_o      (l2_req_ready),
    .req_addr_i       (l2_req.addr),
    .req_write_i      (l2_req.write),
    .req_instr_i      (l2_req.instr),
    .req_temp_i       (l2_req.temp),
    .req_wdata_i      (l2_req.wdata),
    .resp_valid_o     (l2_resp_valid),
    .resp_hit_o       (l2_resp_hit),
    .resp_rdata_o     (l2_resp_rdata),
    .inv_valid_o      (inv_valid_o),
    .inv_addr_o       (inv_addr_o),
    .mem_req_valid_o  (mem_req_valid_o),
    .mem_req_ready_i  (mem_req_ready_i),
    .mem_req_write_o  (mem_req_write_o),
    .mem_req_addr_o   (mem_req_addr_o),
    .mem_req_wdata_o  (mem_req_wdata_o),
    .mem_resp_valid_i (mem_resp_valid_i),
    .mem_resp_rdata_i (mem_resp_rdata_i)
  );

  assign cpu_resp_rdata_o = l2_resp_rdata;

endmodule
