// mmu: address translation that forwards the page's code temperature.
//
// The MMU turns the virtual address of a request into a physical one and,
// as TRRIP requires, copies the temperature ("heat") bits of the page table
// entry into the outgoing request, where the L2 replacement policy reads them.
// The temperature field sits in implementation-defined PTE bits (ARM's PBHA
// bits); the paper only says that at most two of them are used. Here they are
// PTE bits [HEAT_LSB+1:HEAT_LSB], 60:59 by default, decoded as trrip_pkg::temp_e.
//
// How the translation is done is this design's own choice, the simplest that
// does the job: a fully associative TLB of TLB_ENTRIES entries with round-robin
// replacement, backed by a hardware walker for a LEVELS-deep radix page table
// with 512-entry (9-bit indexed) levels of 8-byte PTEs, as in an ARMv8 4 kB
// granule. Bits 1:0 of a PTE give its type, as in ARMv8: x0 invalid, 11 a
// table (or, at the last level, a 4 kB page), 01 a block at the levels in
// between (2 MB at level 2, 1 GB at level 1 for the defaults). Bits
// [PA_BITS-1:PAGE_BITS] hold the next table or the frame; page and block
// descriptors also carry an execute-never bit (XN_BIT) and the heat bits, so
// one temperature covers a whole huge page. A TLB entry remembers the level
// its walk ended at and matches only the VPN bits above that level. The
// walker's PTE reads (PTEA out, PTE back, as in the paper's Fig. 4) go through
// walk_*; in the top they are served by the L2.
//
// Faults: an invalid PTE at any level (including a block descriptor at level 0
// or at the last level), or an instruction fetch from an XN page,
// returns the request with fault_o set (and temperature TEMP_NONE); a walk that
// ends in an invalid PTE is not cached. flush_i empties the TLB, which the OS
// needs after changing a page's temperature.
//
// Timing: a TLB hit is returned on out_* two cycles after the request
// handshake; a miss adds the walk. Requests are handled one at a time;
// out_* holds until out_ready_i. A USER_BITS payload (write flag, data, ...)
// travels with each request unchanged.
module mmu
  import trrip_pkg::*;
#(
  parameter int unsigned VA_BITS     = 48,
  parameter int unsigned PA_BITS     = 40,
  parameter int unsigned PAGE_BITS   = 12,
  parameter int unsigned LEVELS      = 4,
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned HEAT_LSB    = 59,
  parameter int unsigned XN_BIT      = 54,
  parameter int unsigned USER_BITS   = 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [PA_BITS-1:0]    ptbr_i,      // physical base of the top-level table
  input  logic                  flush_i,     // invalidate all TLB entries

  input  logic                  req_valid_i,
  output logic                  req_ready_o,
  input  logic [VA_BITS-1:0]    req_vaddr_i,
  input  logic                  req_instr_i,
  input  logic [USER_BITS-1:0]  req_user_i,

  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output logic [PA_BITS-1:0]    out_paddr_o,
  output temp_e                 out_temp_o,
  output logic                  out_instr_o,
  output logic                  out_fault_o,
  output logic [USER_BITS-1:0]  out_user_o,

  output logic                  walk_req_valid_o,
  input  logic                  walk_req_ready_i,
  output logic [PA_BITS-1:0]    walk_req_addr_o,   // PTEA
  input  logic                  walk_resp_valid_i,
  input  logic [63:0]           walk_resp_pte_i    // PTE
);

  localparam int unsigned VPN_BITS = VA_BITS - PAGE_BITS;
  localparam int unsigned PPN_BITS = PA_BITS - PAGE_BITS;
  localparam int unsigned LVL_BITS = VPN_BITS / LEVELS;   // 9 for the defaults
  localparam int unsigned EBITS    = $clog2(TLB_ENTRIES);
  localparam int unsigned LBITS    = (LEVELS > 1) ? $clog2(LEVELS) : 1;

  typedef struct packed {
    logic                valid;
    logic [VPN_BITS-1:0] vpn;
    logic [PPN_BITS-1:0] ppn;
    logic [LBITS-1:0]    lvl;     // level the walk ended at: LEVELS-1 page, less a block
    logic                xn;
    temp_e               temp;
  } tlb_entry_t;

  typedef enum logic [2:0] {S_IDLE, S_LOOKUP, S_WALK_REQ, S_WALK_WAIT, S_OUT} state_e;

  tlb_entry_t tlb_q [TLB_ENTRIES];
  logic [EBITS-1:0] rr_q;           // round-robin replacement pointer

  state_e               state_q;
  logic [VA_BITS-1:0]   vaddr_q;
  logic                 instr_q;
  logic [USER_BITS-1:0] user_q;
  logic [LBITS-1:0]     level_q;
  logic [PPN_BITS-1:0]  table_q;    // frame of the table being walked
  logic [PPN_BITS-1:0]  ppn_q;
  temp_e                temp_q;
  logic                 fault_q;

  logic [VPN_BITS-1:0]  vpn;
  assign vpn = vaddr_q[VA_BITS-1:PAGE_BITS];

  // VPN bits that name a mapping ended at level l: a block at level l leaves
  // the index bits of the levels below it to the page offset
  function automatic logic [VPN_BITS-1:0] vpn_mask(logic [LBITS-1:0] l);
    logic [VPN_BITS-1:0] m;
    m = '1;
    for (int k = 0; k < LEVELS - 1; k++)
      if (l == LBITS'(k)) m = {VPN_BITS{1'b1}} << ((LEVELS - 1 - k) * LVL_BITS);
    return m;
  endfunction

  // frame of the 4 kB page holding vpn, for a mapping ended at level l
  function automatic logic [PPN_BITS-1:0] merge_ppn(logic [PPN_BITS-1:0] ppn,
                                                    logic [LBITS-1:0] l);
    logic [PPN_BITS-1:0] m;
    m = PPN_BITS'(vpn_mask(l));
    return (ppn & m) | (PPN_BITS'(vpn) & ~m);
  endfunction

  // TLB lookup
  logic             tlb_hit;
  logic [EBITS-1:0] tlb_idx;
  always_comb begin
    tlb_hit = 1'b0;
    tlb_idx = '0;
    for (int e = 0; e < TLB_ENTRIES; e++) begin
      if (tlb_q[e].valid && ((tlb_q[e].vpn ^ vpn) & vpn_mask(tlb_q[e].lvl)) == '0) begin
        tlb_hit = 1'b1;
        tlb_idx = EBITS'(e);
      end
    end
  end

  // index into the table of the current level: level 0 uses the top VPN bits
  logic [LVL_BITS-1:0] lvl_index;
  always_comb begin
    lvl_index = '0;
    for (int l = 0; l < LEVELS; l++)
      if (level_q == LBITS'(l))
        lvl_index = vpn[(LEVELS - 1 - l) * LVL_BITS +: LVL_BITS];
  end

  // descriptor type (bits 1:0): x0 invalid; 11 table, or page at the last
  // level; 01 block at levels 1 .. LEVELS-2, invalid at level 0 and the last
  logic                pte_valid, pte_xn, pte_table, pte_block;
  logic [PPN_BITS-1:0] pte_ppn;
  temp_e               pte_temp;
  logic                last_level;
  assign pte_table  = walk_resp_pte_i[1];
  assign pte_block  = !pte_table && level_q != '0 && !last_level;
  assign pte_valid  = walk_resp_pte_i[0] && (pte_table || pte_block);
  assign pte_xn     = walk_resp_pte_i[XN_BIT];
  assign pte_ppn    = walk_resp_pte_i[PA_BITS-1:PAGE_BITS];
  assign pte_temp   = temp_e'(walk_resp_pte_i[HEAT_LSB +: 2]);
  assign last_level = (level_q == LBITS'(LEVELS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      rr_q    <= '0;
      vaddr_q <= '0;
      instr_q <= 1'b0;
      user_q  <= '0;
      level_q <= '0;
      table_q <= '0;
      ppn_q   <= '0;
      temp_q  <= TEMP_NONE;
      fault_q <= 1'b0;
      for (int e = 0; e < TLB_ENTRIES; e++) tlb_q[e] <= '0;
    end else begin
      if (flush_i)
        for (int e = 0; e < TLB_ENTRIES; e++) tlb_q[e].valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid_i) begin
          vaddr_q <= req_vaddr_i;
          instr_q <= req_instr_i;
          user_q  <= req_user_i;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (tlb_hit && !flush_i) begin
            ppn_q   <= merge_ppn(tlb_q[tlb_idx].ppn, tlb_q[tlb_idx].lvl);
            temp_q  <= tlb_q[tlb_idx].xn && instr_q ? TEMP_NONE : tlb_q[tlb_idx].temp;
            fault_q <= tlb_q[tlb_idx].xn && instr_q;
            state_q <= S_OUT;
          end else begin
            level_q <= '0;
            table_q <= ptbr_i[PA_BITS-1:PAGE_BITS];
            state_q <= S_WALK_REQ;
          end
        end
        S_WALK_REQ: if (walk_req_ready_i) state_q <= S_WALK_WAIT;
        S_WALK_WAIT: if (walk_resp_valid_i) begin
          if (!pte_valid) begin
            fault_q <= 1'b1;
            temp_q  <= TEMP_NONE;
            ppn_q   <= '0;
            state_q <= S_OUT;
          end else if (!last_level && !pte_block) begin
            table_q <= pte_ppn;
            level_q <= level_q + 1'b1;
            state_q <= S_WALK_REQ;
          end else begin
            ppn_q   <= merge_ppn(pte_ppn, level_q);
            temp_q  <= pte_xn && instr_q ? TEMP_NONE : pte_temp;
            fault_q <= pte_xn && instr_q;
            if (!flush_i) begin
              tlb_q[rr_q] <= '{valid: 1'b1, vpn: vpn, ppn: pte_ppn, lvl: level_q,
                               xn: pte_xn, temp: pte_temp};
              rr_q        <= (rr_q == EBITS'(TLB_ENTRIES - 1)) ? '0 : rr_q + 1'b1;
            end
            state_q <= S_OUT;
          end
        end
        S_OUT: if (out_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign req_ready_o      = (state_q == S_IDLE);
  assign out_valid_o      = (state_q == S_OUT);
  assign out_paddr_o      = {ppn_q, vaddr_q[PAGE_BITS-1:0]};
  assign out_temp_o       = temp_q;
  assign out_instr_o      = instr_q;
  assign out_fault_o      = fault_q;
  assign out_user_o       = user_q;
  assign walk_req_valid_o = (state_q == S_WALK_REQ);
  assign walk_req_addr_o  = {table_q, lvl_index, 3'b000};

endmodule
