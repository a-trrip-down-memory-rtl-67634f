// l2_cache: unified set-associative L2 cache with TRRIP replacement.
//
// This is the cache the TRRIP policy lives in. Every request carries, next to
// its physical line address, whether it is an instruction fetch and the
// two-bit temperature hint that the MMU copied from the page table entry. The
// hint is used once, when the RRPV of the touched line is computed, and is not
// stored with the line: the cache arrays are those of plain RRIP.
//
// Organisation (defaults from the paper's Table 1): 512 kB, 8 ways, 2-bit RRPV
// per line. Line size (64 B), address width (40 bits) and the write-back,
// write-allocate handling are this design's assumptions. Per set, one word
// holds the valid, dirty, tag and RRPV fields of all ways, so a lookup reads
// and an update writes the whole set. After reset an initialisation sweep
// clears the valid bits of all sets (one set per cycle), with req_ready_o low.
//
// Operation is blocking, one request at a time:
//   * lookup: the tag check takes TAG_LAT cycles. A hit promotes the line
//     through trrip_policy and returns the line DATA_LAT cycles later, so a hit
//     is answered TAG_LAT+DATA_LAT cycles after the request handshake (8+12 by
//     default, read as serial tag-then-data access).
//   * miss: rrip_victim_select picks the victim (invalid way first, otherwise
//     RRIP ageing until a distant line is found) and the aged RRPVs are written
//     back. A valid victim is announced on inv_* so that inner caches can drop
//     it (the L2 is inclusive); a dirty victim is written to the next level
//     first. A read miss then fetches the line from the next level; a write
//     miss (a full-line write-back from an inner cache) installs the written
//     line without a fetch. The new line gets the insertion RRPV of
//     trrip_policy, and the response follows one cycle after installation.
//
// Interfaces: req_* is valid/ready; resp_* is a one-cycle valid pulse with no
// back-pressure; mem_req_* is valid/ready towards the next level (system level
// cache or DRAM), mem_resp_* a one-cycle pulse returning a requested line.
// The mode_i input selects SRRIP, TRRIP variant 1 or TRRIP variant 2 at run
// time.
module l2_cache
  import trrip_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 512 * 1024,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned LINE_BYTES = 64,
  parameter int unsigned PA_BITS    = 40,
  parameter int unsigned RRPV_BITS  = 2,
  parameter int unsigned TAG_LAT    = 8,
  parameter int unsigned DATA_LAT   = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  mode_e                       mode_i,

  // request from the inner level (L1 misses / write-backs, MMU table walks)
  input  logic                        req_valid_i,
  output logic                        req_ready_o,
  input  logic [PA_BITS-1:0]          req_addr_i,
  input  logic                        req_write_i,
  input  logic                        req_instr_i,
  input  temp_e                       req_temp_i,
  input  logic [LINE_BYTES*8-1:0]     req_wdata_i,

  // response
  output logic                        resp_valid_o,
  output logic                        resp_hit_o,
  output logic [LINE_BYTES*8-1:0]     resp_rdata_o,

  // back-invalidation of an evicted line (inclusive L2)
  output logic                        inv_valid_o,
  output logic [PA_BITS-1:0]          inv_addr_o,

  // next level
  output logic                        mem_req_valid_o,
  input  logic                        mem_req_ready_i,
  output logic                        mem_req_write_o,
  output logic [PA_BITS-1:0]          mem_req_addr_o,
  output logic [LINE_BYTES*8-1:0]     mem_req_wdata_o,
  input  logic                        mem_resp_valid_i,
  input  logic [LINE_BYTES*8-1:0]     mem_resp_rdata_i
);

  localparam int unsigned LINE_BITS = LINE_BYTES * 8;
  localparam int unsigned SETS      = SIZE_BYTES / (WAYS * LINE_BYTES);
  localparam int unsigned OFF_BITS  = $clog2(LINE_BYTES);
  localparam int unsigned IDX_BITS  = $clog2(SETS);
  localparam int unsigned TAG_BITS  = PA_BITS - IDX_BITS - OFF_BITS;
  localparam int unsigned WBITS     = $clog2(WAYS);
  localparam int unsigned CNT_BITS  = $clog2((TAG_LAT > DATA_LAT ? TAG_LAT : DATA_LAT) + 1);

  typedef logic [WAYS-1:0][TAG_BITS-1:0]  set_tags_t;
  typedef logic [WAYS-1:0][RRPV_BITS-1:0] set_rrpv_t;

  typedef enum logic [2:0] {
    S_INIT, S_IDLE, S_TAG, S_DATA, S_WB, S_FILL, S_FILL_WAIT, S_INSTALL
  } state_e;

  // ---------------------------------------------------------------- arrays
  logic [WAYS-1:0] valid_mem [SETS];
  logic [WAYS-1:0] dirty_mem [SETS];
  set_tags_t       tag_mem   [SETS];
  set_rrpv_t       rrpv_mem  [SETS];
  logic [LINE_BITS-1:0] data_mem [SETS * WAYS];

  // ---------------------------------------------------------------- state
  state_e               state_q;
  logic [IDX_BITS-1:0]  init_idx_q;
  logic [CNT_BITS-1:0]  cnt_q;

  logic [PA_BITS-1:0]   addr_q;
  logic                 write_q, instr_q;
  temp_e                temp_q;
  logic [LINE_BITS-1:0] wdata_q;

  logic [WAYS-1:0]      set_valid_q, set_dirty_q;
  set_tags_t            set_tags_q;
  set_rrpv_t            set_rrpv_q;

  logic [WBITS-1:0]     victim_q;
  logic [RRPV_BITS-1:0] ins_rrpv_q;
  logic [LINE_BITS-1:0] line_q;        // read data / write-back data / fill data
  logic                 hit_q;

  logic [IDX_BITS-1:0]  idx_q;
  logic [TAG_BITS-1:0]  tag_q;
  assign idx_q = addr_q[OFF_BITS +: IDX_BITS];
  assign tag_q = addr_q[OFF_BITS + IDX_BITS +: TAG_BITS];

  logic [IDX_BITS-1:0]  req_idx;
  assign req_idx = req_addr_i[OFF_BITS +: IDX_BITS];

  // ---------------------------------------------------------------- lookup
  logic [WAYS-1:0]  way_hit;
  logic             hit;
  logic [WBITS-1:0] hit_way;
  always_comb begin
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      way_hit[w] = set_valid_q[w] && (set_tags_q[w] == tag_q);
      if (way_hit[w]) hit_way = WBITS'(w);
    end
    hit = |way_hit;
  end

  logic [RRPV_BITS-1:0] policy_rrpv;
  trrip_policy #(.RRPV_BITS(RRPV_BITS)) u_policy (
    .hit_i      (hit),
    .rrpv_i     (set_rrpv_q[hit_way]),
    .is_instr_i (instr_q),
    .temp_i     (temp_q),
    .mode_i     (mode_i),
    .rrpv_o     (policy_rrpv)
  );

  logic [WBITS-1:0] victim;
  logic             victim_valid;
  set_rrpv_t        rrpv_aged;
  logic             aged;
  rrip_victim_select #(.WAYS(WAYS), .RRPV_BITS(RRPV_BITS)) u_victim (
    .valid_i        (set_valid_q),
    .rrpv_i         (set_rrpv_q),
    .victim_o       (victim),
    .victim_valid_o (victim_valid),
    .rrpv_aged_o    (rrpv_aged),
    .aged_o         (aged)
  );

  logic tag_done, data_done;

  // aged RRPVs of the set, captured with the victim decision
  set_rrpv_t rrpv_aged_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rrpv_aged_q <= '0;
    end else if (tag_done && !hit) begin
      rrpv_aged_q <= rrpv_aged;
    end
  end

  assign tag_done  = (state_q == S_TAG)  && (cnt_q == '0);
  assign data_done = (state_q == S_DATA) && (cnt_q == '0);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_INIT;
      init_idx_q  <= '0;
      cnt_q       <= '0;
      addr_q      <= '0;
      write_q     <= 1'b0;
      instr_q     <= 1'b0;
      temp_q      <= TEMP_NONE;
      set_valid_q <= '0;
      set_dirty_q <= '0;
      set_tags_q  <= '0;
      set_rrpv_q  <= '0;
      victim_q    <= '0;
      ins_rrpv_q  <= '0;
      hit_q       <= 1'b0;
    end else begin
      unique case (state_q)
        S_INIT: begin
          init_idx_q <= init_idx_q + 1'b1;
          if (init_idx_q == IDX_BITS'(SETS - 1)) state_q <= S_IDLE;
        end
        S_IDLE: begin
          if (req_valid_i) begin
            addr_q      <= req_addr_i;
            write_q     <= req_write_i;
            instr_q     <= req_instr_i && !req_write_i;
            temp_q      <= req_temp_i;
            set_valid_q <= valid_mem[req_idx];
            set_dirty_q <= dirty_mem[req_idx];
            set_tags_q  <= tag_mem[req_idx];
            set_rrpv_q  <= rrpv_mem[req_idx];
            cnt_q       <= CNT_BITS'(TAG_LAT - 1);
            state_q     <= S_TAG;
          end
        end
        S_TAG: begin
          if (cnt_q != '0) begin
            cnt_q <= cnt_q - 1'b1;
          end else if (hit) begin
            hit_q   <= 1'b1;
            cnt_q   <= CNT_BITS'(DATA_LAT - 1);
            state_q <= S_DATA;
          end else begin
            hit_q      <= 1'b0;
            victim_q   <= victim;
            ins_rrpv_q <= policy_rrpv;
            if (victim_valid && set_dirty_q[victim]) state_q <= S_WB;
            else if (write_q)                        state_q <= S_INSTALL;
            else                                     state_q <= S_FILL;
          end
        end
        S_DATA: begin
          if (cnt_q != '0) cnt_q <= cnt_q - 1'b1;
          else             state_q <= S_IDLE;
        end
        S_WB: begin
          if (mem_req_ready_i) state_q <= write_q ? S_INSTALL : S_FILL;
        end
        S_FILL: begin
          if (mem_req_ready_i) state_q <= S_FILL_WAIT;
        end
        S_FILL_WAIT: begin
          if (mem_resp_valid_i) state_q <= S_INSTALL;
        end
        S_INSTALL: begin
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Data path register: read data on a hit, victim data for a write-back,
  // fetched line on a fill, written line on a write miss.
  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && req_valid_i)
      wdata_q <= req_wdata_i;
    if (tag_done) begin
      if (hit) line_q <= data_mem[{idx_q, hit_way}];
      else     line_q <= data_mem[{idx_q, victim}];
    end
    if (state_q == S_WB && mem_req_ready_i && write_q)
      line_q <= wdata_q;
    if (state_q == S_FILL_WAIT && mem_resp_valid_i)
      line_q <= mem_resp_rdata_i;
    if (state_q == S_TAG && cnt_q == '0 && !hit && write_q && !(victim_valid && set_dirty_q[victim]))
      line_q <= wdata_q;
  end

  // ---------------------------------------------------------------- array writes
  always_ff @(posedge clk) begin
    if (state_q == S_INIT) begin
      valid_mem[init_idx_q] <= '0;
      dirty_mem[init_idx_q] <= '0;
      rrpv_mem[init_idx_q]  <= '0;
    end
    if (tag_done) begin
      if (hit) begin
        // promotion of the hit line; a write hit also updates data and dirty
        set_rrpv_t r;
        r = set_rrpv_q;
        r[hit_way] = policy_rrpv;
        rrpv_mem[idx_q] <= r;
        if (write_q) begin
          logic [WAYS-1:0] d;
          d = set_dirty_q;
          d[hit_way] = 1'b1;
          dirty_mem[idx_q] <= d;
          data_mem[{idx_q, hit_way}] <= wdata_q;
        end
      end
    end
    if (state_q == S_INSTALL) begin
      set_tags_t       t;
      set_rrpv_t       r;
      logic [WAYS-1:0] v, d;
      t = set_tags_q;  t[victim_q] = tag_q;
      r = rrpv_aged_q; r[victim_q] = ins_rrpv_q;
      v = set_valid_q; v[victim_q] = 1'b1;
      d = set_dirty_q; d[victim_q] = write_q;
      tag_mem[idx_q]   <= t;
      rrpv_mem[idx_q]  <= r;
      valid_mem[idx_q] <= v;
      dirty_mem[idx_q] <= d;
      data_mem[{idx_q, victim_q}] <= line_q;
    end
  end

  // ---------------------------------------------------------------- outputs
  assign req_ready_o     = (state_q == S_IDLE);
  assign resp_valid_o    = data_done || (state_q == S_INSTALL);
  assign resp_hit_o      = hit_q;
  assign resp_rdata_o    = line_q;

  assign inv_valid_o     = tag_done && !hit && victim_valid;
  assign inv_addr_o      = {set_tags_q[victim], idx_q, OFF_BITS'(0)};

  assign mem_req_valid_o = (state_q == S_WB) || (state_q == S_FILL);
  assign mem_req_write_o = (state_q == S_WB);
  assign mem_req_addr_o  = (state_q == S_WB) ? {set_tags_q[victim_q], idx_q, OFF_BITS'(0)}
                                             : {tag_q, idx_q, OFF_BITS'(0)};
  assign mem_req_wdata_o = line_q;

endmodule
