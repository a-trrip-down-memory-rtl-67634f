// pt_builder: page-table construction helpers shared by the testbenches.
//
// Builds a four-level radix page table (9 index bits per level, 8-byte PTEs,
// 4 kB pages, optional 2 MB blocks) in a sparse word array, in the layout the
// MMU walks: bits 1:0 the descriptor type (11 table or page, 01 block, x0
// invalid), bits [39:12] next table or frame, bit 54 execute-never, bits
// 60:59 the temperature. Tables are allocated upwards from a base frame.
package pt_builder;
  import trrip_pkg::*;

  class page_table;
    logic [63:0] words [logic [39:0]];   // physical address -> 64-bit word
    logic [39:0] root;
    logic [27:0] next_frame;

    function new(logic [39:0] root_pa);
      root       = root_pa;
      next_frame = root_pa[39:12] + 28'd1;
    endfunction

    function logic [63:0] read(logic [39:0] pa);
      if (words.exists(pa)) return words[pa];
      return 64'd0;
    endfunction

    // map virtual page vpn to physical frame ppn with the given attributes
    function void map(logic [35:0] vpn, logic [27:0] ppn, temp_e heat, bit xn);
      logic [39:0] table_pa = root;
      for (int l = 0; l < 3; l++) begin
        logic [39:0] pte_pa = {table_pa[39:12], vpn[(3 - l) * 9 +: 9], 3'b000};
        logic [63:0] pte = read(pte_pa);
        if (!pte[0]) begin
          pte = {24'd0, next_frame, 10'd0, 2'b11};   // table descriptor
          words[pte_pa] = pte;
          next_frame++;
        end
        table_pa = {pte[39:12], 12'd0};
      end
      words[{table_pa[39:12], vpn[8:0], 3'b000}] =
        (64'(heat) << 59) | (64'(xn) << 54) | {24'd0, ppn, 12'h003};   // page descriptor
    endfunction

    // map the 2 MB region holding vpn with one level-2 block descriptor;
    // ppn is the first 4 kB frame of the physical region (low 9 bits zero)
    function void map_block(logic [35:0] vpn, logic [27:0] ppn, temp_e heat, bit xn);
      logic [39:0] table_pa = root;
      for (int l = 0; l < 2; l++) begin
        logic [39:0] pte_pa = {table_pa[39:12], vpn[(3 - l) * 9 +: 9], 3'b000};
        logic [63:0] pte = read(pte_pa);
        if (!pte[0]) begin
          pte = {24'd0, next_frame, 10'd0, 2'b11};
          words[pte_pa] = pte;
          next_frame++;
        end
        table_pa = {pte[39:12], 12'd0};
      end
      words[{table_pa[39:12], vpn[17:9], 3'b000}] =
        (64'(heat) << 59) | (64'(xn) << 54) | {24'd0, ppn[27:9], 9'd0, 12'h001};
    endfunction

    // remove the leaf mapping of vpn (the PTE becomes invalid)
    function void unmap(logic [35:0] vpn);
      logic [39:0] table_pa = root;
      for (int l = 0; l < 3; l++) begin
        logic [63:0] pte = read({table_pa[39:12], vpn[(3 - l) * 9 +: 9], 3'b000});
        if (!pte[0]) return;
        table_pa = {pte[39:12], 12'd0};
      end
      words[{table_pa[39:12], vpn[8:0], 3'b000}] = 64'd0;
    endfunction
  endclass
endpackage
