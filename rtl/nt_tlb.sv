// nt_tlb: translation look-aside buffer whose entries also cache the
// non-transient (NT) bit of the page-table entry.
//
// Fully associative, ENTRIES entries, one lookup and one fill per cycle.
// A lookup compares the virtual page number with every valid entry in the
// same cycle and returns the physical page number and the cached NT bit.
// A fill writes the entry named by a round-robin pointer, or updates the
// entry already holding that page. An invalidation removes one page (what
// the operating system does after changing a mapping to non-transient);
// flush_all clears every entry.
//
// Timing: lookup is combinational; fill, invalidate and flush take effect
// at the next clock edge. Invalidate wins over a fill of the same page.
//
// From the paper: the TLB carries one extra NT bit copied from the PTE and
// memory accesses use this cached bit. Chosen here: 64 entries, full
// associativity and round-robin replacement; the paper gives no TLB size.
module nt_tlb
  import contxt_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic clk,
  input  logic rst_n,
  // lookup
  input  vpn_t lk_vpn,
  output logic lk_hit,
  output ppn_t lk_ppn,
  output logic lk_nt,
  // fill from the page walk
  input  logic fill_valid,
  input  vpn_t fill_vpn,
  input  ppn_t fill_ppn,
  input  logic fill_nt,
  // maintenance
  input  logic inval_valid,
  input  vpn_t inval_vpn,
  input  logic flush_all
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic valid;
    logic nt;
    vpn_t vpn;
    ppn_t ppn;
  } tlb_entry_t;

  tlb_entry_t             ent [ENTRIES];
  logic [IDX_W-1:0]       rr_ptr;

  // lookup
  always_comb begin
    lk_hit = 1'b0;
    lk_ppn = '0;
    lk_nt  = 1'b0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid && ent[i].vpn == lk_vpn) begin
        lk_hit = 1'b1;
        lk_ppn = ent[i].ppn;
        lk_nt  = ent[i].nt;
      end
    end
  end

  // entry already holding the page being filled
  logic             fill_match;
  logic [IDX_W-1:0] fill_match_idx;
  always_comb begin
    fill_match     = 1'b0;
    fill_match_idx = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid && ent[i].vpn == fill_vpn) begin
        fill_match     = 1'b1;
        fill_match_idx = IDX_W'(i);
      end
    end
  end

  logic [IDX_W-1:0] fill_idx;
  assign fill_idx = fill_match ? fill_match_idx : rr_ptr;

  logic fill_wr;
  assign fill_wr = fill_valid && !(inval_valid && inval_vpn == fill_vpn);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr <= '0;
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i] <= '0;
    end else if (flush_all) begin
      for (int unsigned i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
    end else begin
      if (fill_wr) begin
        ent[fill_idx] <= '{valid: 1'b1, nt: fill_nt, vpn: fill_vpn, ppn: fill_ppn};
        if (!fill_match)
          rr_ptr <= (rr_ptr == IDX_W'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
      end
      if (inval_valid) begin
        for (int unsigned i = 0; i < ENTRIES; i++)
          if (ent[i].vpn == inval_vpn && !(fill_wr && fill_idx == IDX_W'(i)))
            ent[i].valid <= 1'b0;
      end
    end
  end

  // At most one valid entry per page.
  logic [ENTRIES-1:0] lk_match_vec;
  always_comb
    for (int unsigned i = 0; i < ENTRIES; i++)
      lk_match_vec[i] = ent[i].valid && ent[i].vpn == lk_vpn;

  a_single_match: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(lk_match_vec));

endmodule
