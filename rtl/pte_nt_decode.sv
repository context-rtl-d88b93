// pte_nt_decode: derives the non-transient (NT) attribute of a translation
// from the page-table entries a page walk returns.
//
// Three encodings are supported, selected by NT_MODE:
//   NT_MODE_IGNORED (default): the NT flag is one of the PTE bits the
//     architecture leaves ignored (NT_BIT). Because the operating system may
//     already use that bit, it only takes effect when the OS has enabled it
//     through a control-register bit (cr_nt_enable); with the enable clear,
//     every page is reported as transient.
//   NT_MODE_RESERVED: the NT flag is the last reserved physical-address bit
//     (RSV_BIT). Legacy software must keep reserved bits zero, so no enable
//     is needed.
//   NT_MODE_PAT: the three bits PAT, PCD and PWT of the leaf entry select
//     one of the eight entries of the page-attribute table (the IA32_PAT
//     value on pat); the page is NT when that entry holds the new memory
//     type 2. No enable is needed and no PTE bit changes meaning.
// In the two flag encodings a page is non-transient when the flag is set in
// any entry of its walk, the same way the no-execute bit combines over the
// levels. In every encoding a guest page is also non-transient when the
// nested (EPT) walk marked it so. The leaf entry also gives the physical
// page number and the present bit that the TLB caches.
//
// Interface: pte[0] is the leaf entry, pte[LEVELS-1] the root-level entry;
// level_used[i] says whether level i took part in the walk (large pages end
// the walk early). In PAT mode the leaf must be given in 4 KiB format (PAT
// index bit in position 7). cr_nt_enable is only read in NT_MODE_IGNORED, pat
// only in NT_MODE_PAT. Purely combinational.
//
// From the paper: the three encodings, the control-register enable of the
// ignored-bit encoding, the last reserved bit, memory type 2, the PAT index
// bits 3, 4 and 7, and the OR over the hierarchy and EPT. Chosen here:
// ignored bit 58 as the NT flag (NT_BIT), applying the OR over the levels to
// the reserved bit as well, and ANDing the present bits of all used levels.
module pte_nt_decode
  import contxt_pkg::*;
#(
  parameter nt_mode_e    NT_MODE = NT_MODE_IGNORED,
  parameter int unsigned LEVELS  = WALK_LEVELS,
  parameter int unsigned NT_BIT  = PTE_NT_BIT,
  parameter int unsigned RSV_BIT = PTE_RSV_NT
) (
  input  pte_t [LEVELS-1:0] pte,
  input  logic [LEVELS-1:0] level_used,
  input  logic              ept_nt,        // NT as seen by a nested walk, 0 without virtualisation
  input  logic              cr_nt_enable,  // control-register enable of the ignored-bit encoding
  input  logic [63:0]       pat,           // IA32_PAT: eight 8-bit entries, type in bits 2..0
  output logic              nt,
  output logic              present,
  output ppn_t              ppn
);
  logic       any_ign, any_rsv, all_present;
  logic [2:0] pat_idx, mem_type;

  always_comb begin
    any_ign     = 1'b0;
    any_rsv     = 1'b0;
    all_present = 1'b1;
    for (int unsigned i = 0; i < LEVELS; i++) begin
      if (level_used[i]) begin
        any_ign     = any_ign | pte[i][NT_BIT];
        any_rsv     = any_rsv | pte[i][RSV_BIT];
        all_present = all_present & pte[i][PTE_P];
      end
    end
  end

  assign pat_idx  = {pte[0][PTE_PAT], pte[0][PTE_UC], pte[0][PTE_WT]};
  assign mem_type = pat[8*pat_idx +: 3];

  always_comb begin
    unique case (NT_MODE)
      NT_MODE_RESERVED: nt = ept_nt | any_rsv;
      NT_MODE_PAT:      nt = ept_nt | (mem_type == MT_NON_TRANSIENT);
      default:          nt = cr_nt_enable & (ept_nt | any_ign);
    endcase
  end

  assign present = all_present & level_used[0];
  assign ppn     = pte[0][PTE_PPN_HI:PTE_PPN_LO];

endmodule
