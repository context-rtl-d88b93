// walker_model: behavioural stand-in for the core's page-table walker, used
// by the system-level testbenches. It answers a walk request after LAT
// cycles with a 4-level walk. The physical page is vpn ^ 0x10000. The page
// NT_VPN carries the non-transient flag in its leaf entry, pages from
// STACK_VPN_LO to STACK_VPN_HI carry it in the page-directory entry, and
// HOLE_VPN is not present. All of these NT pages also select PAT entry 5
// in their leaf, so a unit using the PAT encoding, with that entry set to
// the non-transient type, sees the same pages as NT. For testbench use only.
module walker_model
  import contxt_pkg::*;
#(
  parameter int   LAT          = 3,
  parameter vpn_t NT_VPN       = '0,
  parameter vpn_t STACK_VPN_LO = '0,
  parameter vpn_t STACK_VPN_HI = '0,
  parameter vpn_t HOLE_VPN     = '1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   walk_req,
  input  vpn_t                   walk_vpn,
  output logic                   walk_resp_valid,
  output vpn_t                   walk_resp_vpn,
  output pte_t [WALK_LEVELS-1:0] walk_resp_pte,
  output logic [WALK_LEVELS-1:0] walk_resp_levels,
  output logic                   walk_resp_ept_nt,
  output int                     walks
);
  function automatic pte_t entry(logic [33:0] pn, logic p, logic ntb);
    pte_t e;
    e = '0;
    e[PTE_P] = p; e[PTE_RW] = 1'b1; e[PTE_US] = 1'b1;
    e[PTE_PPN_HI:PTE_PPN_LO] = pn;
    e[PTE_NT_BIT] = ntb;
    return e;
  endfunction

  int   cnt;
  logic busy;
  vpn_t vpn;
  logic nt_page;
  assign nt_page = vpn == NT_VPN || (vpn >= STACK_VPN_LO && vpn <= STACK_VPN_HI);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; vpn <= '0; walks <= 0;
      walk_resp_valid <= 1'b0; walk_resp_vpn <= '0; walk_resp_pte <= '0;
      walk_resp_levels <= '0; walk_resp_ept_nt <= 1'b0;
    end else begin
      walk_resp_valid <= 1'b0;
      if (!busy && walk_req && !walk_resp_valid) begin
        busy <= 1'b1; cnt <= LAT; vpn <= walk_vpn; walks <= walks + 1;
      end else if (busy) begin
        cnt <= cnt - 1;
        if (cnt == 1) begin
          busy <= 1'b0;
          walk_resp_valid  <= 1'b1;
          walk_resp_vpn    <= vpn;
          walk_resp_levels <= '1;
          walk_resp_ept_nt <= 1'b0;
          walk_resp_pte[3] <= entry(34'h100, 1'b1, 1'b0);
          walk_resp_pte[2] <= entry(34'h101, 1'b1, 1'b0);
          walk_resp_pte[1] <= entry(34'h102, 1'b1, vpn >= STACK_VPN_LO && vpn <= STACK_VPN_HI);
          walk_resp_pte[0] <= entry(34'(vpn) ^ 34'h1_0000, vpn != HOLE_VPN, vpn == NT_VPN);
          // every NT page also selects PAT entry 5 (PAT=1, PCD=0, PWT=1)
          walk_resp_pte[0][PTE_PAT] <= nt_page;
          walk_resp_pte[0][PTE_WT]  <= nt_page;
        end
      end
    end
  end
endmodule
