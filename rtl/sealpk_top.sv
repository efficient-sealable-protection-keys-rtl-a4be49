// sealpk_top -- the SealPK additions to a RISC-V core's data side.
//
// Two paths share the key state:
//
// Data-access path (combinational, one cycle). The virtual page of a load or
// store is looked up in the DTLB; the line yields the physical page, the
// page's R/W bits and its 10-bit key. The key reads its (RD, WD) bits from PKR
// in the same cycle, and pkey_perm_check intersects the two permissions. A
// refused access raises a load/store page fault; acc_pkey_fault tells that the
// key, not the PTE, refused it. A TLB miss is reported on acc_miss and the
// core's page-table walker fills the line through fill_*; the fill is the
// leaf PTE itself, whose bits 63:54 hold the key.
//
// Instruction path. Custom instructions (RDPKR, WRPKR, seal_start, seal_end,
// and the supervisor seal, refill and context-switch commands) enter on cmd
// and are executed by sealpk_cmd_unit against PKR, SealReg and PK-CAM; a
// response per command comes back one cycle later (see sealpk_cmd_unit).
// A WRPKR on a sealed key outside its permitted range returns a seal-violation
// exception; one whose range is not cached returns the refill flag.
//
// The core, its page-table walker and caches are not included; their
// connections are the ports below. The sizes of the DTLB and PK-CAM and the
// port protocol are this design's choices; PKR and SealReg sizes are the
// paper's.
module sealpk_top
  import sealpk_pkg::*;
#(
  parameter int unsigned TLB_ENTRIES = 32,
  parameter int unsigned CAM_ENTRIES = 8,
  parameter int unsigned ADDR_W      = 40
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // data access from the core's memory stage
  input  logic                       acc_valid,
  input  logic [VPN_W+PGOFF_W-1:0]   acc_vaddr,
  input  logic                       acc_is_load,
  input  logic                       acc_is_store,
  output logic                       acc_hit,
  output logic                       acc_miss,
  output logic [PPN_W+PGOFF_W-1:0]   acc_paddr,
  output logic                       acc_load_fault,
  output logic                       acc_store_fault,
  output logic                       acc_pkey_fault,
  output logic [PKEY_W-1:0]          acc_pkey,
  // DTLB refill from the page-table walker, and sfence.vma
  input  logic                       fill_en,
  input  logic [VPN_W-1:0]           fill_vpn,
  input  sv39_pte_t                  fill_pte,
  input  logic                       sfence,
  // custom instructions
  input  sealpk_cmd_t                cmd,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  output sealpk_resp_t               resp,
  output logic                       resp_valid,
  input  logic                       resp_ready
);

  // ---------------- data-access path ----------------
  logic       tlb_hit;
  tlb_entry_t tlb_line;
  pk_perm_t   key_perm;
  logic       eff_r, eff_w, lf, sf, pf;

  dtlb #(.ENTRIES(TLB_ENTRIES)) u_dtlb (
    .clk, .rst_n,
    .lk_vpn   (acc_vaddr[PGOFF_W +: VPN_W]),
    .lk_hit   (tlb_hit),
    .lk_entry (tlb_line),
    .fill_en, .fill_vpn, .fill_pte,
    .flush    (sfence)
  );

  pkey_perm_check u_check (
    .pte_r       (tlb_line.r),
    .pte_w       (tlb_line.w),
    .pk_perm     (key_perm),
    .is_load     (acc_is_load),
    .is_store    (acc_is_store),
    .eff_r, .eff_w,
    .load_fault  (lf),
    .store_fault (sf),
    .pkey_fault  (pf)
  );

  assign acc_hit         = acc_valid && tlb_hit;
  assign acc_miss        = acc_valid && !tlb_hit;
  assign acc_paddr       = {tlb_line.ppn, acc_vaddr[PGOFF_W-1:0]};
  assign acc_load_fault  = acc_hit && lf;
  assign acc_store_fault = acc_hit && sf;
  assign acc_pkey_fault  = acc_hit && pf;
  assign acc_pkey        = tlb_line.pkey;

  // ---------------- key state ----------------
  logic [4:0]            pkr_rd_idx, pkr_wr_idx;
  logic [PKR_ROW_W-1:0]  pkr_rd_row, pkr_wr_row;
  logic                  pkr_wr_en;
  logic [PKEY_W-1:0]     seal_q_pkey, seal_set_pkey;
  logic                  seal_q_sealed, seal_set_en, seal_row_wr_en;
  logic [3:0]            seal_row_idx;
  logic [SEAL_ROW_W-1:0] seal_row_rd, seal_row_wr;
  logic [PKEY_W-1:0]     cam_q_pkey, cam_ins_pkey;
  logic [ADDR_W-1:0]     cam_q_pc, cam_ins_start, cam_ins_end;
  logic                  cam_hit, cam_pkey_hit, cam_ins_en, cam_flush;

  pkr u_pkr (
    .clk,
    .chk_pkey (tlb_line.pkey),
    .chk_perm (key_perm),
    .rd_idx   (pkr_rd_idx),
    .rd_row   (pkr_rd_row),
    .wr_en    (pkr_wr_en),
    .wr_idx   (pkr_wr_idx),
    .wr_row   (pkr_wr_row)
  );

  seal_reg u_seal (
    .clk, .rst_n,
    .q_pkey    (seal_q_pkey),
    .q_sealed  (seal_q_sealed),
    .set_en    (seal_set_en),
    .set_pkey  (seal_set_pkey),
    .row_idx   (seal_row_idx),
    .row_rd    (seal_row_rd),
    .row_wr_en (seal_row_wr_en),
    .row_wr    (seal_row_wr)
  );

  pk_cam #(.ENTRIES(CAM_ENTRIES), .ADDR_W(ADDR_W)) u_cam (
    .clk, .rst_n,
    .q_pkey    (cam_q_pkey),
    .q_pc      (cam_q_pc),
    .hit       (cam_hit),
    .pkey_hit  (cam_pkey_hit),
    .ins_en    (cam_ins_en),
    .ins_pkey  (cam_ins_pkey),
    .ins_start (cam_ins_start),
    .ins_end   (cam_ins_end),
    .flush     (cam_flush)
  );

  sealpk_cmd_unit #(.ADDR_W(ADDR_W)) u_cmd (
    .clk, .rst_n,
    .cmd, .cmd_valid, .cmd_ready,
    .resp, .resp_valid, .resp_ready,
    .pkr_rd_idx, .pkr_rd_row, .pkr_wr_en, .pkr_wr_idx, .pkr_wr_row,
    .seal_q_pkey, .seal_q_sealed, .seal_set_en, .seal_set_pkey,
    .seal_row_idx, .seal_row_rd, .seal_row_wr_en, .seal_row_wr,
    .cam_q_pkey, .cam_q_pc, .cam_hit, .cam_pkey_hit,
    .cam_ins_en, .cam_ins_pkey, .cam_ins_start, .cam_ins_end, .cam_flush
  );

endmodule
