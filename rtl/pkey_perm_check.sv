// pkey_perm_check -- effective permission of a data access.
//
// Purely combinational. The page's own R and W bits (from the DTLB) are
// intersected with the key's permission (RD, WD from PKR):
//   eff_r = R & ~RD        eff_w = W & ~WD
// With R W = 11 and RD WD = 01 this gives 10: reads allowed, writes refused,
// the worked example of the paper. A load needs eff_r and a store needs eff_w
// (a store does not need R), so RD=1, WD=0 makes a write-only page even though
// Sv39 itself has no write-only encoding.
//
// load_fault / store_fault request a load or store page fault. pkey_fault is
// set when the fault is due to the key only (the PTE alone would have allowed
// the access), so the kernel can report a key violation; this flag is the
// design's own way of passing that information.
module pkey_perm_check
  import sealpk_pkg::*;
(
  input  logic     pte_r,
  input  logic     pte_w,
  input  pk_perm_t pk_perm,
  input  logic     is_load,
  input  logic     is_store,
  output logic     eff_r,
  output logic     eff_w,
  output logic     load_fault,
  output logic     store_fault,
  output logic     pkey_fault
);

  always_comb begin
    eff_r       = pte_r & ~pk_perm.rd;
    eff_w       = pte_w & ~pk_perm.wd;
    load_fault  = is_load  & ~eff_r;
    store_fault = is_store & ~eff_w;
    pkey_fault  = (is_load  & pte_r & pk_perm.rd) |
                  (is_store & pte_w & pk_perm.wd);
  end

endmodule
