// dtlb -- data TLB whose lines also carry the page's 10-bit protection key.
//
// Fully associative, ENTRIES lines of (VPage#, PPage#, R, W, X, U, Pkey). The
// pkey column is SealPK's addition: when a line is filled from an Sv39 leaf
// PTE, bits 63:54 of the PTE (reserved in Sv39) are kept as the page's key.
// The instruction TLB is unchanged, since keys only apply to data accesses.
//
// Ports:
//   lk_vpn -> lk_hit, lk_entry : combinational lookup of a virtual page.
//   fill_en/fill_vpn/fill_pte  : write a line from a leaf PTE supplied by the
//                                page-table walker; the first invalid line is
//                                used, else a round-robin victim. A fill for a
//                                page already present rewrites that line.
//   flush                      : invalidate all lines (sfence.vma); wins over
//                                a fill in the same cycle.
// A PTE that is not valid, or whose A bit (or, for W, D bit) is clear, is
// stored with the affected permissions removed, so the access faults.
//
// Only 4 KiB pages are held and there are no ASIDs. Entry count, replacement
// and these simplifications are this design's own; the paper describes only
// the added pkey field.
// An assertion checks that no page is ever held in two lines.
module dtlb
  import sealpk_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [VPN_W-1:0] lk_vpn,
  output logic             lk_hit,
  output tlb_entry_t       lk_entry,
  input  logic             fill_en,
  input  logic [VPN_W-1:0] fill_vpn,
  input  sv39_pte_t        fill_pte,
  input  logic             flush
);

  localparam int unsigned PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  tlb_entry_t       line  [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic [PTR_W-1:0] rr_ptr;

  // Lookup.
  always_comb begin
    lk_hit   = 1'b0;
    lk_entry = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid[i] && line[i].vpn == lk_vpn) begin
        lk_hit   = 1'b1;
        lk_entry = line[i];
      end
    end
  end

  // Fill: reuse the line of the same page, else a free line, else round robin.
  logic             same_found, free_found;
  logic [PTR_W-1:0] same_idx, free_idx, victim;
  tlb_entry_t       new_line;

  always_comb begin
    same_found = 1'b0;
    free_found = 1'b0;
    same_idx   = '0;
    free_idx   = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (valid[i] && line[i].vpn == fill_vpn) begin
        same_found = 1'b1;
        same_idx   = PTR_W'(i);
      end
      if (!valid[i]) begin
        free_found = 1'b1;
        free_idx   = PTR_W'(i);
      end
    end
    victim = same_found ? same_idx : (free_found ? free_idx : rr_ptr);

    new_line.vpn  = fill_vpn;
    new_line.ppn  = fill_pte.ppn;
    new_line.r    = fill_pte.v && fill_pte.a && fill_pte.r;
    new_line.w    = fill_pte.v && fill_pte.a && fill_pte.d && fill_pte.w;
    new_line.x    = fill_pte.v && fill_pte.a && fill_pte.x;
    new_line.u    = fill_pte.u;
    new_line.pkey = fill_pte.pkey;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= '0;
      rr_ptr <= '0;
    end else if (flush) begin
      valid  <= '0;
      rr_ptr <= '0;
    end else if (fill_en) begin
      valid[victim] <= 1'b1;
      if (!same_found && !free_found)
        rr_ptr <= (rr_ptr == PTR_W'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (fill_en && !flush) line[victim] <= new_line;
  end

  // Invariant: a page occupies at most one line (a refill reuses its line).
  logic dup_vpn;
  always_comb begin
    dup_vpn = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      for (int j = i + 1; j < ENTRIES; j++)
        if (valid[i] && valid[j] && line[i].vpn == line[j].vpn) dup_vpn = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!dup_vpn) else $error("dtlb: page held in two lines");
  end

endmodule
