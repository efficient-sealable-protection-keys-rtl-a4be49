// pk_cam -- PK-CAM, a small associative cache of permissible WRPKR ranges.
//
// Each entry holds (pkey, Addr_start, Addr_end). For a WRPKR on a sealed key
// every entry is compared in parallel with the key and the instruction's PC:
//   hit      = some entry has Pkey == q_pkey && start <= q_pc && q_pc <= end
//              (the hit condition printed in the paper's figure)
//   pkey_hit = some valid entry has Pkey == q_pkey
// A pkey_hit without a hit means the WRPKR lies outside the sealed range
// (exception); no pkey_hit means the range is not cached (refill).
//
// Inserting (ins_en) writes the first invalid entry, or else the entry under a
// round-robin pointer. An insert for a key that already has a valid entry is
// dropped: a cached range can never be changed, in line with the paper's
// one-time-fuse rule. flush invalidates all entries (context switch) and wins
// over an insert in the same cycle. Lookups are combinational; inserts and
// flushes take effect at the clock edge. Entry count, replacement and flush
// are this design's choices; the paper gives only the fields and the hit rule.
// An assertion checks that no key is ever cached in two entries.
module pk_cam
  import sealpk_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned ADDR_W  = 40
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PKEY_W-1:0] q_pkey,
  input  logic [ADDR_W-1:0] q_pc,
  output logic              hit,
  output logic              pkey_hit,
  input  logic              ins_en,
  input  logic [PKEY_W-1:0] ins_pkey,
  input  logic [ADDR_W-1:0] ins_start,
  input  logic [ADDR_W-1:0] ins_end,
  input  logic              flush
);

  localparam int unsigned PTR_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic              valid;
    logic [PKEY_W-1:0] pkey;
    logic [ADDR_W-1:0] start;
    logic [ADDR_W-1:0] stop;
  } cam_entry_t;

  cam_entry_t       ent [ENTRIES];
  logic [PTR_W-1:0] rr_ptr;

  // Lookup.
  always_comb begin
    hit      = 1'b0;
    pkey_hit = 1'b0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (ent[i].valid && ent[i].pkey == q_pkey) begin
        pkey_hit = 1'b1;
        if (q_pc >= ent[i].start && q_pc <= ent[i].stop) hit = 1'b1;
      end
    end
  end

  // Insert: is the key present, and which way is the victim?
  logic             ins_present;
  logic             have_free;
  logic [PTR_W-1:0] free_idx;
  logic [PTR_W-1:0] victim;

  always_comb begin
    ins_present = 1'b0;
    have_free   = 1'b0;
    free_idx    = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (ent[i].valid && ent[i].pkey == ins_pkey) ins_present = 1'b1;
      if (!ent[i].valid) begin
        have_free = 1'b1;
        free_idx  = PTR_W'(i);
      end
    end
    victim = have_free ? free_idx : rr_ptr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      rr_ptr <= '0;
    end else if (flush) begin
      for (int i = 0; i < ENTRIES; i++) ent[i].valid <= 1'b0;
      rr_ptr <= '0;
    end else if (ins_en && !ins_present) begin
      ent[victim] <= '{valid: 1'b1, pkey: ins_pkey, start: ins_start, stop: ins_end};
      if (!have_free)
        rr_ptr <= (rr_ptr == PTR_W'(ENTRIES - 1)) ? '0 : rr_ptr + 1'b1;
    end
  end

  // Invariant: a key is never cached twice (inserts of a present key are dropped).
  logic dup_key;
  always_comb begin
    dup_key = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      for (int j = i + 1; j < ENTRIES; j++)
        if (ent[i].valid && ent[j].valid && ent[i].pkey == ent[j].pkey) dup_key = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!dup_key) else $error("pk_cam: key cached in two entries");
  end

endmodule
