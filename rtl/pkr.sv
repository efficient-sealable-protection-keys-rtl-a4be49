// pkr -- the PKR protection-key permission memory.
//
// 2 Kb of storage organised as ROWS rows of ROW_W bits; each row holds the
// two permission bits (RD, WD) of 32 keys. Key k lives in row k[9:5], slot
// k[4:0]; slot s occupies bits [2s+1:2s] with RD in the upper bit. This is the
// geometry of the paper; the bit order inside a row is read off its figure.
//
// Ports:
//   chk_pkey -> chk_perm : combinational read used by every data access, so the
//                          key's permission is known in the same cycle as the
//                          TLB permission check, as the paper requires.
//   rd_idx   -> rd_row   : combinational whole-row read for RDPKR.
//   wr_en/wr_idx/wr_row  : whole-row write for WRPKR, taken at the clock edge.
// A read in the cycle of a write returns the old contents.
//
// The array has no reset: the operating system loads every row of a thread
// when it switches to it. This is the design's own choice.
module pkr
  import sealpk_pkg::*;
#(
  parameter int unsigned ROWS  = PKR_ROWS,
  parameter int unsigned ROW_W = PKR_ROW_W
) (
  input  logic                    clk,
  input  logic [PKEY_W-1:0]       chk_pkey,
  output pk_perm_t                chk_perm,
  input  logic [$clog2(ROWS)-1:0] rd_idx,
  output logic [ROW_W-1:0]        rd_row,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_idx,
  input  logic [ROW_W-1:0]        wr_row
);

  localparam int unsigned IDX_W  = $clog2(ROWS);
  localparam int unsigned SLOT_W = $clog2(ROW_W / 2);

  initial assert (ROWS * ROW_W / 2 == NUM_PKEYS && IDX_W + SLOT_W == PKEY_W)
    else $error("pkr: geometry does not hold %0d keys", NUM_PKEYS);

  logic [ROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= wr_row;
  end

  logic [ROW_W-1:0]  chk_row;
  logic [SLOT_W-1:0] chk_slot;

  always_comb begin
    chk_row  = mem[chk_pkey[PKEY_W-1 -: IDX_W]];
    chk_slot = chk_pkey[SLOT_W-1:0];
    chk_perm = pk_perm_t'(chk_row[2*chk_slot +: 2]);
  end

  assign rd_row = mem[rd_idx];

endmodule
