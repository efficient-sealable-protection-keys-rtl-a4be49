// seal_reg -- SealReg, one seal bit per protection key.
//
// A set bit means the key's permission is sealed: WRPKR on that key is then
// only allowed from the key's permissible address range. 1024 bits arranged
// as ROWS x ROW_W (16 x 64); key k is bit k[5:0] of row k[9:6], the layout the
// paper's figure shows.
//
// Ports:
//   q_pkey -> q_sealed      : combinational lookup for WRPKR.
//   set_en/set_pkey         : seal one key. This port can only set bits, so a
//                             seal cannot be undone by the seal instruction
//                             (the paper's "one-time fuse").
//   row_idx -> row_rd       : combinational row read, for the kernel to save
//                             the seal state of a process.
//   row_wr_en/row_wr        : restore a whole row at a context switch.
// Writes take effect at the clock edge. If a seal and a restore hit the same
// row in one cycle, the seal bit is ORed into the restored value.
// Reset clears every bit (nothing sealed); reset behaviour is this design's
// choice. The bits are flip-flops, not an SRAM, because they need that reset.
module seal_reg
  import sealpk_pkg::*;
#(
  parameter int unsigned ROWS  = SEAL_ROWS,
  parameter int unsigned ROW_W = SEAL_ROW_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [PKEY_W-1:0]       q_pkey,
  output logic                    q_sealed,
  input  logic                    set_en,
  input  logic [PKEY_W-1:0]       set_pkey,
  input  logic [$clog2(ROWS)-1:0] row_idx,
  output logic [ROW_W-1:0]        row_rd,
  input  logic                    row_wr_en,
  input  logic [ROW_W-1:0]        row_wr
);

  localparam int unsigned IDX_W = $clog2(ROWS);
  localparam int unsigned BIT_W = $clog2(ROW_W);

  initial assert (ROWS * ROW_W == NUM_PKEYS && IDX_W + BIT_W == PKEY_W)
    else $error("seal_reg: geometry does not hold %0d keys", NUM_PKEYS);

  logic [ROW_W-1:0] bits [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROWS; i++) bits[i] <= '0;
    end else begin
      for (int i = 0; i < ROWS; i++) begin
        logic [ROW_W-1:0] nxt;
        nxt = bits[i];
        if (row_wr_en && row_idx == IDX_W'(i)) nxt = row_wr;
        if (set_en && set_pkey[PKEY_W-1 -: IDX_W] == IDX_W'(i))
          nxt[set_pkey[BIT_W-1:0]] = 1'b1;
        bits[i] <= nxt;
      end
    end
  end

  assign q_sealed = bits[q_pkey[PKEY_W-1 -: IDX_W]][q_pkey[BIT_W-1:0]];
  assign row_rd   = bits[row_idx];

endmodule
