// sealpk_pkg -- types and constants shared by the SealPK protection-key blocks.
//
// SealPK gives every Sv39 page a 10-bit protection key (pkey), kept in the
// reserved bits 63:54 of the page-table entry. The permission of each of the
// 1024 keys is two bits, RD (read disable) and WD (write disable), stored in
// the 2 Kb PKR memory: 32 rows of 64 bits, row = pkey[9:5], slot = pkey[4:0].
// Seal bits live in SealReg (16 rows of 64 bits, row = pkey[9:6]).
//
// The field layout of the PTE and the PKR/SealReg geometry follow the paper.
// The command encoding (funct values), the response record and the exception
// causes are this design's own choice: the paper only names the instructions.
package sealpk_pkg;

  localparam int unsigned XLEN       = 64;
  localparam int unsigned PKEY_W     = 10;   // 1024 keys
  localparam int unsigned NUM_PKEYS  = 1 << PKEY_W;
  localparam int unsigned PKR_ROWS   = 32;   // 2 Kb = 32 x 64
  localparam int unsigned PKR_ROW_W  = 64;   // 32 keys x 2 bits
  localparam int unsigned SEAL_ROWS  = 16;   // 1024 seal bits = 16 x 64
  localparam int unsigned SEAL_ROW_W = 64;
  localparam int unsigned VPN_W      = 27;   // Sv39: 3 x 9
  localparam int unsigned PPN_W      = 44;   // Sv39 PTE bits 53:10
  localparam int unsigned PGOFF_W    = 12;   // 4 KiB pages

  // Sv39 page-table entry, bits 63 down to 0.
  typedef struct packed {
    logic [PKEY_W-1:0] pkey;  // 63:54, "Reserved" in Sv39, used for the pkey
    logic [PPN_W-1:0]  ppn;   // 53:10 (PPN2, PPN1, PPN0)
    logic [1:0]        rsw;   // 9:8
    logic              d;     // 7
    logic              a;     // 6
    logic              g;     // 5
    logic              u;     // 4
    logic              x;     // 3
    logic              w;     // 2
    logic              r;     // 1
    logic              v;     // 0
  } sv39_pte_t;

  // One DTLB line: the Fig. 2 columns (VPage#, PPage#, R, W, Pkey) plus X, U.
  typedef struct packed {
    logic [VPN_W-1:0]  vpn;
    logic [PPN_W-1:0]  ppn;
    logic              r;
    logic              w;
    logic              x;
    logic              u;
    logic [PKEY_W-1:0] pkey;
  } tlb_entry_t;

  // Two-bit permission of one key. All-zero means "no restriction".
  typedef struct packed {
    logic rd;  // read disable
    logic wd;  // write disable
  } pk_perm_t;

  // Custom instruction selector (funct7 of the custom-0 opcode).
  typedef enum logic [6:0] {
    F_RDPKR       = 7'd0,   // rd  = PKR[rs1[9:5]]
    F_WRPKR       = 7'd1,   // PKR[rs1[9:5]] = rs2, subject to the seal check
    F_SEAL_START  = 7'd2,   // range start = PC of this instruction
    F_SEAL_END    = 7'd3,   // range end   = PC of this instruction
    F_PERM_SEAL   = 7'd4,   // S-mode: seal pkey rs1 with the latched range
    F_CAM_REFILL  = 7'd5,   // S-mode: insert (rs1, refill range) into PK-CAM
    F_SET_RANGE   = 7'd6,   // S-mode: refill range = [rs1, rs2]
    F_RD_RANGE    = 7'd7,   // S-mode: rd = rs1[0] ? latched end : latched start
    F_SEALREG_RD  = 7'd8,   // S-mode: rd = SealReg[rs1[3:0]]
    F_SEALREG_WR  = 7'd9,   // S-mode: SealReg[rs1[3:0]] = rs2 (context restore)
    F_CAM_FLUSH   = 7'd10   // S-mode: invalidate every PK-CAM entry
  } sealpk_funct_e;

  typedef enum logic [1:0] {
    EXC_NONE       = 2'd0,
    EXC_ILLEGAL    = 2'd1,  // unknown funct, or S-mode command from U-mode
    EXC_SEAL_VIOL  = 2'd2   // sealed pkey, WRPKR outside its permissible range
  } sealpk_exc_e;

  // Command from the core: decoded custom instruction with operands and PC.
  typedef struct packed {
    sealpk_funct_e   funct;
    logic [4:0]      rd;
    logic            xd;         // instruction writes rd
    logic [XLEN-1:0] rs1;
    logic [XLEN-1:0] rs2;
    logic [XLEN-1:0] pc;         // virtual PC of the instruction
    logic            supervisor; // issued in S-mode (or higher)
  } sealpk_cmd_t;

  // Completion record, one per command.
  typedef struct packed {
    logic [4:0]        rd;
    logic              wb;       // write data to rd
    logic [XLEN-1:0]   data;
    sealpk_exc_e       exc;      // raise this exception (EXC_NONE: none)
    logic              refill;   // PK-CAM miss: interrupt the OS, re-execute
    logic [PKEY_W-1:0] pkey;     // pkey of a refill or seal violation
  } sealpk_resp_t;

  function automatic logic [4:0] pkr_row(input logic [PKEY_W-1:0] k);
    return k[PKEY_W-1 -: 5];
  endfunction

endpackage
