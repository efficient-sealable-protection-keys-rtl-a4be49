// sealpk_cmd_unit -- executes SealPK's custom instructions.
//
// The core hands over each decoded custom instruction as a sealpk_cmd_t
// (function, operands, destination, the instruction's PC and whether it was
// issued in supervisor mode). The unit reads and writes PKR, SealReg and
// PK-CAM through its ports and answers with one sealpk_resp_t per command.
//
// User instructions:
//   RDPKR      rd = PKR row rs1[9:5]  (32 keys, 2 bits each)
//   WRPKR      PKR row rs1[9:5] = rs2, through the seal flow of the paper:
//                key not sealed            -> write
//                sealed, PK-CAM hit        -> write  (PC inside the range)
//                sealed, key in PK-CAM     -> no write, seal-violation exception
//                sealed, key not in PK-CAM -> no write, refill flag: the core
//                                             interrupts the OS, which inserts
//                                             the range; the WRPKR is re-run
//   SEAL_START latch the instruction's own PC as the range start
//   SEAL_END   latch the instruction's own PC as the range end
// Supervisor-only instructions (illegal-instruction exception from U-mode):
//   PERM_SEAL  seal key rs1: set its SealReg bit and insert (key, start, end)
//              into PK-CAM. If the key is already sealed nothing changes (the
//              seal is write-once); rd = 1 if this call sealed it, else 0.
//   SET_RANGE  load the refill range [rs1, rs2];  CAM_REFILL inserts
//              (rs1 key, refill range) into PK-CAM for the refill interrupt.
//   RD_RANGE   rd = latched start (rs1[0]=0) or end (rs1[0]=1), so the kernel
//              can keep the range of a key it seals.
//   SEALREG_RD / SEALREG_WR  save / restore a SealReg row at a context switch.
//   CAM_FLUSH  invalidate PK-CAM at a context switch.
// A WRPKR in supervisor mode skips the seal check, so the kernel can clear a
// freed key and restore PKR at a context switch.
//
// The instruction list and the WRPKR flow follow the paper; the encodings, the
// supervisor helper commands, the refill-by-re-execution protocol and the
// supervisor bypass are this design's choices.
//
// Timing: a command is accepted when cmd_valid && cmd_ready; its PKR, SealReg
// and PK-CAM updates happen at that clock edge, and its response is valid from
// the next cycle until resp_ready. cmd_ready is low only while an untaken
// response is held, so with resp_ready high one command completes per cycle.
module sealpk_cmd_unit
  import sealpk_pkg::*;
#(
  parameter int unsigned ADDR_W = 40
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command / response
  input  sealpk_cmd_t             cmd,
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  output sealpk_resp_t            resp,
  output logic                    resp_valid,
  input  logic                    resp_ready,
  // PKR
  output logic [4:0]              pkr_rd_idx,
  input  logic [PKR_ROW_W-1:0]    pkr_rd_row,
  output logic                    pkr_wr_en,
  output logic [4:0]              pkr_wr_idx,
  output logic [PKR_ROW_W-1:0]    pkr_wr_row,
  // SealReg
  output logic [PKEY_W-1:0]       seal_q_pkey,
  input  logic                    seal_q_sealed,
  output logic                    seal_set_en,
  output logic [PKEY_W-1:0]       seal_set_pkey,
  output logic [3:0]              seal_row_idx,
  input  logic [SEAL_ROW_W-1:0]   seal_row_rd,
  output logic                    seal_row_wr_en,
  output logic [SEAL_ROW_W-1:0]   seal_row_wr,
  // PK-CAM
  output logic [PKEY_W-1:0]       cam_q_pkey,
  output logic [ADDR_W-1:0]       cam_q_pc,
  input  logic                    cam_hit,
  input  logic                    cam_pkey_hit,
  output logic                    cam_ins_en,
  output logic [PKEY_W-1:0]       cam_ins_pkey,
  output logic [ADDR_W-1:0]       cam_ins_start,
  output logic [ADDR_W-1:0]       cam_ins_end,
  output logic                    cam_flush
);

  logic [ADDR_W-1:0] seal_start_q, seal_end_q;      // latched by SEAL_START/END
  logic [ADDR_W-1:0] refill_start_q, refill_end_q;  // loaded by SET_RANGE

  logic              fire;
  logic [PKEY_W-1:0] key;
  sealpk_resp_t      nxt;
  logic              wr_allowed;

  assign cmd_ready = !resp_valid || resp_ready;
  assign fire      = cmd_valid && cmd_ready;
  assign key       = cmd.rs1[PKEY_W-1:0];

  // Lookups driven straight from the command operands.
  assign pkr_rd_idx    = pkr_row(key);
  assign seal_q_pkey   = key;
  assign seal_row_idx  = cmd.rs1[3:0];
  assign cam_q_pkey    = key;
  assign cam_q_pc      = cmd.pc[ADDR_W-1:0];
  assign pkr_wr_idx    = pkr_row(key);
  assign pkr_wr_row    = cmd.rs2;
  assign seal_set_pkey = key;
  assign seal_row_wr   = cmd.rs2;
  assign cam_ins_pkey  = key;

  // WRPKR decision (user mode): the flow of the paper's seal figure.
  assign wr_allowed = cmd.supervisor || !seal_q_sealed || cam_hit;

  always_comb begin
    nxt            = '0;
    nxt.rd         = cmd.rd;
    nxt.pkey       = key;
    nxt.exc        = EXC_NONE;
    pkr_wr_en      = 1'b0;
    seal_set_en    = 1'b0;
    seal_row_wr_en = 1'b0;
    cam_ins_en     = 1'b0;
    cam_ins_start  = seal_start_q;
    cam_ins_end    = seal_end_q;
    cam_flush      = 1'b0;

    unique case (cmd.funct)
      F_RDPKR: begin
        nxt.wb   = cmd.xd;
        nxt.data = pkr_rd_row;
      end
      F_WRPKR: begin
        if (wr_allowed)        pkr_wr_en  = fire;
        else if (cam_pkey_hit) nxt.exc    = EXC_SEAL_VIOL;
        else                   nxt.refill = 1'b1;
      end
      F_SEAL_START, F_SEAL_END: ;
      F_PERM_SEAL, F_CAM_REFILL, F_SET_RANGE, F_RD_RANGE,
      F_SEALREG_RD, F_SEALREG_WR, F_CAM_FLUSH: begin
        if (!cmd.supervisor) begin
          nxt.exc = EXC_ILLEGAL;
        end else begin
          unique case (cmd.funct)
            F_PERM_SEAL: begin
              nxt.wb   = cmd.xd;
              nxt.data = XLEN'(!seal_q_sealed);
              if (!seal_q_sealed) begin
                seal_set_en = fire;
                cam_ins_en  = fire;
              end
            end
            F_CAM_REFILL: begin
              cam_ins_en    = fire;
              cam_ins_start = refill_start_q;
              cam_ins_end   = refill_end_q;
            end
            F_RD_RANGE: begin
              nxt.wb   = cmd.xd;
              nxt.data = XLEN'(cmd.rs1[0] ? seal_end_q : seal_start_q);
            end
            F_SEALREG_RD: begin
              nxt.wb   = cmd.xd;
              nxt.data = seal_row_rd;
            end
            F_SEALREG_WR: seal_row_wr_en = fire;
            F_CAM_FLUSH:  cam_flush      = fire;
            default: ;  // F_SET_RANGE: registers below
          endcase
        end
      end
      default: nxt.exc = EXC_ILLEGAL;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid     <= 1'b0;
      resp           <= '0;
      seal_start_q   <= '0;
      seal_end_q     <= '0;
      refill_start_q <= '0;
      refill_end_q   <= '0;
    end else begin
      if (fire) begin
        resp_valid <= 1'b1;
        resp       <= nxt;
        unique case (cmd.funct)
          F_SEAL_START: seal_start_q <= cmd.pc[ADDR_W-1:0];
          F_SEAL_END:   seal_end_q   <= cmd.pc[ADDR_W-1:0];
          F_SET_RANGE: if (cmd.supervisor) begin
            refill_start_q <= cmd.rs1[ADDR_W-1:0];
            refill_end_q   <= cmd.rs2[ADDR_W-1:0];
          end
          default: ;
        endcase
      end else if (resp_ready) begin
        resp_valid <= 1'b0;
      end
    end
  end

  // Handshake rule: a held response does not change until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   resp_valid && !resp_ready |=> resp_valid && $stable(resp))
    else $error("sealpk_cmd_unit: response changed while held");

endmodule
