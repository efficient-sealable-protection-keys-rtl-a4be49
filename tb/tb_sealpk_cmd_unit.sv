// tb_sealpk_cmd_unit -- self-checking test of the custom-instruction unit.
//
// The unit is connected to real PKR, SealReg and PK-CAM instances. The test
// plays the paper's log example: a trusted function brackets its code with
// seal_start (PC 0x103b8) and seal_end (PC 0x10728), the kernel seals key
// 0x001, and then WRPKR on that key is tried from inside the range (written),
// from outside it (seal-violation exception, row unchanged), after a PK-CAM
// flush (refill flag, then the OS refill and a successful re-execution), and
// from supervisor mode (always written). It also checks RDPKR, the write-once
// seal, illegal use of supervisor commands from user mode, SealReg save and
// restore, the one-cycle response latency and that a held response stalls
// new commands.
module tb_sealpk_cmd_unit;
  import sealpk_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  sealpk_cmd_t  cmd;
  sealpk_resp_t resp;
  logic cmd_valid, cmd_ready, resp_valid, resp_ready;

  logic [4:0]  pkr_rd_idx, pkr_wr_idx;
  logic [63:0] pkr_rd_row, pkr_wr_row, seal_row_rd, seal_row_wr;
  logic        pkr_wr_en, seal_q_sealed, seal_set_en, seal_row_wr_en;
  logic [9:0]  seal_q_pkey, seal_set_pkey, cam_q_pkey, cam_ins_pkey;
  logic [3:0]  seal_row_idx;
  logic [39:0] cam_q_pc, cam_ins_start, cam_ins_end;
  logic        cam_hit, cam_pkey_hit, cam_ins_en, cam_flush;
  pk_perm_t    unused_perm;

  int checks = 0, failures = 0;

  sealpk_cmd_unit #(.ADDR_W(40)) dut (.*);

  pkr u_pkr (.clk, .chk_pkey(10'd0), .chk_perm(unused_perm), .rd_idx(pkr_rd_idx),
             .rd_row(pkr_rd_row), .wr_en(pkr_wr_en), .wr_idx(pkr_wr_idx), .wr_row(pkr_wr_row));
  seal_reg u_seal (.clk, .rst_n, .q_pkey(seal_q_pkey), .q_sealed(seal_q_sealed),
                   .set_en(seal_set_en), .set_pkey(seal_set_pkey), .row_idx(seal_row_idx),
                   .row_rd(seal_row_rd), .row_wr_en(seal_row_wr_en), .row_wr(seal_row_wr));
  pk_cam #(.ENTRIES(8), .ADDR_W(40)) u_cam (.clk, .rst_n, .q_pkey(cam_q_pkey), .q_pc(cam_q_pc),
                   .hit(cam_hit), .pkey_hit(cam_pkey_hit), .ins_en(cam_ins_en),
                   .ins_pkey(cam_ins_pkey), .ins_start(cam_ins_start), .ins_end(cam_ins_end),
                   .flush(cam_flush));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one command and wait for its response; checks the 1-cycle latency.
  task automatic issue(input sealpk_funct_e f, input logic [63:0] rs1, input logic [63:0] rs2,
                       input logic [63:0] pc, input logic sup, output sealpk_resp_t r);
    int lat = 0;
    cmd = '0;
    cmd.funct = f; cmd.rs1 = rs1; cmd.rs2 = rs2; cmd.pc = pc; cmd.supervisor = sup;
    cmd.rd = 5'd10; cmd.xd = 1'b1;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(posedge clk);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    check(lat == 0, $sformatf("%s response latency %0d extra cycles", f.name(), lat));
    r = resp;
  endtask

  function automatic logic [63:0] perm_row(input int slot, input logic [1:0] rdwd);
    return 64'(rdwd) << (2 * slot);
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sealpk_resp_t r;
    logic [63:0] row0;
    rst_n = 0; cmd = '0; cmd_valid = 0; resp_ready = 1;
    #12 rst_n = 1;
    @(posedge clk); #1;

    // kernel initialises PKR row 0 (keys 0..31): all accessible
    issue(F_WRPKR, 64'd0, 64'd0, 64'h8000_0000, 1'b1, r);
    // Main: key 1 read-only (RD=0, WD=1) from user mode, not sealed yet
    issue(F_WRPKR, 64'd1, perm_row(1, 2'b01), 64'h10100, 1'b0, r);
    check(r.exc == EXC_NONE && !r.refill, "unsealed WRPKR accepted");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h10104, 1'b0, r);
    check(r.wb && r.rd == 5'd10 && r.data == perm_row(1, 2'b01), "RDPKR returns row");
    // Func-A brackets its code, kernel seals key 1 (pkey_perm_seal)
    issue(F_SEAL_START, 64'd0, 64'd0, 64'h00000103b8, 1'b0, r);
    issue(F_SEAL_END,   64'd0, 64'd0, 64'h0000010728, 1'b0, r);
    issue(F_RD_RANGE, 64'd0, 64'd0, 64'h8000_0100, 1'b1, r);
    check(r.data == 64'h103b8, "latched range start is the seal_start PC");
    issue(F_RD_RANGE, 64'd1, 64'd0, 64'h8000_0104, 1'b1, r);
    check(r.data == 64'h10728, "latched range end is the seal_end PC");
    issue(F_PERM_SEAL, 64'd1, 64'd0, 64'h10000, 1'b0, r);
    check(r.exc == EXC_ILLEGAL, "PERM_SEAL from user mode is illegal");
    issue(F_SEALREG_RD, 64'd0, 64'd0, 64'h8000_0108, 1'b1, r);
    check(r.data == 64'd0, "nothing sealed by the illegal attempt");
    issue(F_PERM_SEAL, 64'd1, 64'd0, 64'h8000_0200, 1'b1, r);
    check(r.exc == EXC_NONE && r.data == 64'd1, "PERM_SEAL seals key 1");
    issue(F_SEALREG_RD, 64'd0, 64'd0, 64'h8000_0108, 1'b1, r);
    check(r.data == 64'h2, "SealReg row 0 bit 1 set");

    // Func-A inside the range: pkey_set(pkey, 0x2) -> write-only (RD=1, WD=0)
    issue(F_WRPKR, 64'd1, perm_row(1, 2'b10), 64'h10400, 1'b0, r);
    check(r.exc == EXC_NONE && !r.refill, "WRPKR inside range accepted");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h10404, 1'b0, r);
    check(r.data == perm_row(1, 2'b10), "row written from inside range");
    // Func-D injected WRPKR(0x1, 0x0) outside the range
    issue(F_WRPKR, 64'd1, 64'd0, 64'h20000, 1'b0, r);
    check(r.exc == EXC_SEAL_VIOL && r.pkey == 10'd1, "WRPKR outside range raises exception");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h20004, 1'b0, r);
    check(r.data == perm_row(1, 2'b10), "row unchanged after violation");
    // range end is inclusive, one past it is not
    issue(F_WRPKR, 64'd1, perm_row(1, 2'b01), 64'h10728, 1'b0, r);
    check(r.exc == EXC_NONE, "WRPKR at range end accepted");
    issue(F_WRPKR, 64'd1, 64'd0, 64'h1072c, 1'b0, r);
    check(r.exc == EXC_SEAL_VIOL, "WRPKR just past range end refused");

    // sealing is write-once: a second seal changes nothing
    issue(F_SEAL_START, 64'd0, 64'd0, 64'h30000, 1'b0, r);
    issue(F_SEAL_END,   64'd0, 64'd0, 64'h30100, 1'b0, r);
    issue(F_PERM_SEAL, 64'd1, 64'd0, 64'h8000_0200, 1'b1, r);
    check(r.data == 64'd0, "second PERM_SEAL reports already sealed");
    issue(F_WRPKR, 64'd1, 64'd0, 64'h30010, 1'b0, r);
    check(r.exc == EXC_SEAL_VIOL, "range not moved by second seal");

    // PK-CAM flushed at a context switch: WRPKR requests a refill
    issue(F_CAM_FLUSH, 64'd0, 64'd0, 64'h8000_0300, 1'b1, r);
    issue(F_WRPKR, 64'd1, perm_row(1, 2'b10), 64'h10400, 1'b0, r);
    check(r.refill && r.exc == EXC_NONE && r.pkey == 10'd1, "PK-CAM miss requests refill");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h10404, 1'b0, r);
    check(r.data == perm_row(1, 2'b01), "no write on refill");
    // OS interrupt handler refills and the WRPKR is re-executed
    issue(F_SET_RANGE, 64'h103b8, 64'h10728, 64'h8000_0400, 1'b1, r);
    issue(F_CAM_REFILL, 64'd1, 64'd0, 64'h8000_0404, 1'b1, r);
    check(r.exc == EXC_NONE, "refill accepted in supervisor mode");
    issue(F_WRPKR, 64'd1, perm_row(1, 2'b10), 64'h10400, 1'b0, r);
    check(!r.refill && r.exc == EXC_NONE, "re-executed WRPKR accepted");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h10404, 1'b0, r);
    check(r.data == perm_row(1, 2'b10), "re-executed WRPKR wrote row");
    issue(F_CAM_REFILL, 64'd1, 64'd0, 64'h10000, 1'b0, r);
    check(r.exc == EXC_ILLEGAL, "CAM_REFILL from user mode is illegal");

    // kernel (supervisor) writes a sealed key from anywhere, e.g. pkey_free
    issue(F_WRPKR, 64'd1, 64'd0, 64'h8000_0500, 1'b1, r);
    check(r.exc == EXC_NONE, "supervisor WRPKR bypasses seal");
    issue(F_RDPKR, 64'd1, 64'd0, 64'h8000_0504, 1'b1, r);
    check(r.data == 64'd0, "supervisor WRPKR wrote row");

    // an unsealed key in another row is writable from anywhere
    issue(F_WRPKR, 64'd1000, 64'hdead_beef_0123_4567, 64'h20000, 1'b0, r);
    issue(F_RDPKR, 64'd1000, 64'd0, 64'h20004, 1'b0, r);
    check(r.data == 64'hdead_beef_0123_4567, "unsealed key row 31 written");

    // SealReg save/restore (context switch)
    issue(F_SEALREG_RD, 64'd0, 64'd0, 64'h8000_0600, 1'b1, r);
    row0 = r.data;
    issue(F_SEALREG_WR, 64'd0, 64'd0, 64'h8000_0604, 1'b1, r);   // next process: nothing sealed
    issue(F_WRPKR, 64'd1, 64'd0, 64'h20000, 1'b0, r);
    check(r.exc == EXC_NONE && !r.refill, "key 1 unsealed in other process");
    issue(F_SEALREG_WR, 64'd0, row0, 64'h8000_0608, 1'b1, r);    // switch back
    issue(F_WRPKR, 64'd1, 64'd0, 64'h20000, 1'b0, r);
    check(r.exc == EXC_SEAL_VIOL, "seal restored");
    issue(F_SEALREG_WR, 64'd0, 64'd0, 64'h10000, 1'b0, r);
    check(r.exc == EXC_ILLEGAL, "SEALREG_WR from user mode is illegal");

    // held response stalls the next command and stays stable
    @(posedge clk); #1;
    check(!resp_valid, "response dropped once taken");
    resp_ready = 0;
    cmd = '0; cmd.funct = F_RDPKR; cmd.rs1 = 64'd1000; cmd.xd = 1; cmd.rd = 5'd3; cmd_valid = 1;
    @(posedge clk); #1;
    check(resp_valid && !cmd_ready, "response held, cmd_ready low");
    cmd.funct = F_WRPKR; cmd.rs2 = 64'd0;
    repeat (3) @(posedge clk); #1;
    check(resp_valid && resp.rd == 5'd3 && resp.data == 64'hdead_beef_0123_4567,
          "held response stable");
    resp_ready = 1; #1;
    check(cmd_ready, "cmd_ready returns with resp_ready");
    @(posedge clk); #1; cmd_valid = 0;
    @(posedge clk); #1;
    issue(F_RDPKR, 64'd1000, 64'd0, 64'h20004, 1'b0, r);
    check(r.data == 64'd0, "stalled WRPKR executed once released");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
