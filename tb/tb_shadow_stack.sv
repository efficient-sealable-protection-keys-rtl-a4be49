// tb_shadow_stack -- the isolated shadow stack run on sealpk_top.
//
// Models the instrumented program of the case study at the default sizes.
// One key guards the shadow-stack pages and is read-only (RD WD = 01) outside
// prologues. The instrumentation code lies in one address range, which is
// sealed for that key with seal_start / seal_end and the supervisor seal.
// Each call runs the prologue:
//   (RD+WR variant) RDPKR to fetch the key's row, then
//   WRPKR row with the key at 00 (writable), store the return address to the
//   shadow stack, WRPKR row with the key back at 01,
// and each return loads the saved address (allowed while read-only). The
// WR-only variant skips RDPKR and writes a row built from the known value.
// A random call/return trace of NCALLS calls is run for both variants; the
// testbench checks every access and instruction outcome, counts the cycles of
// every prologue (two or three one-cycle commands plus a one-cycle store, as
// the key is checked in the same cycle as the TLB), and mixes
// in attacks: a store to the shadow stack outside a prologue (key store
// fault) and an injected WRPKR outside the sealed range (exception).
module tb_shadow_stack;
  import sealpk_pkg::*;

  localparam int          NCALLS  = 3000;
  localparam logic [9:0]  SS_KEY  = 10'd37;      // row 1, slot 5
  localparam int          SS_PAGES = 4;
  localparam logic [26:0] SS_VPN  = 27'h3f000;
  localparam logic [39:0] PASS_LO = 40'h0_0002_0000;  // instrumentation code
  localparam logic [39:0] PASS_HI = 40'h0_0002_03fc;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic        acc_valid, acc_is_load, acc_is_store;
  logic [38:0] acc_vaddr;
  logic        acc_hit, acc_miss, acc_load_fault, acc_store_fault, acc_pkey_fault;
  logic [55:0] acc_paddr;
  logic [9:0]  acc_pkey;
  logic        fill_en, sfence;
  logic [26:0] fill_vpn;
  sv39_pte_t   fill_pte;
  sealpk_cmd_t cmd;
  logic        cmd_valid, cmd_ready, resp_valid, resp_ready;
  sealpk_resp_t resp;

  sealpk_top dut (.*);

  int checks = 0, failures = 0;
  int n_calls, n_returns, n_store_attacks, n_wrpkr_attacks, n_refills;
  int max_prologue_cycles, n_fills;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input sealpk_funct_e f, input logic [63:0] a, input logic [63:0] b,
                       input logic [63:0] pc, input logic sup, output sealpk_resp_t r);
    int lat = 0;
    cmd = '0;
    cmd.funct = f; cmd.rs1 = a; cmd.rs2 = b; cmd.pc = pc; cmd.supervisor = sup;
    cmd.rd = 5'd6; cmd.xd = 1'b1;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(posedge clk);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    check(lat == 0, "one-cycle response");
    r = resp;
  endtask

  // WRPKR from the instrumentation range; a refill is serviced as by the OS.
  task automatic pass_wrpkr(input logic [63:0] row, input logic [39:0] pc);
    sealpk_resp_t r;
    issue(F_WRPKR, 64'(SS_KEY), row, 64'(pc), 1'b0, r);
    if (r.refill) begin
      sealpk_resp_t r2;
      n_refills++;
      issue(F_SET_RANGE, 64'(PASS_LO), 64'(PASS_HI), 64'h8000_0000, 1'b1, r2);
      issue(F_CAM_REFILL, 64'(SS_KEY), 64'd0, 64'h8000_0004, 1'b1, r2);
      issue(F_WRPKR, 64'(SS_KEY), row, 64'(pc), 1'b0, r);
    end
    check(r.exc == EXC_NONE && !r.refill, "instrumentation WRPKR accepted");
  endtask

  // One shadow-stack access (slot = stack depth); returns the fault flags.
  task automatic ss_access(input int depth, input logic is_store, output logic fault,
                           output logic pk);
    automatic logic [38:0] va = {SS_VPN, 12'd0} + 39'(8 * depth);
    acc_valid = 1; acc_is_load = !is_store; acc_is_store = is_store; acc_vaddr = va;
    #1;
    if (acc_miss) begin
      automatic sv39_pte_t p = '0;
      n_fills++;
      p.v = 1; p.r = 1; p.w = 1; p.a = 1; p.d = 1; p.u = 1;
      p.ppn = 44'h8_0000 + 44'(va[38:12] - SS_VPN);
      p.pkey = SS_KEY;
      fill_en = 1; fill_vpn = va[38:12]; fill_pte = p;
      @(posedge clk); #1;
      fill_en = 0;
    end
    check(acc_hit && acc_pkey == SS_KEY, "shadow stack page translated with its key");
    fault = is_store ? acc_store_fault : acc_load_fault;
    pk    = acc_pkey_fault;
    @(posedge clk); #1;
    acc_valid = 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sealpk_resp_t r;
    logic [63:0]  row_ro, row_rw;
    rst_n = 0; acc_valid = 0; acc_is_load = 0; acc_is_store = 0; acc_vaddr = '0;
    fill_en = 0; fill_vpn = '0; fill_pte = '0; sfence = 0; cmd = '0; cmd_valid = 0; resp_ready = 1;
    {n_calls, n_returns, n_store_attacks, n_wrpkr_attacks, n_refills} = '0;
    max_prologue_cycles = 0; n_fills = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;

    for (int variant = 0; variant < 2; variant++) begin   // 0: WR only, 1: RD+WR
      automatic int depth = 0;
      // kernel: thread's PKR all open, pkey_alloc(read-only) for the shadow stack
      for (int i = 0; i < 32; i++) issue(F_WRPKR, 64'(i * 32), 64'd0, 64'h8000_0000, 1'b1, r);
      row_ro = 64'(2'b01) << (2 * SS_KEY[4:0]);
      row_rw = 64'd0;
      issue(F_WRPKR, 64'(SS_KEY), row_ro, 64'h8000_0010, 1'b1, r);
      if (variant == 0) begin
        // seal the key's permission to the instrumentation range (once per process)
        issue(F_SEAL_START, 64'd0, 64'd0, 64'(PASS_LO), 1'b0, r);
        issue(F_SEAL_END,   64'd0, 64'd0, 64'(PASS_HI), 1'b0, r);
        issue(F_PERM_SEAL,  64'(SS_KEY), 64'd0, 64'h8000_0020, 1'b1, r);
        check(r.data == 64'd1, "shadow-stack key sealed");
      end else begin
        // a new process: context switch flushes PK-CAM, SealReg row keeps the seal
        issue(F_CAM_FLUSH, 64'd0, 64'd0, 64'h8000_0030, 1'b1, r);
        sfence = 1; @(posedge clk); #1; sfence = 0;
      end

      for (int c = 0; c < NCALLS; c++) begin
        automatic int sel = $urandom_range(99);
        logic f, pk;
        if ((sel < 55 && depth < 500) || depth == 0) begin
          // call: prologue
          automatic longint t0 = $time;
          automatic int f0 = n_fills, r0 = n_refills;
          automatic int cyc, exp_cyc;
          logic [63:0] row;
          if (variant == 1) begin
            issue(F_RDPKR, 64'(SS_KEY), 64'd0, 64'(PASS_LO + 40'h10), 1'b0, r);
            check(r.data == row_ro, "RDPKR sees read-only key");
            row = r.data & ~(64'h3 << (2 * SS_KEY[4:0]));
          end else begin
            row = row_rw;
          end
          pass_wrpkr(row, PASS_LO + 40'h20);
          ss_access(depth, 1'b1, f, pk);
          check(!f, "return address pushed while writable");
          pass_wrpkr(row_ro, PASS_LO + 40'h30);
          cyc = int'(($time - t0) / 10);
          // one cycle per command and for the store, plus walker fills and refills
          exp_cyc = (variant == 1 ? 3 : 2) + 1 + (n_fills - f0) + 3 * (n_refills - r0);
          check(cyc == exp_cyc, $sformatf("prologue took %0d cycles, expected %0d", cyc, exp_cyc));
          if (cyc > max_prologue_cycles) max_prologue_cycles = cyc;
          depth++;
          n_calls++;
        end else if (sel < 95) begin
          // return: epilogue pops with a load, the key is read-only
          depth--;
          ss_access(depth, 1'b0, f, pk);
          check(!f, "return address popped while read-only");
          n_returns++;
        end else if (sel < 98) begin
          // attacker overwrites a saved return address
          ss_access(depth == 0 ? 0 : depth - 1, 1'b1, f, pk);
          check(f && pk, "store outside prologue refused by the key");
          n_store_attacks++;
        end else begin
          // attacker injects WRPKR(key, writable) outside the sealed range
          issue(F_WRPKR, 64'(SS_KEY), row_rw, 64'h0_0005_0000, 1'b0, r);
          if (r.refill) begin
            sealpk_resp_t r2;
            n_refills++;
            issue(F_SET_RANGE, 64'(PASS_LO), 64'(PASS_HI), 64'h8000_0000, 1'b1, r2);
            issue(F_CAM_REFILL, 64'(SS_KEY), 64'd0, 64'h8000_0004, 1'b1, r2);
            issue(F_WRPKR, 64'(SS_KEY), row_rw, 64'h0_0005_0000, 1'b0, r);
          end
          check(r.exc == EXC_SEAL_VIOL, "injected WRPKR refused");
          issue(F_RDPKR, 64'(SS_KEY), 64'd0, 64'(PASS_LO), 1'b0, r);
          check(r.data == row_ro, "key still read-only after attack");
          n_wrpkr_attacks++;
        end
      end
    end

    $display("shadow stack: calls=%0d returns=%0d store_attacks=%0d wrpkr_attacks=%0d refills=%0d max_prologue_cycles=%0d",
             n_calls, n_returns, n_store_attacks, n_wrpkr_attacks, n_refills, max_prologue_cycles);
    check(n_calls > 0 && n_returns > 0, "calls and returns ran");
    check(n_store_attacks > 0 && n_wrpkr_attacks > 0, "both attacks ran");
    check(n_refills > 0, "PK-CAM refill after context switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
