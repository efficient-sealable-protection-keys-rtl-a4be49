// tb_sealpk_top -- end-to-end test of the SealPK data-side blocks.
//
// Plays the roles of the core, the page-table walker and the kernel around
// sealpk_top, at its default sizes (32-line DTLB, 8-entry PK-CAM, full 1024-
// key PKR and SealReg). A page table of 64 pages uses 16 keys spread over
// several PKR rows; keys 1..12 are sealed, each to its own code range, which
// is more than PK-CAM holds, so refills and evictions happen.
//
// A random mix of operations is then run and every result is compared with a
// reference model kept here (page table, PKR contents, seal bits and ranges):
//   data loads/stores   - translation, TLB miss and walker fill, and the
//                         effective permission R&~RD / W&~WD, same cycle
//   WRPKR               - from inside or outside the key's range, user or
//                         supervisor; a refill response is serviced the way
//                         the kernel would (load range, CAM_REFILL, re-issue)
//   RDPKR, sfence.vma, supervisor commands from user mode, held responses.
// Every mechanism is counted and a mechanism that never occurred is a failure.
// It starts with the worked example of a store to page 87 refused by its key.
module tb_sealpk_top;
  import sealpk_pkg::*;

  localparam int NPAGES = 64;
  localparam int NKEYS  = 16;
  localparam int NSEAL  = 12;   // keys 1..12 sealed
  localparam int NOPS   = 4000;

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

  // reference state
  sv39_pte_t   pt     [NPAGES];
  logic [9:0]  keys   [NKEYS];
  logic [63:0] pkr_m  [32];
  logic        sealed [NKEYS];
  logic [39:0] rs [NKEYS], re [NKEYS];

  // mechanism counters
  int n_tlb_miss, n_tlb_hit, n_load_pkfault, n_store_pkfault, n_pte_fault, n_wonly_store;
  int n_wr_unsealed, n_wr_inrange, n_seal_viol, n_refill, n_illegal, n_sup_bypass;
  int n_sfence, n_stall, n_reseal, n_rdpkr;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input sealpk_funct_e f, input logic [63:0] a, input logic [63:0] b,
                       input logic [63:0] pc, input logic sup, output sealpk_resp_t r);
    int lat = 0;
    cmd = '0;
    cmd.funct = f; cmd.rs1 = a; cmd.rs2 = b; cmd.pc = pc; cmd.supervisor = sup;
    cmd.rd = 5'd5; cmd.xd = 1'b1;
    cmd_valid = 1'b1;
    while (!cmd_ready) @(posedge clk);
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    check(lat == 0, "response one cycle after acceptance");
    r = resp;
  endtask

  function automatic logic [1:0] perm_of(input logic [9:0] k);
    return pkr_m[k[9:5]][2*k[4:0] +: 2];
  endfunction

  // WRPKR as user code; services refills like the kernel would.
  task automatic user_wrpkr(input int j, input logic [1:0] perm, input logic in_range);
    sealpk_resp_t r;
    logic [63:0]  row;
    logic [39:0]  pc;
    logic [9:0]   k = keys[j];
    int           tries = 0;
    row = pkr_m[k[9:5]];
    row[2*k[4:0] +: 2] = perm;
    if (sealed[j])
      pc = in_range ? rs[j] + 40'(4 * $urandom_range(int'((re[j] - rs[j]) / 4)))
                  : re[j] + 40'(4 * $urandom_range(1, 64));
    else
      pc = 40'h7_0000 + 40'(4 * $urandom_range(1000));
    do begin
      issue(F_WRPKR, 64'(k), row, 64'(pc), 1'b0, r);
      if (r.refill) begin
        sealpk_resp_t r2;
        n_refill++;
        check(sealed[j] && r.pkey == k && r.exc == EXC_NONE, "refill only for a sealed key");
        issue(F_SET_RANGE, 64'(rs[j]), 64'(re[j]), 64'h8000_1000, 1'b1, r2);
        issue(F_CAM_REFILL, 64'(k), 64'd0, 64'h8000_1004, 1'b1, r2);
      end
      tries++;
    end while (r.refill && tries < 3);
    check(!r.refill, "refill resolved after one OS refill");
    if (!sealed[j] || in_range) begin
      check(r.exc == EXC_NONE, $sformatf("WRPKR key %0d allowed", k));
      pkr_m[k[9:5]] = row;
      if (sealed[j]) n_wr_inrange++; else n_wr_unsealed++;
    end else begin
      check(r.exc == EXC_SEAL_VIOL && r.pkey == k, $sformatf("WRPKR key %0d refused", k));
      n_seal_viol++;
    end
  endtask

  // One data access; walks the page table on a miss.
  task automatic access(input int p, input logic is_store);
    logic [11:0] off = 12'($urandom);
    logic [1:0]  kp;
    logic        er, ew, exp_fault, exp_pk;
    acc_valid = 1; acc_is_load = !is_store; acc_is_store = is_store;
    acc_vaddr = {27'(32'h100 + p), off};
    #1;
    if (acc_miss) begin
      n_tlb_miss++;
      fill_en = 1; fill_vpn = 27'(32'h100 + p); fill_pte = pt[p];
      @(posedge clk); #1;
      fill_en = 0;
    end else begin
      n_tlb_hit++;
    end
    check(acc_hit && !acc_miss, "hit after fill");
    kp = perm_of(pt[p].pkey);
    er = pt[p].r & ~kp[1];
    ew = pt[p].w & ~kp[0];
    exp_fault = is_store ? !ew : !er;
    exp_pk    = is_store ? (pt[p].w & kp[0]) : (pt[p].r & kp[1]);
    check(acc_paddr == {pt[p].ppn, off}, "physical address");
    check(acc_pkey == pt[p].pkey, "key of the page");
    check((is_store ? acc_store_fault : acc_load_fault) == exp_fault &&
          (is_store ? acc_load_fault : acc_store_fault) == 1'b0,
          $sformatf("fault page %0d store=%0b", p, is_store));
    check(acc_pkey_fault == exp_pk, "key-fault flag");
    if (exp_pk && !is_store) n_load_pkfault++;
    if (exp_pk &&  is_store) n_store_pkfault++;
    if (exp_fault && !exp_pk) n_pte_fault++;
    if (is_store && !exp_fault && kp == 2'b10) n_wonly_store++;
    @(posedge clk); #1;
    acc_valid = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sealpk_resp_t r;
    rst_n = 0; acc_valid = 0; acc_is_load = 0; acc_is_store = 0; acc_vaddr = '0;
    fill_en = 0; fill_vpn = '0; fill_pte = '0; sfence = 0; cmd = '0; cmd_valid = 0; resp_ready = 1;
    {n_tlb_miss, n_tlb_hit, n_load_pkfault, n_store_pkfault, n_pte_fault, n_wonly_store} = '0;
    {n_wr_unsealed, n_wr_inrange, n_seal_viol, n_refill, n_illegal, n_sup_bypass} = '0;
    {n_sfence, n_stall, n_reseal, n_rdpkr} = '0;

    for (int j = 0; j < NKEYS; j++) begin
      keys[j]   = 10'((j * 67) % 1024);       // 0, 67, 134, ... over many rows
      sealed[j] = 1'b0;
    end
    for (int p = 0; p < NPAGES; p++) begin
      pt[p] = '0;
      pt[p].v = 1; pt[p].a = 1; pt[p].d = 1; pt[p].u = 1;
      pt[p].r = (p % 7 != 3);                 // a few pages not readable
      pt[p].w = (p % 5 != 0);                 // some read-only pages
      pt[p].ppn = 44'(32'h5000 + 3 * p);
      pt[p].pkey = keys[p % NKEYS];
    end
    #12 rst_n = 1;
    @(posedge clk); #1;

    // kernel: load an all-accessible PKR for this thread
    for (int i = 0; i < 32; i++) begin
      issue(F_WRPKR, 64'(i * 32), 64'd0, 64'h8000_0000, 1'b1, r);
      pkr_m[i] = '0;
    end
    // The worked example: page 87 -> frame 760, R W = 11, key 1111000001
    // (row 30, slot 1) whose bits are RD WD = 01. A store must fault (effective
    // permission 10, caused by the key) and a load must pass.
    begin
      automatic sv39_pte_t p = '0;
      p.v = 1; p.r = 1; p.w = 1; p.a = 1; p.d = 1; p.u = 1; p.ppn = 44'd760;
      p.pkey = 10'b1111000001;
      issue(F_WRPKR, 64'(10'b1111000001), 64'h4, 64'h8000_0000, 1'b1, r);
      fill_en = 1; fill_vpn = 27'd87; fill_pte = p;
      @(posedge clk); #1; fill_en = 0;
      acc_valid = 1; acc_is_store = 1; acc_is_load = 0; acc_vaddr = {27'd87, 12'h123}; #1;
      check(acc_hit && acc_paddr == {44'd760, 12'h123} && acc_pkey == 10'b1111000001,
            "example: page 87 translated with its key");
      check(acc_store_fault && acc_pkey_fault && !acc_load_fault, "example: store refused by key");
      acc_is_store = 0; acc_is_load = 1; #1;
      check(!acc_load_fault && !acc_pkey_fault, "example: load allowed");
      acc_valid = 0; acc_is_load = 0;
      issue(F_WRPKR, 64'(10'b1111000001), 64'h0, 64'h8000_0000, 1'b1, r);
      sfence = 1; @(posedge clk); #1; sfence = 0;
    end
    // trusted code of each sealed key: seal_start / seal_end / pkey_perm_seal
    for (int j = 1; j <= NSEAL; j++) begin
      rs[j] = 40'h1_0000 + 40'(j) * 40'h1000;
      re[j] = rs[j] + 40'h7fc;
      issue(F_SEAL_START, 64'd0, 64'd0, 64'(rs[j]), 1'b0, r);
      issue(F_SEAL_END,   64'd0, 64'd0, 64'(re[j]), 1'b0, r);
      issue(F_PERM_SEAL,  64'(keys[j]), 64'd0, 64'h8000_0200, 1'b1, r);
      check(r.exc == EXC_NONE && r.data == 64'd1, "key sealed");
      sealed[j] = 1'b1;
    end

    for (int t = 0; t < NOPS; t++) begin
      automatic int sel = $urandom_range(99);
      automatic int j   = $urandom_range(1, NKEYS - 1);
      if (sel < 50) begin
        access($urandom_range(NPAGES - 1), 1'($urandom));
      end else if (sel < 80) begin
        user_wrpkr(j, 2'($urandom), ($urandom_range(3) != 0));
      end else if (sel < 86) begin
        issue(F_RDPKR, 64'(keys[j]), 64'd0, 64'h7_0000, 1'b0, r);
        check(r.wb && r.data == pkr_m[keys[j][9:5]], "RDPKR row");
        n_rdpkr++;
      end else if (sel < 89) begin
        // kernel write of a sealed key from outside any range (pkey_free)
        automatic logic [63:0] row = pkr_m[keys[1][9:5]];
        row[2*keys[1][4:0] +: 2] = 2'b00;
        issue(F_WRPKR, 64'(keys[1]), row, 64'h8000_0300, 1'b1, r);
        check(r.exc == EXC_NONE && !r.refill, "supervisor WRPKR bypasses the seal");
        pkr_m[keys[1][9:5]] = row;
        n_sup_bypass++;
      end else if (sel < 92) begin
        issue(sealpk_funct_e'($urandom_range(4, 10)), 64'(keys[j]), 64'd0, 64'h7_0000, 1'b0, r);
        check(r.exc == EXC_ILLEGAL, "supervisor command from user mode");
        n_illegal++;
      end else if (sel < 94) begin
        issue(F_PERM_SEAL, 64'(keys[$urandom_range(1, NSEAL)]), 64'd0, 64'h8000_0200, 1'b1, r);
        check(r.exc == EXC_NONE && r.data == 64'd0, "re-seal has no effect");
        n_reseal++;
      end else if (sel < 96) begin
        sfence = 1; @(posedge clk); #1; sfence = 0;
        n_sfence++;
      end else begin
        // response held by the core for a few cycles
        @(posedge clk); #1;
        resp_ready = 0;
        cmd = '0; cmd.funct = F_RDPKR; cmd.rs1 = 64'(keys[j]); cmd.xd = 1; cmd.rd = 5'd7;
        cmd_valid = 1;
        @(posedge clk); #1;
        cmd_valid = 0;
        repeat ($urandom_range(1, 4)) begin
          check(resp_valid && !cmd_ready && resp.data == pkr_m[keys[j][9:5]], "held response");
          @(posedge clk); #1;
        end
        resp_ready = 1;
        @(posedge clk); #1;
        n_stall++;
      end
    end

    $display("mechanisms: tlb_miss=%0d tlb_hit=%0d load_pkfault=%0d store_pkfault=%0d pte_fault=%0d write_only_store=%0d",
             n_tlb_miss, n_tlb_hit, n_load_pkfault, n_store_pkfault, n_pte_fault, n_wonly_store);
    $display("mechanisms: wrpkr_unsealed=%0d wrpkr_in_range=%0d seal_violation=%0d cam_refill=%0d illegal=%0d sup_bypass=%0d sfence=%0d stall=%0d reseal=%0d rdpkr=%0d",
             n_wr_unsealed, n_wr_inrange, n_seal_viol, n_refill, n_illegal, n_sup_bypass,
             n_sfence, n_stall, n_reseal, n_rdpkr);
    check(n_tlb_miss > 0,      "mechanism: DTLB miss and fill");
    check(n_tlb_hit > 0,       "mechanism: DTLB hit");
    check(n_load_pkfault > 0,  "mechanism: load refused by key");
    check(n_store_pkfault > 0, "mechanism: store refused by key");
    check(n_pte_fault > 0,     "mechanism: access refused by PTE");
    check(n_wonly_store > 0,   "mechanism: store to write-only page");
    check(n_wr_unsealed > 0,   "mechanism: WRPKR on unsealed key");
    check(n_wr_inrange > 0,    "mechanism: sealed WRPKR inside range");
    check(n_seal_viol > 0,     "mechanism: seal violation exception");
    check(n_refill > 0,        "mechanism: PK-CAM refill");
    check(n_illegal > 0,       "mechanism: illegal supervisor command");
    check(n_sup_bypass > 0,    "mechanism: supervisor WRPKR");
    check(n_sfence > 0,        "mechanism: sfence flush");
    check(n_stall > 0,         "mechanism: response back-pressure");
    check(n_reseal > 0,        "mechanism: write-once seal");
    check(n_rdpkr > 0,         "mechanism: RDPKR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
