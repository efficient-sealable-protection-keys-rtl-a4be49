// tb_pkey_perm_check -- exhaustive test of the effective-permission logic.
//
// Runs all 64 input combinations (R, W, RD, WD, load, store) and compares the
// outputs with a table computed here from the rules: read allowed iff R and
// not RD, write allowed iff W and not WD; a key fault is a fault that the PTE
// alone would not have raised. Includes the paper's example (RW 11, key 01,
// effective 10) and the write-only page (RW 11, key 10).
module tb_pkey_perm_check;
  import sealpk_pkg::*;

  logic pte_r, pte_w, is_load, is_store;
  pk_perm_t pk_perm;
  logic eff_r, eff_w, load_fault, store_fault, pkey_fault;
  int checks = 0, failures = 0;

  pkey_perm_check dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      logic er, ew, lf, sf, kf;
      {pte_r, pte_w, pk_perm.rd, pk_perm.wd, is_load, is_store} = 6'(v);
      #1;
      er = pte_r & ~pk_perm.rd;
      ew = pte_w & ~pk_perm.wd;
      lf = is_load && !er;
      sf = is_store && !ew;
      kf = (lf && pte_r) || (sf && pte_w);
      check(eff_r == er && eff_w == ew, $sformatf("eff perm v=%0d", v));
      check(load_fault == lf && store_fault == sf && pkey_fault == kf,
            $sformatf("faults v=%0d", v));
    end
    // paper's example: RW perm 11, pkey perm 01 -> effective 10, store refused
    pte_r = 1; pte_w = 1; pk_perm = '{rd: 1'b0, wd: 1'b1}; is_load = 0; is_store = 1; #1;
    check({eff_r, eff_w} == 2'b10, "example effective perm 10");
    check(store_fault && pkey_fault, "example store faults because of the key");
    // write-only page through the key
    pk_perm = '{rd: 1'b1, wd: 1'b0}; is_load = 0; is_store = 1; #1;
    check(!store_fault, "write-only page accepts store");
    is_load = 1; is_store = 0; #1;
    check(load_fault && pkey_fault, "write-only page refuses load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
