// tb_seal_reg -- self-checking test of SealReg.
//
// After reset no key is sealed. Seals a random set of keys through the set
// port, checking each against a 1024-entry reference; checks that sealing
// is sticky (no port path clears a bit except a row restore), that the row
// read matches the layout row = key[9:6], bit = key[5:0] (the paper's
// example: key 0x001 is bit 1 of row 0), and that a restore writes a row.
module tb_seal_reg;
  import sealpk_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [PKEY_W-1:0] q_pkey, set_pkey;
  logic q_sealed, set_en, row_wr_en;
  logic [3:0] row_idx;
  logic [63:0] row_rd, row_wr;
  logic ref_bits [1024];
  int checks = 0, failures = 0;

  seal_reg dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic check_all(input string tag);
    int bad = 0;
    for (int k = 0; k < 1024; k++) begin
      q_pkey = 10'(k); #1;
      if (q_sealed != ref_bits[k]) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d keys wrong", tag, bad));
    for (int r = 0; r < 16; r++) begin
      logic [63:0] exp;
      for (int b = 0; b < 64; b++) exp[b] = ref_bits[r*64 + b];
      row_idx = 4'(r); #1;
      check(row_rd == exp, $sformatf("%s: row %0d", tag, r));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; set_en = 0; set_pkey = 0; row_wr_en = 0; row_wr = 0; row_idx = 0; q_pkey = 0;
    foreach (ref_bits[k]) ref_bits[k] = 1'b0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    check_all("after reset");
    // paper's example key 0x001
    set_en = 1; set_pkey = 10'h001; @(posedge clk); #1; set_en = 0;
    ref_bits[1] = 1'b1;
    row_idx = 0; #1;
    check(row_rd == 64'h2, "key 0x001 is bit 1 of row 0");
    for (int i = 0; i < 100; i++) begin
      automatic int k = $urandom_range(1023);
      set_en = 1; set_pkey = 10'(k); @(posedge clk); #1;
      ref_bits[k] = 1'b1;
    end
    set_en = 0;
    check_all("after sealing");
    // sealing again keeps everything
    set_en = 1; set_pkey = 10'h001; @(posedge clk); #1; set_en = 0;
    check_all("after re-seal");
    // restore row 5 (context switch)
    row_idx = 5; row_wr = {$urandom, $urandom}; row_wr_en = 1;
    @(posedge clk); #1; row_wr_en = 0;
    for (int b = 0; b < 64; b++) ref_bits[5*64 + b] = row_wr[b];
    check_all("after restore");
    // seal and restore of the same row in one cycle: seal bit kept
    row_idx = 7; row_wr = '0; row_wr_en = 1; set_en = 1; set_pkey = 10'(7*64 + 9);
    @(posedge clk); #1; row_wr_en = 0; set_en = 0;
    for (int b = 0; b < 64; b++) ref_bits[7*64 + b] = 1'b0;
    ref_bits[7*64 + 9] = 1'b1;
    check_all("seal during restore");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
