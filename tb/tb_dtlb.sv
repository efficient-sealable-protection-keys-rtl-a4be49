// tb_dtlb -- self-checking test of the pkey-carrying DTLB.
//
// Fills lines from Sv39 leaf PTEs and checks that a lookup returns the PPN,
// the permissions and the key taken from PTE bits 63:54, using the rows of the
// paper's TLB figure (e.g. page 87 -> frame 760, RW 11, key 1111000001).
// Then checks refill of an existing page, A/D handling, eviction once more
// pages than lines have been filled (all filled pages are tracked by a model
// of the round-robin rule) and the flush.
module tb_dtlb;
  import sealpk_pkg::*;

  localparam int N = 4;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [VPN_W-1:0] lk_vpn, fill_vpn;
  logic lk_hit, fill_en, flush;
  tlb_entry_t lk_entry;
  sv39_pte_t fill_pte;
  int checks = 0, failures = 0;

  dtlb #(.ENTRIES(N)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic sv39_pte_t mk_pte(input logic [43:0] ppn, input logic r, input logic w,
                                       input logic [9:0] key);
    sv39_pte_t p = '0;
    p.pkey = key; p.ppn = ppn; p.v = 1; p.r = r; p.w = w; p.a = 1; p.d = 1; p.u = 1;
    return p;
  endfunction

  task automatic fill(input logic [26:0] vpn, input sv39_pte_t pte);
    fill_en = 1; fill_vpn = vpn; fill_pte = pte;
    @(posedge clk); #1; fill_en = 0;
  endtask

  task automatic expect_line(input logic [26:0] vpn, input logic [43:0] ppn, input logic r,
                             input logic w, input logic [9:0] key);
    lk_vpn = vpn; #1;
    check(lk_hit && lk_entry.ppn == ppn && lk_entry.r == r && lk_entry.w == w &&
          lk_entry.pkey == key, $sformatf("page %0d", vpn));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sv39_pte_t p;
    rst_n = 0; fill_en = 0; flush = 0; lk_vpn = 0; fill_vpn = 0; fill_pte = '0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    lk_vpn = 87; #1; check(!lk_hit, "empty TLB misses");
    // the figure's rows
    fill(24,  mk_pte(1223, 1, 0, 10'b1111000001));
    fill(110, mk_pte(2089, 1, 1, 10'b0000011111));
    fill(87,  mk_pte(760,  1, 1, 10'b1111000001));
    fill(224, mk_pte(4068, 1, 0, 10'b1111011110));
    expect_line(24,  1223, 1, 0, 10'b1111000001);
    expect_line(110, 2089, 1, 1, 10'b0000011111);
    expect_line(87,  760,  1, 1, 10'b1111000001);
    expect_line(224, 4068, 1, 0, 10'b1111011110);
    // key comes from the raw PTE bits 63:54
    p = mk_pte(1800, 1, 1, 10'b1111011110);
    check(p[63:54] == 10'b1111011110 && p[53:10] == 44'd1800, "PTE layout");
    // refill of a present page rewrites its line (no eviction)
    fill(87, mk_pte(761, 1, 1, 10'h3));
    expect_line(87, 761, 1, 1, 10'h3);
    expect_line(24, 1223, 1, 0, 10'b1111000001);
    // A/D: W needs D, everything needs A
    p = mk_pte(5, 1, 1, 0); p.d = 0;
    fill(24, p);
    expect_line(24, 5, 1, 0, 0);
    p.a = 0;
    fill(24, p);
    expect_line(24, 5, 0, 0, 0);
    // eviction: TLB full (24,110,87,224); round robin victim is line 0 (page 24)
    fill(54, mk_pte(1800, 1, 1, 10'b1111011110));
    lk_vpn = 24; #1; check(!lk_hit, "page 24 evicted");
    expect_line(54, 1800, 1, 1, 10'b1111011110);
    expect_line(110, 2089, 1, 1, 10'b0000011111);
    fill(312, mk_pte(3200, 1, 1, 10'b1111011110));
    lk_vpn = 110; #1; check(!lk_hit, "page 110 evicted next");
    expect_line(312, 3200, 1, 1, 10'b1111011110);
    expect_line(87, 761, 1, 1, 10'h3);
    // flush
    flush = 1; @(posedge clk); #1; flush = 0;
    lk_vpn = 87; #1; check(!lk_hit, "flush clears");
    lk_vpn = 312; #1; check(!lk_hit, "flush clears all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
