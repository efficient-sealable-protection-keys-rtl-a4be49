// tb_pkr -- self-checking test of the PKR permission memory.
//
// Fills all 32 rows with random values kept in a reference array, then checks
// the RDPKR row port and the per-key check port for every one of the 1024
// keys against slot arithmetic done here (row = key[9:5], slot bits
// [2*key[4:0]+1 -: 2]). Also checks the worked example of the paper: key
// 1111000001 with slot value 01 in row 30, and that a read in the cycle of a
// write still sees the old row.
module tb_pkr;
  import sealpk_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [PKEY_W-1:0] chk_pkey;
  pk_perm_t          chk_perm;
  logic [4:0]        rd_idx, wr_idx;
  logic [63:0]       rd_row, wr_row;
  logic              wr_en;

  int checks = 0, failures = 0;
  logic [63:0] ref_mem [32];

  pkr dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_row(input logic [4:0] idx, input logic [63:0] val);
    wr_en = 1'b1; wr_idx = idx; wr_row = val;
    @(posedge clk); #1;
    wr_en = 1'b0;
    ref_mem[idx] = val;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_idx = 0; wr_row = 0; rd_idx = 0; chk_pkey = 0;
    @(posedge clk); #1;
    for (int r = 0; r < 32; r++) write_row(5'(r), {$urandom, $urandom});
    // whole-row reads
    for (int r = 0; r < 32; r++) begin
      rd_idx = 5'(r); #1;
      check(rd_row == ref_mem[r], $sformatf("row %0d read", r));
    end
    // every key
    for (int k = 0; k < 1024; k++) begin
      logic [63:0] row;
      int          s;
      chk_pkey = 10'(k); #1;
      row = ref_mem[k / 32];
      s   = k % 32;
      check({chk_perm.rd, chk_perm.wd} == {row[2*s+1], row[2*s]},
            $sformatf("key %0d perm", k));
    end
    // worked example: key 1111000001 -> row 30, slot 1 holds 01
    write_row(5'd30, 64'h0000_0000_0000_0004);
    chk_pkey = 10'b1111000001; #1;
    check(chk_perm.rd == 1'b0 && chk_perm.wd == 1'b1, "example key 1111000001 = 01");
    chk_pkey = 10'b1111000000; #1;
    check({chk_perm.rd, chk_perm.wd} == 2'b00, "neighbour slot 0 untouched");
    // read during write sees old data
    rd_idx = 5'd3;
    wr_en = 1'b1; wr_idx = 5'd3; wr_row = ~ref_mem[3]; #1;
    check(rd_row == ref_mem[3], "old value during write");
    @(posedge clk); #1; wr_en = 1'b0;
    check(rd_row == ~ref_mem[3], "new value after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
