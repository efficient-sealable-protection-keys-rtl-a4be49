// tb_pk_cam -- self-checking test of PK-CAM.
//
// Checks the paper's example entry (key 0x001, range 0x00000103b8 to
// 0x0000010728, both ends included), the hit / key-hit distinction, that an
// insert for a key already cached is ignored, the flush, and then runs random
// inserts and lookups against a reference model of the same replacement rule
// (first free entry, else round robin).
module tb_pk_cam;
  import sealpk_pkg::*;

  localparam int N = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;
  logic [PKEY_W-1:0] q_pkey, ins_pkey;
  logic [39:0] q_pc, ins_start, ins_end;
  logic hit, pkey_hit, ins_en, flush;
  int checks = 0, failures = 0;

  // reference model
  logic        m_v [N];
  logic [9:0]  m_k [N];
  logic [39:0] m_s [N], m_e [N];
  int          m_rr;

  pk_cam #(.ENTRIES(N), .ADDR_W(40)) dut (.*);

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic m_insert(input logic [9:0] k, input logic [39:0] s, input logic [39:0] e);
    int v = -1;
    for (int i = 0; i < N; i++) if (m_v[i] && m_k[i] == k) return;
    for (int i = 0; i < N; i++) if (!m_v[i]) begin v = i; break; end
    if (v < 0) begin v = m_rr; m_rr = (m_rr + 1) % N; end
    m_v[v] = 1; m_k[v] = k; m_s[v] = s; m_e[v] = e;
  endtask

  task automatic insert(input logic [9:0] k, input logic [39:0] s, input logic [39:0] e);
    ins_en = 1; ins_pkey = k; ins_start = s; ins_end = e;
    @(posedge clk); #1; ins_en = 0;
    m_insert(k, s, e);
  endtask

  task automatic lookup(input logic [9:0] k, input logic [39:0] pc, input string tag);
    logic eh = 0, ek = 0;
    for (int i = 0; i < N; i++)
      if (m_v[i] && m_k[i] == k) begin
        ek = 1;
        if (pc >= m_s[i] && pc <= m_e[i]) eh = 1;
      end
    q_pkey = k; q_pc = pc; #1;
    check(hit == eh && pkey_hit == ek,
          $sformatf("%s key=%h pc=%h hit=%b/%b khit=%b/%b", tag, k, pc, hit, eh, pkey_hit, ek));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; ins_en = 0; flush = 0; q_pkey = 0; q_pc = 0; ins_pkey = 0; ins_start = 0; ins_end = 0;
    for (int i = 0; i < N; i++) m_v[i] = 0;
    m_rr = 0;
    #12 rst_n = 1;
    @(posedge clk); #1;
    lookup(10'h001, 40'h103c0, "empty");
    check(!hit && !pkey_hit, "empty CAM misses");
    insert(10'h001, 40'h00000103b8, 40'h0000010728);
    q_pkey = 10'h001; q_pc = 40'h10400; #1;
    check(hit && pkey_hit, "example: PC inside range hits");
    q_pc = 40'h103b8; #1; check(hit, "example: start included");
    q_pc = 40'h10728; #1; check(hit, "example: end included");
    q_pc = 40'h1072c; #1; check(!hit && pkey_hit, "example: PC past end is key hit only");
    q_pc = 40'h103b4; #1; check(!hit && pkey_hit, "example: PC before start is key hit only");
    q_pkey = 10'h002; q_pc = 40'h10400; #1; check(!hit && !pkey_hit, "other key misses");
    // cached range cannot be changed
    insert(10'h001, 40'h0, 40'hff_ffff_ffff);
    q_pkey = 10'h001; q_pc = 40'h20000; #1;
    check(!hit && pkey_hit, "second insert for same key ignored");
    // flush
    flush = 1; @(posedge clk); #1; flush = 0;
    for (int i = 0; i < N; i++) m_v[i] = 0;
    m_rr = 0;
    q_pkey = 10'h001; q_pc = 40'h10400; #1;
    check(!hit && !pkey_hit, "flush clears");
    // random traffic, keys from a small set so that eviction and repeats occur
    for (int t = 0; t < 400; t++) begin
      automatic logic [9:0]  k = 10'($urandom_range(15));
      automatic logic [39:0] s = 40'($urandom_range(1000)) << 4;
      automatic logic [39:0] e = s + 40'($urandom_range(200));
      if ($urandom_range(2) == 0) insert(k, s, e);
      lookup(k, 40'($urandom_range(1200)) << 4, "random");
      if (t == 300) begin
        flush = 1; @(posedge clk); #1; flush = 0;
        for (int i = 0; i < N; i++) m_v[i] = 0;
        m_rr = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
