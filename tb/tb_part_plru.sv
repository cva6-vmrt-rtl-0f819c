// tb_part_plru: checks the partitioned PLRU tree against a recursive
// reference model and against the published eight-entry examples:
// A (no partitions: after replacing entry 0 the next victim is entry 4),
// B (cleared partition bits make their entries unreachable, with one and
// with several entries per partition) and C (locking the entry the tree
// points to moves the victim to its sibling, entry 5). Then random hits,
// replacements, partition masks and locks are compared with the model.
module tb_part_plru;
  localparam int unsigned N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // DUT A: one entry per partition; DUT B: four entries per partition
  logic [N-1:0] hit_a, lock_a, vic_a, hit_b, lock_b, vic_b;
  logic [N-1:0] pen_a;
  logic [1:0]   pen_b;
  logic         repl_a, repl_b, vv_a, vv_b;

  part_plru #(.ENTRIES(N), .PARTS(N)) dut_a (
    .clk_i(clk), .rst_ni(rst_n), .hit_i(hit_a), .repl_i(repl_a), .part_en_i(pen_a),
    .locked_i(lock_a), .victim_o(vic_a), .victim_valid_o(vv_a));
  part_plru #(.ENTRIES(N), .PARTS(2)) dut_b (
    .clk_i(clk), .rst_ni(rst_n), .hit_i(hit_b), .repl_i(repl_b), .part_en_i(pen_b),
    .locked_i(lock_b), .victim_o(vic_b), .victim_valid_o(vv_b));

  // ------------------------------------------------ reference model
  bit m_tree [N-1];
  function automatic bit m_reach(int n, logic [N-1:0] pen_leaf, logic [N-1:0] lk);
    if (n >= N - 1) return pen_leaf[n-(N-1)] && !lk[n-(N-1)];
    return m_reach(2*n+1, pen_leaf, lk) || m_reach(2*n+2, pen_leaf, lk);
  endfunction
  function automatic int m_victim(logic [N-1:0] pen_leaf, logic [N-1:0] lk);
    int n = 0;
    if (!m_reach(0, pen_leaf, lk)) return -1;
    while (n < N - 1) begin
      int pref = m_tree[n] ? 2*n+2 : 2*n+1;
      int oth  = m_tree[n] ? 2*n+1 : 2*n+2;
      n = m_reach(pref, pen_leaf, lk) ? pref : oth;
    end
    return n - (N - 1);
  endfunction
  function automatic void m_touch(int leaf);
    int n = leaf + N - 1;
    while (n > 0) begin
      int p = (n - 1) / 2;
      m_tree[p] = (n == 2*p+1);   // went left -> point right
      n = p;
    end
  endfunction

  function automatic int onehot_idx(logic [N-1:0] v);
    for (int i = 0; i < N; i++) if (v[i]) return i;
    return -1;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step;
    @(posedge clk); #1;
  endtask

  initial begin
    hit_a = 0; lock_a = 0; repl_a = 0; pen_a = '1;
    hit_b = 0; lock_b = 0; repl_b = 0; pen_b = '1;
    foreach (m_tree[i]) m_tree[i] = 0;
    repeat (2) step;
    rst_n = 1;
    step;
    // ---- example A: default tree, replace entry 0, next victim entry 4
    check("A before", onehot_idx(vic_a), 0);
    repl_a = 1; step; repl_a = 0; #1;
    check("A after", onehot_idx(vic_a), 4);
    // ---- example C: lock entry 4 -> victim becomes 5
    lock_a = 8'b0001_0000; #1;
    check("C lock moves victim", onehot_idx(vic_a), 5);
    lock_a = 0; #1;
    // ---- example B2: partitions = entries; only entries 0..3 enabled
    pen_a = 8'b0000_1111; #1;
    check("B2 restricted", onehot_idx(vic_a), 2);   // tree: root->right blocked, node1 bit=1 -> entry 2
    pen_a = 8'b0000_0000; #1;
    check("no reachable entry", int'(vv_a), 0);
    check("no victim", int'(vic_a), 0);
    pen_a = '1;
    // ---- example B1: two partitions of four entries, upper disabled
    pen_b = 2'b01; #1;
    check("B1 before", onehot_idx(vic_b), 0);
    repl_b = 1; step; repl_b = 0; #1;
    check("B1 after", onehot_idx(vic_b), 2);        // upper half blocked
    repl_b = 1; step; repl_b = 0; #1;
    check("B1 third", onehot_idx(vic_b), 1);
    // ---- random comparison (DUT A) against the model
    rst_n = 0; step; rst_n = 1; step;
    foreach (m_tree[i]) m_tree[i] = 0;
    for (int it = 0; it < 3000; it++) begin
      int exp_v;
      pen_a  = N'($urandom);
      lock_a = ($urandom % 4 == 0) ? N'($urandom) & N'($urandom) : '0;
      hit_a  = 0;
      repl_a = 0;
      #1;
      exp_v = m_victim(pen_a, lock_a);
      check("random victim", onehot_idx(vic_a), exp_v);
      check("random valid", int'(vv_a), int'(exp_v >= 0));
      if ($urandom % 2 && exp_v >= 0) begin
        repl_a = 1;
        m_touch(exp_v);
      end else if ($urandom % 2) begin
        int h;
        h = $urandom % N;
        hit_a[h] = 1'b1;
        m_touch(h);
      end
      step;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
