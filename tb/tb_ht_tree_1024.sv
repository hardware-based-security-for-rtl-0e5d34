// tb_ht_tree_1024: the hash-tree workload of a fully populated platform,
// 1024 vTPMs bound to one hardware PCR through a tree of height 10, run on
// the whole binding extension at its default parameters.
//
// The host model keeps an ordinary binary hash tree over 1024 random leaves
// (node = SHA-1(left child || right child)), writes its root into PCR 10,
// and then changes leaves one after the other: the first and the last leaf
// and random ones in between. For each change it sends TPM_Update_Leaf_Init
// and ten TPM_Update_Leaf commands over the LPC DMA timing model. On every
// level where the path is the right child, the sibling is the left child and
// goes out with the left-sibling ordinal; elsewhere with the right-sibling
// ordinal. Each change must end in ST_ROOT with the host's new root in PCR 10
// and take 5038 + 5*10 + 3 clocks (the paper's 5038 plus this design's
// register stages). After that, two changes must be refused: one that claims
// a wrong old leaf, and one for a leaf on the right half sent with the
// right-sibling ordinal on every level, i.e. hashing in the fixed order of
// the paper's algorithm, which does not match the tree. Both must leave
// PCR 10 untouched. Levels of each side, roots and refusals are counted; a
// kind that never occurred counts as a failure.
module tb_ht_tree_1024;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned H = 10;
  localparam int unsigned LEAVES = 1 << H;
  localparam int unsigned PCR = 10;
  localparam int unsigned UPDATES = 8;
  localparam longint EXPECTED_CLOCKS = 448 + H * 284 + H * 175 + 5 * H + 3;

  logic clk = 0, rst_n = 0;
  logic lpc_valid, lpc_ready;
  logic [31:0] lpc_data;
  logic ht_rsp_valid;
  ht_rsp_t ht_rsp;
  logic setup_we = 0;
  logic [4:0] setup_idx = 0, ht_rd_idx = 5'(PCR), inc_rd_idx = 0;
  logic [159:0] setup_value = 0, ht_rd_value;
  logic inc_req_valid = 0, inc_req_ready, inc_rsp_valid;
  inc_req_t inc_req = '0;
  inc_rsp_t inc_rsp;
  logic [511:0] inc_rd_value;

  int checks = 0, failures = 0;
  longint cycle = 0;
  int n_right = 0, n_left = 0, n_root = 0, n_tamper = 0;

  // node[1] is the root, node[LEAVES + k] is leaf k, node[j] has children
  // node[2j] (left) and node[2j+1] (right).
  logic [159:0] node [2 * LEAVES];

  vtpm_binding_top dut (.*);
  lpc_dma_model host (.clk, .blk_valid(lpc_valid), .blk_data(lpc_data), .blk_ready(lpc_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [159:0] pair(logic [159:0] l, logic [159:0] r);
    bytes_t q;
    push_bits(q, 1024'(l), 20);
    push_bits(q, 1024'(r), 20);
    return sha1(q);
  endfunction

  function automatic bytes_t init_cmd(logic [159:0] o, logic [159:0] n);
    bytes_t q;
    push_bits(q, 1024'(16'h00C1), 2);
    push_bits(q, 1024'(INIT_SIZE), 4);
    push_bits(q, 1024'(ORD_UPDATE_LEAF_INIT), 4);
    push_bits(q, 1024'(PCR), 4);
    push_bits(q, 1024'(H), 2);
    push_bits(q, 1024'(o), 20);
    push_bits(q, 1024'(n), 20);
    return q;
  endfunction

  function automatic bytes_t update_cmd(logic [159:0] s, bit left);
    bytes_t q;
    push_bits(q, 1024'(16'h00C1), 2);
    push_bits(q, 1024'(UPDATE_SIZE), 4);
    push_bits(q, 1024'(left ? ORD_UPDATE_LEAF_LEFT : ORD_UPDATE_LEAF), 4);
    push_bits(q, 1024'(PCR), 4);
    push_bits(q, 1024'(s), 20);
    return q;
  endfunction

  task automatic wait_rsp(output ht_rsp_t r);
    while (!ht_rsp_valid) @(negedge clk);
    r = ht_rsp;
    @(negedge clk);
  endtask

  task automatic expect_status(ht_rsp_t r, ht_status_e s, string what);
    checks++;
    if (r.status != s) begin
      failures++;
      $display("FAIL %s: %s, expected %s", what, r.status.name(), s.name());
    end
  endtask

  // Walks leaf k from claimed_old to new_leaf. With fixed_order every
  // sibling is sent with the right-sibling ordinal.
  task automatic change_leaf(int k, logic [159:0] claimed_old, logic [159:0] new_leaf,
                             bit fixed_order, output ht_rsp_t last, output longint clocks);
    ht_rsp_t r;
    longint t0;
    int j = LEAVES + k;
    @(posedge clk);
    t0 = cycle;
    host.send(init_cmd(claimed_old, new_leaf));
    wait_rsp(r);
    expect_status(r, ST_OK, "Init");
    for (int l = 0; l < H; l++) begin
      automatic bit left = j[0] && !fixed_order;   // path is the right child
      if (left) n_left++;
      else n_right++;
      host.send(update_cmd(node[j ^ 1], left));
      wait_rsp(r);
      if (l < H - 1) expect_status(r, ST_OK, "level");
      j = j >> 1;
    end
    clocks = cycle - t0;
    last = r;
  endtask

  task automatic host_set_leaf(int k, logic [159:0] v);
    int j = LEAVES + k;
    node[j] = v;
    for (j = j >> 1; j >= 1; j = j >> 1) node[j] = pair(node[2 * j], node[2 * j + 1]);
  endtask

  initial begin
    ht_rsp_t r;
    longint clocks;
    int leaf [UPDATES];
    for (int k = 0; k < LEAVES; k++) node[LEAVES + k] = rand160();
    for (int j = LEAVES - 1; j >= 1; j--) node[j] = pair(node[2 * j], node[2 * j + 1]);
    leaf[0] = 0;
    leaf[1] = LEAVES - 1;
    for (int u = 2; u < UPDATES; u++) leaf[u] = $urandom_range(0, LEAVES - 1);

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    setup_we = 1; setup_idx = 5'(PCR); setup_value = node[1];
    @(negedge clk);
    setup_we = 0;

    for (int u = 0; u < UPDATES; u++) begin
      automatic logic [159:0] v = rand160();
      change_leaf(leaf[u], node[LEAVES + leaf[u]], v, 0, r, clocks);
      host_set_leaf(leaf[u], v);
      expect_status(r, ST_ROOT, $sformatf("leaf %0d", leaf[u]));
      if (r.status == ST_ROOT) n_root++;
      checks += 3;
      if (r.pcr !== node[1]) begin
        failures++;
        $display("FAIL leaf %0d: answered root %h, host tree %h", leaf[u], r.pcr, node[1]);
      end
      if (ht_rd_value !== node[1]) begin
        failures++;
        $display("FAIL leaf %0d: PCR %h, host tree %h", leaf[u], ht_rd_value, node[1]);
      end
      if (clocks != EXPECTED_CLOCKS) begin
        failures++;
        $display("FAIL leaf %0d: %0d clocks, expected %0d", leaf[u], clocks, EXPECTED_CLOCKS);
      end
    end

    // wrong old leaf
    change_leaf(37, rand160(), rand160(), 0, r, clocks);
    expect_status(r, ST_ERR_TAMPER, "wrong old leaf");
    if (r.status == ST_ERR_TAMPER) n_tamper++;
    // right-half leaf hashed in the fixed (sibling appended) order
    change_leaf(LEAVES - 2, node[2 * LEAVES - 2], rand160(), 1, r, clocks);
    expect_status(r, ST_ERR_TAMPER, "fixed order on a right-half leaf");
    if (r.status == ST_ERR_TAMPER) n_tamper++;
    checks++;
    if (ht_rd_value !== node[1]) begin
      failures++;
      $display("FAIL refused changes altered the PCR");
    end

    $display("levels with right sibling %0d, with left sibling %0d, roots %0d, refused %0d",
             n_right, n_left, n_root, n_tamper);
    checks += 4;
    if (n_right == 0) begin failures++; $display("FAIL no right-sibling level"); end
    if (n_left == 0)  begin failures++; $display("FAIL no left-sibling level"); end
    if (n_root != UPDATES) begin failures++; $display("FAIL %0d roots", n_root); end
    if (n_tamper != 2) begin failures++; $display("FAIL %0d refusals", n_tamper); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
