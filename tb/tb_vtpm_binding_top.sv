// tb_vtpm_binding_top: end-to-end test of the binding extension at its
// default parameters (24 PCRs, SHA-1 latency 175, 512-bit modulus).
//
// Hash tree: the host model sends the commands as LPC DMA writes (24 + 2n
// clocks per block of n bytes). For tree heights 2, 10 and 20 - the three
// heights of the paper's timing table - it writes the root of a reference
// tree into the PCR, sends TPM_Update_Leaf_Init and then one TPM_Update_Leaf
// per level, and checks every answer and the final root. The height-10 run
// uses the command block printed in the paper (PCR 5, height 10, the printed
// digest bytes, last 4 bytes of each digest 00). The clocks from the first
// Init block to the root answer are compared with the paper's totals for the
// parallel design (448 + h*284 bus clocks + h*175 SHA-1 clocks). This design
// adds 4 clocks per Update_Leaf (parser register, sibling register, result
// write-back, response register) and the host model one more to see each
// answer, plus 3 clocks for the Init; the check allows exactly 5h + 3.
// Then a tampered tree, an Init during a running update, an Update_Leaf
// without Init and a command with a wrong tag must be refused.
//
// Incremental hash: three vTPMs are bound to PCR 10, one is extended
// (Algorithm 3), one is removed and bound again; the first requests are made
// while the hash tree is busy, so both engines run at once. Results are
// compared with the reference model.
//
// Each mechanism is counted; one that never happened counts as a failure.
module tb_vtpm_binding_top;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LAT = 175;
  localparam logic [511:0] M = INC_MODULUS;

  logic clk = 0, rst_n = 0;
  logic lpc_valid, lpc_ready;
  logic [31:0] lpc_data;
  logic ht_rsp_valid;
  ht_rsp_t ht_rsp;
  logic setup_we = 0;
  logic [4:0] setup_idx = 0, ht_rd_idx = 0, inc_rd_idx = 0;
  logic [159:0] setup_value = 0, ht_rd_value;
  logic inc_req_valid = 0, inc_req_ready, inc_rsp_valid;
  inc_req_t inc_req = '0;
  inc_rsp_t inc_rsp;
  logic [511:0] inc_rd_value;

  int checks = 0, failures = 0;
  longint cycle = 0;
  // mechanism counters
  int n_level = 0, n_root = 0, n_tamper = 0, n_busy = 0, n_noinit = 0, n_badcmd = 0;
  int n_inc_add = 0, n_inc_update = 0, n_inc_remove = 0, n_overlap = 0;

  vtpm_binding_top dut (.*);
  lpc_dma_model host (.clk, .blk_valid(lpc_valid), .blk_data(lpc_data), .blk_ready(lpc_ready));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // both engines busy in the same cycle: a hash-tree update is in progress
  // (between its Init and its last answer) while the incremental unit works
  bit ht_active = 0;
  always @(posedge clk) if (!inc_req_ready && ht_active) n_overlap <= n_overlap + 1;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bytes_t init_cmd(int idx, int h, logic [159:0] o, logic [159:0] n);
    bytes_t q;
    push_bits(q, 1024'(16'h00C1), 2);
    push_bits(q, 1024'(56), 4);
    push_bits(q, 1024'(0), 4);
    push_bits(q, 1024'(idx), 4);
    push_bits(q, 1024'(h), 2);
    push_bits(q, 1024'(o), 20);
    push_bits(q, 1024'(n), 20);
    return q;
  endfunction

  function automatic bytes_t update_cmd(int idx, logic [159:0] s, logic [15:0] tag = 16'h00C1);
    bytes_t q;
    push_bits(q, 1024'(tag), 2);
    push_bits(q, 1024'(34), 4);
    push_bits(q, 1024'(1), 4);
    push_bits(q, 1024'(idx), 4);
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
    case (r.status)
      ST_OK:         n_level++;
      ST_ROOT:       begin n_level++; n_root++; end
      ST_ERR_TAMPER: begin n_level++; n_tamper++; end
      ST_ERR_BUSY:   n_busy++;
      ST_ERR_NOINIT: n_noinit++;
      ST_ERR_CMD:    n_badcmd++;
      default: ;
    endcase
  endtask

  task automatic setup_root(int idx, logic [159:0] v);
    @(negedge clk);
    setup_we = 1; setup_idx = 5'(idx); setup_value = v;
    @(negedge clk);
    setup_we = 0;
  endtask

  // One leaf update through the bus; returns the clocks from the first
  // Init block to the last answer.
  task automatic tree_update(int idx, int h, logic [159:0] claimed_old, logic [159:0] new_leaf,
                             logic [159:0] sib[$], bit busy_probe, output ht_rsp_t last,
                             output longint clocks);
    ht_rsp_t r;
    longint t0;
    @(posedge clk);
    t0 = cycle;
    ht_active = 1;
    host.send(init_cmd(idx, h, claimed_old, new_leaf));
    wait_rsp(r);
    expect_status(r, ST_OK, "Init");
    for (int l = 0; l < h; l++) begin
      host.send(update_cmd(idx, sib[l]));
      wait_rsp(r);
      clocks = cycle - t0;
      if (l < h - 1) expect_status(r, ST_OK, "level");
      if (busy_probe && l == 0) begin
        ht_rsp_t rb;
        host.send(init_cmd((idx + 3) % 24, h, claimed_old, new_leaf));
        wait_rsp(rb);
        expect_status(rb, ST_ERR_BUSY, "Init during a running update");
        t0 += 448 + 2;   // not part of the timed sequence
      end
    end
    last = r;
    ht_active = 0;
  endtask

  // Incremental-hash reference state and request
  logic [511:0] model [24];

  function automatic logic [511:0] H(logic [31:0] t, logic [159:0] v, bit with_pcr,
                                     logic [511:0] p);
    bytes_t q;
    push_bits(q, 1024'(t), 4);
    push_bits(q, 1024'(v), 20);
    if (with_pcr) push_bits(q, 1024'(p), 64);
    return sha512(q) % M;
  endfunction

  task automatic inc_issue(inc_op_e op, int idx, logic [31:0] tag, logic [159:0] o,
                           logic [159:0] n);
    @(negedge clk);
    inc_req.op = op; inc_req.pcr_idx = 5'(idx); inc_req.tag = tag;
    inc_req.old_vpcr = o; inc_req.new_vpcr = n;
    inc_req_valid = 1;
    @(posedge clk);
    while (!inc_req_ready) @(posedge clk);
    @(negedge clk);
    inc_req_valid = 0;
  endtask

  task automatic inc_check(inc_op_e op, int idx, logic [31:0] tag, logic [159:0] o,
                           logic [159:0] n);
    logic [511:0] e;
    while (!inc_rsp_valid) @(negedge clk);
    case (op)
      INC_ADD:    begin e = mulmod(model[idx], H(tag, n, 0, '0), M); n_inc_add++; end
      INC_REMOVE: begin e = divmod(model[idx], H(tag, o, 0, '0), M); n_inc_remove++; end
      default: begin
        e = mulmod(divmod(model[idx], H(tag, o, 0, '0), M), H(tag, n, 1, model[idx]), M);
        n_inc_update++;
      end
    endcase
    model[idx] = e;
    inc_rd_idx = 5'(idx);
    #1;
    checks += 2;
    if (inc_rsp.status != INC_ST_OK || inc_rsp.pcr !== e || inc_rd_value !== e) begin
      failures++;
      $display("FAIL incremental %s: %h expected %h", op.name(), inc_rsp.pcr, e);
    end
    @(negedge clk);
  endtask

  logic [159:0] vt [4];

  // Incremental-hash sequence, started while the hash tree works.
  initial begin
    foreach (model[i]) model[i] = 512'd1;
    wait (rst_n);
    repeat (600) @(negedge clk);
    for (int k = 1; k <= 3; k++) begin
      vt[k] = rand160();
      inc_issue(INC_ADD, 10, 32'(k), '0, vt[k]);
      inc_check(INC_ADD, 10, 32'(k), '0, vt[k]);
    end
    begin
      automatic logic [159:0] nv = rand160();
      inc_issue(INC_UPDATE, 10, 32'd10, vt[2], nv);
      inc_check(INC_UPDATE, 10, 32'd10, vt[2], nv);
      vt[2] = nv;
    end
    begin
      automatic logic [511:0] saved = model[10];
      inc_issue(INC_REMOVE, 10, 32'd3, vt[3], '0);
      inc_check(INC_REMOVE, 10, 32'd3, vt[3], '0);
      inc_issue(INC_ADD, 10, 32'd3, '0, vt[3]);
      inc_check(INC_ADD, 10, 32'd3, '0, vt[3]);
      checks++;
      if (model[10] !== saved) begin
        failures++;
        $display("FAIL remove and add did not restore the PCR");
      end
    end
  end

  initial begin
    ht_rsp_t r;
    longint clocks;
    int heights[3] = '{2, 10, 20};
    int paper_total[3] = '{1366, 5038, 9628};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      automatic int h = heights[t];
      automatic int idx = (h == 10) ? 5 : 6 + t;
      automatic logic [159:0] old_leaf, new_leaf;
      automatic logic [159:0] sib[$];
      automatic logic [159:0] root_old, root_new;
      if (h == 10) begin
        old_leaf = 160'hA334688E5F5142523C9439DD8133D8E100000000;
        new_leaf = 160'h048391477F194003FA2284B65D3978AD00000000;
      end else begin
        old_leaf = rand160();
        new_leaf = rand160();
      end
      for (int l = 0; l < h; l++) sib.push_back(rand160());
      root_old = ht_path(old_leaf, sib);
      root_new = ht_path(new_leaf, sib);
      setup_root(idx, root_old);
      tree_update(idx, h, old_leaf, new_leaf, sib, h == 10, r, clocks);
      expect_status(r, ST_ROOT, $sformatf("root, height %0d", h));
      ht_rd_idx = 5'(idx);
      #1;
      checks += 2;
      if (r.pcr !== root_new || ht_rd_value !== root_new) begin
        failures++;
        $display("FAIL height %0d: root %h expected %h", h, r.pcr, root_new);
      end
      $display("height %2d: %0d clocks from first Init block to root (paper, parallel: %0d)",
               h, clocks, paper_total[t]);
      if (clocks != paper_total[t] + 3 + 5 * h) begin
        failures++;
        $display("FAIL height %0d took %0d clocks, expected %0d", h, clocks,
                 paper_total[t] + 3 + 5 * h);
      end
      // tampered tree on the same PCR: wrong old leaf
      if (h == 2) begin
        tree_update(idx, h, rand160(), rand160(), sib, 0, r, clocks);
        expect_status(r, ST_ERR_TAMPER, "tampered tree");
        #1;
        checks++;
        if (ht_rd_value !== root_new) begin
          failures++;
          $display("FAIL tampered update changed the PCR");
        end
      end
    end
    host.send(update_cmd(4, rand160()));
    wait_rsp(r);
    expect_status(r, ST_ERR_NOINIT, "Update_Leaf without Init");
    host.send(update_cmd(4, rand160(), 16'h00C4));
    wait_rsp(r);
    expect_status(r, ST_ERR_CMD, "wrong tag");
    wait (n_inc_add == 4);
    repeat (5) @(negedge clk);
    $display("mechanisms: tree levels %0d, roots %0d, tamper %0d, busy %0d, no-init %0d, bad command %0d",
             n_level, n_root, n_tamper, n_busy, n_noinit, n_badcmd);
    $display("            incremental add %0d, update %0d, remove %0d, both engines busy %0d cycles",
             n_inc_add, n_inc_update, n_inc_remove, n_overlap);
    if (n_level == 0 || n_root == 0 || n_tamper == 0 || n_busy == 0 || n_noinit == 0 ||
        n_badcmd == 0 || n_inc_add == 0 || n_inc_update == 0 || n_inc_remove == 0 ||
        n_overlap == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
