// tb_ht_controller: checks TPM_Update_Leaf_Init / TPM_Update_Leaf execution.
//
// A reference hash-tree path (t = SHA-1(t || sibling) per level, or
// SHA-1(sibling || t) on levels whose sibling is the left child; the height-10
// tree uses random sides) gives the root for the old leaf, which is written
// into PCR_i through the setup port.
// Then: a full update of height 4 and of height 10 (every intermediate
// answer ST_OK, the last ST_ROOT with the new root, which must also appear on
// the read port); an update whose old leaf is wrong (ST_ERR_TAMPER, PCR_i
// unchanged); Update_Leaf without Init; Init while an update runs, on the same
// and on another PCR; a bad index, a zero height and a malformed command. Each
// Update_Leaf must be answered SHA1_LATENCY + 3 cycles after the clock edge
// that accepts it, an error on that edge itself.
module tb_ht_controller;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned LAT = 175;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, rsp_valid;
  ht_cmd_t cmd;
  ht_rsp_t rsp;
  logic setup_we = 0;
  logic [4:0] setup_idx = 0, rd_idx = 0;
  logic [159:0] setup_value = 0, rd_value;
  int checks = 0, failures = 0;
  logic [63:0] sides = '0;   // sibling side per level of the current tree

  ht_controller #(.NUM_PCR(24), .SHA1_LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input ht_cmd_t c, output ht_rsp_t r, output int cycles);
    @(negedge clk);
    cmd = c;
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    cycles = 0;
    while (!rsp_valid) begin
      @(negedge clk);
      cycles++;
    end
    r = rsp;
  endtask

  task automatic check_status(ht_rsp_t r, ht_status_e s, string what);
    checks++;
    if (r.status != s) begin
      failures++;
      $display("FAIL %s: status %s expected %s", what, r.status.name(), s.name());
    end
  endtask

  task automatic setup(int idx, logic [159:0] v);
    @(negedge clk);
    setup_we = 1; setup_idx = 5'(idx); setup_value = v;
    @(negedge clk);
    setup_we = 0;
  endtask

  function automatic ht_cmd_t mk_init(int idx, int h, logic [159:0] o, logic [159:0] n);
    ht_cmd_t c = '0;
    c.op = OP_INIT; c.pcr_idx = idx; c.height = 16'(h); c.old_digest = o; c.new_digest = n;
    return c;
  endfunction

  function automatic ht_cmd_t mk_upd(int idx, logic [159:0] s);
    ht_cmd_t c = '0;
    c.op = OP_UPDATE; c.pcr_idx = idx; c.sibling = s;
    return c;
  endfunction

  // Full update of PCR idx; returns the status of the last step.
  task automatic tree_update(int idx, int h, logic [159:0] claimed_old, logic [159:0] new_leaf,
                             logic [159:0] sib[$], output ht_rsp_t last);
    ht_rsp_t r;
    int cyc;
    issue(mk_init(idx, h, claimed_old, new_leaf), r, cyc);
    check_status(r, ST_OK, "Init");
    for (int l = 0; l < h; l++) begin
      begin
        automatic ht_cmd_t u = mk_upd(idx, sib[l]);
        u.sib_left = sides[l];
        issue(u, r, cyc);
      end
      checks++;
      if (cyc != LAT + 3) begin
        failures++;
        $display("FAIL Update_Leaf answered after %0d cycles, expected %0d", cyc, LAT + 3);
      end
      if (l < h - 1) check_status(r, ST_OK, "intermediate level");
      if (l == 1) begin
        // Init on the same and on another PCR while this update runs
        ht_rsp_t rb;
        issue(mk_init(idx, h, claimed_old, new_leaf), rb, cyc);
        check_status(rb, ST_ERR_BUSY, "Init on running PCR");
        issue(mk_init((idx + 1) % 24, h, claimed_old, new_leaf), rb, cyc);
        check_status(rb, ST_ERR_BUSY, "Init on other PCR while datapath busy");
      end
    end
    last = r;
  endtask

  initial begin
    ht_rsp_t r;
    int cyc;
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2; t++) begin
      automatic int h = (t == 0) ? 4 : 10;
      automatic int idx = (t == 0) ? 5 : 17;
      automatic logic [159:0] old_leaf = rand160(), new_leaf = rand160();
      automatic logic [159:0] sib[$];
      automatic logic [159:0] root_old, root_new;
      for (int l = 0; l < h; l++) sib.push_back(rand160());
      sides = (t == 0) ? '0 : {$urandom, $urandom} | 64'h2;
      root_old = ht_path(old_leaf, sib, sides);
      root_new = ht_path(new_leaf, sib, sides);
      setup(idx, root_old);
      tree_update(idx, h, old_leaf, new_leaf, sib, r);
      check_status(r, ST_ROOT, $sformatf("root, height %0d", h));
      rd_idx = 5'(idx);
      #1;
      checks += 2;
      if (r.pcr !== root_new || rd_value !== root_new) begin
        failures++;
        $display("FAIL new root %h / read %h expected %h", r.pcr, rd_value, root_new);
      end
      // second update from the new leaf back to a fresh one
      begin
        automatic logic [159:0] next_leaf = rand160();
        tree_update(idx, h, new_leaf, next_leaf, sib, r);
        check_status(r, ST_ROOT, "second update");
        checks++;
        if (r.pcr !== ht_path(next_leaf, sib, sides)) begin
          failures++;
          $display("FAIL second root");
        end
        root_new = r.pcr;
      end
      // tampered: wrong old leaf
      tree_update(idx, h, rand160(), rand160(), sib, r);
      check_status(r, ST_ERR_TAMPER, "tampered tree");
      #1;
      checks++;
      if (rd_value !== root_new) begin
        failures++;
        $display("FAIL PCR changed by a tampered update");
      end
    end
    issue(mk_upd(3, rand160()), r, cyc);
    check_status(r, ST_ERR_NOINIT, "Update_Leaf without Init");
    checks++;
    if (cyc != 0) begin
      failures++;
      $display("FAIL error answered after %0d cycles", cyc);
    end
    issue(mk_init(24, 4, rand160(), rand160()), r, cyc);
    check_status(r, ST_ERR_PARAM, "PCR index 24");
    issue(mk_init(2, 0, rand160(), rand160()), r, cyc);
    check_status(r, ST_ERR_PARAM, "height 0");
    begin
      automatic ht_cmd_t c = '0;
      c.op = OP_BAD;
      issue(c, r, cyc);
      check_status(r, ST_ERR_CMD, "malformed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
