// tb_tpm_cmd_parser: checks command decoding.
//
// Sends the TPM_Update_Leaf_Init block printed in the paper (tag 0x00C1, size
// 0x38, ordinal 0, PCR index 5, tree height 10, the printed digest bytes; the
// figure shows 16 of the 20 bytes of each digest, the last 4 are 00 here),
// then random Init and Update_Leaf commands (right-sibling ordinal 1 and
// left-sibling ordinal 2), and commands with a wrong tag, a
// wrong ordinal, a size that does not match the ordinal and an impossible
// size. Blocks arrive with random gaps and the consumer stalls at random;
// every decoded command is compared with the fields that were sent.
module tb_tpm_cmd_parser;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, cmd_valid, cmd_ready = 0;
  logic [31:0] in_data = 0;
  ht_cmd_t cmd;
  int checks = 0, failures = 0;

  tpm_cmd_parser dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer with random stalls
  ht_cmd_t got[$];
  always @(posedge clk) begin
    if (cmd_valid && cmd_ready) got.push_back(cmd);
    cmd_ready <= ($urandom_range(0, 3) != 0);
  end

  task automatic send(bytes_t q);
    while (q.size() % 4 != 0) q.push_back(8'hEE);   // filler of the last block
    for (int i = 0; i < q.size(); i += 4) begin
      @(negedge clk);
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_valid = 1;
      in_data = {q[i], q[i+1], q[i+2], q[i+3]};
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_valid = 0;
    end
  endtask

  function automatic bytes_t header(logic [15:0] tag, logic [31:0] size, logic [31:0] ord);
    bytes_t q;
    push_bits(q, 1024'(tag), 2);
    push_bits(q, 1024'(size), 4);
    push_bits(q, 1024'(ord), 4);
    return q;
  endfunction

  task automatic expect_cmd(ht_cmd_t e, string what);
    int w = 0;
    while (got.size() == 0 && w < 200) begin
      @(negedge clk);
      w++;
    end
    checks++;
    if (got.size() == 0) begin
      failures++;
      $display("FAIL %s: no command", what);
      return;
    end
    begin
      automatic ht_cmd_t g = got.pop_front();
      if (g.op != e.op ||
          (e.op != OP_BAD && g.pcr_idx != e.pcr_idx) ||
          (e.op == OP_INIT && (g.height != e.height || g.old_digest != e.old_digest ||
                               g.new_digest != e.new_digest)) ||
          (e.op == OP_UPDATE && (g.sibling != e.sibling || g.sib_left != e.sib_left))) begin
        failures++;
        $display("FAIL %s: got op %s idx %0d h %0d old %h new %h sib %h", what, g.op.name(),
                 g.pcr_idx, g.height, g.old_digest, g.new_digest, g.sibling);
      end
    end
  endtask

  initial begin
    ht_cmd_t e;
    bytes_t q;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // The printed command block
    q = '{8'h00, 8'hC1, 8'h00, 8'h00, 8'h00, 8'h38, 8'h00, 8'h00, 8'h00, 8'h00,
          8'h00, 8'h00, 8'h00, 8'h05, 8'h00, 8'h0A,
          8'hA3, 8'h34, 8'h68, 8'h8E, 8'h5F, 8'h51, 8'h42, 8'h52,
          8'h3C, 8'h94, 8'h39, 8'hDD, 8'h81, 8'h33, 8'hD8, 8'hE1, 8'h00, 8'h00, 8'h00, 8'h00,
          8'h04, 8'h83, 8'h91, 8'h47, 8'h7F, 8'h19, 8'h40, 8'h03,
          8'hFA, 8'h22, 8'h84, 8'hB6, 8'h5D, 8'h39, 8'h78, 8'hAD, 8'h00, 8'h00, 8'h00, 8'h00};
    checks++;
    if (q.size() != 56) begin
      failures++;
      $display("FAIL printed block is %0d bytes", q.size());
    end
    send(q);
    e = '0;
    e.op = OP_INIT; e.pcr_idx = 5; e.height = 10;
    e.old_digest = 160'hA334688E5F5142523C9439DD8133D8E100000000;
    e.new_digest = 160'h048391477F194003FA2284B65D3978AD00000000;
    expect_cmd(e, "printed Init");
    for (int n = 0; n < 30; n++) begin
      e = '0;
      e.pcr_idx = 32'($urandom_range(0, 30));
      if (n % 2 == 0) begin
        e.op = OP_INIT;
        e.height = 16'($urandom);
        e.old_digest = rand160();
        e.new_digest = rand160();
        q = header(16'h00C1, 56, 0);
        push_bits(q, 1024'(e.pcr_idx), 4);
        push_bits(q, 1024'(e.height), 2);
        push_bits(q, 1024'(e.old_digest), 20);
        push_bits(q, 1024'(e.new_digest), 20);
      end else begin
        e.op = OP_UPDATE;
        e.sibling = rand160();
        e.sib_left = ($urandom_range(0, 1) == 1);
        q = header(16'h00C1, 34, e.sib_left ? 2 : 1);
        push_bits(q, 1024'(e.pcr_idx), 4);
        push_bits(q, 1024'(e.sibling), 20);
      end
      send(q);
      expect_cmd(e, $sformatf("random %0d", n));
    end
    // malformed commands
    e = '0;
    e.op = OP_BAD;
    q = header(16'h00C4, 34, 1);
    push_bits(q, 1024'(5), 4);
    push_bits(q, 1024'(rand160()), 20);
    send(q);
    expect_cmd(e, "bad tag");
    q = header(16'h00C1, 34, 7);
    push_bits(q, 1024'(5), 4);
    push_bits(q, 1024'(rand160()), 20);
    send(q);
    expect_cmd(e, "bad ordinal");
    q = header(16'h00C1, 34, 0);
    push_bits(q, 1024'(5), 4);
    push_bits(q, 1024'(rand160()), 20);
    send(q);
    expect_cmd(e, "size does not match ordinal");
    q = '{8'h00, 8'hC1, 8'h00, 8'h00, 8'h00, 8'h04, 8'h00, 8'h00};
    send(q);
    expect_cmd(e, "impossible size");
    // a good command afterwards is still decoded
    e = '0;
    e.op = OP_UPDATE; e.pcr_idx = 3; e.sibling = rand160();
    q = header(16'h00C1, 34, 1);
    push_bits(q, 1024'(e.pcr_idx), 4);
    push_bits(q, 1024'(e.sibling), 20);
    send(q);
    expect_cmd(e, "resync");
    repeat (20) @(negedge clk);
    checks++;
    if (got.size() != 0) begin
      failures++;
      $display("FAIL %0d extra commands", got.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
