// tb_sha1_core: checks the one-block SHA-1 core.
//
// Known-answer test for "abc" (FIPS 180 example), then random 40-byte
// messages t || s as the hash tree uses them, each compared with the
// reference model. Every hash must take exactly LATENCY = 175 cycles from
// start to done, the per-hash cycle count of the hash-tree timing table.
module tb_sha1_core;
  import tb_ref_pkg::*;
  import vtpm_pkg::*;

  localparam int unsigned LAT = 175;
  logic clk = 0, rst_n = 0, start = 0;
  logic [511:0] block;
  logic busy, done;
  logic [159:0] digest;
  int checks = 0, failures = 0;

  sha1_core #(.LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [511:0] blk, input logic [159:0] expect_d, input string what);
    int cycles = 0;
    @(negedge clk);
    block = blk;
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    checks += 2;
    if (digest !== expect_d) begin
      failures++;
      $display("FAIL %s: digest %h expected %h", what, digest, expect_d);
    end
    if (cycles != LAT) begin
      failures++;
      $display("FAIL %s: latency %0d expected %0d", what, cycles, LAT);
    end
  endtask

  initial begin
    logic [511:0] abc_block;
    block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // "abc" padded: 61 62 63 80 00 .. 00 0x18
    abc_block = {24'h616263, 8'h80, 416'd0, 64'd24};
    run(abc_block, 160'hA9993E364706816ABA3E25717850C26C9CD0D89D, "abc KAT");
    checks++;
    if (sha1(str_bytes("abc")) !== 160'hA9993E364706816ABA3E25717850C26C9CD0D89D) begin
      failures++;
      $display("FAIL reference model KAT");
    end
    for (int n = 0; n < 20; n++) begin
      automatic logic [159:0] a = rand160(), s = rand160();
      automatic bytes_t q;
      push_bits(q, 1024'(a), 20);
      push_bits(q, 1024'(s), 20);
      run(sha1_pad_pair(a, s), sha1(q), $sformatf("random %0d", n));
    end
    // start while busy is ignored: digest must still be that of the first block
    begin
      automatic logic [159:0] a = rand160(), s = rand160();
      automatic bytes_t q;
      push_bits(q, 1024'(a), 20);
      push_bits(q, 1024'(s), 20);
      @(negedge clk);
      block = sha1_pad_pair(a, s);
      start = 1;
      @(negedge clk);
      block = '1;
      repeat (5) @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks++;
      if (digest !== sha1(q)) begin
        failures++;
        $display("FAIL start during busy changed the result");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
