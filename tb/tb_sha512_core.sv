// tb_sha512_core: checks the one-block SHA-512 core.
//
// Known-answer test for "abc" (FIPS 180 example), then random messages of the
// two lengths the incremental hash uses - 24 bytes (i || vPCR) and 88 bytes
// (i || vPCR || PCR) - compared with the reference model. Each hash must take
// 81 cycles from start to done, the count in the paper's resource table.
module tb_sha512_core;
  import tb_ref_pkg::*;
  import vtpm_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic [1023:0] block;
  logic busy, done;
  logic [511:0] digest;
  int checks = 0, failures = 0;

  sha512_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [1023:0] blk, input logic [511:0] expect_d, input string what);
    int cycles;
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
    if (cycles != 81) begin
      failures++;
      $display("FAIL %s: latency %0d expected 81", what, cycles);
    end
  endtask

  localparam logic [511:0] ABC = 512'hDDAF35A193617ABACC417349AE20413112E6FA4E89A97EA20A9EEEE64B55D39A2192992A274FC1A836BA3C23A3FEEBBD454D4423643CE80E2A9AC94FA54CA49F;

  initial begin
    block = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run({24'h616263, 8'h80, 864'd0, 128'd24}, ABC, "abc KAT");
    checks++;
    if (sha512(str_bytes("abc")) !== ABC) begin
      failures++;
      $display("FAIL reference model KAT");
    end
    for (int n = 0; n < 6; n++) begin
      automatic logic [31:0]  i = $urandom;
      automatic logic [159:0] v = rand160();
      automatic logic [511:0] p = rand512();
      automatic bytes_t q24, q88;
      push_bits(q24, 1024'(i), 4);
      push_bits(q24, 1024'(v), 20);
      q88 = q24;
      push_bits(q88, 1024'(p), 64);
      run(sha512_pad_24(i, v), sha512(q24), $sformatf("24-byte %0d", n));
      run(sha512_pad_88(i, v, p), sha512(q88), $sformatf("88-byte %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
