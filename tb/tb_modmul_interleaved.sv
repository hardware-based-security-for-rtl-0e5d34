// tb_modmul_interleaved: checks x*y mod m on the 512-bit prime 2^512-569.
//
// Random operands (some above m, so the input reduction is exercised) and
// corner cases (0, 1, m-1, all ones) compared with the reference model's
// wide multiply and remainder. Every product must take 4*K+4 = 2052 cycles
// from start to done.
module tb_modmul_interleaved;
  import tb_ref_pkg::*;
  localparam int unsigned K = 512;
  localparam logic [K-1:0] M = vtpm_pkg::INC_MODULUS;
  logic clk = 0, rst_n = 0, start = 0;
  logic [K-1:0] x, y, m, p;
  logic busy, done;
  int checks = 0, failures = 0;

  modmul_interleaved #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [K-1:0] a, input logic [K-1:0] b);
    int cycles = 0;
    logic [K-1:0] e;
    @(negedge clk);
    x = a; y = b; m = M; start = 1;
    @(negedge clk);
    start = 0;
    x = '0; y = '0;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    e = mulmod(a, b, M);
    checks += 2;
    if (p !== e) begin
      failures++;
      $display("FAIL %h * %h: got %h expected %h", a, b, p, e);
    end
    if (cycles != 4 * K + 4) begin
      failures++;
      $display("FAIL latency %0d expected %0d", cycles, 4 * K + 4);
    end
  endtask

  initial begin
    x = '0; y = '0; m = M;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run('0, rand512());
    run(rand512(), '0);
    run(K'(1), rand512());
    run(M - 1, M - 1);
    run('1, '1);
    for (int n = 0; n < 8; n++) run(rand512(), rand512());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
