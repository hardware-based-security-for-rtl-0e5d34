// tb_moddiv_binary: checks x/y mod m on the 512-bit prime 2^512-569.
//
// Random and corner-case operands compared with the reference model
// (x * y^(m-2) mod m); y = 0 and y = m must raise div_by_zero. Prints the
// cycle count of each division and checks that it stays below 4 + 4*K + 2,
// the bound of the binary algorithm (every subtraction leaves an even
// number that the next step halves, so u and v lose a bit every two steps).
module tb_moddiv_binary;
  import tb_ref_pkg::*;
  localparam int unsigned K = 512;
  localparam logic [K-1:0] M = vtpm_pkg::INC_MODULUS;
  logic clk = 0, rst_n = 0, start = 0;
  logic [K-1:0] x, y, m, q;
  logic busy, done, div_by_zero;
  int checks = 0, failures = 0;
  longint total_cycles = 0;
  int ndiv = 0;

  moddiv_binary #(.K(K)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [K-1:0] a, input logic [K-1:0] b, input bit zero);
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
    checks += 2;
    if (zero) begin
      if (!div_by_zero) begin
        failures++;
        $display("FAIL y=%h not flagged", b);
      end
      checks--;
      return;
    end
    e = divmod(a, b, M);
    if (q !== e || div_by_zero) begin
      failures++;
      $display("FAIL %h / %h: got %h expected %h", a, b, q, e);
    end
    if (cycles > 4 + 4 * K + 2) begin
      failures++;
      $display("FAIL %0d cycles", cycles);
    end
    total_cycles += cycles;
    ndiv++;
  endtask

  initial begin
    x = '0; y = '0; m = M;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(rand512(), '0, 1);
    run(rand512(), M, 1);
    run(rand512(), K'(1), 0);
    run('0, rand512(), 0);
    run(M - 1, M - 1, 0);
    run('1, K'(2), 0);
    for (int n = 0; n < 10; n++) run(rand512(), rand512(), 0);
    $display("average division: %0d cycles over %0d divisions", total_cycles / ndiv, ndiv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
