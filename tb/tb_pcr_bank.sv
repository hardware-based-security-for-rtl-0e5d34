// tb_pcr_bank: checks the PCR register file against a shadow array.
//
// Checks the reset value of every entry, then random writes with reads on
// both ports (a write is visible on the cycle after it), and that writes to
// an index past the last PCR change nothing.
module tb_pcr_bank;
  localparam int unsigned NUM = 24, WIDTH = 160;
  localparam logic [WIDTH-1:0] RV = 160'h5;
  logic clk = 0, rst_n = 0, we = 0;
  logic [4:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;
  logic [WIDTH-1:0] shadow [NUM];
  int checks = 0, failures = 0;

  pcr_bank #(.NUM(NUM), .WIDTH(WIDTH), .RESET_VALUE(RV)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr_a = 0; raddr_b = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NUM; i++) begin
      shadow[i] = RV;
      raddr_a = 5'(i);
      raddr_b = 5'(NUM - 1 - i);
      #1;
      checks++;
      if (rdata_a !== RV || rdata_b !== RV) begin
        failures++;
        $display("FAIL reset value at %0d", i);
      end
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 5'($urandom_range(0, 31));
      wdata = {$urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      if (we && waddr < NUM) shadow[waddr] = wdata;
      we = 0;
      raddr_a = 5'($urandom_range(0, NUM - 1));
      raddr_b = 5'($urandom_range(0, NUM - 1));
      #1;
      checks++;
      if (rdata_a !== shadow[raddr_a] || rdata_b !== shadow[raddr_b]) begin
        failures++;
        $display("FAIL read %0d/%0d", raddr_a, raddr_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
