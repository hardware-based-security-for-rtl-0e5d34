// tb_ht_datapath: checks the parallel two-SHA-1 hash-tree datapath.
//
// Loads random old/new leaves, then feeds a chain of random siblings; after
// each level both registers must hold hash(previous || sibling), or
// hash(sibling || previous) when the level's side bit is set, from the
// reference model, i.e. the outputs are fed back through the multiplexers.
// Sides are random, so both orders occur.
// Each level must take SHA1_LATENCY + 2 cycles from the sibling write to
// done (175 for the hashes themselves). A load or sibling write while busy
// must be ignored.
module tb_ht_datapath;
  import tb_ref_pkg::*;

  localparam int unsigned LAT = 175;
  logic clk = 0, rst_n = 0;
  logic load = 0, sibling_we = 0, sibling_left = 0;
  logic [159:0] old_in, new_in, sibling_in;
  logic busy, done;
  logic [159:0] pcr_old, pcr_new;
  int checks = 0, failures = 0;

  ht_datapath #(.SHA1_LATENCY(LAT)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [159:0] h(logic [159:0] a, logic [159:0] s, logic left);
    logic [159:0] sib[$];
    sib.push_back(s);
    return ht_path(a, sib, 64'(left));
  endfunction

  initial begin
    logic [159:0] exp_old, exp_new;
    old_in = '0; new_in = '0; sibling_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      @(negedge clk);
      exp_old = rand160();
      exp_new = rand160();
      old_in = exp_old;
      new_in = exp_new;
      load = 1;
      @(negedge clk);
      load = 0;
      checks++;
      if (pcr_old !== exp_old || pcr_new !== exp_new) begin
        failures++;
        $display("FAIL load");
      end
      for (int lvl = 0; lvl < 4; lvl++) begin
        automatic logic [159:0] s = rand160();
        automatic int cycles = 0;
        automatic logic side = (lvl % 2 == 1) ^ (t == 2);
        sibling_in = s;
        sibling_left = side;
        sibling_we = 1;
        @(negedge clk);
        sibling_we = 0;
        // disturb: load and another sibling while busy
        load = 1;
        old_in = '1;
        sibling_in = '1;
        sibling_left = !side;
        sibling_we = 1;
        @(negedge clk);
        load = 0;
        sibling_we = 0;
        cycles = 1;
        while (!done) begin
          @(negedge clk);
          cycles++;
        end
        exp_old = h(exp_old, s, side);
        exp_new = h(exp_new, s, side);
        checks += 3;
        if (pcr_old !== exp_old) begin
          failures++;
          $display("FAIL level %0d old %h expected %h", lvl, pcr_old, exp_old);
        end
        if (pcr_new !== exp_new) begin
          failures++;
          $display("FAIL level %0d new %h expected %h", lvl, pcr_new, exp_new);
        end
        if (cycles != LAT + 2) begin
          failures++;
          $display("FAIL level %0d took %0d cycles, expected %0d", lvl, cycles, LAT + 2);
        end
        @(negedge clk);
        checks++;
        if (busy) begin
          failures++;
          $display("FAIL busy after done");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
