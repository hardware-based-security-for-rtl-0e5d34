// lpc_dma_model: behavioural model of the host side of the TPM's LPC bus.
//
// Not synthesizable and not a bus protocol engine: it reproduces only the
// timing of LPC DMA writes that the hash-tree evaluation is based on. The bus
// is 4 bits wide, so a command byte takes 2 clocks; every 4-byte block costs
// a further 24 clocks of protocol overhead. A block carrying n command bytes
// therefore occupies the bus for 24 + 2n clocks, at the end of which the
// model presents the block on blk_valid/blk_data (first byte in bits 31:24)
// for the TPM to take. A 56-byte Init costs 14*32 = 448 clocks, a 34-byte
// Update_Leaf 8*32 + 28 = 284. bus_cycles counts the clocks spent this way.
module lpc_dma_model (
  input  logic        clk,
  output logic        blk_valid,
  output logic [31:0] blk_data,
  input  logic        blk_ready
);
  typedef byte unsigned bytes_t[$];
  longint bus_cycles = 0;

  initial begin
    blk_valid = 0;
    blk_data = 0;
  end

  task automatic send(bytes_t q);
    for (int i = 0; i < q.size(); i += 4) begin
      automatic int n = (q.size() - i >= 4) ? 4 : q.size() - i;
      automatic logic [31:0] w = '0;
      for (int j = 0; j < n; j++) w[31-8*j -: 8] = q[i+j];
      // 24 + 2n clocks on the bus; the last one is the hand-over clock
      repeat (24 + 2 * n - 1) begin
        @(posedge clk);
        bus_cycles++;
      end
      #1;
      blk_valid = 1;
      blk_data = w;
      @(posedge clk);
      bus_cycles++;
      while (!blk_ready) begin
        @(posedge clk);
        bus_cycles++;
      end
      #1;
      blk_valid = 0;
    end
  endtask
endmodule
