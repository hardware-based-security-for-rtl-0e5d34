// pcr_bank: the TPM's hardware Platform Configuration Registers.
//
// NUM registers of WIDTH bits in the TPM's shielded storage. The hash-tree
// scheme keeps a tree root (160 bits) per index, the incremental scheme a
// 512-bit product modulo a prime. One synchronous write port; two
// combinational read ports (the owning engine's port and an attestation port
// for the TPM's signing logic). Reset loads RESET_VALUE into every entry: 0
// for SHA-1 PCRs as in a TPM, 1 for the incremental scheme's products. The
// paper names the PCRs but not their count or reset value; NUM = 24 follows
// TPM v1.2, the rest is this design's choice. A write to an index >= NUM is
// ignored and reads of such an index return 0.
module pcr_bank #(
  parameter int unsigned     NUM         = 24,
  parameter int unsigned     WIDTH       = 160,
  parameter logic [WIDTH-1:0] RESET_VALUE = '0,
  localparam int unsigned    AW          = (NUM > 1) ? $clog2(NUM) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr_a,
  output logic [WIDTH-1:0] rdata_a,
  input  logic [AW-1:0]    raddr_b,
  output logic [WIDTH-1:0] rdata_b
);

  logic [WIDTH-1:0] pcr [NUM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM; i++) pcr[i] <= RESET_VALUE;
    end else if (we && (32'(waddr) < NUM)) begin
      pcr[waddr] <= wdata;
    end
  end

  assign rdata_a = (32'(raddr_a) < NUM) ? pcr[raddr_a] : '0;
  assign rdata_b = (32'(raddr_b) < NUM) ? pcr[raddr_b] : '0;

endmodule
