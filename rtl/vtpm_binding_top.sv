// vtpm_binding_top: TPM extension that binds virtual PCRs to hardware PCRs.
//
// A platform running many virtual TPMs keeps their PCRs in software, where
// they can be altered unnoticed. This extension of a hardware TPM ties every
// virtual PCR of index i to hardware PCR_i in one of two ways:
//
//  * hash tree: the virtual PCRs of index i (one per vTPM) are the leaves of
//    a binary hash tree held by the host; PCR_i holds the root. Commands
//    arrive as 4-byte blocks from the TPM's bus and go through the command
//    parser to the hash-tree controller, which walks one tree level per
//    TPM_Update_Leaf command with two SHA-1 cores in parallel (old and new
//    path) and replaces the root only if the old path reproduces PCR_i.
//  * incremental hash: PCR_i is a product of SHA-512 factors modulo a 512-bit
//    prime, updated in constant time by dividing out the old factor and
//    multiplying in the new one. The paper defines no bus command for it, so
//    its requests enter through a separate request port.
//
// The bus interface in front of the parser and the TPM's signing engine,
// which reads the PCRs for attestation, are not part of this design: the
// 4-byte command blocks, the hash-tree setup write and both PCR read ports
// are brought out as ports instead.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   lpc_valid/lpc_data/lpc_ready : command blocks, first byte in bits 31:24
//   ht_rsp_valid/ht_rsp          : one response per hash-tree command
//   setup_*                      : write a tree root into PCR_i (setup phase)
//   inc_req_*/inc_rsp_*          : incremental-hash requests and responses
//   ht_rd_*/inc_rd_*             : PCR read ports for attestation
// Timing: see the blocks; an Update_Leaf is answered SHA1_LATENCY+3 cycles
// after its last block.
module vtpm_binding_top
  import vtpm_pkg::*;
#(
  parameter int unsigned NUM_PCR      = vtpm_pkg::PCR_COUNT,
  parameter int unsigned SHA1_LATENCY = 175
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // hash-tree commands from the bus interface
  input  logic                 lpc_valid,
  input  logic [31:0]          lpc_data,
  output logic                 lpc_ready,
  output logic                 ht_rsp_valid,
  output ht_rsp_t              ht_rsp,
  input  logic                 setup_we,
  input  logic [PCR_IDX_W-1:0] setup_idx,
  input  logic [DIGEST_W-1:0]  setup_value,
  input  logic [PCR_IDX_W-1:0] ht_rd_idx,
  output logic [DIGEST_W-1:0]  ht_rd_value,
  // incremental-hash requests
  input  logic                 inc_req_valid,
  input  inc_req_t             inc_req,
  output logic                 inc_req_ready,
  output logic                 inc_rsp_valid,
  output inc_rsp_t             inc_rsp,
  input  logic [PCR_IDX_W-1:0] inc_rd_idx,
  output logic [INC_K-1:0]     inc_rd_value
);

  localparam int unsigned AW = (NUM_PCR > 1) ? $clog2(NUM_PCR) : 1;

  logic    cmd_valid, cmd_ready;
  ht_cmd_t cmd;

  tpm_cmd_parser u_parser (
    .clk, .rst_n,
    .in_valid(lpc_valid), .in_data(lpc_data), .in_ready(lpc_ready),
    .cmd_valid, .cmd, .cmd_ready);

  ht_controller #(.NUM_PCR(NUM_PCR), .SHA1_LATENCY(SHA1_LATENCY)) u_ht (
    .clk, .rst_n,
    .cmd_valid, .cmd, .cmd_ready,
    .rsp_valid(ht_rsp_valid), .rsp(ht_rsp),
    .setup_we, .setup_idx(AW'(setup_idx)), .setup_value,
    .rd_idx(AW'(ht_rd_idx)), .rd_value(ht_rd_value));

  logic [1:0] inc_status;
  inc_hash_unit #(.NUM_PCR(NUM_PCR)) u_inc (
    .clk, .rst_n,
    .req_valid(inc_req_valid), .req(inc_req), .req_ready(inc_req_ready),
    .rsp_valid(inc_rsp_valid), .rsp_status(inc_status), .rsp_pcr(inc_rsp.pcr),
    .rd_idx(AW'(inc_rd_idx)), .rd_value(inc_rd_value));
  assign inc_rsp.status = inc_status_e'(inc_status);

endmodule
