// tpm_cmd_parser: decodes TPM_Update_Leaf_Init and TPM_Update_Leaf commands.
//
// The host sends each command as a byte string in 4-byte blocks over the
// TPM's bus. The layout of TPM_Update_Leaf_Init is the one printed in the
// paper: authorization tag 0x00C1 (2 bytes), parameter size 56 (4 bytes),
// ordinal 0x00000000 (4 bytes), PCR index (4 bytes), tree height (2 bytes),
// old digest (20 bytes), new digest (20 bytes), all big-endian.
// TPM_Update_Leaf is 34 bytes in the paper; its fields are this design's
// choice: the same 10-byte header, PCR index (4 bytes), sibling (20 bytes).
// Its ninth block carries 2 command bytes and 2 ignored ones. The ordinal
// says on which side of the running value the sibling sits: 0x00000001 for
// a right sibling, hash(tmp || sibling), the order the paper's algorithm
// uses; 0x00000002 for a left sibling, hash(sibling || tmp), which the
// ordinary tree of the paper's setup phase needs on every level where the
// updated path is the right child.
//
// The parser stores the bytes of one command in a 56-byte buffer, reads the
// parameter size once bytes 2..5 are in, and ends the command with the block
// that holds its last byte. Then it checks tag, ordinal and size together and
// presents the command (op OP_BAD when any of them is wrong or the size is
// below 10 or above 1024 bytes; an impossible size ends the command at once).
//
// Interface: in_valid/in_ready for 4-byte blocks, first byte in bits 31:24;
// cmd_valid/cmd_ready for the decoded command. in_ready is low while a decoded
// command waits. Timing: cmd_valid rises on the edge that takes the last block.
module tpm_cmd_parser
  import vtpm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] in_data,
  output logic        in_ready,
  output logic        cmd_valid,
  output ht_cmd_t     cmd,
  input  logic        cmd_ready
);

  localparam int unsigned BUF = INIT_SIZE;

  logic [7:0]  buffer [BUF];
  logic [7:0]  nbuf   [BUF];
  logic [10:0] pos, npos;          // bytes received of this command

  assign in_ready = !cmd_valid;

  // Buffer contents with the incoming block written in.
  always_comb begin
    for (int p = 0; p < BUF; p++) nbuf[p] = buffer[p];
    for (int j = 0; j < 4; j++)
      for (int p = 0; p < BUF; p++)
        if (32'(pos) + j == p) nbuf[p] = in_data[31-8*j -: 8];
    npos = pos + 11'd4;
  end

  logic [31:0] nsize, nord;
  logic [15:0] ntag;
  logic        size_known, size_bad, cmd_end;
  assign ntag       = {nbuf[0], nbuf[1]};
  assign nsize      = {nbuf[2], nbuf[3], nbuf[4], nbuf[5]};
  assign nord       = {nbuf[6], nbuf[7], nbuf[8], nbuf[9]};
  assign size_known = npos >= 11'd6;
  assign size_bad   = size_known && (nsize < 32'd10 || nsize > 32'd1024);
  assign cmd_end    = size_known && (size_bad || 32'(npos) >= nsize);

  function automatic logic [159:0] bytes20(int unsigned at);
    logic [159:0] r;
    for (int k = 0; k < 20; k++) r[159-8*k -: 8] = nbuf[at+k];
    return r;
  endfunction

  ht_cmd_t dec;
  always_comb begin
    dec         = '0;
    dec.op      = OP_BAD;
    dec.pcr_idx = {nbuf[10], nbuf[11], nbuf[12], nbuf[13]};
    if (!size_bad && ntag == TPM_TAG_RQU_AUTH1) begin
      if (nord == ORD_UPDATE_LEAF_INIT && nsize == 32'(INIT_SIZE)) begin
        dec.op         = OP_INIT;
        dec.height     = {nbuf[14], nbuf[15]};
        dec.old_digest = bytes20(16);
        dec.new_digest = bytes20(36);
      end else if ((nord == ORD_UPDATE_LEAF || nord == ORD_UPDATE_LEAF_LEFT) &&
                   nsize == 32'(UPDATE_SIZE)) begin
        dec.op       = OP_UPDATE;
        dec.sibling  = bytes20(14);
        dec.sib_left = (nord == ORD_UPDATE_LEAF_LEFT);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < BUF; p++) buffer[p] <= '0;
      pos       <= '0;
      cmd_valid <= 1'b0;
      cmd       <= '0;
    end else begin
      if (cmd_valid && cmd_ready) cmd_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int p = 0; p < BUF; p++) buffer[p] <= nbuf[p];
        if (cmd_end) begin
          pos       <= '0;
          cmd       <= dec;
          cmd_valid <= 1'b1;
        end else begin
          pos <= npos;
        end
      end
    end
  end

  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
