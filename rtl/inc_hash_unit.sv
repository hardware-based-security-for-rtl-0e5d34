// inc_hash_unit: incremental-hash binding of virtual PCRs (second scheme).
//
// Here hardware PCR_i is a K-bit number modulo a prime m: the product of one
// SHA-512 factor per bound virtual PCR. A vTPM k is bound by multiplying
// hash(k || vPCR) into PCR_i and unbound by dividing it out. An extend of a
// virtual PCR runs TPM_Increment_Hash:
//   h     = PCR_i / hash(i || vPCR_old)            mod m
//   PCR_i = h * hash(i || vPCR_new || PCR_i)       mod m
// where the second hash also covers the old PCR_i, so the value keeps its
// history. The operations and formulas are the paper's. The unit owns one
// SHA-512 core, one interleaved multiplier and one binary divider (one of
// each, as the paper's resource table lists) and uses them in sequence:
//   INC_UPDATE : hash old, divide, hash new||PCR_i, multiply, write back
//   INC_ADD    : hash new, multiply, write back
//   INC_REMOVE : hash old, divide, write back
// This design's choices: the request carries a 32-bit tag that is hashed in
// front of the vPCR - the caller gives i for an update and k for add/remove,
// because the paper writes i in the algorithm and k in the setup formula; the
// tag is 4 bytes big-endian, vPCRs 20 bytes, PCR_i 64 bytes; PCRs reset to 1
// (the empty product); a hash that is 0 mod m is answered INC_ST_ERR_ZERO and
// PCR_i is left alone; m is the parameter MODULUS, 2^512-569 by default.
//
// Interface: req_valid/req_ready (request taken when both high), one
// rsp_valid pulse per request with the new PCR_i; rd_idx/rd_value read PCRs.
// Timing for K = 512, from the accepting edge to rsp_valid: add 81+2052+5
// cycles, update 2*81 + 2052 + division + 8 (3270 to 3320 in all on random
// operands).
module inc_hash_unit
  import vtpm_pkg::*;
#(
  parameter int unsigned      NUM_PCR = vtpm_pkg::PCR_COUNT,
  parameter int unsigned      K       = vtpm_pkg::INC_K,
  parameter logic [K-1:0]     MODULUS = K'(vtpm_pkg::INC_MODULUS),
  localparam int unsigned     AW      = (NUM_PCR > 1) ? $clog2(NUM_PCR) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  input  inc_req_t       req,
  output logic           req_ready,
  output logic           rsp_valid,
  output logic [1:0]     rsp_status,
  output logic [K-1:0]   rsp_pcr,
  input  logic [AW-1:0]  rd_idx,
  output logic [K-1:0]   rd_value
);

  typedef enum logic [2:0] {S_IDLE, S_HASH1, S_DIV, S_HASH2, S_MUL, S_WB} state_e;
  state_e state;

  inc_req_t     r;
  logic [K-1:0] pcr_cur, h1, dq, h2, prod;
  logic         launched;

  // SHA-512 (512-bit digest, reduced to K bits when K < 512)
  logic          sha_start, sha_busy, sha_done;
  logic [1023:0] sha_block;
  logic [511:0]  sha_digest;
  sha512_core u_sha (.clk, .rst_n, .start(sha_start), .block(sha_block),
                     .busy(sha_busy), .done(sha_done), .digest(sha_digest));

  logic         div_start, div_busy, div_done, div_zero;
  logic [K-1:0] div_q;
  moddiv_binary #(.K(K)) u_div (.clk, .rst_n, .start(div_start), .x(pcr_cur), .y(h1),
    .m(MODULUS), .busy(div_busy), .done(div_done), .q(div_q), .div_by_zero(div_zero));

  logic         mul_start, mul_busy, mul_done;
  logic [K-1:0] mul_x, mul_y, mul_p;
  modmul_interleaved #(.K(K)) u_mul (.clk, .rst_n, .start(mul_start), .x(mul_x),
    .y(mul_y), .m(MODULUS), .busy(mul_busy), .done(mul_done), .p(mul_p));

  logic          pcr_we;
  logic [K-1:0]  pcr_rdata;
  pcr_bank #(.NUM(NUM_PCR), .WIDTH(K), .RESET_VALUE(K'(1))) u_pcr (
    .clk, .rst_n, .we(pcr_we), .waddr(r.pcr_idx[AW-1:0]), .wdata(prod),
    .raddr_a(req.pcr_idx[AW-1:0]), .rdata_a(pcr_rdata),
    .raddr_b(rd_idx), .rdata_b(rd_value));

  // The PCR value enters the second hash as 64 bytes.
  logic [511:0] pcr_cur_512;
  assign pcr_cur_512 = 512'(pcr_cur);

  always_comb begin
    if (state == S_HASH2)          sha_block = sha512_pad_88(r.tag, r.new_vpcr, pcr_cur_512);
    else if (r.op == INC_ADD)      sha_block = sha512_pad_24(r.tag, r.new_vpcr);
    else                           sha_block = sha512_pad_24(r.tag, r.old_vpcr);
  end

  assign mul_x     = (r.op == INC_ADD) ? pcr_cur : dq;
  assign mul_y     = (r.op == INC_ADD) ? h1 : h2;
  assign sha_start = (state == S_HASH1 || state == S_HASH2) && !launched;
  assign div_start = (state == S_DIV) && !launched;
  assign mul_start = (state == S_MUL) && !launched;
  assign pcr_we    = (state == S_WB);
  assign req_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      r          <= '0;
      {pcr_cur, h1, dq, h2, prod} <= '0;
      launched   <= 1'b0;
      rsp_valid  <= 1'b0;
      rsp_status <= INC_ST_OK;
      rsp_pcr    <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (sha_start || div_start || mul_start) launched <= 1'b1;
      unique case (state)
        S_IDLE: if (req_valid) begin
          if (32'(req.pcr_idx) >= NUM_PCR || req.op == 2'd3) begin
            rsp_valid  <= 1'b1;
            rsp_status <= INC_ST_ERR_IDX;
            rsp_pcr    <= '0;
          end else begin
            r       <= req;
            pcr_cur <= pcr_rdata;
            state   <= S_HASH1;
          end
        end
        S_HASH1: if (sha_done) begin
          h1       <= K'(sha_digest);
          launched <= 1'b0;
          state    <= (r.op == INC_ADD) ? S_MUL : S_DIV;
        end
        S_DIV: if (div_done) begin
          launched <= 1'b0;
          dq       <= div_q;
          prod     <= div_q;
          if (div_zero) begin
            rsp_valid  <= 1'b1;
            rsp_status <= INC_ST_ERR_ZERO;
            rsp_pcr    <= pcr_cur;
            state      <= S_IDLE;
          end else begin
            state <= (r.op == INC_REMOVE) ? S_WB : S_HASH2;
          end
        end
        S_HASH2: if (sha_done) begin
          h2       <= K'(sha_digest);
          launched <= 1'b0;
          state    <= S_MUL;
        end
        S_MUL: if (mul_done) begin
          prod     <= mul_p;
          launched <= 1'b0;
          state    <= S_WB;
        end
        S_WB: begin
          rsp_valid  <= 1'b1;
          rsp_status <= INC_ST_OK;
          rsp_pcr    <= prod;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
