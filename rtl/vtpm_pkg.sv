// vtpm_pkg: types, constants and padding helpers shared by the virtual-PCR
// binding engines.
//
// The hash-tree scheme binds all virtual PCRs of one index to one hardware PCR
// through a binary hash tree kept outside the TPM; the TPM only walks the path
// from one leaf to the root, one level per TPM_Update_Leaf command. The
// incremental scheme keeps a product of SHA-512 values modulo a prime in a
// 512-bit PCR. This package holds what the blocks of both schemes share: the
// command ordinals and tag of the TPM_Update_Leaf commands (the Init layout
// follows the command block of the paper, the Update_Leaf ordinals are this
// design's choice), the command/response structs passed between parser,
// controller and top, and the functions that build padded one-block SHA-1 and
// SHA-512 messages.
package vtpm_pkg;

  localparam int unsigned DIGEST_W   = 160;  // SHA-1 digest / vPCR width
  localparam int unsigned PCR_COUNT  = 24;   // hardware PCRs (TPM v1.2 count)
  localparam int unsigned PCR_IDX_W  = 5;
  localparam int unsigned HEIGHT_W   = 16;   // tree-height field is 2 bytes
  localparam int unsigned INC_K      = 512;  // incremental-hash modulus width

  // Largest prime below 2^512 (2^512 - 569): modulus of the incremental hash.
  localparam logic [INC_K-1:0] INC_MODULUS = {{(INC_K-16){1'b1}}, 16'hFDC7};

  // Command header values
  localparam logic [15:0] TPM_TAG_RQU_AUTH1 = 16'h00C1;
  localparam logic [31:0] ORD_UPDATE_LEAF_INIT = 32'h0000_0000;
  localparam logic [31:0] ORD_UPDATE_LEAF      = 32'h0000_0001;  // sibling is the right child
  localparam logic [31:0] ORD_UPDATE_LEAF_LEFT = 32'h0000_0002;  // sibling is the left child
  localparam int unsigned INIT_SIZE   = 56;  // bytes
  localparam int unsigned UPDATE_SIZE = 34;  // bytes

  typedef enum logic [1:0] {
    OP_INIT   = 2'd0,   // TPM_Update_Leaf_Init
    OP_UPDATE = 2'd1,   // TPM_Update_Leaf
    OP_BAD    = 2'd2    // malformed command
  } ht_op_e;

  typedef struct packed {
    ht_op_e                  op;
    logic [31:0]             pcr_idx;
    logic [HEIGHT_W-1:0]     height;
    logic [DIGEST_W-1:0]     old_digest;  // Init
    logic [DIGEST_W-1:0]     new_digest;  // Init
    logic [DIGEST_W-1:0]     sibling;     // Update_Leaf
    logic                    sib_left;    // Update_Leaf: hash(sibling || tmp)
  } ht_cmd_t;

  typedef enum logic [2:0] {
    ST_OK         = 3'd0,  // Init accepted or tree level done
    ST_ROOT       = 3'd1,  // root reached, PCR_i replaced by the new root
    ST_ERR_BUSY   = 3'd2,  // Init while an update is running
    ST_ERR_TAMPER = 3'd3,  // recomputed old root differs from PCR_i
    ST_ERR_NOINIT = 3'd4,  // Update_Leaf without a running update
    ST_ERR_PARAM  = 3'd5,  // PCR index or height out of range
    ST_ERR_CMD    = 3'd6   // malformed command
  } ht_status_e;

  typedef struct packed {
    ht_status_e          status;
    logic [DIGEST_W-1:0] pcr;   // PCR_i after the command
  } ht_rsp_t;

  typedef enum logic [1:0] {
    INC_UPDATE = 2'd0,  // TPM_Increment_Hash (Algorithm 3)
    INC_ADD    = 2'd1,  // setup: multiply hash(k||vPCR) into PCR_i
    INC_REMOVE = 2'd2   // setup: divide hash(k||vPCR) out of PCR_i
  } inc_op_e;

  typedef struct packed {
    inc_op_e              op;
    logic [PCR_IDX_W-1:0] pcr_idx;
    logic [31:0]          tag;        // i (update) or k (add/remove)
    logic [DIGEST_W-1:0]  old_vpcr;   // update, remove
    logic [DIGEST_W-1:0]  new_vpcr;   // update, add
  } inc_req_t;

  typedef enum logic [1:0] {
    INC_ST_OK       = 2'd0,
    INC_ST_ERR_ZERO = 2'd1,  // hash is 0 mod m, cannot divide
    INC_ST_ERR_IDX  = 2'd2
  } inc_status_e;

  typedef struct packed {
    inc_status_e      status;
    logic [INC_K-1:0] pcr;
  } inc_rsp_t;

  // One-block SHA-1 message for hash(a || b), a and b 20 bytes each (320 bits).
  function automatic logic [511:0] sha1_pad_pair(logic [159:0] a, logic [159:0] b);
    return {a, b, 1'b1, 127'd0, 64'd320};
  endfunction

  // One-block SHA-512 message for hash(i || v), 24 bytes (192 bits).
  function automatic logic [1023:0] sha512_pad_24(logic [31:0] i, logic [159:0] v);
    return {i, v, 1'b1, 703'd0, 128'd192};
  endfunction

  // One-block SHA-512 message for hash(i || v || p), 88 bytes (704 bits).
  function automatic logic [1023:0] sha512_pad_88(logic [31:0] i, logic [159:0] v,
                                                  logic [511:0] p);
    return {i, v, p, 1'b1, 191'd0, 128'd704};
  endfunction

endpackage
