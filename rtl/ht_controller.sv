// ht_controller: executes TPM_Update_Leaf_Init and TPM_Update_Leaf.
//
// The hash tree that binds the virtual PCRs of index i lives outside the TPM;
// only its root is kept in hardware PCR_i. To change one leaf the host first
// sends Init with the old and new leaf value and the tree height l, then l
// Update_Leaf commands, each carrying the sibling of the current level. The
// controller keeps a down-counter c_i per PCR (Init refused while c_i != 0,
// loaded with l), loads the old/new leaf into the parallel datapath and, per
// Update_Leaf, hashes both running values with the sibling (on the side the
// command names, see the parser) and decrements c_i. When c_i reaches 0 the
// recomputed old root must equal PCR_i: then PCR_i
// takes the new root (status ST_ROOT), otherwise the tree was tampered with
// (ST_ERR_TAMPER) and PCR_i keeps its value. All this follows the paper's two
// algorithms. This design's own choices: the datapath is shared, so an Init is
// also refused while another PCR's update is in progress; Update_Leaf with
// c_i = 0, a zero height or a bad index are answered with an error; an
// intermediate level is answered ST_OK; the first root is written through the
// setup port (the root write of a finishing update wins over a setup write in
// the same cycle).
//
// Interface: cmd_valid/cmd_ready handshake (command taken when both high);
// one rsp_valid pulse per command. rd_idx/rd_value read PCRs for attestation.
// Timing: Init and error responses are registered on the clock edge that
// accepts the command; an Update_Leaf response SHA1_LATENCY+3 edges later
// (sibling register, one datapath level, response register).
module ht_controller
  import vtpm_pkg::*;
#(
  parameter int unsigned NUM_PCR      = vtpm_pkg::PCR_COUNT,
  parameter int unsigned SHA1_LATENCY = 175,
  localparam int unsigned AW          = (NUM_PCR > 1) ? $clog2(NUM_PCR) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cmd_valid,
  input  ht_cmd_t       cmd,
  output logic          cmd_ready,
  output logic          rsp_valid,
  output ht_rsp_t       rsp,
  input  logic          setup_we,
  input  logic [AW-1:0] setup_idx,
  input  logic [159:0]  setup_value,
  input  logic [AW-1:0] rd_idx,
  output logic [159:0]  rd_value
);

  typedef enum logic [0:0] {S_IDLE, S_HASH} state_e;
  state_e state;

  logic [HEIGHT_W-1:0] c [NUM_PCR];   // c_i of the algorithms
  logic                active;        // datapath owned by an update
  logic [AW-1:0]       owner;         // PCR index of that update

  // Datapath
  logic         dp_load, dp_sib_we, dp_busy, dp_done;
  logic [159:0] dp_old, dp_new;

  ht_datapath #(.SHA1_LATENCY(SHA1_LATENCY)) u_dp (
    .clk, .rst_n,
    .load(dp_load), .old_in(cmd.old_digest), .new_in(cmd.new_digest),
    .sibling_we(dp_sib_we), .sibling_in(cmd.sibling), .sibling_left(cmd.sib_left),
    .busy(dp_busy), .done(dp_done), .pcr_old(dp_old), .pcr_new(dp_new));

  // PCR bank
  logic          pcr_we;
  logic [AW-1:0] pcr_waddr, pcr_raddr;
  logic [159:0]  pcr_wdata, pcr_rdata;
  logic          root_write;

  pcr_bank #(.NUM(NUM_PCR), .WIDTH(160), .RESET_VALUE('0)) u_pcr (
    .clk, .rst_n,
    .we(pcr_we), .waddr(pcr_waddr), .wdata(pcr_wdata),
    .raddr_a(pcr_raddr), .rdata_a(pcr_rdata),
    .raddr_b(rd_idx), .rdata_b(rd_value));

  // Command decode
  logic          accept, idx_ok;
  logic [AW-1:0] idx;
  assign cmd_ready = (state == S_IDLE);
  assign accept    = cmd_valid && cmd_ready;
  assign idx_ok    = (cmd.pcr_idx < 32'(NUM_PCR));
  assign idx       = AW'(cmd.pcr_idx);

  logic init_ok, update_ok;
  assign init_ok   = accept && cmd.op == OP_INIT && idx_ok && !active &&
                     c[idx] == '0 && cmd.height != '0;
  assign update_ok = accept && cmd.op == OP_UPDATE && idx_ok && c[idx] != '0;

  assign dp_load   = init_ok;
  assign dp_sib_we = update_ok;

  // Root reached: compare the recomputed old root with PCR_i.
  logic last_level, root_match;
  assign last_level = (state == S_HASH) && dp_done && (c[owner] == HEIGHT_W'(1));
  assign root_match = (dp_old == pcr_rdata);
  assign root_write = last_level && root_match;

  assign pcr_raddr = (state == S_HASH) ? owner : idx;
  assign pcr_we    = root_write || setup_we;
  assign pcr_waddr = root_write ? owner : setup_idx;
  assign pcr_wdata = root_write ? dp_new : setup_value;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      for (int i = 0; i < NUM_PCR; i++) c[i] <= '0;
      active    <= 1'b0;
      owner     <= '0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (accept) begin
          rsp_valid <= 1'b1;
          rsp.pcr   <= idx_ok ? pcr_rdata : '0;
          if (cmd.op == OP_BAD) begin
            rsp.status <= ST_ERR_CMD;
          end else if (!idx_ok) begin
            rsp.status <= ST_ERR_PARAM;
          end else if (cmd.op == OP_INIT) begin
            if (c[idx] != '0 || active) rsp.status <= ST_ERR_BUSY;
            else if (cmd.height == '0)  rsp.status <= ST_ERR_PARAM;
            else begin
              c[idx]     <= cmd.height;     // c_i <- l
              active     <= 1'b1;
              owner      <= idx;
              rsp.status <= ST_OK;
            end
          end else begin                    // OP_UPDATE
            if (c[idx] == '0) rsp.status <= ST_ERR_NOINIT;
            else begin
              rsp_valid <= 1'b0;            // answered after the hash
              state     <= S_HASH;
            end
          end
        end
        S_HASH: if (dp_done) begin
          c[owner]   <= c[owner] - HEIGHT_W'(1);   // c_i <- c_i - 1
          rsp_valid  <= 1'b1;
          state      <= S_IDLE;
          if (last_level) begin
            active     <= 1'b0;
            rsp.status <= root_match ? ST_ROOT : ST_ERR_TAMPER;
            rsp.pcr    <= root_match ? dp_new : pcr_rdata;
          end else begin
            rsp.status <= ST_OK;
            rsp.pcr    <= pcr_rdata;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Only the owner of the datapath can have a running update.
  a_single_owner: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_HASH) |-> active);

endmodule
