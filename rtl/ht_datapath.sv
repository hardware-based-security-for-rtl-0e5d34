// ht_datapath: parallel datapath of the hash-tree update (one tree level).
//
// Three 160-bit registers, PCR_old, sibling_i and PCR_new, feed two SHA-1
// cores that run side by side: one computes hash(PCR_old || sibling_i), the
// other hash(PCR_new || sibling_i). A two-way multiplexer in front of each PCR
// register selects either an external value (the old and new vPCR handed over
// by TPM_Update_Leaf_Init) or the core's result, which is written back so that
// the next level hashes the previous level's output. This structure - the
// three registers, the two multiplexers with feedback, the shared sibling and
// the sibling appended behind the PCR value - follows the paper's datapath
// figure and algorithm; the select and enable signals are this design's.
// So is a side bit stored with the sibling: when set, both cores hash
// sibling_i || PCR instead, as a tree node whose left child is the sibling
// requires.
//
// Interface:
//   load        : PCR_old <= old_in, PCR_new <= new_in (mux on external input)
//   sibling_we  : sibling_i <= sibling_in, side <= sibling_left; both cores
//                 start on the next edge
//   done        : one-cycle pulse; PCR_old/PCR_new now hold PCR'_old/PCR'_new
// Timing: sibling_we at edge 0, the cores start at edge 1 and finish at edge
// 1+SHA1_LATENCY; the registers take the results on the edge after, together
// with done. One level therefore costs SHA1_LATENCY+2 cycles. load and
// sibling_we are ignored while busy.
module ht_datapath #(
  parameter int unsigned SHA1_LATENCY = 175
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [159:0] old_in,
  input  logic [159:0] new_in,
  input  logic         sibling_we,
  input  logic [159:0] sibling_in,
  input  logic         sibling_left,
  output logic         busy,
  output logic         done,
  output logic [159:0] pcr_old,
  output logic [159:0] pcr_new
);

  import vtpm_pkg::*;

  logic [159:0] sibling;
  logic         side_left;
  logic         start_q;
  logic         busy_old, busy_new, done_old, done_new;
  logic [159:0] dig_old, dig_new;
  logic         sel_feedback;

  sha1_core #(.LATENCY(SHA1_LATENCY)) u_sha_old (
    .clk, .rst_n, .start(start_q),
    .block(side_left ? sha1_pad_pair(sibling, pcr_old) : sha1_pad_pair(pcr_old, sibling)),
    .busy(busy_old), .done(done_old), .digest(dig_old));

  sha1_core #(.LATENCY(SHA1_LATENCY)) u_sha_new (
    .clk, .rst_n, .start(start_q),
    .block(side_left ? sha1_pad_pair(sibling, pcr_new) : sha1_pad_pair(pcr_new, sibling)),
    .busy(busy_new), .done(done_new), .digest(dig_new));

  // Both cores are started together and have the same latency.
  assign sel_feedback = done_old & done_new;
  assign busy = start_q | busy_old | busy_new | done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcr_old <= '0;
      pcr_new <= '0;
      sibling   <= '0;
      side_left <= 1'b0;
      start_q   <= 1'b0;
      done    <= 1'b0;
    end else begin
      start_q <= 1'b0;
      done    <= sel_feedback;
      if (sel_feedback) begin
        pcr_old <= dig_old;
        pcr_new <= dig_new;
      end else if (!busy && load) begin
        pcr_old <= old_in;
        pcr_new <= new_in;
      end
      if (!busy && sibling_we) begin
        sibling   <= sibling_in;
        side_left <= sibling_left;
        start_q   <= 1'b1;
      end
    end
  end

  // Both cores must finish in the same cycle.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) done_old == done_new);

endmodule
