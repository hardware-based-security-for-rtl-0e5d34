// tb_inc_hash_unit: checks the incremental-hash binding engine.
//
// A reference model keeps the 512-bit PCRs (reset value 1) and applies
//   add    : PCR = PCR * H(k||v)                   mod m
//   remove : PCR = PCR / H(k||v)                   mod m
//   update : PCR = PCR / H(i||old) * H(i||new||PCR) mod m
// with H = SHA-512 reduced mod m (m = 2^512-569). The test binds three vTPMs
// to PCR 10, extends one of them twice, removes and re-adds one (the PCR must
// return to the value it had), touches a second PCR to show the PCRs are
// separate, and sends a bad index. Every response and the read port are
// compared with the model. An add must take 81 + 2052 + 5 cycles from the
// accepting clock edge (one SHA-512, one multiplication, sequencing).
module tb_inc_hash_unit;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 512;
  localparam logic [K-1:0] M = INC_MODULUS;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  inc_req_t req;
  logic [1:0] rsp_status;
  logic [K-1:0] rsp_pcr, rd_value;
  logic [4:0] rd_idx = 0;
  logic [K-1:0] model [24];
  int checks = 0, failures = 0;

  inc_hash_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [K-1:0] H24(logic [31:0] t, logic [159:0] v);
    bytes_t q;
    push_bits(q, 1024'(t), 4);
    push_bits(q, 1024'(v), 20);
    return sha512(q) % M;
  endfunction

  function automatic logic [K-1:0] H88(logic [31:0] t, logic [159:0] v, logic [511:0] p);
    bytes_t q;
    push_bits(q, 1024'(t), 4);
    push_bits(q, 1024'(v), 20);
    push_bits(q, 1024'(p), 64);
    return sha512(q) % M;
  endfunction

  task automatic do_req(inc_op_e op, int idx, logic [31:0] tag, logic [159:0] o,
                        logic [159:0] n, output int cycles);
    logic [K-1:0] e;
    @(negedge clk);
    req.op = op; req.pcr_idx = 5'(idx); req.tag = tag; req.old_vpcr = o; req.new_vpcr = n;
    req_valid = 1;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    req = '0;
    cycles = 0;
    while (!rsp_valid) begin
      @(negedge clk);
      cycles++;
    end
    case (op)
      INC_ADD:    e = mulmod(model[idx], H24(tag, n), M);
      INC_REMOVE: e = divmod(model[idx], H24(tag, o), M);
      default:    e = mulmod(divmod(model[idx], H24(tag, o), M), H88(tag, n, model[idx]), M);
    endcase
    model[idx] = e;
    rd_idx = 5'(idx);
    #1;
    checks += 2;
    if (rsp_status != INC_ST_OK || rsp_pcr !== e) begin
      failures++;
      $display("FAIL %s on PCR %0d: status %0d pcr %h expected %h", op.name(), idx, rsp_status,
               rsp_pcr, e);
    end
    if (rd_value !== e) begin
      failures++;
      $display("FAIL read port after %s", op.name());
    end
  endtask

  initial begin
    logic [159:0] v [4];
    logic [K-1:0] saved;
    int cyc;
    req = '0;
    foreach (model[i]) model[i] = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rd_idx = 10;
    #1;
    checks++;
    if (rd_value !== K'(1)) begin
      failures++;
      $display("FAIL reset value");
    end
    for (int k = 1; k <= 3; k++) begin
      v[k] = rand160();
      do_req(INC_ADD, 10, 32'(k), '0, v[k], cyc);
      checks++;
      if (cyc != 81 + 4 * K + 4 + 5) begin
        failures++;
        $display("FAIL add took %0d cycles, expected %0d", cyc, 81 + 4 * K + 4 + 5);
      end
    end
    // extend vTPM 2's PCR 10 twice (Algorithm 3, tag = PCR number)
    for (int t = 0; t < 2; t++) begin
      automatic logic [159:0] nv = rand160();
      do_req(INC_UPDATE, 10, 32'd10, v[2], nv, cyc);
      $display("update took %0d cycles", cyc);
      v[2] = nv;
    end
    // remove vTPM 3 and bind it again: PCR returns to its value
    saved = model[10];
    do_req(INC_REMOVE, 10, 32'd3, v[3], '0, cyc);
    do_req(INC_ADD, 10, 32'd3, '0, v[3], cyc);
    checks++;
    if (model[10] !== saved || rsp_pcr !== saved) begin
      failures++;
      $display("FAIL remove + add did not restore PCR");
    end
    // another PCR is independent
    do_req(INC_ADD, 0, 32'd1, '0, rand160(), cyc);
    rd_idx = 10;
    #1;
    checks++;
    if (rd_value !== model[10]) begin
      failures++;
      $display("FAIL PCR 10 disturbed");
    end
    // bad index
    @(negedge clk);
    req.op = INC_ADD; req.pcr_idx = 5'd30; req_valid = 1;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!rsp_valid || rsp_status != INC_ST_ERR_IDX) begin
      failures++;
      $display("FAIL bad index not refused");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
