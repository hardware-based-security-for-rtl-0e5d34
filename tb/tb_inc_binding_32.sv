// tb_inc_binding_32: incremental-hash binding of a platform with 32 vTPMs,
// run on the whole binding extension at its default parameters (512-bit
// modulus 2^512 - 569, 24 PCRs).
//
// 32 is above the 16 vTPMs from which the incremental update beats a hash
// tree in update time, so this is the size where the scheme is meant to be
// used. The test:
//   1. binds vTPMs 1..32 to PCR 7: 32 add requests, PCR 7 = product of
//      H(k || vPCR_k) mod m. After the last one it must equal that product
//      computed directly. Each add must take 81 + 2052 + 5 clocks.
//   2. extends 8 random vTPMs (TPM_Increment_Hash with i = 7). Each result is
//      compared with the reference model. Each update must take between
//      2138 + 81 clocks and that plus the divider's worst case 4*512 + 4 + 8.
//      The update log (old value, new value, PCR before) is kept, as the
//      hardware TPM's measurement log would be.
//   3. acts as the challenger: starting from the product of the initial
//      factors, it replays the log and must arrive at the PCR read from the
//      design. It also checks that the plain product over the current vPCRs
//      no longer matches, since every update folds the previous PCR into the
//      new factor; this is why verification has to replay all updates.
//   4. unbinds one vTPM and binds it again: the PCR must come back.
// The number of adds, updates, removes and replay steps is counted; one that
// never happened counts as a failure.
module tb_inc_binding_32;
  import vtpm_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N = 32;
  localparam int unsigned U = 8;
  localparam int unsigned PCR = 7;
  localparam int unsigned K = INC_K;
  localparam logic [K-1:0] M = INC_MODULUS;
  localparam int unsigned ADD_CLOCKS = 81 + 4 * K + 4 + 5;

  logic clk = 0, rst_n = 0;
  logic lpc_valid = 0, lpc_ready;
  logic [31:0] lpc_data = 0;
  logic ht_rsp_valid;
  ht_rsp_t ht_rsp;
  logic setup_we = 0;
  logic [4:0] setup_idx = 0, ht_rd_idx = 0, inc_rd_idx = 5'(PCR);
  logic [159:0] setup_value = 0, ht_rd_value;
  logic inc_req_valid = 0, inc_req_ready, inc_rsp_valid;
  inc_req_t inc_req = '0;
  inc_rsp_t inc_rsp;
  logic [511:0] inc_rd_value;

  int checks = 0, failures = 0;
  int n_add = 0, n_update = 0, n_remove = 0, n_replay = 0;

  typedef struct {
    logic [159:0] old_v;
    logic [159:0] new_v;
    logic [K-1:0] pcr_before;
  } log_entry_t;

  vtpm_binding_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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

  function automatic logic [K-1:0] H88(logic [31:0] t, logic [159:0] v, logic [K-1:0] p);
    bytes_t q;
    push_bits(q, 1024'(t), 4);
    push_bits(q, 1024'(v), 20);
    push_bits(q, 1024'(p), 64);
    return sha512(q) % M;
  endfunction

  task automatic request(inc_op_e op, logic [31:0] tag, logic [159:0] o, logic [159:0] n,
                         output inc_rsp_t r, output int cycles);
    @(negedge clk);
    inc_req.op = op; inc_req.pcr_idx = 5'(PCR); inc_req.tag = tag;
    inc_req.old_vpcr = o; inc_req.new_vpcr = n;
    inc_req_valid = 1;
    @(posedge clk);
    while (!inc_req_ready) @(posedge clk);
    @(negedge clk);
    inc_req_valid = 0;
    cycles = 0;
    while (!inc_rsp_valid) begin
      @(negedge clk);
      cycles++;
    end
    r = inc_rsp;
  endtask

  task automatic expect_pcr(inc_rsp_t r, logic [K-1:0] e, string what);
    checks += 2;
    if (r.status != INC_ST_OK || r.pcr !== e) begin
      failures++;
      $display("FAIL %s: status %s pcr %h expected %h", what, r.status.name(), r.pcr, e);
    end
    #1;
    if (inc_rd_value !== e) begin
      failures++;
      $display("FAIL %s: read port %h", what, inc_rd_value);
    end
  endtask

  initial begin
    logic [159:0] v [N + 1];
    logic [K-1:0] model, initial_product, product, saved;
    log_entry_t sml [$];
    int who [U];
    inc_rsp_t r;
    int cyc;

    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. bind the 32 vTPMs
    model = 1;
    for (int k = 1; k <= N; k++) begin
      v[k] = rand160();
      request(INC_ADD, 32'(k), '0, v[k], r, cyc);
      model = mulmod(model, H24(32'(k), v[k]), M);
      expect_pcr(r, model, $sformatf("add vTPM %0d", k));
      n_add++;
      checks++;
      if (cyc != ADD_CLOCKS) begin
        failures++;
        $display("FAIL add took %0d clocks, expected %0d", cyc, ADD_CLOCKS);
      end
    end
    initial_product = 1;
    for (int k = 1; k <= N; k++) initial_product = mulmod(initial_product, H24(32'(k), v[k]), M);
    checks++;
    if (inc_rd_value !== initial_product) begin
      failures++;
      $display("FAIL PCR after binding is not the product of the 32 factors");
    end

    // 2. extends (Algorithm 3: the hashed index is the PCR number)
    for (int u = 0; u < U; u++) begin
      automatic logic [159:0] nv = rand160();
      who[u] = $urandom_range(1, N);
      sml.push_back('{v[who[u]], nv, model});
      request(INC_UPDATE, 32'(PCR), v[who[u]], nv, r, cyc);
      model = mulmod(divmod(model, H24(32'(PCR), v[who[u]]), M), H88(32'(PCR), nv, model), M);
      expect_pcr(r, model, $sformatf("update %0d (vTPM %0d)", u, who[u]));
      n_update++;
      checks++;
      if (cyc < ADD_CLOCKS + 81 || cyc > ADD_CLOCKS + 81 + 4 * K + 4 + 8) begin
        failures++;
        $display("FAIL update took %0d clocks", cyc);
      end
      $display("update %0d took %0d clocks", u, cyc);
      v[who[u]] = nv;
    end

    // 3. challenger: replay the log from the initial product
    product = initial_product;
    foreach (sml[s]) begin
      checks++;
      if (sml[s].pcr_before !== product) begin
        failures++;
        $display("FAIL log entry %0d does not follow from the previous one", s);
      end
      product = mulmod(divmod(product, H24(32'(PCR), sml[s].old_v), M),
                       H88(32'(PCR), sml[s].new_v, product), M);
      n_replay++;
    end
    checks++;
    if (product !== inc_rd_value) begin
      failures++;
      $display("FAIL replayed log gives %h, PCR holds %h", product, inc_rd_value);
    end
    begin
      automatic logic [K-1:0] plain = 1;
      for (int k = 1; k <= N; k++) plain = mulmod(plain, H24(32'(k), v[k]), M);
      checks++;
      if (plain === inc_rd_value) begin
        failures++;
        $display("FAIL PCR equals the plain product: no update history kept");
      end
    end

    // 4. unbind and rebind one vTPM
    saved = model;
    request(INC_REMOVE, 32'(5), v[5], '0, r, cyc);
    model = divmod(model, H24(32'(5), v[5]), M);
    expect_pcr(r, model, "remove vTPM 5");
    n_remove++;
    request(INC_ADD, 32'(5), '0, v[5], r, cyc);
    expect_pcr(r, saved, "rebind vTPM 5");
    n_add++;

    $display("adds %0d, updates %0d, removes %0d, replayed log entries %0d",
             n_add, n_update, n_remove, n_replay);
    checks += 4;
    if (n_add != N + 1) begin failures++; $display("FAIL adds"); end
    if (n_update != U) begin failures++; $display("FAIL updates"); end
    if (n_remove != 1) begin failures++; $display("FAIL removes"); end
    if (n_replay != U) begin failures++; $display("FAIL replay"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
