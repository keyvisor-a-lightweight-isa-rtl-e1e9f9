// tb_kv_handle_wrapper -- self-checking testbench of the handle wrapper.
//
// The wrapper runs with the real HSC and IV generator, a memory model and
// the AES-128-GCM model.  Expected handles are computed in the testbench
// from the drawn IV with its own single-block GCM routine (built on the
// model's AES and GF(2^128) functions), so the check covers the handle
// layout, byte order, the policy-as-AAD binding and the HSC entry.
// Scenarios: wrapkey; unwrap for encryption; privilege denial; tampered
// policy (authentication failure); a decrypt-only, process-bound handle with
// a usage counter of 2 (encrypt denied, foreign process denied, two uses,
// then revoked); a self-bound TEE handle (revoke refused to the OS, revoke
// by PMP ID from machine mode); explicit revocation; and filling the HSC
// until sets overflow, predicting every RES_HSC_FULL from the drawn IVs.
module tb_kv_handle_wrapper;
  import kv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  kv_mem_if m ();
  gcm_req_t gq;
  gcm_rsp_t gs;

  logic        start, busy, done;
  hw_op_e      op;
  logic [63:0] rs1, rs2, val;
  kv_ctx_t     ctx;
  kv_res_e     res;
  logic [127:0] ukey, pol_o;
  localparam logic [127:0] VKEY = 128'h2b7e151628aed2a6abf7158809cf4f3c;

  logic iv_next; logic [95:0] iv;
  logic hsc_busy, hsc_lookup, hsc_rsp_valid, hsc_hit, hsc_free, hsc_wr, hsc_wr_valid;
  logic hsc_sweep, hsc_sweep_pmp, hsc_sweep_done;
  logic [0:0] hsc_hit_way, hsc_free_way, hsc_wr_way;
  logic [95:0] hsc_iv;
  hsc_state_t hsc_hit_state, hsc_wr_state;
  hsc_kind_t  hsc_hit_kind, hsc_wr_kind;
  logic [63:0] hsc_sweep_id;
  logic [7:0] hsc_sweep_cnt;
  logic [127:0] valid;

  kv_handle_wrapper dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .op_i(op), .rs1_i(rs1), .rs2_i(rs2),
    .ctx_i(ctx), .visor_key_i(VKEY), .busy_o(busy), .done_o(done), .res_o(res),
    .val_o(val), .user_key_o(ukey), .policy_o(pol_o), .mem(m),
    .gcm_req_o(gq), .gcm_rsp_i(gs), .iv_next_o(iv_next), .iv_i(iv),
    .hsc_busy_i(hsc_busy), .hsc_lookup_o(hsc_lookup), .hsc_iv_o(hsc_iv),
    .hsc_rsp_valid_i(hsc_rsp_valid), .hsc_hit_i(hsc_hit), .hsc_hit_way_i(hsc_hit_way),
    .hsc_hit_state_i(hsc_hit_state), .hsc_free_i(hsc_free), .hsc_free_way_i(hsc_free_way),
    .hsc_wr_o(hsc_wr), .hsc_wr_way_o(hsc_wr_way), .hsc_wr_state_o(hsc_wr_state),
    .hsc_wr_kind_o(hsc_wr_kind), .hsc_wr_valid_o(hsc_wr_valid),
    .hsc_sweep_o(hsc_sweep), .hsc_sweep_id_o(hsc_sweep_id), .hsc_sweep_pmp_o(hsc_sweep_pmp),
    .hsc_sweep_done_i(hsc_sweep_done), .hsc_sweep_cnt_i(hsc_sweep_cnt));

  kv_hsc u_hsc (
    .clk_i(clk), .rst_ni(rst_n), .busy_o(hsc_busy), .lookup_i(hsc_lookup), .iv_i(hsc_iv),
    .rsp_valid_o(hsc_rsp_valid), .hit_o(hsc_hit), .hit_way_o(hsc_hit_way),
    .hit_state_o(hsc_hit_state), .hit_kind_o(hsc_hit_kind), .free_o(hsc_free),
    .free_way_o(hsc_free_way), .wr_i(hsc_wr), .wr_iv_i(hsc_iv), .wr_way_i(hsc_wr_way),
    .wr_state_i(hsc_wr_state), .wr_kind_i(hsc_wr_kind), .wr_valid_i(hsc_wr_valid),
    .sweep_i(hsc_sweep), .sweep_id_i(hsc_sweep_id), .sweep_pmp_i(hsc_sweep_pmp),
    .sweep_done_o(hsc_sweep_done), .sweep_cnt_o(hsc_sweep_cnt), .valid_o(valid));

  kv_iv_gen u_iv (.clk_i(clk), .rst_ni(rst_n), .next_i(iv_next), .iv_o(iv));

  kv_aes_gcm_model #(.LAT(4)) u_gcm (.clk_i(clk), .rst_ni(rst_n), .req_i(gq), .rsp_o(gs));

  kv_mem_model #(.WORDS(4096)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(m.req_valid), .req_ready_o(m.req_ready),
    .req_addr_i(m.req_addr), .req_we_i(m.req_we), .req_wdata_i(m.req_wdata),
    .req_mask_i(m.req_mask), .resp_valid_o(m.resp_valid), .resp_rdata_o(m.resp_rdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // IV drawn by the last wrapkey
  logic [95:0] drawn_iv;
  always @(posedge clk) if (iv_next) drawn_iv <= iv;

  // single-block GCM: 16-byte AAD, 16-byte text
  task automatic gcm1(input logic [127:0] k, input logic [95:0] ivg, input logic [127:0] a,
                      input logic [127:0] p, output logic [127:0] c, output logic [127:0] t);
    logic [127:0] h, j0, s;
    h  = u_gcm.aes128(k, '0);
    j0 = {ivg, 32'd1};
    c  = p ^ u_gcm.aes128(k, {ivg, 32'd2});
    s  = u_gcm.gf128_mul(a, h);
    s  = u_gcm.gf128_mul(s ^ c, h);
    s  = u_gcm.gf128_mul(s ^ {64'd128, 64'd128}, h);
    t  = u_gcm.aes128(k, j0) ^ s;
  endtask

  task automatic run(input hw_op_e o, input logic [63:0] a1, input logic [63:0] a2,
                     input kv_ctx_t c, output kv_res_e r);
    @(negedge clk);
    start = 1; op = o; rs1 = a1; rs2 = a2; ctx = c;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    r = res;
  endtask

  function automatic logic [127:0] mkpol(input bit u, s, mm, enc, dec, bnd, selfb, pmp, ctr);
    logic [127:0] p = '0;
    p[POL_PRIV_U] = u; p[POL_PRIV_S] = s; p[POL_PRIV_M] = mm;
    p[POL_ALG_AESGCM] = 1'b1;
    p[POL_ALLOW_ENC] = enc; p[POL_ALLOW_DEC] = dec;
    p[POL_FEAT_BINDING] = bnd; p[POL_SELFBIND] = selfb; p[POL_PMPMODE] = pmp;
    p[POL_FEAT_USAGECTR] = ctr;
    return p;
  endfunction

  // write a handlegen structure at byte address a
  task automatic put_gen(input logic [63:0] a, input logic [127:0] p, input logic [127:0] k,
                         input logic [63:0] bid, input logic [7:0] cnt);
    u_mem.mem[a/8 + 0] = p[63:0];  u_mem.mem[a/8 + 1] = p[127:64];
    u_mem.mem[a/8 + 2] = k[63:0];  u_mem.mem[a/8 + 3] = k[127:64];
    u_mem.mem[a/8 + 4] = bid;      u_mem.mem[a/8 + 5] = {56'd0, cnt};
  endtask

  kv_ctx_t cu, cs, cm;
  kv_res_e r;
  int nfull, nok, setcnt [64];

  initial begin
    logic [127:0] pa, ka, ct, tg;
    start = 0; op = HW_GEN; rs1 = '0; rs2 = '0; ctx = '0;
    cu = '{priv: PRV_U, satp: 64'h1234, pmp_id: 64'd0};
    cs = '{priv: PRV_S, satp: 64'h0,    pmp_id: 64'd0};
    cm = '{priv: PRV_M, satp: 64'h0,    pmp_id: 64'd0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // ---- handle A: user+supervisor, encrypt and decrypt, unbound
    pa = mkpol(1, 1, 0, 1, 1, 0, 0, 0, 0);
    ka = 128'h00112233445566778899aabbccddeeff;
    put_gen(64'h100, pa, ka, 64'h0, 8'd0);
    run(HW_GEN, 64'h100, 64'h1000, cu, r);
    check(r == RES_OK, "wrapkey A");
    gcm1(VKEY, bswap96(drawn_iv), bswap128(pa), bswap128(ka), ct, tg);
    check({u_mem.mem[16'h1000/8 + 1], u_mem.mem[16'h1000/8]} == pa, "A: policy row");
    check({u_mem.mem[16'h1000/8 + 3], u_mem.mem[16'h1000/8 + 2]} == {32'd0, drawn_iv}, "A: IV row");
    check({u_mem.mem[16'h1000/8 + 5], u_mem.mem[16'h1000/8 + 4]} == bswap128(tg), "A: GCM tag row");
    check({u_mem.mem[16'h1000/8 + 7], u_mem.mem[16'h1000/8 + 6]} == bswap128(ct), "A: encrypted key row");
    check({u_mem.mem[16'h1000/8 + 7], u_mem.mem[16'h1000/8 + 6]} != ka, "A: key not in plaintext");
    check($countones(valid) == 1, "A: one allowlist bit set");

    run(HW_ENC, 64'h1000, 64'h0, cu, r);
    check(r == RES_OK, "A: encrypt by user");
    check(ukey == bswap128(ka), "A: unwrapped user key");
    run(HW_DEC, 64'h1000, 64'h0, cm, r);
    check(r == RES_DENIED, "A: machine mode not permitted");
    check(ukey == '0, "A: key not released on denial");

    // tampered policy: add machine mode
    u_mem.mem[16'h1000/8][POL_PRIV_M] = 1'b1;
    run(HW_DEC, 64'h1000, 64'h0, cm, r);
    check(r == RES_AUTH_FAIL, "A: tampered policy fails authentication");
    u_mem.mem[16'h1000/8][POL_PRIV_M] = 1'b0;
    run(HW_DEC, 64'h1000, 64'h0, cs, r);
    check(r == RES_OK, "A: restored handle works");

    // ---- handle B: decrypt-only, bound to process 0x1234, two uses
    put_gen(64'h140, mkpol(1, 0, 0, 0, 1, 1, 0, 0, 1), 128'hB0B0, 64'h1234, 8'd2);
    run(HW_GEN, 64'h140, 64'h1040, cs, r);
    check(r == RES_OK, "wrapkey B (by the OS for process 0x1234)");
    run(HW_ENC, 64'h1040, 64'h0, cu, r);
    check(r == RES_DENIED, "B: encrypt denied on decrypt-only handle");
    run(HW_DEC, 64'h1040, 64'h0, '{priv: PRV_U, satp: 64'h9999, pmp_id: 64'd0}, r);
    check(r == RES_DENIED, "B: other process denied");
    run(HW_DEC, 64'h1040, 64'h0, cu, r);
    check(r == RES_OK, "B: use 1 of 2");
    run(HW_DEC, 64'h1040, 64'h0, cu, r);
    check(r == RES_OK, "B: use 2 of 2");
    run(HW_DEC, 64'h1040, 64'h0, cu, r);
    check(r == RES_INVALID, "B: revoked after counter reached zero");

    // ---- handle C: self-bound to TEE (PMP ID 7)
    put_gen(64'h180, mkpol(1, 0, 0, 1, 1, 0, 1, 1, 0), 128'hC0C0, 64'hDEAD, 8'd0);
    run(HW_GEN, 64'h180, 64'h1080, '{priv: PRV_U, satp: 64'h55, pmp_id: 64'd7}, r);
    check(r == RES_OK, "wrapkey C inside TEE 7");
    run(HW_ENC, 64'h1080, 64'h0, '{priv: PRV_U, satp: 64'h55, pmp_id: 64'd8}, r);
    check(r == RES_DENIED, "C: other TEE denied");
    run(HW_ENC, 64'h1080, 64'h0, '{priv: PRV_U, satp: 64'h99, pmp_id: 64'd7}, r);
    check(r == RES_OK, "C: own TEE permitted");
    run(HW_REVOKE, 64'h1080, 64'h0, cs, r);
    check(r == RES_DENIED, "C: OS may not revoke a TEE handle");
    run(HW_REVOKE_ID, 64'd7, 64'd1, cs, r);
    check(r == RES_DENIED, "C: OS may not revoke by PMP ID");
    run(HW_REVOKE_ID, 64'd7, 64'd1, cm, r);
    check(r == RES_OK && val == 64'd1, $sformatf("C: monitor revokes by PMP ID (%0d)", val));
    run(HW_ENC, 64'h1080, 64'h0, '{priv: PRV_U, satp: 64'h99, pmp_id: 64'd7}, r);
    check(r == RES_INVALID, "C: gone after revoke by ID");

    // ---- explicit revocation of A by a user process
    run(HW_REVOKE, 64'h1000, 64'h0, cu, r);
    check(r == RES_OK, "A: revoked by user");
    run(HW_ENC, 64'h1000, 64'h0, cu, r);
    check(r == RES_INVALID, "A: invalid after revocation");
    check($countones(valid) == 0, "allowlist empty");

    // ---- fill the HSC: predict overflow from the drawn IVs
    foreach (setcnt[i]) setcnt[i] = 0;
    nfull = 0; nok = 0;
    put_gen(64'h1c0, mkpol(1, 0, 0, 1, 1, 0, 0, 0, 0), 128'h1, 64'h0, 8'd0);
    for (int i = 0; i < 160; i++) begin
      int s;
      run(HW_GEN, 64'h1c0, 64'h2000 + 64'(i) * 64, cu, r);
      s = int'(drawn_iv[5:0]);
      if (setcnt[s] == 2) begin
        check(r == RES_HSC_FULL, $sformatf("set %0d full", s));
        nfull++;
      end else begin
        check(r == RES_OK, $sformatf("set %0d has room", s));
        setcnt[s]++;
        nok++;
      end
    end
    check(nfull > 0, "overflow happened");
    check($countones(valid) == nok, "allowlist counts the created handles");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
