// tb_keyvisor_top -- end-to-end testbench of the KeyVisor extension.
//
// Runs keyvisor_top at its default size (2-way x 64-set HSC) behind the
// command/response port, with a memory model and the AES-128-GCM model.
// The testbench plays the core and software: it writes handlegen and I/O
// structures into memory, issues instructions with a caller context, and
// checks rd, the memory contents (handles, ciphertext, IV_data, tags,
// plaintext) against its own byte-level GCM reference.
//
// Mechanisms, each counted; a mechanism that never happens is a failure:
//   no_key, bad_op, wrapkey, encrypt, decrypt, tag_fail, auth_fail,
//   privilege_deny, binding_deny, direction_deny, counter_expiry, revoke,
//   revoke_by_id, hsc_full, mem_stall, resp_backpressure.
// Scenarios follow the paper's use cases: a process-bound decrypt-only
// handle with a usage limit, a TEE-bound handle revoked by its PMP ID from
// machine mode, and filling the handle state cache until a set overflows.
//
// It also measures the latency of encrypt (command accepted to response)
// for 4 B data + 4 B AAD, 200 B + 200 B and a 1500 B TLS record with 13 B
// AAD with memory stalls switched off, and prints them next to the cycle
// counts reported for the FPGA prototype.  Only the 4 B case is checked
// (within 25 % of the prototype's 188 cycles) and that the handle part does
// not depend on the payload; the longer payloads are reported, as this
// design moves one 64-bit word at a time (four round trips per block),
// which bounds its per-block rate rather than the AES-GCM engine.
module tb_keyvisor_top;
  import kv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         key_load;
  logic [127:0] key_in;
  logic         cmd_valid, cmd_ready, resp_valid, resp_ready, busy;
  logic [6:0]   funct;
  logic [63:0]  rs1, rs2, resp_data;
  logic [4:0]   rd, resp_rd;
  kv_ctx_t      ctx;
  logic         mv, mr, mwe, rv;
  logic [63:0]  ma, mwd, mrd;
  logic [7:0]   mm;
  gcm_req_t     gq;
  gcm_rsp_t     gs;
  logic [127:0] hvalid;

  keyvisor_top dut (
    .clk_i(clk), .rst_ni(rst_n), .visor_key_load_i(key_load), .visor_key_i(key_in),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_funct_i(funct),
    .cmd_rs1_i(rs1), .cmd_rs2_i(rs2), .cmd_rd_i(rd), .cmd_ctx_i(ctx),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready), .resp_rd_o(resp_rd),
    .resp_data_o(resp_data), .busy_o(busy),
    .mem_req_valid_o(mv), .mem_req_ready_i(mr), .mem_req_addr_o(ma), .mem_req_we_o(mwe),
    .mem_req_wdata_o(mwd), .mem_req_mask_o(mm), .mem_resp_valid_i(rv), .mem_resp_rdata_i(mrd),
    .gcm_req_o(gq), .gcm_rsp_i(gs), .hsc_valid_o(hvalid));

  kv_mem_model #(.WORDS(8192), .LAT(2)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(mv), .req_ready_o(mr), .req_addr_i(ma),
    .req_we_i(mwe), .req_wdata_i(mwd), .req_mask_i(mm), .resp_valid_o(rv), .resp_rdata_o(mrd));

  kv_aes_gcm_model u_gcm (.clk_i(clk), .rst_ni(rst_n), .req_i(gq), .rsp_o(gs));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------------------------------------------------------- mechanisms
  typedef enum int {M_NO_KEY, M_BAD_OP, M_WRAPKEY, M_ENCRYPT, M_DECRYPT, M_TAG_FAIL,
                    M_AUTH_FAIL, M_PRIV_DENY, M_BIND_DENY, M_DIR_DENY, M_CTR_EXPIRY,
                    M_REVOKE, M_REVOKE_ID, M_HSC_FULL, M_MEM_STALL, M_BACKPRESSURE,
                    M_COUNT} mech_e;
  int mech [M_COUNT];
  string mech_name [M_COUNT] = '{"no_key", "bad_op", "wrapkey", "encrypt", "decrypt",
    "tag_fail", "auth_fail", "privilege_deny", "binding_deny", "direction_deny",
    "counter_expiry", "revoke", "revoke_by_id", "hsc_full", "mem_stall", "resp_backpressure"};
  always @(posedge clk) if (rst_n && mv && !mr) mech[M_MEM_STALL]++;

  // cycles spent in the handle wrapper (verification and unwrapping)
  int unsigned hw_cycles;
  always @(posedge clk) if (dut.u_hw.busy_o) hw_cycles++;

  // ---------------------------------------------------------------- helpers
  function automatic logic [127:0] pack(input byte unsigned b [], input int off);
    logic [127:0] r = '0;
    for (int i = 0; i < 16; i++) if (off + i < b.size()) r[127 - 8*i -: 8] = b[off + i];
    return r;
  endfunction

  task automatic gcm_ref(input logic [127:0] k, input logic [95:0] ivg,
                         input byte unsigned a [], input byte unsigned t [], input bit e,
                         output byte unsigned o [], output logic [127:0] tag);
    logic [127:0] h, s, ks, cb;
    h = u_gcm.aes128(k, '0);
    s = '0;
    o = new[t.size()];
    for (int i = 0; i < a.size(); i += 16) s = u_gcm.gf128_mul(s ^ pack(a, i), h);
    for (int i = 0; i < t.size(); i += 16) begin
      ks = u_gcm.aes128(k, {ivg, 32'(i / 16 + 2)});
      for (int j = 0; j < 16 && i + j < t.size(); j++) o[i + j] = t[i + j] ^ ks[127 - 8*j -: 8];
      cb = e ? pack(o, i) : pack(t, i);
      s = u_gcm.gf128_mul(s ^ cb, h);
    end
    s = u_gcm.gf128_mul(s ^ {64'(a.size()) * 8, 64'(t.size()) * 8}, h);
    tag = u_gcm.aes128(k, {ivg, 32'd1}) ^ s;
  endtask

  function automatic logic [127:0] mkpol(input bit u, s, mm_, enc, dec, bnd, selfb, pmp, ctr);
    logic [127:0] p = '0;
    p[POL_PRIV_U] = u; p[POL_PRIV_S] = s; p[POL_PRIV_M] = mm_;
    p[POL_ALG_AESGCM] = 1'b1;
    p[POL_ALLOW_ENC] = enc; p[POL_ALLOW_DEC] = dec;
    p[POL_FEAT_BINDING] = bnd; p[POL_SELFBIND] = selfb; p[POL_PMPMODE] = pmp;
    p[POL_FEAT_USAGECTR] = ctr;
    return p;
  endfunction

  task automatic put_gen(input logic [63:0] a, input logic [127:0] p, input logic [127:0] k,
                         input logic [63:0] bid, input logic [7:0] cnt);
    u_mem.mem[a/8 + 0] = p[63:0];  u_mem.mem[a/8 + 1] = p[127:64];
    u_mem.mem[a/8 + 2] = k[63:0];  u_mem.mem[a/8 + 3] = k[127:64];
    u_mem.mem[a/8 + 4] = bid;      u_mem.mem[a/8 + 5] = {56'd0, cnt};
  endtask

  // issue one instruction; returns the result code, the value field and the
  // latency from command acceptance to the response
  int unsigned n_cmds;
  task automatic issue(input logic [6:0] f, input logic [63:0] a1, input logic [63:0] a2,
                       input kv_ctx_t c, output kv_res_e r, output logic [55:0] v,
                       output int lat);
    logic [4:0] rdn;
    rdn = 5'($urandom);
    @(negedge clk);
    cmd_valid = 1; funct = f; rs1 = a1; rs2 = a2; rd = rdn; ctx = c;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(negedge clk); lat++; end
    if (n_cmds++ % 3 == 1) begin
      repeat ($urandom_range(1, 3)) @(negedge clk);
      check(resp_valid, "response held under back-pressure");
      mech[M_BACKPRESSURE]++;
    end
    resp_ready = 1;
    check(resp_rd == rdn, "rd register number");
    r = kv_res_e'(resp_data[3:0]);
    v = resp_data[63:8];
    @(negedge clk);
    resp_ready = 0;
  endtask

  localparam logic [63:0] IO = 64'h800, AAD = 64'h2000, DAT = 64'h3000;

  // I/O structure and buffers for one job
  task automatic put_io(input byte unsigned a [], input byte unsigned d [],
                        input logic [95:0] iv_mem, input logic [127:0] tag_mem);
    foreach (a[i]) u_mem.wr_byte(AAD + i, a[i]);
    foreach (d[i]) u_mem.wr_byte(DAT + i, d[i]);
    u_mem.mem[IO/8 + 0] = DAT;  u_mem.mem[IO/8 + 1] = 64'(d.size());
    u_mem.mem[IO/8 + 2] = AAD;  u_mem.mem[IO/8 + 3] = 64'(a.size());
    u_mem.mem[IO/8 + 4] = iv_mem[63:0];
    u_mem.mem[IO/8 + 5] = {32'd0, iv_mem[95:64]};
    {u_mem.mem[IO/8 + 7], u_mem.mem[IO/8 + 6]} = tag_mem;
  endtask

  function automatic bit buf_is(input logic [63:0] base, input byte unsigned d []);
    foreach (d[i]) if (u_mem.rd_byte(base + i) != d[i]) return 0;
    return 1;
  endfunction

  // every IV_data handed out by encrypt, to check that none repeats
  logic [95:0] seen_iv [$];
  task automatic note_iv(input logic [95:0] v);
    foreach (seen_iv[i]) check(seen_iv[i] != v, "IV_data never reused");
    seen_iv.push_back(v);
  endtask

  function automatic logic [95:0] io_iv();
    return {u_mem.mem[IO/8 + 5][31:0], u_mem.mem[IO/8 + 4]};
  endfunction
  function automatic logic [127:0] io_tag();
    return {u_mem.mem[IO/8 + 7], u_mem.mem[IO/8 + 6]};
  endfunction

  // encrypt through handle h and check everything; returns the latency
  task automatic enc_job(input logic [63:0] h, input logic [127:0] kmem, input kv_ctx_t c,
                         input int alen, input int dlen, output int lat);
    byte unsigned a [], p [], o [];
    logic [127:0] tg; kv_res_e r; logic [55:0] v;
    a = new[alen]; p = new[dlen];
    foreach (a[i]) a[i] = 8'($urandom);
    foreach (p[i]) p[i] = 8'($urandom);
    put_io(a, p, '0, '0);
    issue(FN_ENCRYPT, h, IO, c, r, v, lat);
    check(r == RES_OK, $sformatf("encrypt %0d/%0d", dlen, alen));
    note_iv(io_iv());
    gcm_ref(bswap128(kmem), bswap96(io_iv()), a, p, 1'b1, o, tg);
    check(buf_is(DAT, o), "ciphertext in place");
    check(bswap128(io_tag()) == tg, "tag in I/O structure");
    if (r == RES_OK) mech[M_ENCRYPT]++;
    // decrypt back
    issue(FN_DECRYPT, h, IO, c, r, v, lat);
    check(r == RES_OK && buf_is(DAT, p), "decrypt restores plaintext");
    if (r == RES_OK) mech[M_DECRYPT]++;
  endtask

  kv_ctx_t cu, cs, cm;

  initial begin
    kv_res_e r; logic [55:0] v; int lat;
    logic [127:0] pa, ka, kb, kc, kp, tg;
    byte unsigned a [], p [], o [];
    foreach (mech[i]) mech[i] = 0;
    n_cmds = 0;
    key_load = 0; key_in = '0; cmd_valid = 0; funct = '0; rs1 = '0; rs2 = '0; rd = '0;
    ctx = '0; resp_ready = 0;
    cu = '{priv: PRV_U, satp: 64'h77, pmp_id: 64'd0};
    cs = '{priv: PRV_S, satp: 64'h0,  pmp_id: 64'd0};
    cm = '{priv: PRV_M, satp: 64'h0,  pmp_id: 64'd0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    // ---- no visor key yet
    pa = mkpol(1, 1, 0, 1, 1, 0, 0, 0, 0);
    ka = 128'h0f0e0d0c0b0a09080706050403020100;
    put_gen(64'h100, pa, ka, '0, 8'd0);
    issue(FN_WRAPKEY, 64'h100, 64'h1000, cu, r, v, lat);
    check(r == RES_NO_KEY, "no visor key yet");
    if (r == RES_NO_KEY) mech[M_NO_KEY]++;
    check(hvalid == '0, "nothing created");

    @(negedge clk); key_load = 1; key_in = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    @(negedge clk); key_load = 0; key_in = '0;

    issue(7'd9, '0, '0, cu, r, v, lat);
    check(r == RES_BAD_OP, "undefined function code");
    if (r == RES_BAD_OP) mech[M_BAD_OP]++;

    // ---- handle A: general purpose
    issue(FN_WRAPKEY, 64'h100, 64'h1000, cu, r, v, lat);
    check(r == RES_OK, "wrapkey A");
    if (r == RES_OK) mech[M_WRAPKEY]++;
    check({u_mem.mem[16'h1000/8 + 7], u_mem.mem[16'h1000/8 + 6]} != ka, "key not stored in clear");
    enc_job(64'h1000, ka, cu, 11, 37, lat);
    enc_job(64'h1000, ka, cs, 0, 64, lat);

    // tag failure
    a = new[5]; p = new[20];
    foreach (a[i]) a[i] = 8'(i); foreach (p[i]) p[i] = 8'(3 * i);
    put_io(a, p, '0, '0);
    issue(FN_ENCRYPT, 64'h1000, IO, cu, r, v, lat);
    note_iv(io_iv());
    u_mem.mem[IO/8 + 7][9] = ~u_mem.mem[IO/8 + 7][9];
    issue(FN_DECRYPT, 64'h1000, IO, cu, r, v, lat);
    check(r == RES_TAG_FAIL, "corrupted tag detected");
    if (r == RES_TAG_FAIL) mech[M_TAG_FAIL]++;

    // privilege
    issue(FN_ENCRYPT, 64'h1000, IO, cm, r, v, lat);
    check(r == RES_DENIED, "machine mode not in policy");
    if (r == RES_DENIED) mech[M_PRIV_DENY]++;

    // tampered handle
    u_mem.mem[16'h1000/8][POL_PRIV_M] = 1'b1;
    issue(FN_ENCRYPT, 64'h1000, IO, cm, r, v, lat);
    check(r == RES_AUTH_FAIL, "tampered policy rejected");
    if (r == RES_AUTH_FAIL) mech[M_AUTH_FAIL]++;
    u_mem.mem[16'h1000/8][POL_PRIV_M] = 1'b0;

    // ---- handle B: decrypt-only, bound to process 0x77, two uses (made by the OS)
    kb = 128'hfeffe9928665731c6d6a8f9467308308;
    put_gen(64'h140, mkpol(1, 0, 0, 0, 1, 1, 0, 0, 1), kb, 64'h77, 8'd2);
    issue(FN_WRAPKEY, 64'h140, 64'h1040, cs, r, v, lat);
    check(r == RES_OK, "wrapkey B");
    if (r == RES_OK) mech[M_WRAPKEY]++;
    issue(FN_ENCRYPT, 64'h1040, IO, cu, r, v, lat);
    check(r == RES_DENIED, "encrypt on a decrypt-only handle");
    if (r == RES_DENIED) mech[M_DIR_DENY]++;
    // ciphertext prepared by a remote party holding kb
    a = new[13]; p = new[48];
    foreach (a[i]) a[i] = 8'($urandom); foreach (p[i]) p[i] = 8'($urandom);
    gcm_ref(bswap128(kb), 96'hcafebabefacedbaddecaf888, a, p, 1'b1, o, tg);
    put_io(a, o, bswap96(96'hcafebabefacedbaddecaf888), bswap128(tg));
    issue(FN_DECRYPT, 64'h1040, IO, '{priv: PRV_U, satp: 64'h78, pmp_id: 64'd0}, r, v, lat);
    check(r == RES_DENIED, "other process denied");
    if (r == RES_DENIED) mech[M_BIND_DENY]++;
    check(buf_is(DAT, o), "nothing decrypted for the other process");
    for (int u = 0; u < 2; u++) begin
      put_io(a, o, bswap96(96'hcafebabefacedbaddecaf888), bswap128(tg));
      issue(FN_DECRYPT, 64'h1040, IO, cu, r, v, lat);
      check(r == RES_OK && buf_is(DAT, p), $sformatf("bound decrypt use %0d", u + 1));
      if (r == RES_OK) mech[M_DECRYPT]++;
    end
    put_io(a, o, bswap96(96'hcafebabefacedbaddecaf888), bswap128(tg));
    issue(FN_DECRYPT, 64'h1040, IO, cu, r, v, lat);
    check(r == RES_INVALID, "usage counter exhausted");
    if (r == RES_INVALID) mech[M_CTR_EXPIRY]++;

    // ---- explicit revocation of A
    issue(FN_REVOKE, 64'h1000, '0, cu, r, v, lat);
    check(r == RES_OK, "revoke A");
    if (r == RES_OK) mech[M_REVOKE]++;
    issue(FN_ENCRYPT, 64'h1000, IO, cu, r, v, lat);
    check(r == RES_INVALID, "A unusable after revocation");

    // ---- handle C: created inside TEE 5, bound to it; revoked by PMP ID
    kc = 128'h1;
    put_gen(64'h180, mkpol(1, 0, 0, 1, 1, 0, 1, 1, 0), kc, '0, 8'd0);
    issue(FN_WRAPKEY, 64'h180, 64'h1080, '{priv: PRV_U, satp: 64'h5, pmp_id: 64'd5}, r, v, lat);
    check(r == RES_OK, "wrapkey C");
    if (r == RES_OK) mech[M_WRAPKEY]++;
    enc_job(64'h1080, kc, '{priv: PRV_U, satp: 64'h9, pmp_id: 64'd5}, 3, 3, lat);
    issue(FN_REVOKE_ID, 64'd5, 64'd1, cs, r, v, lat);
    check(r == RES_DENIED, "OS cannot revoke TEE handles");
    issue(FN_REVOKE_ID, 64'd5, 64'd1, cm, r, v, lat);
    check(r == RES_OK && v == 56'd1, $sformatf("monitor revokes TEE 5 handles (%0d)", v));
    if (r == RES_OK && v == 56'd1) mech[M_REVOKE_ID]++;
    issue(FN_ENCRYPT, 64'h1080, IO, '{priv: PRV_U, satp: 64'h9, pmp_id: 64'd5}, r, v, lat);
    check(r == RES_INVALID, "C unusable after revoke by ID");
    check(hvalid == '0, "allowlist empty");

    // ---- latency of encrypt (no memory stalls)
    begin
      int l4, l200, l1500, lh;
      u_mem.stall_en = 0;
      kp = 128'h000102030405060708090a0b0c0d0e0f;
      put_gen(64'h1c0, mkpol(1, 0, 0, 1, 1, 0, 0, 0, 0), kp, '0, 8'd0);
      issue(FN_WRAPKEY, 64'h1c0, 64'h10c0, cu, r, v, lat);
      check(r == RES_OK, "wrapkey P");
      if (r == RES_OK) mech[M_WRAPKEY]++;
      $display("PERF wrapkey: %0d cycles", lat);
      enc_job(64'h10c0, kp, cu, 4, 4, l4);    // warm-up round trip, not timed
      begin
        byte unsigned aa [], dd [];
        int lens [3][2] = '{'{4, 4}, '{200, 200}, '{13, 1500}};
        int got [3], hwc [3];
        for (int j = 0; j < 3; j++) begin
          aa = new[lens[j][0]]; dd = new[lens[j][1]];
          foreach (aa[i]) aa[i] = 8'($urandom); foreach (dd[i]) dd[i] = 8'($urandom);
          put_io(aa, dd, '0, '0);
          hw_cycles = 0;
          issue(FN_ENCRYPT, 64'h10c0, IO, cu, r, v, got[j]);
          hwc[j] = int'(hw_cycles);
          note_iv(io_iv());
          gcm_ref(bswap128(kp), bswap96(io_iv()), aa, dd, 1'b1, o, tg);
          check(r == RES_OK && buf_is(DAT, o) && bswap128(io_tag()) == tg,
                $sformatf("timed encrypt %0d/%0d", lens[j][1], lens[j][0]));
        end
        l4 = got[0]; l200 = got[1]; l1500 = got[2];
        $display("PERF handle verification and unwrapping: %0d cycles (prototype overhead: 93)", hwc[0]);
        check(hwc[0] == hwc[1] && hwc[1] == hwc[2], "handle part independent of the payload");
      end
      // handle part alone: encrypt with empty data and AAD
      a = new[0]; p = new[0];
      put_io(a, p, '0, '0);
      issue(FN_ENCRYPT, 64'h10c0, IO, cu, r, v, lh);
      $display("PERF encrypt   4 B data +   4 B AAD: %0d cycles (prototype: 188)", l4);
      $display("PERF encrypt 200 B data + 200 B AAD: %0d cycles (prototype: 421)", l200);
      $display("PERF encrypt 1500 B data + 13 B AAD: %0d cycles (prototype: 1439)", l1500);
      $display("PERF encrypt 0 B data + 0 B AAD (handle check + tag): %0d cycles", lh);
      check(l4 < l200 && l200 < l1500, "latency grows with the data");
      // the small-payload case is dominated by the handle and a few blocks;
      // it must be in the range of the prototype's 188 cycles
      check(l4 > 188 * 3 / 4 && l4 < 188 * 5 / 4, "4 B / 4 B latency within 25 % of 188 cycles");
      u_mem.stall_en = 1;
    end
    issue(FN_REVOKE, 64'h10c0, '0, cu, r, v, lat);
    check(r == RES_OK, "revoke P");

    // ---- fill the HSC until a set overflows
    begin
      int nok, nfull;
      nok = 0; nfull = 0;
      put_gen(64'h1c0, mkpol(1, 0, 0, 1, 1, 0, 0, 0, 0), 128'h5, '0, 8'd0);
      for (int i = 0; i < 140 && nfull < 3; i++) begin
        issue(FN_WRAPKEY, 64'h1c0, 64'h4000 + 64'(i) * 64, cu, r, v, lat);
        if (r == RES_OK) nok++;
        else if (r == RES_HSC_FULL) nfull++;
        else check(0, "unexpected wrapkey result while filling");
      end
      check(nfull > 0, "HSC overflow reported");
      if (nfull > 0) mech[M_HSC_FULL]++;
      check($countones(hvalid) == nok && nok <= 128, $sformatf("allowlist holds %0d handles", nok));
      $display("HSC: %0d handles created before %0d overflows", nok, nfull);
    end

    for (int i = 0; i < M_COUNT; i++) begin
      $display("MECH %-18s %0d", mech_name[i], mech[i]);
      check(mech[i] > 0, $sformatf("mechanism %s exercised", mech_name[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
