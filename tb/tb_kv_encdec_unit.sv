// tb_kv_encdec_unit -- self-checking testbench of the de-/encryption unit.
//
// The unit runs with the real IV generator, the AES-128-GCM model and a
// stalling memory model.  For random AAD and data lengths (including empty
// buffers, partial last blocks and the 1500-byte / 13-byte TLS case) the
// testbench builds an I/O structure, runs encrypt and compares the
// in-place ciphertext, the stored IV_data and tag with its own byte-level
// GCM reference (built on the model's AES and GF(2^128) functions).  Bytes
// just past the data buffer must stay untouched.  It then decrypts the
// result and expects the original plaintext and RES_OK, and finally flips
// one tag bit and expects RES_TAG_FAIL.  Memory stalls make the engine
// finish some blocks while the unit is still writing back the previous
// one; the testbench checks that this early-output path was taken.
module tb_kv_encdec_unit;
  import kv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  kv_mem_if m ();
  gcm_req_t gq;
  gcm_rsp_t gs;
  logic start, enc, busy, done, iv_next;
  logic [127:0] key;
  logic [63:0]  io_ptr;
  kv_res_e      res;
  logic [95:0]  iv;

  kv_encdec_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .start_i(start), .enc_i(enc), .key_i(key),
    .io_ptr_i(io_ptr), .busy_o(busy), .done_o(done), .res_o(res), .mem(m),
    .gcm_req_o(gq), .gcm_rsp_i(gs), .iv_next_o(iv_next), .iv_i(iv));

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

  logic [95:0] drawn_iv;
  always @(posedge clk) if (iv_next) drawn_iv <= iv;

  // output blocks that came back while the unit was still moving words
  int n_early;
  always @(posedge clk) if (rst_n && gs.out_valid && dut.state_q != dut.S_WAIT) n_early++;

  function automatic logic [127:0] pack(input byte unsigned b [], input int off);
    logic [127:0] r = '0;
    for (int i = 0; i < 16; i++) if (off + i < b.size()) r[127 - 8*i -: 8] = b[off + i];
    return r;
  endfunction

  // byte-level AES-128-GCM reference (IV and key in GCM byte order)
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

  localparam logic [63:0] IO = 64'h100, AAD = 64'h1000, DAT = 64'h2000;

  task automatic run(input bit e);
    @(negedge clk);
    start = 1; enc = e; io_ptr = IO;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  task automatic one_case(input int alen, input int dlen);
    byte unsigned a [], p [], c [];
    logic [127:0] tg, mtag;
    logic [95:0]  miv;
    int ok, flip;
    a = new[alen]; p = new[dlen];
    foreach (a[i]) a[i] = 8'($urandom);
    foreach (p[i]) p[i] = 8'($urandom);
    key = {$urandom, $urandom, $urandom, $urandom};
    foreach (a[i]) u_mem.wr_byte(AAD + i, a[i]);
    foreach (p[i]) u_mem.wr_byte(DAT + i, p[i]);
    for (int i = 0; i < 8; i++) u_mem.wr_byte(DAT + dlen + i, 8'hA5);
    u_mem.mem[IO/8 + 0] = DAT;  u_mem.mem[IO/8 + 1] = 64'(dlen);
    u_mem.mem[IO/8 + 2] = AAD;  u_mem.mem[IO/8 + 3] = 64'(alen);
    for (int i = 4; i < 8; i++) u_mem.mem[IO/8 + i] = '0;

    run(1'b1);
    check(res == RES_OK, "encrypt result");
    miv = {u_mem.mem[IO/8 + 5][31:0], u_mem.mem[IO/8 + 4]};
    check(miv == drawn_iv, "stored IV_data is the generated one");
    gcm_ref(key, bswap96(miv), a, p, 1'b1, c, tg);
    mtag = bswap128({u_mem.mem[IO/8 + 7], u_mem.mem[IO/8 + 6]});
    check(mtag == tg, $sformatf("tag aad=%0d data=%0d", alen, dlen));
    ok = 1;
    foreach (c[i]) if (u_mem.rd_byte(DAT + i) != c[i]) ok = 0;
    check(ok == 1, $sformatf("ciphertext aad=%0d data=%0d", alen, dlen));
    ok = 1;
    for (int i = 0; i < 8; i++) if (u_mem.rd_byte(DAT + dlen + i) != 8'hA5) ok = 0;
    check(ok == 1, "bytes past the buffer untouched");
    ok = 1;
    foreach (a[i]) if (u_mem.rd_byte(AAD + i) != a[i]) ok = 0;
    check(ok == 1, "AAD untouched");

    run(1'b0);
    check(res == RES_OK, "decrypt with correct tag");
    ok = 1;
    foreach (p[i]) if (u_mem.rd_byte(DAT + i) != p[i]) ok = 0;
    check(ok == 1, "plaintext restored");
    check(bswap128({u_mem.mem[IO/8 + 7], u_mem.mem[IO/8 + 6]}) == tg, "tag not overwritten");

    flip = $urandom_range(0, 63);
    u_mem.mem[IO/8 + 6][flip] = ~u_mem.mem[IO/8 + 6][flip];
    foreach (c[i]) u_mem.wr_byte(DAT + i, c[i]);
    run(1'b0);
    check(res == RES_TAG_FAIL, "decrypt with corrupted tag");
  endtask

  initial begin
    start = 0; enc = 0; key = '0; io_ptr = '0; n_early = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    one_case(4, 4);
    one_case(0, 16);
    one_case(16, 0);
    one_case(0, 0);
    one_case(13, 1500);
    one_case(200, 200);
    for (int i = 0; i < 12; i++) one_case($urandom_range(0, 40), $urandom_range(0, 100));
    check(n_early > 0, $sformatf("early engine outputs were captured (%0d)", n_early));
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
