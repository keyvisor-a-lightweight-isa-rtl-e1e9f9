// tb_kv_aes_gcm_model -- checks the AES-128-GCM behavioural model against
// published known-answer vectors: the AES-128 example of FIPS-197
// (appendix C.1) and GCM test cases 2 and 4 of the original GCM
// specification (McGrew/Viega).  Test case 4 has 20 bytes of AAD and 60
// bytes of text, so it also covers partial blocks; it is run as encryption
// and as decryption.
module tb_kv_aes_gcm_model;
  import kv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  gcm_req_t req;
  gcm_rsp_t rsp;
  int checks = 0, failures = 0;

  kv_aes_gcm_model #(.LAT(3)) dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // run one job; blocks are given as a flat byte string, MSB first
  task automatic run(input logic [127:0] key, input logic [95:0] iv, input bit enc,
                     input logic [127:0] aad [], input int aad_len,
                     input logic [127:0] txt [], input int txt_len,
                     output logic [127:0] outb [4], output logic [127:0] tag);
    int nout = 0;
    @(negedge clk);
    req = '0; req.start = 1; req.key = key; req.iv = iv; req.enc = enc;
    req.aad_len = 32'(aad_len); req.data_len = 32'(txt_len);
    @(negedge clk); req.start = 0;
    foreach (aad[i]) begin
      req.blk_valid = 1; req.blk = aad[i];
      while (!rsp.blk_ready) @(negedge clk);
      @(negedge clk); req.blk_valid = 0;
    end
    foreach (txt[i]) begin
      req.blk_valid = 1; req.blk = txt[i];
      while (!rsp.blk_ready) @(negedge clk);
      @(negedge clk); req.blk_valid = 0;
      do @(negedge clk); while (!rsp.out_valid);
      outb[nout++] = rsp.out;
    end
    do @(negedge clk); while (!rsp.tag_valid);
    tag = rsp.tag;
  endtask

  initial begin
    logic [127:0] o [4];
    logic [127:0] t;
    logic [127:0] a4 [] , p4 [], c4 [], z [], p2 [];
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);   // S-box ready at time zero

    check(dut.aes128(128'h000102030405060708090a0b0c0d0e0f,
                     128'h00112233445566778899aabbccddeeff) == 128'h69c4e0d86a7b0430d8cdb78070b4c55a,
          "FIPS-197 C.1");

    // GCM test case 2
    z = new[0]; p2 = new[1]; p2[0] = '0;
    run('0, '0, 1'b1, z, 0, p2, 16, o, t);
    check(o[0] == 128'h0388dace60b6a392f328c2b971b2fe78, "TC2 ciphertext");
    check(t == 128'hab6e47d42cec13bdf53a67b21257bddf, "TC2 tag");

    // GCM test case 4
    a4 = new[2];
    a4[0] = 128'hfeedfacedeadbeeffeedfacedeadbeef;
    a4[1] = 128'habaddad2000000000000000000000000;
    p4 = new[4];
    p4[0] = 128'hd9313225f88406e5a55909c5aff5269a;
    p4[1] = 128'h86a7a9531534f7da2e4c303d8a318a72;
    p4[2] = 128'h1c3c0c95956809532fcf0e2449a6b525;
    p4[3] = 128'hb16aedf5aa0de657ba637b3900000000;
    c4 = new[4];
    c4[0] = 128'h42831ec2217774244b7221b784d0d49c;
    c4[1] = 128'he3aa212f2c02a4e035c17e2329aca12e;
    c4[2] = 128'h21d514b25466931c7d8f6a5aac84aa05;
    c4[3] = 128'h1ba30b396a0aac973d58e09100000000;
    run(128'hfeffe9928665731c6d6a8f9467308308, 96'hcafebabefacedbaddecaf888, 1'b1,
        a4, 20, p4, 60, o, t);
    for (int i = 0; i < 4; i++) check(o[i] == c4[i], $sformatf("TC4 ciphertext block %0d", i));
    check(t == 128'h5bc94fbc3221a5db94fae95ae7121a47, "TC4 tag");
    run(128'hfeffe9928665731c6d6a8f9467308308, 96'hcafebabefacedbaddecaf888, 1'b0,
        a4, 20, c4, 60, o, t);
    for (int i = 0; i < 4; i++) check(o[i] == p4[i], $sformatf("TC4 plaintext block %0d", i));
    check(t == 128'h5bc94fbc3221a5db94fae95ae7121a47, "TC4 decrypt tag");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
