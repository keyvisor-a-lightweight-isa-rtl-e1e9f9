// kv_aes_gcm_model -- behavioural model of the external AES-128-GCM engine.
//
// Behavioural model, not synthesizable: stands in for the third-party
// AES-GCM core that KeyVisor uses as a black box.  It computes real
// AES-128-GCM (NIST SP 800-38D) with SystemVerilog functions: the S-box is
// built at time zero from the GF(2^8) inverse and the affine map, GHASH
// uses the bit-serial multiply of the standard.  Only 96-bit IVs are
// supported (J0 = IV || 0^31 || 1).
//
// Protocol (gcm_req_t / gcm_rsp_t of kv_pkg): a one-cycle start with key,
// IV, direction and byte lengths opens a job; ceil(aad_len/16) AAD blocks
// and then ceil(data_len/16) text blocks are taken on blk_valid/blk_ready,
// most significant byte first, zero padded.  Each block is busy for LAT
// cycles; each text block yields one out_valid pulse with the result block
// (bytes past the length zeroed), and LAT cycles after the last block a
// tag_valid pulse carries the tag.  On decryption the tag is computed over
// the ciphertext that was fed in; comparing it is the caller's job.
module kv_aes_gcm_model
  import kv_pkg::*;
#(
  parameter int LAT = 11
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  gcm_req_t req_i,
  output gcm_rsp_t rsp_o
);
  // ----------------------------------------------------------- AES
  byte unsigned sbox [256];

  function automatic byte unsigned gmul(input byte unsigned a, input byte unsigned b);
    byte unsigned p = 0;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = (a[7]) ? byte'((a << 1) ^ 8'h1b) : byte'(a << 1);
      b = b >> 1;
    end
    return p;
  endfunction

  initial begin
    for (int x = 0; x < 256; x++) begin
      byte unsigned inv, s;
      inv = 0;
      for (int y = 1; y < 256; y++) if (gmul(byte'(x), byte'(y)) == 1) inv = byte'(y);
      s = inv;
      for (int k = 1; k < 5; k++) s ^= byte'((inv << k) | (inv >> (8 - k)));
      sbox[x] = s ^ 8'h63;
    end
  end

  function automatic logic [127:0] aes128(input logic [127:0] key, input logic [127:0] pt);
    logic [31:0]  w [44];
    logic [7:0]   st [16], t [16];
    logic [7:0]   rcon;
    rcon = 8'h01;
    for (int i = 0; i < 4; i++) w[i] = key[127-32*i -: 32];
    for (int i = 4; i < 44; i++) begin
      logic [31:0] tmp;
      tmp = w[i-1];
      if (i % 4 == 0) begin
        tmp = {sbox[tmp[23:16]], sbox[tmp[15:8]], sbox[tmp[7:0]], sbox[tmp[31:24]]};
        tmp[31:24] ^= rcon;
        rcon = gmul(rcon, 8'h02);
      end
      w[i] = w[i-4] ^ tmp;
    end
    for (int i = 0; i < 16; i++) st[i] = pt[127-8*i -: 8] ^ w[i/4][31-8*(i%4) -: 8];
    for (int r = 1; r <= 10; r++) begin
      for (int i = 0; i < 16; i++) st[i] = sbox[st[i]];
      for (int c = 0; c < 4; c++)
        for (int rr = 0; rr < 4; rr++) t[4*c+rr] = st[4*((c+rr)%4)+rr];
      if (r != 10) begin
        for (int c = 0; c < 4; c++) begin
          logic [7:0] a0, a1, a2, a3;
          a0 = t[4*c]; a1 = t[4*c+1]; a2 = t[4*c+2]; a3 = t[4*c+3];
          st[4*c]   = gmul(a0, 2) ^ gmul(a1, 3) ^ a2 ^ a3;
          st[4*c+1] = a0 ^ gmul(a1, 2) ^ gmul(a2, 3) ^ a3;
          st[4*c+2] = a0 ^ a1 ^ gmul(a2, 2) ^ gmul(a3, 3);
          st[4*c+3] = gmul(a0, 3) ^ a1 ^ a2 ^ gmul(a3, 2);
        end
      end else begin
        for (int i = 0; i < 16; i++) st[i] = t[i];
      end
      for (int i = 0; i < 16; i++) st[i] ^= w[4*r + i/4][31-8*(i%4) -: 8];
    end
    for (int i = 0; i < 16; i++) aes128[127-8*i -: 8] = st[i];
  endfunction

  function automatic logic [127:0] gf128_mul(input logic [127:0] x, input logic [127:0] y);
    logic [127:0] z, v;
    z = '0; v = y;
    for (int i = 0; i < 128; i++) begin
      if (x[127-i]) z ^= v;
      v = v[0] ? ((v >> 1) ^ {8'he1, 120'd0}) : (v >> 1);
    end
    return z;
  endfunction

  function automatic logic [127:0] msb_mask(input int nbytes);
    return (nbytes >= 16) ? '1 : ~({128{1'b1}} >> (8*nbytes));
  endfunction

  // ------------------------------------------------------- job state
  logic [127:0] key_q, h_q, j0_q, ctr_q, ghash_q;
  logic         enc_q, busy_q, tag_pend_q, out_pend_q;
  int           aad_left_q, dat_left_q, aad_bytes_q, dat_bytes_q, wait_q;
  logic [63:0]  aad_bits_q, dat_bits_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; tag_pend_q <= 1'b0; out_pend_q <= 1'b0; wait_q <= 0;
      rsp_o  <= '0;
      key_q <= '0; h_q <= '0; j0_q <= '0; ctr_q <= '0; ghash_q <= '0; enc_q <= 1'b0;
      aad_left_q <= 0; dat_left_q <= 0; aad_bytes_q <= 0; dat_bytes_q <= 0;
      aad_bits_q <= '0; dat_bits_q <= '0;
    end else begin
      rsp_o.out_valid <= 1'b0;
      rsp_o.tag_valid <= 1'b0;
      rsp_o.blk_ready <= 1'b0;
      if (req_i.start && !busy_q) begin
        busy_q      <= 1'b1;
        key_q       <= req_i.key;
        h_q         <= aes128(req_i.key, '0);
        j0_q        <= {req_i.iv, 32'd1};
        ctr_q       <= {req_i.iv, 32'd1};
        ghash_q     <= '0;
        enc_q       <= req_i.enc;
        aad_left_q  <= int'((req_i.aad_len + 32'd15) >> 4);
        dat_left_q  <= int'((req_i.data_len + 32'd15) >> 4);
        aad_bytes_q <= int'(req_i.aad_len);
        dat_bytes_q <= int'(req_i.data_len);
        aad_bits_q  <= {29'd0, req_i.aad_len, 3'd0};
        dat_bits_q  <= {29'd0, req_i.data_len, 3'd0};
        wait_q      <= 1;
        tag_pend_q  <= 1'b1;
        out_pend_q  <= 1'b0;
      end else if (busy_q) begin
        if (wait_q > 0) begin
          wait_q <= wait_q - 1;
          if (wait_q == 1) begin
            if (out_pend_q) begin
              rsp_o.out_valid <= 1'b1;
              out_pend_q      <= 1'b0;
            end
            if (aad_left_q + dat_left_q > 0) rsp_o.blk_ready <= 1'b1;
          end
        end else if (aad_left_q + dat_left_q > 0) begin
          rsp_o.blk_ready <= 1'b1;
          if (req_i.blk_valid && rsp_o.blk_ready) begin
            rsp_o.blk_ready <= 1'b0;
            if (aad_left_q > 0) begin
              logic [127:0] a;
              a = req_i.blk & msb_mask(aad_bytes_q);
              ghash_q     <= gf128_mul(ghash_q ^ a, h_q);
              aad_left_q  <= aad_left_q - 1;
              aad_bytes_q <= aad_bytes_q - 16;
            end else begin
              logic [127:0] ctr, ks, o, c;
              ctr = {ctr_q[127:32], ctr_q[31:0] + 32'd1};
              ks  = aes128(key_q, ctr);
              o   = (req_i.blk ^ ks) & msb_mask(dat_bytes_q);
              c   = enc_q ? o : (req_i.blk & msb_mask(dat_bytes_q));
              ctr_q       <= ctr;
              ghash_q     <= gf128_mul(ghash_q ^ c, h_q);
              rsp_o.out   <= o;
              out_pend_q  <= 1'b1;
              dat_left_q  <= dat_left_q - 1;
              dat_bytes_q <= dat_bytes_q - 16;
            end
            wait_q <= LAT;
          end
        end else if (tag_pend_q) begin
          logic [127:0] s;
          s = gf128_mul(ghash_q ^ {aad_bits_q, dat_bits_q}, h_q);
          rsp_o.tag  <= aes128(key_q, j0_q) ^ s;
          tag_pend_q <= 1'b0;
          wait_q     <= LAT;
        end else begin
          rsp_o.tag_valid <= 1'b1;
          busy_q          <= 1'b0;
        end
      end
    end
  end
endmodule
