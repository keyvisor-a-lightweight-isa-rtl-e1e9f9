// kv_encdec_unit -- handle-based de-/encryption unit.
//
// Runs the data part of the encrypt and decrypt instructions once the
// handle wrapper has verified the handle and released its user key.
//
//  1. Load the I/O structure (eight 64-bit words) from io_ptr_i:
//       w0 data pointer, w1 data length (bytes), w2 AAD pointer,
//       w3 AAD length (bytes), w4-5 IV_data (96 bits, byte 0 first),
//       w6-7 GCM tag (128 bits).
//  2. Encrypt: take a fresh 96-bit IV_data from the IV generator.
//     Decrypt: use the IV_data of the I/O structure.
//  3. Stream the AAD and then the data through AES-GCM in 16-byte blocks,
//     reading each block as one or two 64-bit words (only words that hold
//     valid bytes are read; bytes past the length are zeroed).  Each result
//     block is written back in place, byte-masked in the last block.
//     The loop is software-pipelined around the engine: once block i has
//     been handed over, the unit writes back the result of block i-1 and
//     fetches block i+1 while the engine computes, then collects the result
//     of block i (kept in a capture register if it arrived early) and hands
//     over block i+1.  The input, output and capture buffers make this safe
//     with any memory latency.
//  4. Encrypt: store the used IV_data and the tag into w4-7 of the I/O
//     structure.  Decrypt: compare the computed tag with w6-7; the result
//     (RES_OK or RES_TAG_FAIL) is returned, no tag is ever written.
//
// Interface: start_i (one cycle, while idle) with enc_i, key_i (user key,
// GCM byte order) and io_ptr_i; done_o pulses with res_o.  Memory through
// a kv_mem_if client port (8-byte aligned pointers), AES-GCM through the
// gcm_req_t / gcm_rsp_t bundle, IVs from kv_iv_gen.  One 64-bit memory
// access is in flight at a time, so a block costs four memory round trips
// (two reads, two writes); these overlap the engine's work on the block.
//
// From the paper: I/O structure with data/AAD pointers, IV and tag;
// LFSR-generated 96-bit IV_data for encryption, user IV and tag for
// decryption; block-wise in-place processing; tag checked, not returned,
// on decryption.  Own choices: the structure layout, 8-byte aligned
// buffers, 32-bit length counters, writing back decrypted data even when
// the tag check later fails (the result code reports it).
module kv_encdec_unit
  import kv_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic             enc_i,
  input  logic [127:0]     key_i,
  input  logic [63:0]      io_ptr_i,
  output logic             busy_o,
  output logic             done_o,
  output kv_res_e          res_o,
  kv_mem_if.client         mem,
  output gcm_req_t         gcm_req_o,
  input  gcm_rsp_t         gcm_rsp_i,
  output logic             iv_next_o,
  input  logic [IV_W-1:0]  iv_i
);
  typedef enum logic [3:0] {
    S_IDLE, S_MREQ, S_MRSP, S_IV, S_START, S_FETCH, S_WAIT, S_SEND, S_WB,
    S_TAG, S_DONE
  } state_e;

  state_e        state_q, ret_q;
  logic          enc_q;
  logic [127:0]  key_q;
  logic [63:0]   w_q [12];        // 0-7 I/O structure, 8-9 input block, 10-11 output block
  logic [7:0]    mask_q [12];
  logic [3:0]    widx_q, wlast_q;
  logic          mwe_q;
  logic [63:0]   base_q;          // address of the word group being moved
  logic [63:0]   io_ptr_q;
  logic [95:0]   iv_q;            // IV_data, memory byte order
  // fetch side: what is still to be read
  logic [31:0]   aad_rem_q, dat_rem_q;
  logic [63:0]   aad_ptr_q, dat_ptr_q;
  logic          f_aad_q;         // fetching AAD blocks
  // input block buffer (w_q[8..9])
  logic          ib_valid_q, ib_aad_q;
  logic [4:0]    ib_nb_q;
  logic [63:0]   ib_addr_q;
  // block inside the engine whose output is still awaited
  logic          sb_data_q;
  logic [4:0]    sb_nb_q;
  logic [63:0]   sb_addr_q;
  // output block buffer (w_q[10..11]) waiting to be written back
  logic          ob_pend_q;
  logic [3:0]    ob_last_q;
  logic [63:0]   ob_addr_q;
  // engine output captured while the unit was busy elsewhere
  logic [127:0]  cap_q;
  logic          cap_valid_q;
  logic          fin_q;           // every block has been handed to the engine
  logic [127:0]  tag_q;
  logic          tag_seen_q;
  kv_res_e       res_q;

  // bytes of the next block to fetch
  logic [31:0]   rem;
  logic [4:0]    nb;
  always_comb begin
    rem = f_aad_q ? aad_rem_q : dat_rem_q;
    nb  = (rem >= 32'd16) ? 5'd16 : rem[4:0];
  end

  function automatic logic [7:0] byte_mask(input logic [3:0] n);
    return 8'((9'd1 << n) - 9'd1);
  endfunction
  function automatic logic [3:0] n_lo(input logic [4:0] n);
    return (n >= 5'd8) ? 4'd8 : n[3:0];
  endfunction
  function automatic logic [3:0] n_hi(input logic [4:0] n);
    return (n >= 5'd8) ? 4'(n - 5'd8) : 4'd0;
  endfunction

  // --------------------------------------------------------- outputs
  always_comb begin
    busy_o = (state_q != S_IDLE);
    done_o = (state_q == S_DONE);
    res_o  = res_q;

    mem.req_valid = (state_q == S_MREQ);
    mem.req_addr  = base_q + {57'd0, (widx_q >= 4'd8) ? {3'd0, widx_q[0]} : widx_q, 3'd0};
    mem.req_we    = mwe_q;
    mem.req_wdata = w_q[widx_q];
    mem.req_mask  = mask_q[widx_q];

    gcm_req_o           = '0;
    gcm_req_o.start     = (state_q == S_START);
    gcm_req_o.key       = key_q;
    gcm_req_o.iv        = bswap96(iv_q);
    gcm_req_o.enc       = enc_q;
    gcm_req_o.aad_len   = w_q[3][31:0];
    gcm_req_o.data_len  = w_q[1][31:0];
    gcm_req_o.blk_valid = (state_q == S_SEND) && ib_valid_q;
    gcm_req_o.blk       = bswap128(keep_bytes({w_q[9], w_q[8]}, ib_nb_q));

    iv_next_o = (state_q == S_IV) && enc_q;
  end

  // ---------------------------------------------------- state machine
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      ret_q       <= S_IDLE;
      enc_q       <= 1'b0;
      key_q       <= '0;
      for (int i = 0; i < 12; i++) begin
        w_q[i]    <= '0;
        mask_q[i] <= 8'hFF;
      end
      widx_q      <= '0;
      wlast_q     <= '0;
      mwe_q       <= 1'b0;
      base_q      <= '0;
      io_ptr_q    <= '0;
      iv_q        <= '0;
      aad_rem_q   <= '0;
      dat_rem_q   <= '0;
      aad_ptr_q   <= '0;
      dat_ptr_q   <= '0;
      f_aad_q     <= 1'b0;
      ib_valid_q  <= 1'b0;
      ib_aad_q    <= 1'b0;
      ib_nb_q     <= '0;
      ib_addr_q   <= '0;
      sb_data_q   <= 1'b0;
      sb_nb_q     <= '0;
      sb_addr_q   <= '0;
      ob_pend_q   <= 1'b0;
      ob_last_q   <= 4'd10;
      ob_addr_q   <= '0;
      cap_q       <= '0;
      cap_valid_q <= 1'b0;
      fin_q       <= 1'b0;
      tag_q       <= '0;
      tag_seen_q  <= 1'b0;
      res_q       <= RES_OK;
    end else begin
      if (gcm_rsp_i.tag_valid && busy_o) begin
        tag_q      <= gcm_rsp_i.tag;
        tag_seen_q <= 1'b1;
      end
      // an output block that arrives while the unit moves words is kept
      if (gcm_rsp_i.out_valid && busy_o && !(state_q == S_WAIT && sb_data_q)) begin
        cap_q       <= gcm_rsp_i.out;
        cap_valid_q <= 1'b1;
      end
      unique case (state_q)
        S_IDLE: if (start_i) begin
          enc_q       <= enc_i;
          key_q       <= key_i;
          base_q      <= io_ptr_i;
          io_ptr_q    <= io_ptr_i;
          widx_q      <= 4'd0;
          wlast_q     <= 4'(IOS_WORDS - 1);
          mwe_q       <= 1'b0;
          tag_seen_q  <= 1'b0;
          cap_valid_q <= 1'b0;
          ib_valid_q  <= 1'b0;
          sb_data_q   <= 1'b0;
          ob_pend_q   <= 1'b0;
          fin_q       <= 1'b0;
          res_q       <= RES_OK;
          for (int i = 0; i < 12; i++) mask_q[i] <= 8'hFF;
          ret_q       <= S_IV;
          state_q     <= S_MREQ;
        end

        // ---------- word transfers w_q[widx_q .. wlast_q]
        S_MREQ: if (mem.req_ready) state_q <= S_MRSP;
        S_MRSP: if (mem.resp_valid) begin
          if (!mwe_q) w_q[widx_q] <= mem.resp_rdata;
          widx_q  <= widx_q + 1'b1;
          state_q <= (widx_q == wlast_q) ? ret_q : S_MREQ;
        end

        // ---------- IV, then open the AES-GCM job
        S_IV: begin
          iv_q      <= enc_q ? iv_i : {w_q[5][31:0], w_q[4]};
          dat_ptr_q <= w_q[0];
          dat_rem_q <= w_q[1][31:0];
          aad_ptr_q <= w_q[2];
          aad_rem_q <= w_q[3][31:0];
          f_aad_q   <= (w_q[3][31:0] != 32'd0);
          state_q   <= S_START;
        end
        S_START: state_q <= S_FETCH;

        // ---------- block loop: FETCH(i+1), WAIT(i), SEND(i+1), WB(i), ...
        // fetch the next AAD or data block into the input buffer
        S_FETCH: begin
          if (f_aad_q && aad_rem_q == 32'd0) begin
            f_aad_q <= 1'b0;                    // AAD done, go on with data
          end else if (rem != 32'd0) begin
            base_q     <= f_aad_q ? aad_ptr_q : dat_ptr_q;
            ib_addr_q  <= f_aad_q ? aad_ptr_q : dat_ptr_q;
            ib_aad_q   <= f_aad_q;
            ib_nb_q    <= nb;
            ib_valid_q <= 1'b1;
            if (f_aad_q) begin
              aad_rem_q <= aad_rem_q - {27'd0, nb};
              aad_ptr_q <= aad_ptr_q + 64'd16;
            end else begin
              dat_rem_q <= dat_rem_q - {27'd0, nb};
              dat_ptr_q <= dat_ptr_q + 64'd16;
            end
            widx_q  <= 4'd8;
            wlast_q <= (n_hi(nb) != 4'd0) ? 4'd9 : 4'd8;
            w_q[9]  <= '0;
            mwe_q   <= 1'b0;
            ret_q   <= S_WAIT;
            state_q <= S_MREQ;
          end else begin
            state_q <= S_WAIT;                  // nothing left to read
          end
        end
        // collect the output of the data block inside the engine
        S_WAIT: begin
          if (!sb_data_q) state_q <= S_SEND;
          else if (cap_valid_q || gcm_rsp_i.out_valid) begin
            {w_q[11], w_q[10]} <= bswap128(cap_valid_q ? cap_q : gcm_rsp_i.out);
            mask_q[10]  <= byte_mask(n_lo(sb_nb_q));
            mask_q[11]  <= byte_mask(n_hi(sb_nb_q));
            ob_last_q   <= (n_hi(sb_nb_q) != 4'd0) ? 4'd11 : 4'd10;
            ob_addr_q   <= sb_addr_q;
            ob_pend_q   <= 1'b1;
            sb_data_q   <= 1'b0;
            cap_valid_q <= 1'b0;
            state_q     <= S_SEND;
          end
        end
        // hand the input block to the engine (or note that all are sent)
        S_SEND: begin
          if (!ib_valid_q) begin
            fin_q   <= 1'b1;
            state_q <= S_WB;
          end else if (gcm_rsp_i.blk_ready) begin
            ib_valid_q <= 1'b0;
            sb_data_q  <= !ib_aad_q;
            sb_nb_q    <= ib_nb_q;
            sb_addr_q  <= ib_addr_q;
            state_q    <= S_WB;
          end
        end
        // write back the previous output block while the engine works
        S_WB: begin
          if (ob_pend_q) begin
            ob_pend_q <= 1'b0;
            base_q    <= ob_addr_q;
            widx_q    <= 4'd10;
            wlast_q   <= ob_last_q;
            mwe_q     <= 1'b1;
            ret_q     <= fin_q ? S_TAG : S_FETCH;
            state_q   <= S_MREQ;
          end else begin
            state_q   <= fin_q ? S_TAG : S_FETCH;
          end
        end

        // ---------- tag: store (encrypt) or compare (decrypt)
        S_TAG: if (tag_seen_q) begin
          if (enc_q) begin
            w_q[4]  <= iv_q[63:0];
            w_q[5]  <= {32'd0, iv_q[95:64]};
            {w_q[7], w_q[6]} <= bswap128(tag_q);
            base_q  <= io_ptr_q;
            widx_q  <= 4'd4;
            wlast_q <= 4'd7;
            mwe_q   <= 1'b1;
            ret_q   <= S_DONE;
            state_q <= S_MREQ;
          end else begin
            res_q   <= (bswap128(tag_q) == {w_q[7], w_q[6]}) ? RES_OK : RES_TAG_FAIL;
            state_q <= S_DONE;
          end
        end

        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk_i) disable iff (!rst_ni)
    start_i |-> state_q == S_IDLE);
endmodule
