// kv_handle_wrapper -- creates, unwraps, checks and revokes key handles.
//
// Every KeyVisor instruction passes through this unit.
//
//  HW_GEN (wrapkey): load the 384-bit handlegen structure from rs1, take a
//    fresh IV_handle from the IV generator, allocate an HSC entry in the set
//    IV_handle[5:0] (fails with RES_HSC_FULL when both ways are valid) and
//    store tag, binding ID and usage counter there, then run AES-GCM
//    encryption with the visor key: AAD = the 128-bit policy, text = the
//    user key.  The 512-bit handle {policy, IV_handle, GCM tag, encrypted
//    user key} is stored at rs2.
//  HW_ENC / HW_DEC / HW_REVOKE: load the handle from rs1, decrypt the user
//    key with the visor key and IV_handle (policy as AAD) and compare the
//    computed tag with the handle's tag (RES_AUTH_FAIL on mismatch).  Then
//    look the handle up in the HSC (RES_INVALID if absent or revoked) and
//    evaluate the policy in one cycle (RES_DENIED).  Encrypt/decrypt: a
//    usage-counted handle has its counter decremented and is revoked when it
//    reaches zero; the user key and policy are handed on.  Revoke: the
//    revocation rules are checked and the valid bit is cleared.
//  HW_REVOKE_ID: revoke every handle bound to the ID in rs1 (rs2[0] = 1:
//    PMP/TEE ID, only from machine mode; 0: process ID, from supervisor or
//    machine mode) by a sweep over the HSC; rd returns the number revoked.
//
// Memory layouts (64-bit little-endian words):
//   handle:    w0-1 policy, w2-3 IV_handle (bits 95:0), w4-5 GCM tag,
//              w6-7 encrypted user key
//   handlegen: w0-1 policy, w2-3 user key, w4 binding target ID,
//              w5[7:0] usage counter
// Byte 0 of a 128-bit field is the first byte handed to AES-GCM.
//
// Interface: start_i (one cycle, while idle) with op_i, rs1_i, rs2_i and the
// caller context ctx_i; done_o pulses once with res_o, val_o (revoke count
// for HW_REVOKE_ID), user_key_o and policy_o.  Memory via a kv_mem_if
// client port, AES-GCM via the gcm_req_t / gcm_rsp_t bundle, IVs from
// kv_iv_gen, state in kv_hsc.
//
// From the paper: the handle format, the order of the wrapkey steps (copy
// policy, new IV, HSC entry, AES-GCM with visor key / user key / policy as
// AAD / IV), the unwrap-then-check order, counter-based revocation, and the
// revocation rules of its appendix.  Own choices: the structure layouts
// above, the result codes, decrementing the counter when the use is
// granted (before the data is processed), and letting SelfBind imply
// binding to the caller's own ID.
module kv_handle_wrapper
  import kv_pkg::*;
(
  input  logic             clk_i,
  input  logic             rst_ni,
  // command
  input  logic             start_i,
  input  hw_op_e           op_i,
  input  logic [63:0]      rs1_i,
  input  logic [63:0]      rs2_i,
  input  kv_ctx_t          ctx_i,
  input  logic [127:0]     visor_key_i,
  output logic             busy_o,
  output logic             done_o,
  output kv_res_e          res_o,
  output logic [63:0]      val_o,
  output logic [127:0]     user_key_o,   // GCM byte order
  output logic [127:0]     policy_o,
  // memory
  kv_mem_if.client         mem,
  // AES-GCM engine
  output gcm_req_t         gcm_req_o,
  input  gcm_rsp_t         gcm_rsp_i,
  // IV generator
  output logic             iv_next_o,
  input  logic [IV_W-1:0]  iv_i,
  // HSC
  input  logic             hsc_busy_i,
  output logic             hsc_lookup_o,
  output logic [IV_W-1:0]  hsc_iv_o,      // lookup and write IV
  input  logic             hsc_rsp_valid_i,
  input  logic             hsc_hit_i,
  input  logic             hsc_hit_way_i,
  input  hsc_state_t       hsc_hit_state_i,
  input  logic             hsc_free_i,
  input  logic             hsc_free_way_i,
  output logic             hsc_wr_o,
  output logic             hsc_wr_way_o,
  output hsc_state_t       hsc_wr_state_o,
  output hsc_kind_t        hsc_wr_kind_o,
  output logic             hsc_wr_valid_o,
  output logic             hsc_sweep_o,
  output logic [BIND_W-1:0] hsc_sweep_id_o,
  output logic             hsc_sweep_pmp_o,
  input  logic             hsc_sweep_done_i,
  input  logic [7:0]       hsc_sweep_cnt_i
);
  typedef enum logic [3:0] {
    S_IDLE, S_MREQ, S_MRSP, S_GEN_IV, S_LOOK, S_GCM_START, S_GCM_AAD,
    S_GCM_TXT, S_GCM_OUT, S_GCM_TAG, S_CHECK, S_SWEEP, S_DONE
  } state_e;

  state_e        state_q, ret_q;
  hw_op_e        op_q;
  logic [63:0]   rs1_q, rs2_q;
  kv_ctx_t       ctx_q;
  logic [63:0]   buf_q [8];
  logic [2:0]    widx_q, wlast_q;
  logic [63:0]   maddr_q;
  logic          mwe_q;
  logic [95:0]   iv_q;           // new IV_handle (wrapkey), memory byte order
  logic [95:0]   iv_cur;         // IV_handle of the current handle
  logic [127:0]  key_q;          // user key, GCM order
  logic [127:0]  ctext_q;        // encrypted user key, GCM order
  kv_res_e       res_q;
  logic [63:0]   val_q;
  logic          hit_way_q;
  hsc_state_t    hit_state_q;

  logic [127:0]  pol;
  assign pol = {buf_q[1], buf_q[0]};

  wire is_gen = (op_q == HW_GEN);

  // wrapkey: the freshly drawn IV; otherwise the IV stored in the handle
  assign iv_cur = is_gen ? iv_q : {buf_q[3][31:0], buf_q[2]};

  // values written into the HSC by wrapkey
  hsc_state_t gen_state;
  hsc_kind_t  gen_kind;
  always_comb begin
    gen_state.ctr     = buf_q[5][CTR_W-1:0];
    gen_state.binding = pol[POL_SELFBIND] ? ctx_id(pol, ctx_q) : buf_q[4];
    if (!pol_bound(pol)) gen_state.binding = '0;
    if (!pol[POL_FEAT_USAGECTR]) gen_state.ctr = '0;
    gen_kind.bound    = pol_bound(pol);
    gen_kind.pmp      = pol[POL_PMPMODE];
  end

  // ---------------------------------------------------- outputs
  always_comb begin
    busy_o     = (state_q != S_IDLE);
    done_o     = (state_q == S_DONE);
    res_o      = res_q;
    val_o      = val_q;
    user_key_o = key_q;
    policy_o   = pol;

    mem.req_valid = (state_q == S_MREQ);
    mem.req_addr  = maddr_q + {58'd0, widx_q, 3'd0};
    mem.req_we    = mwe_q;
    mem.req_wdata = buf_q[widx_q];
    mem.req_mask  = 8'hFF;

    gcm_req_o           = '0;
    gcm_req_o.start     = (state_q == S_GCM_START);
    gcm_req_o.key       = visor_key_i;
    gcm_req_o.iv        = bswap96(iv_cur);
    gcm_req_o.enc       = is_gen;
    gcm_req_o.aad_len   = 32'd16;
    gcm_req_o.data_len  = 32'd16;
    gcm_req_o.blk_valid = (state_q == S_GCM_AAD) || (state_q == S_GCM_TXT);
    gcm_req_o.blk       = (state_q == S_GCM_AAD) ? bswap128(pol)
                        : (is_gen ? bswap128({buf_q[3], buf_q[2]}) : bswap128({buf_q[7], buf_q[6]}));

    iv_next_o       = (state_q == S_GEN_IV);
    hsc_lookup_o    = (state_q == S_GEN_IV) || (state_q == S_GCM_TAG && gcm_rsp_i.tag_valid && !is_gen);
    hsc_iv_o        = (state_q == S_GEN_IV) ? iv_i : iv_cur;

    hsc_wr_o        = 1'b0;
    hsc_wr_way_o    = hit_way_q;
    hsc_wr_state_o  = hit_state_q;
    hsc_wr_kind_o   = gen_kind;
    hsc_wr_valid_o  = 1'b0;
    if (state_q == S_LOOK && hsc_rsp_valid_i && is_gen && hsc_free_i) begin
      hsc_wr_o       = 1'b1;
      hsc_wr_way_o   = hsc_free_way_i;
      hsc_wr_state_o = gen_state;
      hsc_wr_valid_o = 1'b1;
    end
    if (state_q == S_CHECK && res_q == RES_OK) begin
      // counter update (enc/dec of a usage-counted handle) or revocation
      if (op_q == HW_REVOKE) begin
        hsc_wr_o       = 1'b1;
        hsc_wr_valid_o = 1'b0;
      end else if (pol[POL_FEAT_USAGECTR]) begin
        hsc_wr_o           = 1'b1;
        hsc_wr_state_o.ctr = hit_state_q.ctr - 1'b1;
        hsc_wr_valid_o     = (hit_state_q.ctr != 8'd1);
      end
    end

    hsc_sweep_o     = (state_q == S_SWEEP) && !hsc_busy_i && (res_q == RES_OK) && (val_q == '0);
    hsc_sweep_id_o  = rs1_q;
    hsc_sweep_pmp_o = rs2_q[0];
  end

  // --------------------------------------------------- state machine
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      ret_q       <= S_IDLE;
      op_q        <= HW_GEN;
      rs1_q       <= '0;
      rs2_q       <= '0;
      ctx_q       <= '0;
      for (int i = 0; i < 8; i++) buf_q[i] <= '0;
      widx_q      <= '0;
      wlast_q     <= '0;
      maddr_q     <= '0;
      mwe_q       <= 1'b0;
      iv_q        <= '0;
      key_q       <= '0;
      ctext_q     <= '0;
      res_q       <= RES_OK;
      val_q       <= '0;
      hit_way_q   <= 1'b0;
      hit_state_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start_i) begin
          op_q   <= op_i;
          rs1_q  <= rs1_i;
          rs2_q  <= rs2_i;
          ctx_q  <= ctx_i;
          res_q  <= RES_OK;
          val_q  <= '0;
          key_q  <= '0;
          widx_q <= '0;
          mwe_q  <= 1'b0;
          maddr_q <= rs1_i;
          if (op_i == HW_REVOKE_ID) begin
            state_q <= S_SWEEP;
            // TEE handles: machine mode only; process handles: S or M
            if (rs2_i[0] ? (ctx_i.priv != PRV_M) : (ctx_i.priv == PRV_U))
              res_q <= RES_DENIED;
          end else begin
            wlast_q <= (op_i == HW_GEN) ? 3'(HANDLEGEN_WORDS - 1) : 3'(HANDLE_WORDS - 1);
            ret_q   <= (op_i == HW_GEN) ? S_GEN_IV : S_GCM_START;
            state_q <= S_MREQ;
          end
        end

        // ------------- word transfer loop: widx_q .. wlast_q
        S_MREQ: if (mem.req_ready) state_q <= S_MRSP;
        S_MRSP: if (mem.resp_valid) begin
          if (!mwe_q) buf_q[widx_q] <= mem.resp_rdata;
          widx_q <= widx_q + 1'b1;
          state_q <= (widx_q == wlast_q) ? ret_q : S_MREQ;
        end

        // ------------- wrapkey: new IV, HSC allocation
        S_GEN_IV: begin
          iv_q    <= iv_i;
          state_q <= S_LOOK;
        end
        S_LOOK: if (hsc_rsp_valid_i) begin
          hit_way_q   <= hsc_hit_way_i;
          hit_state_q <= hsc_hit_state_i;
          if (is_gen) begin
            if (!hsc_free_i) begin
              res_q   <= RES_HSC_FULL;
              state_q <= S_DONE;
            end else begin
              state_q <= S_GCM_START;
            end
          end else if (!hsc_hit_i) begin
            res_q   <= RES_INVALID;
            state_q <= S_DONE;
          end else begin
            state_q <= S_CHECK;
            if (op_q == HW_REVOKE) begin
              if (!pol_revoke_ok(pol, ctx_q, hsc_hit_state_i)) res_q <= RES_DENIED;
            end else begin
              if (!pol_use_ok(pol, op_q == HW_ENC, ctx_q, hsc_hit_state_i)) res_q <= RES_DENIED;
            end
          end
        end

        // ------------- AES-GCM with the visor key
        S_GCM_START: state_q <= S_GCM_AAD;
        S_GCM_AAD: if (gcm_rsp_i.blk_ready) state_q <= S_GCM_TXT;
        S_GCM_TXT: if (gcm_rsp_i.blk_ready) state_q <= S_GCM_OUT;
        S_GCM_OUT: if (gcm_rsp_i.out_valid) begin
          if (is_gen) ctext_q <= gcm_rsp_i.out;
          else        key_q   <= gcm_rsp_i.out;   // unwrapped user key
          state_q <= S_GCM_TAG;
        end
        S_GCM_TAG: if (gcm_rsp_i.tag_valid) begin
          if (is_gen) begin
            // assemble the handle and store it at rs2
            buf_q[2] <= iv_q[63:0];
            buf_q[3] <= {32'd0, iv_q[95:64]};
            {buf_q[5], buf_q[4]} <= bswap128(gcm_rsp_i.tag);
            {buf_q[7], buf_q[6]} <= bswap128(ctext_q);
            maddr_q <= rs2_q;
            widx_q  <= '0;
            wlast_q <= 3'(HANDLE_WORDS - 1);
            mwe_q   <= 1'b1;
            ret_q   <= S_DONE;
            state_q <= S_MREQ;
          end else if (bswap128(gcm_rsp_i.tag) != {buf_q[5], buf_q[4]}) begin
            res_q   <= RES_AUTH_FAIL;
            key_q   <= '0;
            state_q <= S_DONE;
          end else begin
            state_q <= S_LOOK;      // lookup was issued this cycle
          end
        end

        // ------------- counter update / revocation (outputs above)
        S_CHECK: begin
          if (res_q != RES_OK) key_q <= '0;
          state_q <= S_DONE;
        end

        // ------------- revoke by ID
        S_SWEEP: begin
          if (res_q != RES_OK) state_q <= S_DONE;
          else if (hsc_sweep_o) val_q <= 64'd1;       // marks the sweep as started
          else if (hsc_sweep_done_i) begin
            val_q   <= {56'd0, hsc_sweep_cnt_i};
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
