// kv_pkg -- shared types and constants of the KeyVisor key-handle extension.
//
// Holds the 512-bit key-handle layout, the bit positions of the usage
// policy, the instruction function codes, the result codes returned in rd,
// the Handle State Cache (HSC) entry format and a few helpers for converting
// between memory byte order and AES-GCM block order.
//
// From the paper: 512-bit handles made of four 128-bit rows (policy,
// IV_handle, GCM tag, encrypted user key), a 128-bit policy with the fields
// H.Flags [7:0], Privileges [15:8], Algorithm [23:16], Crypt.Attr. [31:24]
// and Feature Map [~125:32]; 96-bit IVs split into a 6-bit set index and a
// 90-bit tag; HSC entries holding tag, 8-bit counter and 64-bit binding ID
// (162 bits).  Own choices: the exact bit of every flag inside its field
// (read from the layout drawing, shifted so each flag lies in its field and
// the privilege bits follow the RISC-V privilege encoding), the function
// codes, the result codes and the word layout of the handlegen and I/O
// structures.
package kv_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN      = 64;   // RoCC register / memory word width
  localparam int unsigned IV_W      = 96;   // GCM IV width
  localparam int unsigned KEY_W     = 128;  // AES-128 key
  localparam int unsigned BLK_W     = 128;  // AES block
  localparam int unsigned BIND_W    = 64;   // binding ID (satp or PMP ID)
  localparam int unsigned CTR_W     = 8;    // usage counter
  localparam int unsigned HANDLE_WORDS    = 8; // 512-bit handle
  localparam int unsigned HANDLEGEN_WORDS = 6; // 384-bit handlegen struct
  localparam int unsigned IOS_WORDS       = 8; // I/O structure

  // ------------------------------------------------ usage policy (row 0)
  // H.Flags
  localparam int unsigned POL_DKEYMODE  = 5;  // future extension, not used
  localparam int unsigned POL_SELFBIND  = 6;
  localparam int unsigned POL_PMPMODE   = 7;
  // Privileges: bit 8 + RISC-V privilege level (U=0, S=1, M=3)
  localparam int unsigned POL_PRIV_BASE = 8;
  localparam int unsigned POL_PRIV_U    = 8;
  localparam int unsigned POL_PRIV_S    = 9;
  localparam int unsigned POL_PRIV_M    = 11;
  // Algorithm
  localparam int unsigned POL_ALG_AESGCM = 16;
  localparam int unsigned POL_ALG_CHACHA = 17; // future extension
  localparam int unsigned POL_ALG_ASCON  = 18; // future extension
  // Crypt. Attr.
  localparam int unsigned POL_ALLOW_ENC = 24;
  localparam int unsigned POL_ALLOW_DEC = 25;
  // Feature Map
  localparam int unsigned POL_FEAT_LIFETIME = 32; // future extension
  localparam int unsigned POL_FEAT_BINDING  = 33;
  localparam int unsigned POL_FEAT_USAGECTR = 34;

  // RISC-V privilege levels
  localparam logic [1:0] PRV_U = 2'd0;
  localparam logic [1:0] PRV_S = 2'd1;
  localparam logic [1:0] PRV_M = 2'd3;

  // ---------------------------------------------- instruction (funct7)
  typedef enum logic [6:0] {
    FN_WRAPKEY   = 7'd0,
    FN_ENCRYPT   = 7'd1,
    FN_DECRYPT   = 7'd2,
    FN_REVOKE    = 7'd3,
    FN_REVOKE_ID = 7'd4   // revoke every handle bound to rs1 (rs2[0]: PMP ID)
  } kv_funct_e;

  // Handle wrapper operations
  typedef enum logic [2:0] {
    HW_GEN, HW_ENC, HW_DEC, HW_REVOKE, HW_REVOKE_ID
  } hw_op_e;

  // ----------------------------------------------------- result codes
  typedef enum logic [3:0] {
    RES_OK         = 4'd0,
    RES_AUTH_FAIL  = 4'd1,  // handle tag wrong: tampered or foreign handle
    RES_INVALID    = 4'd2,  // handle not in the allowlist (revoked)
    RES_DENIED     = 4'd3,  // usage policy forbids the operation
    RES_HSC_FULL   = 4'd4,  // no free way in the HSC set
    RES_TAG_FAIL   = 4'd5,  // decrypt: ciphertext tag mismatch
    RES_BAD_OP     = 4'd6,  // unknown function code
    RES_NO_KEY     = 4'd7   // visor key not loaded yet
  } kv_res_e;

  // ----------------------------------------------------- HSC entry
  localparam int unsigned HSC_WAYS  = 2;
  localparam int unsigned HSC_SETS  = 64;
  localparam int unsigned HSC_IDX_W = 6;
  localparam int unsigned HSC_TAG_W = IV_W - HSC_IDX_W; // 90

  // Per-handle state of an HSC entry; the entry also stores the IV tag
  // (IV_handle[95:6]) next to it: 90 + 8 + 64 = 162 bits per entry.
  typedef struct packed {
    logic [CTR_W-1:0]     ctr;      // remaining uses
    logic [BIND_W-1:0]    binding;  // bound process (satp) or PMP ID
  } hsc_state_t;

  // Binding kind kept beside the valid bit of every entry
  typedef struct packed {
    logic bound;
    logic pmp;
  } hsc_kind_t;

  // Caller context handed over with every instruction
  typedef struct packed {
    logic [1:0]        priv;
    logic [BIND_W-1:0] satp;
    logic [BIND_W-1:0] pmp_id;
  } kv_ctx_t;

  // ------------------------------------------- AES-GCM engine bundle
  // A job is opened with a one-cycle start carrying key, IV (GCM byte
  // order: iv[95:88] is the first byte), direction and the byte lengths of
  // AAD and text.  Then ceil(aad_len/16) AAD blocks and ceil(data_len/16)
  // text blocks follow on blk/blk_valid/blk_ready, zero padded.  For every
  // text block the engine returns one result block (out_valid, one cycle,
  // always accepted); after the last one it returns the tag (tag_valid).
  typedef struct packed {
    logic         start;
    logic [127:0] key;
    logic [95:0]  iv;
    logic         enc;
    logic [31:0]  aad_len;
    logic [31:0]  data_len;
    logic         blk_valid;
    logic [127:0] blk;
  } gcm_req_t;

  typedef struct packed {
    logic         blk_ready;
    logic         out_valid;
    logic [127:0] out;
    logic         tag_valid;
    logic [127:0] tag;
  } gcm_rsp_t;

  // ------------------------------------------------ policy evaluation
  // Binding check is active when Binding or SelfBind is set.
  function automatic logic pol_bound(input logic [127:0] pol);
    return pol[POL_FEAT_BINDING] | pol[POL_SELFBIND];
  endfunction

  // ID of the caller context that a handle of this policy is bound to
  function automatic logic [BIND_W-1:0] ctx_id(input logic [127:0] pol, input kv_ctx_t ctx);
    return pol[POL_PMPMODE] ? ctx.pmp_id : ctx.satp;
  endfunction

  // May the caller use the handle for encryption (enc=1) or decryption?
  // All rules are evaluated in parallel, in one cycle.
  function automatic logic pol_use_ok(input logic [127:0] pol, input logic enc,
                                      input kv_ctx_t ctx, input hsc_state_t st);
    logic priv_ok, alg_ok, op_ok, bind_ok, ctr_ok;
    priv_ok = pol[POL_PRIV_BASE + int'(ctx.priv)];
    alg_ok  = pol[POL_ALG_AESGCM];
    op_ok   = enc ? pol[POL_ALLOW_ENC] : pol[POL_ALLOW_DEC];
    bind_ok = !pol_bound(pol) || (st.binding == ctx_id(pol, ctx));
    ctr_ok  = !pol[POL_FEAT_USAGECTR] || (st.ctr != '0);
    return priv_ok && alg_ok && op_ok && bind_ok && ctr_ok;
  endfunction

  // Lowest privilege level the policy permits (M if none is set)
  function automatic logic [1:0] pol_min_priv(input logic [127:0] pol);
    if (pol[POL_PRIV_U]) return PRV_U;
    if (pol[POL_PRIV_S]) return PRV_S;
    return PRV_M;
  endfunction

  // May the caller revoke the handle?
  //  unbound:     privilege >= lowest permitted level
  //  process:     the bound process, or privilege > lowest permitted level
  //  PMP (TEE):   the bound TEE, or machine mode
  function automatic logic pol_revoke_ok(input logic [127:0] pol, input kv_ctx_t ctx,
                                         input hsc_state_t st);
    if (!pol_bound(pol))      return ctx.priv >= pol_min_priv(pol);
    if (!pol[POL_PMPMODE])    return (st.binding == ctx.satp) || (ctx.priv > pol_min_priv(pol));
    return (st.binding == ctx.pmp_id) || (ctx.priv == PRV_M);
  endfunction

  // ------------------------------------------------------- helpers
  // Memory holds byte 0 of a block in bits [7:0] of the lower word;
  // AES-GCM numbers byte 0 as bits [127:120].  Byte reversal converts.
  function automatic logic [127:0] bswap128(input logic [127:0] x);
    logic [127:0] y;
    for (int i = 0; i < 16; i++) y[8*i +: 8] = x[8*(15-i) +: 8];
    return y;
  endfunction

  function automatic logic [95:0] bswap96(input logic [95:0] x);
    logic [95:0] y;
    for (int i = 0; i < 12; i++) y[8*i +: 8] = x[8*(11-i) +: 8];
    return y;
  endfunction

  // Keep the first n bytes (memory order: low bytes first) of a block.
  function automatic logic [127:0] keep_bytes(input logic [127:0] x, input logic [4:0] n);
    logic [127:0] y;
    for (int i = 0; i < 16; i++) y[8*i +: 8] = (i < int'(n)) ? x[8*i +: 8] : 8'h00;
    return y;
  endfunction

endpackage
