// kv_steering_unit -- instruction decoder and sequencer of KeyVisor.
//
// Receives the custom instructions from the core over a RoCC-style command
// port, runs them to completion one at a time (the core waits, as the
// instructions are blocking) and answers with one response carrying the
// value for rd.  It also holds the 128-bit visor key register, which nothing
// outside KeyVisor can read.
//
//   funct7  instruction   rs1              rs2
//   0       wrapkey       handlegen ptr    handle output ptr
//   1       encrypt       handle ptr       I/O structure ptr
//   2       decrypt       handle ptr       I/O structure ptr
//   3       revoke        handle ptr       -
//   4       revoke by ID  binding ID       bit 0: 1 = PMP/TEE ID
//
// wrapkey and revoke are handled by the handle wrapper alone.  encrypt and
// decrypt first let the handle wrapper verify the handle and release the
// user key; only if that succeeds is the de-/encryption unit started with
// it.  rd returns the result code (kv_res_e) in bits [3:0]; revoke by ID
// also returns the number of revoked handles in bits [63:8].  gcm_sel_o
// hands the shared AES-GCM engine to the de-/encryption unit while it runs.
//
// The visor key is loaded from visor_key_i when visor_key_load_i is high
// (from the TRNG or secure storage at start-up); until then every
// instruction answers RES_NO_KEY.  The caller context (privilege level,
// satp, PMP ID) is sampled with the command.
//
// ed_key_o is the user key released by the handle wrapper, wired straight
// through: the key lives in exactly one register (in the handle wrapper)
// and is never copied here.  rd bits [7:4] are always zero.
//
// From the paper: a steering unit with the visor key register that
// integrates four instructions over RoCC and drives the handle wrapper and
// the en-/decryption unit.  Own choices: function codes, rd format, the
// extra revoke-by-ID function code and the key load port.
module kv_steering_unit
  import kv_pkg::*;
(
  input  logic          clk_i,
  input  logic          rst_ni,
  // visor key source
  input  logic          visor_key_load_i,
  input  logic [127:0]  visor_key_i,
  // RoCC command
  input  logic          cmd_valid_i,
  output logic          cmd_ready_o,
  input  logic [6:0]    cmd_funct_i,
  input  logic [63:0]   cmd_rs1_i,
  input  logic [63:0]   cmd_rs2_i,
  input  logic [4:0]    cmd_rd_i,
  input  kv_ctx_t       cmd_ctx_i,
  // RoCC response
  output logic          resp_valid_o,
  input  logic          resp_ready_i,
  output logic [4:0]    resp_rd_o,
  output logic [63:0]   resp_data_o,
  output logic          busy_o,
  // handle wrapper
  output logic          hw_start_o,
  output hw_op_e        hw_op_o,
  output logic [63:0]   hw_rs1_o,
  output logic [63:0]   hw_rs2_o,
  output kv_ctx_t       hw_ctx_o,
  output logic [127:0]  visor_key_o,
  input  logic          hw_done_i,
  input  kv_res_e       hw_res_i,
  input  logic [63:0]   hw_val_i,
  input  logic [127:0]  hw_user_key_i,
  // de-/encryption unit
  output logic          ed_start_o,
  output logic          ed_enc_o,
  output logic [127:0]  ed_key_o,
  output logic [63:0]   ed_io_ptr_o,
  input  logic          ed_done_i,
  input  kv_res_e       ed_res_i,
  output logic          gcm_sel_o
);
  typedef enum logic [2:0] {S_IDLE, S_HW_START, S_HW, S_ED_START, S_ED, S_RESP} state_e;

  state_e       state_q;
  logic [127:0] vkey_q;
  logic         vkey_valid_q;
  hw_op_e       op_q;
  logic [63:0]  rs1_q, rs2_q;
  logic [4:0]   rd_q;
  kv_ctx_t      ctx_q;
  kv_res_e      res_q;
  logic [63:0]  val_q;

  // decode
  hw_op_e op_dec;
  logic   op_ok;
  always_comb begin
    op_ok  = 1'b1;
    op_dec = HW_GEN;
    unique case (cmd_funct_i)
      FN_WRAPKEY:   op_dec = HW_GEN;
      FN_ENCRYPT:   op_dec = HW_ENC;
      FN_DECRYPT:   op_dec = HW_DEC;
      FN_REVOKE:    op_dec = HW_REVOKE;
      FN_REVOKE_ID: op_dec = HW_REVOKE_ID;
      default:      op_ok  = 1'b0;
    endcase
  end

  always_comb begin
    cmd_ready_o  = (state_q == S_IDLE);
    resp_valid_o = (state_q == S_RESP);
    resp_rd_o    = rd_q;
    resp_data_o  = {val_q[55:0], 4'd0, 4'(res_q)};
    busy_o       = (state_q != S_IDLE);
    hw_start_o   = (state_q == S_HW_START);
    hw_op_o      = op_q;
    hw_rs1_o     = rs1_q;
    hw_rs2_o     = rs2_q;
    hw_ctx_o     = ctx_q;
    visor_key_o  = vkey_q;
    ed_start_o   = (state_q == S_ED_START);
    ed_enc_o     = (op_q == HW_ENC);
    ed_key_o     = hw_user_key_i;
    ed_io_ptr_o  = rs2_q;
    gcm_sel_o    = (state_q == S_ED_START) || (state_q == S_ED);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= S_IDLE;
      vkey_q       <= '0;
      vkey_valid_q <= 1'b0;
      op_q         <= HW_GEN;
      rs1_q        <= '0;
      rs2_q        <= '0;
      rd_q         <= '0;
      ctx_q        <= '0;
      res_q        <= RES_OK;
      val_q        <= '0;
    end else begin
      if (visor_key_load_i && state_q == S_IDLE) begin
        vkey_q       <= visor_key_i;
        vkey_valid_q <= 1'b1;
      end
      unique case (state_q)
        S_IDLE: if (cmd_valid_i) begin
          op_q  <= op_dec;
          rs1_q <= cmd_rs1_i;
          rs2_q <= cmd_rs2_i;
          rd_q  <= cmd_rd_i;
          ctx_q <= cmd_ctx_i;
          val_q <= '0;
          if (!vkey_valid_q) begin
            res_q   <= RES_NO_KEY;
            state_q <= S_RESP;
          end else if (!op_ok) begin
            res_q   <= RES_BAD_OP;
            state_q <= S_RESP;
          end else begin
            state_q <= S_HW_START;
          end
        end
        S_HW_START: state_q <= S_HW;
        S_HW: if (hw_done_i) begin
          res_q <= hw_res_i;
          val_q <= (op_q == HW_REVOKE_ID) ? hw_val_i : '0;
          if ((op_q == HW_ENC || op_q == HW_DEC) && hw_res_i == RES_OK)
            state_q <= S_ED_START;
          else
            state_q <= S_RESP;
        end
        S_ED_START: state_q <= S_ED;
        S_ED: if (ed_done_i) begin
          res_q   <= ed_res_i;
          state_q <= S_RESP;
        end
        S_RESP: if (resp_ready_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_resp_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    resp_valid_o && !resp_ready_i |=> resp_valid_o && $stable(resp_data_o));
endmodule
