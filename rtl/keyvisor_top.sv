// keyvisor_top -- KeyVisor key-handle extension as a RoCC accelerator.
//
// Wires the units of the extension together:
//   steering unit      decodes wrapkey / encrypt / decrypt / revoke (+ revoke
//                      by ID), owns the visor key, sequences the others
//   handle wrapper     creates and unwraps handles, enforces policies
//   HSC                2-way x 64-set handle state cache + 128-bit allowlist
//   de-/encryption     streams user AAD and data through AES-GCM in place
//   IV generator       96-bit LFSR shared by handle and data IVs
//   memory unit        shares the single 64-bit L1 data-cache port
// The AES-128-GCM engine is an external block: its request and response
// bundles (gcm_req_t / gcm_rsp_t, see kv_pkg) are ports of this module and
// are routed to the handle wrapper or, while gcm_sel is high, to the
// de-/encryption unit.  The visor key is loaded through visor_key_* (TRNG
// or secure storage).  The caller context (privilege level, satp, PMP ID)
// comes with every command from the core.
//
// Timing: one instruction at a time; cmd_ready is low until the response
// of the previous instruction has been taken.  Memory: one outstanding
// 64-bit request; every request gets one response (see kv_mem_if).
//
// The structure follows the paper's block diagram of the prototype; the
// port-level protocols are this design's own.
module keyvisor_top
  import kv_pkg::*;
#(
  parameter int unsigned HSC_NWAYS = 2,
  parameter int unsigned HSC_NSETS = 64
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  // visor key source (TRNG / secure storage)
  input  logic          visor_key_load_i,
  input  logic [127:0]  visor_key_i,
  // RoCC command / response
  input  logic          cmd_valid_i,
  output logic          cmd_ready_o,
  input  logic [6:0]    cmd_funct_i,
  input  logic [63:0]   cmd_rs1_i,
  input  logic [63:0]   cmd_rs2_i,
  input  logic [4:0]    cmd_rd_i,
  input  kv_ctx_t       cmd_ctx_i,
  output logic          resp_valid_o,
  input  logic          resp_ready_i,
  output logic [4:0]    resp_rd_o,
  output logic [63:0]   resp_data_o,
  output logic          busy_o,
  // L1 data-cache port
  output logic          mem_req_valid_o,
  input  logic          mem_req_ready_i,
  output logic [63:0]   mem_req_addr_o,
  output logic          mem_req_we_o,
  output logic [63:0]   mem_req_wdata_o,
  output logic [7:0]    mem_req_mask_o,
  input  logic          mem_resp_valid_i,
  input  logic [63:0]   mem_resp_rdata_i,
  // external AES-128-GCM engine
  output gcm_req_t      gcm_req_o,
  input  gcm_rsp_t      gcm_rsp_i,
  // allowlist, for observation
  output logic [HSC_NWAYS*HSC_NSETS-1:0] hsc_valid_o
);
  // ------------------------------------------------------------ wires
  kv_mem_if hw_mem ();
  kv_mem_if ed_mem ();

  logic          hw_start, hw_done, hw_busy;
  hw_op_e        hw_op;
  logic [63:0]   hw_rs1, hw_rs2, hw_val;
  kv_ctx_t       hw_ctx;
  logic [127:0]  visor_key, hw_user_key, hw_policy;
  kv_res_e       hw_res;

  logic          ed_start, ed_enc, ed_done, ed_busy;
  logic [127:0]  ed_key;
  logic [63:0]   ed_io_ptr;
  kv_res_e       ed_res;

  logic          gcm_sel;
  gcm_req_t      hw_gcm_req, ed_gcm_req;
  gcm_rsp_t      hw_gcm_rsp, ed_gcm_rsp;

  logic          hw_iv_next, ed_iv_next;
  logic [IV_W-1:0] iv;

  logic          hsc_busy, hsc_lookup, hsc_rsp_valid, hsc_hit, hsc_free;
  logic [$clog2(HSC_NWAYS)-1:0] hsc_hit_way, hsc_free_way, hsc_wr_way;
  logic [IV_W-1:0] hsc_iv;
  hsc_state_t    hsc_hit_state, hsc_wr_state;
  hsc_kind_t     hsc_hit_kind, hsc_wr_kind;
  logic          hsc_wr, hsc_wr_valid, hsc_sweep, hsc_sweep_pmp, hsc_sweep_done;
  logic [BIND_W-1:0] hsc_sweep_id;
  logic [$clog2(HSC_NWAYS*HSC_NSETS):0] hsc_sweep_cnt;

  // ------------------------------------------------------- steering
  kv_steering_unit u_steer (
    .clk_i, .rst_ni,
    .visor_key_load_i, .visor_key_i,
    .cmd_valid_i, .cmd_ready_o, .cmd_funct_i, .cmd_rs1_i, .cmd_rs2_i,
    .cmd_rd_i, .cmd_ctx_i,
    .resp_valid_o, .resp_ready_i, .resp_rd_o, .resp_data_o, .busy_o,
    .hw_start_o(hw_start), .hw_op_o(hw_op), .hw_rs1_o(hw_rs1), .hw_rs2_o(hw_rs2),
    .hw_ctx_o(hw_ctx), .visor_key_o(visor_key), .hw_done_i(hw_done),
    .hw_res_i(hw_res), .hw_val_i(hw_val), .hw_user_key_i(hw_user_key),
    .ed_start_o(ed_start), .ed_enc_o(ed_enc), .ed_key_o(ed_key),
    .ed_io_ptr_o(ed_io_ptr), .ed_done_i(ed_done), .ed_res_i(ed_res),
    .gcm_sel_o(gcm_sel)
  );

  // ------------------------------------------------- handle wrapper
  kv_handle_wrapper u_hw (
    .clk_i, .rst_ni,
    .start_i(hw_start), .op_i(hw_op), .rs1_i(hw_rs1), .rs2_i(hw_rs2),
    .ctx_i(hw_ctx), .visor_key_i(visor_key),
    .busy_o(hw_busy), .done_o(hw_done), .res_o(hw_res), .val_o(hw_val),
    .user_key_o(hw_user_key), .policy_o(hw_policy),
    .mem(hw_mem),
    .gcm_req_o(hw_gcm_req), .gcm_rsp_i(hw_gcm_rsp),
    .iv_next_o(hw_iv_next), .iv_i(iv),
    .hsc_busy_i(hsc_busy), .hsc_lookup_o(hsc_lookup), .hsc_iv_o(hsc_iv),
    .hsc_rsp_valid_i(hsc_rsp_valid), .hsc_hit_i(hsc_hit),
    .hsc_hit_way_i(hsc_hit_way), .hsc_hit_state_i(hsc_hit_state),
    .hsc_free_i(hsc_free), .hsc_free_way_i(hsc_free_way),
    .hsc_wr_o(hsc_wr), .hsc_wr_way_o(hsc_wr_way), .hsc_wr_state_o(hsc_wr_state),
    .hsc_wr_kind_o(hsc_wr_kind), .hsc_wr_valid_o(hsc_wr_valid),
    .hsc_sweep_o(hsc_sweep), .hsc_sweep_id_o(hsc_sweep_id),
    .hsc_sweep_pmp_o(hsc_sweep_pmp), .hsc_sweep_done_i(hsc_sweep_done),
    .hsc_sweep_cnt_i(8'(hsc_sweep_cnt))
  );

  // ---------------------------------------------- handle state cache
  kv_hsc #(.WAYS(HSC_NWAYS), .SETS(HSC_NSETS)) u_hsc (
    .clk_i, .rst_ni, .busy_o(hsc_busy),
    .lookup_i(hsc_lookup), .iv_i(hsc_iv),
    .rsp_valid_o(hsc_rsp_valid), .hit_o(hsc_hit), .hit_way_o(hsc_hit_way),
    .hit_state_o(hsc_hit_state), .hit_kind_o(hsc_hit_kind),
    .free_o(hsc_free), .free_way_o(hsc_free_way),
    .wr_i(hsc_wr), .wr_iv_i(hsc_iv), .wr_way_i(hsc_wr_way),
    .wr_state_i(hsc_wr_state), .wr_kind_i(hsc_wr_kind), .wr_valid_i(hsc_wr_valid),
    .sweep_i(hsc_sweep), .sweep_id_i(hsc_sweep_id), .sweep_pmp_i(hsc_sweep_pmp),
    .sweep_done_o(hsc_sweep_done), .sweep_cnt_o(hsc_sweep_cnt),
    .valid_o(hsc_valid_o)
  );

  // ---------------------------------------------- de-/encryption unit
  kv_encdec_unit u_ed (
    .clk_i, .rst_ni,
    .start_i(ed_start), .enc_i(ed_enc), .key_i(ed_key), .io_ptr_i(ed_io_ptr),
    .busy_o(ed_busy), .done_o(ed_done), .res_o(ed_res),
    .mem(ed_mem),
    .gcm_req_o(ed_gcm_req), .gcm_rsp_i(ed_gcm_rsp),
    .iv_next_o(ed_iv_next), .iv_i(iv)
  );

  // ------------------------------------------------------ IV generator
  kv_iv_gen u_iv (
    .clk_i, .rst_ni,
    .next_i(hw_iv_next | ed_iv_next),
    .iv_o(iv)
  );

  // -------------------------------------------------------- memory unit
  kv_mem_unit u_mem (
    .clk_i, .rst_ni,
    .c0(hw_mem), .c1(ed_mem),
    .mem_req_valid_o, .mem_req_ready_i, .mem_req_addr_o, .mem_req_we_o,
    .mem_req_wdata_o, .mem_req_mask_o, .mem_resp_valid_i, .mem_resp_rdata_i
  );

  // ------------------------------------------ AES-GCM engine ownership
  always_comb begin
    gcm_req_o  = gcm_sel ? ed_gcm_req : hw_gcm_req;
    hw_gcm_rsp = gcm_sel ? '0 : gcm_rsp_i;
    ed_gcm_rsp = gcm_sel ? gcm_rsp_i : '0;
  end

  // the two IV users never draw in the same cycle
  a_iv_exclusive: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(hw_iv_next && ed_iv_next));
  // the engine is handed over only between jobs
  a_units_exclusive: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(ed_busy && hw_busy));
endmodule
