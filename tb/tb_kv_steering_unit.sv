// tb_kv_steering_unit -- self-checking testbench of the steering unit.
//
// The handle wrapper and the de-/encryption unit are replaced by stubs that
// answer after a random delay with random result codes, values and user
// keys.  Random commands (all five function codes plus undefined ones, random
// operands, caller contexts and rd) are sent first without and then with a
// loaded visor key, with random response back-pressure.  For each command
// the testbench predicts the whole exchange: RES_NO_KEY without a key,
// RES_BAD_OP for an undefined code, otherwise the handle wrapper call with
// the decoded operation, operands, context and visor key; for encrypt and
// decrypt the de-/encryption call only after a successful handle check,
// with the released user key, the I/O pointer and the AES-GCM hand-over;
// and the rd value and register number of the response.
module tb_kv_steering_unit;
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
  logic         hw_start, hw_done, ed_start, ed_enc, ed_done, gcm_sel;
  hw_op_e       hw_op;
  logic [63:0]  hw_rs1, hw_rs2, hw_val, ed_io;
  kv_ctx_t      hw_ctx;
  logic [127:0] vkey, hw_ukey, ed_key;
  kv_res_e      hw_res, ed_res;

  kv_steering_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .visor_key_load_i(key_load), .visor_key_i(key_in),
    .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_funct_i(funct),
    .cmd_rs1_i(rs1), .cmd_rs2_i(rs2), .cmd_rd_i(rd), .cmd_ctx_i(ctx),
    .resp_valid_o(resp_valid), .resp_ready_i(resp_ready), .resp_rd_o(resp_rd),
    .resp_data_o(resp_data), .busy_o(busy),
    .hw_start_o(hw_start), .hw_op_o(hw_op), .hw_rs1_o(hw_rs1), .hw_rs2_o(hw_rs2),
    .hw_ctx_o(hw_ctx), .visor_key_o(vkey), .hw_done_i(hw_done), .hw_res_i(hw_res),
    .hw_val_i(hw_val), .hw_user_key_i(hw_ukey),
    .ed_start_o(ed_start), .ed_enc_o(ed_enc), .ed_key_o(ed_key), .ed_io_ptr_o(ed_io),
    .ed_done_i(ed_done), .ed_res_i(ed_res), .gcm_sel_o(gcm_sel));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stub outputs chosen per command by the stimulus
  kv_res_e      s_hw_res, s_ed_res;
  logic [63:0]  s_hw_val;
  logic [127:0] s_ukey;
  int n_hw_calls, n_ed_calls;

  // handle wrapper stub
  initial begin
    hw_done = 0; hw_res = RES_OK; hw_val = '0; hw_ukey = '0; n_hw_calls = 0;
    forever begin
      @(negedge clk);
      if (hw_start) begin
        n_hw_calls++;
        repeat ($urandom_range(1, 6)) @(negedge clk);
        hw_done = 1; hw_res = s_hw_res; hw_val = s_hw_val;
        hw_ukey = (s_hw_res == RES_OK) ? s_ukey : '0;
        @(negedge clk);
        hw_done = 0; hw_res = RES_OK; hw_val = 'x;
      end
    end
  end

  // de-/encryption stub; also checks the AES-GCM hand-over while it runs
  initial begin
    ed_done = 0; ed_res = RES_OK; n_ed_calls = 0;
    forever begin
      @(negedge clk);
      if (ed_start) begin
        n_ed_calls++;
        repeat ($urandom_range(1, 6)) begin
          @(negedge clk);
          check(gcm_sel, "AES-GCM handed to the de-/encryption unit");
        end
        ed_done = 1; ed_res = s_ed_res;
        @(negedge clk);
        ed_done = 0;
      end
    end
  end

  logic [127:0] key_val;
  bit key_loaded;

  task automatic one_cmd();
    logic [6:0] f; logic [63:0] a1, a2; logic [4:0] r; kv_ctx_t c;
    kv_res_e exp_res; logic [63:0] exp_val; bit exp_hw, exp_ed;
    int hw0, ed0;
    f  = ($urandom_range(0, 9) == 0) ? 7'($urandom_range(5, 127)) : 7'($urandom_range(0, 4));
    a1 = {$urandom, $urandom}; a2 = {$urandom, $urandom}; r = 5'($urandom);
    c.priv = 2'($urandom_range(0, 3)); c.satp = {$urandom, $urandom}; c.pmp_id = {$urandom, $urandom};
    s_hw_res = ($urandom_range(0, 2) != 0) ? RES_OK : kv_res_e'($urandom_range(1, 4));
    s_ed_res = ($urandom_range(0, 2) != 0) ? RES_OK : RES_TAG_FAIL;
    s_hw_val = {$urandom, $urandom};
    s_ukey   = {$urandom, $urandom, $urandom, $urandom};
    // prediction
    exp_hw = key_loaded && f <= 7'd4;
    exp_ed = exp_hw && (f == FN_ENCRYPT || f == FN_DECRYPT) && s_hw_res == RES_OK;
    exp_res = !key_loaded ? RES_NO_KEY : (f > 7'd4) ? RES_BAD_OP : exp_ed ? s_ed_res : s_hw_res;
    exp_val = (exp_hw && f == FN_REVOKE_ID) ? s_hw_val : '0;
    hw0 = n_hw_calls; ed0 = n_ed_calls;

    @(negedge clk);
    cmd_valid = 1; funct = f; rs1 = a1; rs2 = a2; rd = r; ctx = c;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 0; funct = 'x; rs1 = 'x; rs2 = 'x;
    while (!resp_valid) begin
      if (hw_start) begin
        check(hw_op == hw_op_e'(f), "decoded operation");
        check(hw_rs1 == a1 && hw_rs2 == a2, "operands passed to the handle wrapper");
        check(hw_ctx == c, "caller context passed on");
        check(vkey == key_val, "visor key passed on");
      end
      if (ed_start) begin
        check(ed_enc == (f == FN_ENCRYPT), "direction");
        check(ed_key == s_ukey, "released user key passed on");
        check(ed_io == a2, "I/O structure pointer");
      end
      @(negedge clk);
    end
    // back-pressure: the response must hold
    repeat ($urandom_range(0, 3)) begin
      check(resp_valid && resp_data == {exp_val[55:0], 4'd0, 4'(exp_res)}, "response holds");
      @(negedge clk);
    end
    resp_ready = 1;
    check(resp_data == {exp_val[55:0], 4'd0, 4'(exp_res)},
          $sformatf("rd value f=%0d got %h exp res %0d", f, resp_data, exp_res));
    check(resp_rd == r, "rd register number");
    check(n_hw_calls - hw0 == int'(exp_hw), "handle wrapper called iff expected");
    check(n_ed_calls - ed0 == int'(exp_ed), "de-/encryption unit called iff expected");
    @(negedge clk);
    resp_ready = 0;
  endtask

  initial begin
    key_load = 0; key_in = '0; cmd_valid = 0; funct = '0; rs1 = '0; rs2 = '0; rd = '0;
    ctx = '0; resp_ready = 0; key_loaded = 0; key_val = '0;
    s_hw_res = RES_OK; s_ed_res = RES_OK; s_hw_val = '0; s_ukey = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 20; i++) one_cmd();
    key_val = 128'h000102030405060708090a0b0c0d0e0f;
    key_in = key_val; key_load = 1;
    @(negedge clk); key_load = 0; key_in = '0; key_loaded = 1;
    for (int i = 0; i < 500; i++) one_cmd();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
