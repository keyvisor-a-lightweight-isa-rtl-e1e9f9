// tb_kv_iv_gen -- self-checking testbench of the IV generator.
//
// Steps the 96-bit LFSR with randomly spaced requests and compares every
// state with a reference that applies the recurrence bit by bit
// (s[n] = s[n-96] ^ s[n-94] ^ s[n-49] ^ s[n-47], taps 96/94/49/47), checks
// that the state holds while no IV is requested, that the reset value is
// the seed, and that none of the IVs seen repeats.
module tb_kv_iv_gen;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic        next;
  logic [95:0] iv;
  int checks = 0, failures = 0;
  localparam logic [95:0] SEED = 96'h0123_4567_89AB_CDEF_F00D_0001;

  kv_iv_gen #(.SEED(SEED)) dut (.clk_i(clk), .rst_ni(rst_n), .next_i(next), .iv_o(iv));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: bit sequence view of the register; iv[0] is the newest bit
  function automatic logic [95:0] ref_step(input logic [95:0] s);
    logic nb;
    nb = s[95] ^ s[93] ^ s[48] ^ s[46];
    return {s[94:0], nb};
  endfunction

  logic [95:0] expect_iv;
  logic [95:0] seen [$];

  initial begin
    next = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(iv == SEED, "reset value is the seed");
    expect_iv = SEED;
    for (int i = 0; i < 2000; i++) begin
      next = ($urandom_range(0, 2) != 0);
      @(negedge clk);
      if (next) expect_iv = ref_step(expect_iv);
      check(iv == expect_iv, $sformatf("step %0d", i));
      if (next) begin
        foreach (seen[j]) if (seen[j] == iv) begin
          failures++; $display("FAIL: IV repeated at step %0d", i);
        end
        seen.push_back(iv);
      end
      check(iv != '0, "never all zero");
    end
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
