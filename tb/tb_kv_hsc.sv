// tb_kv_hsc -- self-checking testbench of the Handle State Cache.
//
// Keeps a reference copy of the cache (per set and way: valid, tag, state,
// kind) and checks against it: lookups that hit and miss, the free-way
// report, allocation of both ways of a set until it is full, tag
// comparison (same index, other tag), counter updates, single revocation,
// and the revoke-by-ID sweep for process and PMP bindings including its
// count and duration (SETS + 3 cycles from request to done).  Runs at the paper's 2 x 64 size.
module tb_kv_hsc;
  import kv_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        busy, lookup, rsp_valid, hit, free, wr, wr_valid, sweep, sweep_pmp, sweep_done;
  logic [0:0]  hit_way, free_way, wr_way;
  logic [95:0] iv, wr_iv;
  hsc_state_t  hit_state, wr_state;
  hsc_kind_t   hit_kind, wr_kind;
  logic [63:0] sweep_id;
  logic [7:0]  sweep_cnt;
  logic [127:0] valid;

  kv_hsc dut (
    .clk_i(clk), .rst_ni(rst_n), .busy_o(busy),
    .lookup_i(lookup), .iv_i(iv), .rsp_valid_o(rsp_valid), .hit_o(hit),
    .hit_way_o(hit_way), .hit_state_o(hit_state), .hit_kind_o(hit_kind),
    .free_o(free), .free_way_o(free_way),
    .wr_i(wr), .wr_iv_i(wr_iv), .wr_way_i(wr_way), .wr_state_i(wr_state),
    .wr_kind_i(wr_kind), .wr_valid_i(wr_valid),
    .sweep_i(sweep), .sweep_id_i(sweep_id), .sweep_pmp_i(sweep_pmp),
    .sweep_done_o(sweep_done), .sweep_cnt_o(sweep_cnt), .valid_o(valid));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference model
  bit          r_v   [2][64];
  logic [89:0] r_tag [2][64];
  hsc_state_t  r_st  [2][64];
  hsc_kind_t   r_k   [2][64];

  task automatic do_lookup(input logic [95:0] v);
    int s; bit eh; int ew; bit ef; int efw;
    @(negedge clk); lookup = 1; iv = v;
    @(negedge clk); lookup = 0;
    s = int'(v[5:0]);
    eh = 0; ew = 0; ef = 0; efw = 0;
    for (int w = 1; w >= 0; w--) begin
      if (r_v[w][s] && r_tag[w][s] == v[95:6]) begin eh = 1; ew = w; end
      if (!r_v[w][s]) begin ef = 1; efw = w; end
    end
    check(rsp_valid, "response one cycle after lookup");
    check(hit == eh, $sformatf("hit for %h", v));
    if (eh) begin
      check(hit_way == 1'(ew), "hit way");
      check(hit_state == r_st[ew][s], "hit state");
      check(hit_kind == r_k[ew][s], "hit kind");
    end
    check(free == ef, "free flag");
    if (ef) check(free_way == 1'(efw), "free way");
  endtask

  task automatic do_write(input logic [95:0] v, input int w, input hsc_state_t st,
                          input hsc_kind_t k, input bit val);
    @(negedge clk);
    wr = 1; wr_iv = v; wr_way = 1'(w); wr_state = st; wr_kind = k; wr_valid = val;
    @(negedge clk); wr = 0;
    r_v[w][v[5:0]] = val; r_tag[w][v[5:0]] = v[95:6]; r_st[w][v[5:0]] = st; r_k[w][v[5:0]] = k;
  endtask

  function automatic logic [95:0] rand_iv(input int set);
    return {$urandom, $urandom, $urandom} & ~96'h3f | 96'(set);
  endfunction

  logic [95:0] ivs [2][64];

  initial begin
    lookup = 0; wr = 0; sweep = 0; iv = '0; wr_iv = '0; wr_way = 0; wr_state = '0;
    wr_kind = '0; wr_valid = 0; sweep_id = '0; sweep_pmp = 0;
    foreach (r_v[w, s]) r_v[w][s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(valid == '0, "allowlist empty after reset");

    // fill every set completely: way 0 then way 1
    for (int s = 0; s < 64; s++)
      for (int w = 0; w < 2; w++) begin
        hsc_state_t st; hsc_kind_t k;
        ivs[w][s] = rand_iv(s);
        st.ctr = 8'($urandom); st.binding = {$urandom, $urandom};
        k.bound = $urandom_range(0, 1); k.pmp = $urandom_range(0, 1);
        if (s < 4) begin  // a few known bindings for the sweep
          st.binding = (w == 0) ? 64'hAAAA : 64'hBBBB;
          k.bound = 1; k.pmp = (w == 1);
        end else if (st.binding == 64'hAAAA || st.binding == 64'hBBBB) st.binding = 64'h1;
        do_lookup(ivs[w][s]);          // miss, reports the free way
        do_write(ivs[w][s], w, st, k, 1);
      end
    check(valid == '1, "allowlist full");
    for (int s = 0; s < 64; s += 7) begin
      do_lookup(ivs[0][s]);
      do_lookup(ivs[1][s]);
      do_lookup(rand_iv(s));           // same set, other tag: miss, set full
    end

    // counter update keeps the entry, revocation clears it
    begin
      hsc_state_t st;
      st = r_st[1][9]; st.ctr = st.ctr - 1;
      do_write(ivs[1][9], 1, st, r_k[1][9], 1);
      do_lookup(ivs[1][9]);
      do_write(ivs[1][9], 1, st, r_k[1][9], 0);
      do_lookup(ivs[1][9]);
      check(valid[64 + 9] == 0, "valid bit of way 1 set 9 cleared");
    end

    // sweep: process ID 0xAAAA (way 0 of sets 0..3, not PMP)
    begin
      int t0, exp;
      exp = 0;
      for (int s = 0; s < 64; s++) for (int w = 0; w < 2; w++)
        if (r_v[w][s] && r_k[w][s].bound && !r_k[w][s].pmp && r_st[w][s].binding == 64'hAAAA) begin
          exp++; r_v[w][s] = 0;
        end
      @(negedge clk); sweep = 1; sweep_id = 64'hAAAA; sweep_pmp = 0; t0 = $time;
      @(negedge clk); sweep = 0;
      check(busy, "busy during sweep");
      while (!sweep_done) @(negedge clk);
      check(($time - t0) / 10 == 64 + 3, $sformatf("sweep takes SETS+3 cycles (%0d)", ($time - t0) / 10));
      check(int'(sweep_cnt) == exp && exp == 4, $sformatf("sweep count %0d (expected %0d)", sweep_cnt, exp));
      // PMP ID 0xBBBB as a process ID: nothing
      @(negedge clk); sweep = 1; sweep_id = 64'hBBBB; sweep_pmp = 0;
      @(negedge clk); sweep = 0;
      while (!sweep_done) @(negedge clk);
      check(sweep_cnt == 0, "kind must match");
      @(negedge clk); sweep = 1; sweep_id = 64'hBBBB; sweep_pmp = 1;
      @(negedge clk); sweep = 0;
      while (!sweep_done) @(negedge clk);
      check(sweep_cnt == 4, "PMP sweep count");
      for (int s = 0; s < 4; s++) for (int w = 0; w < 2; w++) r_v[w][s] = 0;
      for (int s = 0; s < 6; s++) begin
        do_lookup(ivs[0][s]); do_lookup(ivs[1][s]);
      end
    end
    for (int s = 0; s < 64; s++) for (int w = 0; w < 2; w++)
      check(valid[w*64 + s] == r_v[w][s], "allowlist matches reference");

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
