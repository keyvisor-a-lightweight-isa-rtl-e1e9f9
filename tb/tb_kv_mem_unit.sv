// tb_kv_mem_unit -- self-checking testbench of the memory access unit.
//
// Two independent client processes (standing in for the handle wrapper on
// port 0 and the de-/encryption unit on port 1) issue random byte-masked
// writes and reads into disjoint regions of a stalling memory model, with
// random gaps so that they often compete.  Each client keeps a reference
// copy of its region and checks every read.  Monitors check that each
// client receives exactly one response per accepted request and never a
// response it did not ask for, that port 1 is never granted while port 0
// is requesting, and that both clients finish.
module tb_kv_mem_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  kv_mem_if c [2] ();
  logic        mv, mr, mwe, rv;
  logic [63:0] ma, mwd, rd;
  logic [7:0]  mm;

  kv_mem_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .c0(c[0]), .c1(c[1]),
    .mem_req_valid_o(mv), .mem_req_ready_i(mr), .mem_req_addr_o(ma), .mem_req_we_o(mwe),
    .mem_req_wdata_o(mwd), .mem_req_mask_o(mm), .mem_resp_valid_i(rv), .mem_resp_rdata_i(rd));

  kv_mem_model #(.WORDS(512), .LAT(3)) u_mem (
    .clk_i(clk), .rst_ni(rst_n), .req_valid_i(mv), .req_ready_o(mr), .req_addr_i(ma),
    .req_we_i(mwe), .req_wdata_i(mwd), .req_mask_i(mm), .resp_valid_o(rv), .resp_rdata_o(rd));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam int OPS = 400;
  int pend [2];
  int nresp [2];
  bit fin [2];

  // one client process per port; region of 64 words at 0x400 * (p + 1)
  for (genvar p = 0; p < 2; p++) begin : g_cli
    logic [63:0] refm [64];
    initial begin
      c[p].req_valid = 0; c[p].req_addr = '0; c[p].req_we = 0;
      c[p].req_wdata = '0; c[p].req_mask = '0;
      foreach (refm[i]) refm[i] = '0;
      wait (rst_n);
      repeat (2) @(negedge clk);
      for (int n = 0; n < OPS; n++) begin
        int w; bit we; logic [63:0] d; logic [7:0] msk;
        repeat ($urandom_range(0, 3)) @(negedge clk);
        w = $urandom_range(0, 63);
        we = (n < 64) ? 1'b1 : 1'($urandom_range(0, 1));
        d = {$urandom, $urandom};
        msk = (n < 64) ? 8'hFF : 8'($urandom);
        c[p].req_valid = 1; c[p].req_addr = 64'h400 * (p + 1) + 64'(w) * 8;
        c[p].req_we = we; c[p].req_wdata = d; c[p].req_mask = msk;
        @(posedge clk);
        while (!c[p].req_ready) @(posedge clk);
        @(negedge clk);
        c[p].req_valid = 0;
        while (!c[p].resp_valid) @(negedge clk);
        if (we) begin
          for (int b = 0; b < 8; b++) if (msk[b]) refm[w][8*b +: 8] = d[8*b +: 8];
        end else begin
          check(c[p].resp_rdata == refm[w], $sformatf("port %0d read word %0d", p, w));
        end
      end
      fin[p] = 1;
    end
  end

  // response accounting and arbitration
  for (genvar p = 0; p < 2; p++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (c[p].req_valid && c[p].req_ready) pend[p]++;
      if (c[p].resp_valid) begin
        nresp[p]++;
        if (pend[p] == 0) begin failures++; $display("FAIL: stray response on port %0d", p); end
        else pend[p]--;
      end
      if (pend[p] > 1) begin failures++; $display("FAIL: port %0d has two requests open", p); end
    end
  end
  always @(posedge clk) if (rst_n && c[0].req_valid && c[1].req_ready) begin
    failures++; $display("FAIL: port 1 granted while port 0 requests");
  end

  initial begin
    pend = '{0, 0}; nresp = '{0, 0}; fin = '{0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1]);
    repeat (5) @(negedge clk);
    check(nresp[0] == OPS && nresp[1] == OPS, $sformatf("responses %0d/%0d", nresp[0], nresp[1]));
    check(pend[0] == 0 && pend[1] == 0, "nothing left open");
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
