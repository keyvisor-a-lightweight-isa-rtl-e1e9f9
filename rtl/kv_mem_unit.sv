// kv_mem_unit -- memory access unit of KeyVisor.
//
// KeyVisor reaches memory only through the CPU's L1 data cache port (a
// HellaCache-style port in the Rocket core).  Two units need it: the handle
// wrapper (loading handlegen structures and handles, storing new handles)
// and the de-/encryption unit (I/O structure, AAD, data, result tag and IV).
// This unit multiplexes both onto the one 64-bit port.
//
// Port 0 (handle wrapper) has priority over port 1 (de-/encryption unit).
// One request is outstanding at a time: after a request is accepted by the
// cache port, no further request is forwarded until its response has
// returned, and the response is routed to the port that issued it.  The
// instructions are executed one after another, so the two clients are
// rarely active together and the one-request window costs nothing extra.
//
// Timing: a client request passes combinationally to the cache port when
// the unit is idle; the response passes combinationally back.
//
// From the paper: a memory unit between the KeyVisor units and the L1
// cache, 64-bit transfers.  Own choices: the arbitration order and the
// single outstanding request.
module kv_mem_unit (
  input  logic        clk_i,
  input  logic        rst_ni,
  kv_mem_if.server    c0,       // handle wrapper
  kv_mem_if.server    c1,       // de-/encryption unit
  // L1 data-cache port
  output logic        mem_req_valid_o,
  input  logic        mem_req_ready_i,
  output logic [63:0] mem_req_addr_o,
  output logic        mem_req_we_o,
  output logic [63:0] mem_req_wdata_o,
  output logic [7:0]  mem_req_mask_o,
  input  logic        mem_resp_valid_i,
  input  logic [63:0] mem_resp_rdata_i
);
  logic busy_q, owner_q;   // owner 0: c0, 1: c1
  logic sel;               // client presented to the port now

  assign sel = !c0.req_valid;

  always_comb begin
    mem_req_valid_o = !busy_q && (c0.req_valid || c1.req_valid);
    mem_req_addr_o  = sel ? c1.req_addr  : c0.req_addr;
    mem_req_we_o    = sel ? c1.req_we    : c0.req_we;
    mem_req_wdata_o = sel ? c1.req_wdata : c0.req_wdata;
    mem_req_mask_o  = sel ? c1.req_mask  : c0.req_mask;
    c0.req_ready    = !busy_q && mem_req_ready_i && !sel;
    c1.req_ready    = !busy_q && mem_req_ready_i &&  sel;
    c0.resp_valid   = mem_resp_valid_i && busy_q && !owner_q;
    c1.resp_valid   = mem_resp_valid_i && busy_q &&  owner_q;
    c0.resp_rdata   = mem_resp_rdata_i;
    c1.resp_rdata   = mem_resp_rdata_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q  <= 1'b0;
      owner_q <= 1'b0;
    end else if (!busy_q) begin
      if (mem_req_valid_o && mem_req_ready_i) begin
        busy_q  <= 1'b1;
        owner_q <= sel;
      end
    end else if (mem_resp_valid_i) begin
      busy_q <= 1'b0;
    end
  end

  // handshake rules
  a_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_req_valid_o |-> mem_req_addr_o[2:0] == 3'b000);
  a_no_stray_resp: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mem_resp_valid_i |-> busy_q);
  a_c0_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    c0.req_valid && !c0.req_ready |=> c0.req_valid);
  a_c1_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    c1.req_valid && !c1.req_ready |=> c1.req_valid);
endmodule
