// kv_mem_if -- 64-bit memory request/response bundle used between the
// KeyVisor units and the memory unit, modelled on a simplified L1 data-cache
// (HellaCache-like) port.
//
// A request is offered with req_valid and taken in a cycle where req_ready is
// high; it carries a byte address (8-byte aligned), a write flag, 64 bits of
// write data and a byte mask.  Exactly one response follows every request,
// reads and writes alike, with resp_valid high for one cycle (rdata holds the
// word for reads).  A client keeps at most one request outstanding.  The
// paper names the HellaCache interface; this reduced handshake is this
// design's own.
interface kv_mem_if;
  logic        req_valid;
  logic        req_ready;
  logic [63:0] req_addr;
  logic        req_we;
  logic [63:0] req_wdata;
  logic [7:0]  req_mask;
  logic        resp_valid;
  logic [63:0] resp_rdata;

  modport client (output req_valid, req_addr, req_we, req_wdata, req_mask,
                  input  req_ready, resp_valid, resp_rdata);
  modport server (input  req_valid, req_addr, req_we, req_wdata, req_mask,
                  output req_ready, resp_valid, resp_rdata);
endinterface
