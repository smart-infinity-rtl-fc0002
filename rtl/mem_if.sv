// mem_if -- request/response port to the accelerator memory.
//
// A simplified stand-in for the AXI links that join the decompressor and the updater
// PEs to the device DRAM. One channel carries requests (valid/ready handshake): a read
// or a full-word write with a per-lane write strobe, like AXI's WSTRB. Reads are
// answered in request order on rsp_valid/rsp_data, one cycle per word and with no
// back-pressure, so a master may only have as many reads outstanding as it can take.
// Writes are posted and get no response.
interface mem_if;
  import si_pkg::*;

  logic                req_valid;
  logic                req_ready;
  logic                req_we;
  waddr_t              req_addr;
  word_t               req_wdata;
  logic [LANES-1:0]    req_wstrb;
  logic                rsp_valid;
  word_t               rsp_data;

  modport master (output req_valid, req_we, req_addr, req_wdata, req_wstrb,
                  input  req_ready, rsp_valid, rsp_data);
  modport slave  (input  req_valid, req_we, req_addr, req_wdata, req_wstrb,
                  output req_ready, rsp_valid, rsp_data);

endinterface
