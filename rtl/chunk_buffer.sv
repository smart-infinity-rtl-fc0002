// chunk_buffer -- on-chip BRAM buffer for one processing chunk.
//
// The accelerator stages data from device DRAM in on-chip buffers of S elements (the
// "processing chunk size that fits into an internal BRAM buffer"): the momentum,
// gradient, variance and parameter buffers of each updater PE and the index and value
// buffers of the decompressor. Each word holds WIDTH bits (LANES elements). One write
// port and one read port; the read is synchronous, rdata shows mem[raddr] one cycle
// after raddr is presented. A read of the address written in the same cycle returns
// the old word. Simple dual-port BRAM inference template; no reset of the contents.
module chunk_buffer #(
  parameter int unsigned WIDTH = 512,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
