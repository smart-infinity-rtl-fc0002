// accel_mem_model -- behavioural model of the device DRAM behind the kernel's memory port.
//
// Not synthesizable and not part of the design: it stands in for the 4 GB DDR4 and its
// controller. It holds DEPTH words of LANES FP32 elements, accepts a request when
// req_ready is high (ready drops at random in STALL_PCT percent of the cycles), applies
// writes at once under the lane strobe, and answers reads in request order LATENCY
// cycles after acceptance, one word per cycle. It counts stalled requests and out-of-
// range addresses. Testbenches read and write `mem` directly to load and check data.
module accel_mem_model
  import si_pkg::*;
#(
  parameter int unsigned DEPTH     = 4096,
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic             req_we,
  input  waddr_t           req_addr,
  input  word_t            req_wdata,
  input  logic [LANES-1:0] req_wstrb,
  output logic             rsp_valid,
  output word_t            rsp_data
);

  word_t mem [DEPTH];
  int    stall_pct = STALL_PCT;   // may be changed by the testbench
  int    n_stall = 0;
  int    n_bad   = 0;
  int    n_reads = 0;
  int    n_writes = 0;
  longint now = 0;

  typedef struct { longint due; word_t data; } rsp_t;
  rsp_t q[$];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    req_ready = 1'b0;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    rsp_t r;
    now <= now + 1;
    if (req_valid && req_ready) begin
      if (int'(req_addr) >= int'(DEPTH)) begin
        n_bad <= n_bad + 1;
      end else if (req_we) begin
        n_writes <= n_writes + 1;
        for (int k = 0; k < LANES; k++)
          if (req_wstrb[k]) mem[int'(req_addr)][32*k +: 32] <= req_wdata[32*k +: 32];
      end else begin
        n_reads <= n_reads + 1;
        r.due  = now + longint'(LATENCY);
        r.data = mem[int'(req_addr)];
        q.push_back(r);
      end
    end
    if (req_valid && !req_ready) n_stall <= n_stall + 1;
    if (q.size() > 0 && q[0].due <= now) begin
      rsp_valid <= 1'b1;
      rsp_data  <= q[0].data;
      void'(q.pop_front());
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= int'($urandom % 100) >= stall_pct;
  end

endmodule
