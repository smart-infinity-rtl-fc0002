// mem_arbiter -- shares the accelerator memory port among several masters.
//
// Stands in for the AXI interconnect between the device DRAM and the decompressor and
// updater PEs. N_MST request channels meet one memory request channel; a round-robin
// arbiter grants one request per cycle, starting the search after the master granted
// last. For every read it grants it pushes the master's number into a FIFO; since
// memory answers reads in order, each response is routed to the master at the head of
// that FIFO. A read is not granted while the FIFO is full, so at most OUTST reads are
// in flight. Writes are posted and need no entry. Requests pass through without a
// register (grant is combinational), so the path adds no latency.
// The paper only names the AXI links; arbitration policy and FIFO depth are this
// design's choices.
// The assertion's disable iff (!rst_n) makes lint see rst_n used synchronously as well as
// as the asynchronous reset; that use is in the checker only, not in the circuit.
module mem_arbiter
  import si_pkg::*;
#(
  parameter int unsigned N_MST = 5,
  parameter int unsigned OUTST = 64,
  localparam int unsigned IW   = (N_MST > 1) ? $clog2(N_MST) : 1,
  localparam int unsigned FAW  = $clog2(OUTST)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // masters
  input  logic [N_MST-1:0]      m_req_valid,
  output logic [N_MST-1:0]      m_req_ready,
  input  logic [N_MST-1:0]      m_req_we,
  input  waddr_t                m_req_addr  [N_MST],
  input  word_t                 m_req_wdata [N_MST],
  input  logic [LANES-1:0]      m_req_wstrb [N_MST],
  output logic [N_MST-1:0]      m_rsp_valid,
  output word_t                 m_rsp_data,
  // memory
  output logic                  s_req_valid,
  input  logic                  s_req_ready,
  output logic                  s_req_we,
  output waddr_t                s_req_addr,
  output word_t                 s_req_wdata,
  output logic [LANES-1:0]      s_req_wstrb,
  input  logic                  s_rsp_valid,
  input  word_t                 s_rsp_data,
  // count of cycles in which a master waited for another one
  output logic [31:0]           n_conflict
);

  logic [IW-1:0]  last, gnt;
  logic           gnt_vld;
  logic [IW-1:0]  fifo [OUTST];
  logic [FAW:0]   cnt;
  logic [FAW-1:0] wp, rp;
  logic           full;
  logic [N_MST-1:0] eligible;

  assign full = (cnt == (FAW+1)'(OUTST));

  always_comb begin
    for (int i = 0; i < N_MST; i++) eligible[i] = m_req_valid[i] && (m_req_we[i] || !full);
    gnt_vld = 1'b0;
    gnt     = last;
    for (int k = 1; k <= N_MST; k++) begin
      automatic int i = (int'(last) + k) % N_MST;
      if (!gnt_vld && eligible[i]) begin
        gnt_vld = 1'b1;
        gnt     = IW'(i);
      end
    end
  end

  assign s_req_valid = gnt_vld;
  assign s_req_we    = m_req_we[gnt];
  assign s_req_addr  = m_req_addr[gnt];
  assign s_req_wdata = m_req_wdata[gnt];
  assign s_req_wstrb = m_req_wstrb[gnt];

  always_comb begin
    m_req_ready = '0;
    if (gnt_vld) m_req_ready[gnt] = s_req_ready;
  end

  logic push, pop;
  assign push = gnt_vld && s_req_ready && !m_req_we[gnt];
  assign pop  = s_rsp_valid;

  always_comb begin
    m_rsp_valid = '0;
    if (s_rsp_valid) m_rsp_valid[fifo[rp]] = 1'b1;
  end
  assign m_rsp_data = s_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last       <= IW'(N_MST - 1);
      cnt        <= '0;
      wp         <= '0;
      rp         <= '0;
      n_conflict <= '0;
    end else begin
      if (gnt_vld && s_req_ready) last <= gnt;
      if (push) wp <= wp + 1'b1;
      if (pop) rp <= rp + 1'b1;
      cnt <= cnt + (FAW+1)'(push) - (FAW+1)'(pop);
      if ($countones(m_req_valid) > 1) n_conflict <= n_conflict + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wp] <= gnt;
  end

  // A response must belong to an outstanding read.
  a_no_orphan_rsp: assert property (@(posedge clk) disable iff (!rst_n)
                                    s_rsp_valid |-> cnt != '0);

endmodule
