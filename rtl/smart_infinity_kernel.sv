// smart_infinity_kernel -- near-storage optimizer kernel of one computational SSD.
//
// In storage-offloaded LLM training the optimizer states (FP32 parameter, momentum,
// variance) never leave the SSD of the device that owns them: the host moves one
// subgroup of up to D elements from the SSD into the device DRAM over the device's
// internal PCIe switch, starts this kernel, and moves the results back. For that
// subgroup the kernel
//   1. (compressed mode only) runs the Top-K decompressor, which rebuilds the dense
//      gradient array from the (index, value) pairs the GPU produced,
//   2. starts all NUM_PE updater PEs; each updates its own chunks of S elements with
//      the selected optimizer (Adam, SGD with momentum, AdaGrad),
//   3. raises done for one cycle when all PEs are idle again.
// The decompressor and the PEs share the single DRAM port through a round-robin
// arbiter (the AXI interconnect of the paper's drawing).
// Interface: the host-visible arguments (mode, optimizer, coefficients, array base
// addresses, subgroup size n_words in 64-byte words, the subgroup's first element
// index sub_lo = i*D, the number of compressed pairs nnz) must be held stable from
// start until done. The DRAM port is brought out as plain signals: requests with a
// valid/ready handshake, in-order read responses without back-pressure.
// Status: n_dropped (compressed pairs outside the subgroup), cycles (length of the
// last operation), n_conflict (cycles in which masters competed for memory).
// What follows the paper: the split into decompressor and updater PEs with AXPBY units,
// the subgroup/chunk structure. This design's choices: the control sequence, the
// memory port protocol, the number of PEs (4) and the chunk size S (1024).
// Lint reports rst_n as used both synchronously and asynchronously: the synchronous use is
// the disable iff of the sub-blocks' handshake assertions, not part of the circuit.
module smart_infinity_kernel
  import fp32_pkg::*;
  import si_pkg::*;
#(
  parameter int unsigned NUM_PE = 4,
  parameter int unsigned CHUNK  = 1024,
  parameter int unsigned OUTST  = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  // control
  input  logic             start,
  input  logic             compressed,
  input  opt_e             opt,
  input  opt_coef_t        coef,
  input  region_t          region,
  input  cnt_t             n_words,
  input  idx_t             sub_lo,
  input  cnt_t             nnz,
  output logic             busy,
  output logic             done,
  output cnt_t             n_dropped,
  output logic [31:0]      cycles,
  output logic [31:0]      n_conflict,
  // accelerator memory port
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output logic             mem_req_we,
  output waddr_t           mem_req_addr,
  output word_t            mem_req_wdata,
  output logic [LANES-1:0] mem_req_wstrb,
  input  logic             mem_rsp_valid,
  input  word_t            mem_rsp_data
);

  localparam int unsigned N_MST = NUM_PE + 1;   // master 0: decompressor

  typedef enum logic [1:0] {K_IDLE, K_DECOMP, K_UPDATE, K_WAIT} kstate_e;
  kstate_e state;

  logic              dec_start, pe_start;
  logic              dec_busy;
  logic [NUM_PE-1:0] pe_busy;

  // ---------------------------------------------------------------- masters
  mem_if mif [N_MST] ();

  logic [N_MST-1:0] m_req_valid, m_req_ready, m_req_we, m_rsp_valid;
  waddr_t           m_req_addr  [N_MST];
  word_t            m_req_wdata [N_MST];
  logic [LANES-1:0] m_req_wstrb [N_MST];
  word_t            m_rsp_data;

  for (genvar i = 0; i < N_MST; i++) begin : g_mif
    assign m_req_valid[i]   = mif[i].req_valid;
    assign m_req_we[i]      = mif[i].req_we;
    assign m_req_addr[i]    = mif[i].req_addr;
    assign m_req_wdata[i]   = mif[i].req_wdata;
    assign m_req_wstrb[i]   = mif[i].req_wstrb;
    assign mif[i].req_ready = m_req_ready[i];
    assign mif[i].rsp_valid = m_rsp_valid[i];
    assign mif[i].rsp_data  = m_rsp_data;
  end

  topk_decompressor #(.CHUNK(CHUNK)) u_decomp (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (dec_start),
    .region    (region),
    .n_words   (n_words),
    .sub_lo    (sub_lo),
    .nnz       (nnz),
    .busy      (dec_busy),
    .n_dropped (n_dropped),
    .mem       (mif[0])
  );

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    updater_pe #(.CHUNK(CHUNK), .NUM_PE(NUM_PE), .PE_ID(p)) u_pe (
      .clk     (clk),
      .rst_n   (rst_n),
      .start   (pe_start),
      .opt     (opt),
      .coef    (coef),
      .region  (region),
      .n_words (n_words),
      .busy    (pe_busy[p]),
      .mem     (mif[p+1])
    );
  end

  mem_arbiter #(.N_MST(N_MST), .OUTST(OUTST)) u_arb (
    .clk         (clk),
    .rst_n       (rst_n),
    .m_req_valid (m_req_valid),
    .m_req_ready (m_req_ready),
    .m_req_we    (m_req_we),
    .m_req_addr  (m_req_addr),
    .m_req_wdata (m_req_wdata),
    .m_req_wstrb (m_req_wstrb),
    .m_rsp_valid (m_rsp_valid),
    .m_rsp_data  (m_rsp_data),
    .s_req_valid (mem_req_valid),
    .s_req_ready (mem_req_ready),
    .s_req_we    (mem_req_we),
    .s_req_addr  (mem_req_addr),
    .s_req_wdata (mem_req_wdata),
    .s_req_wstrb (mem_req_wstrb),
    .s_rsp_valid (mem_rsp_valid),
    .s_rsp_data  (mem_rsp_data),
    .n_conflict  (n_conflict)
  );

  // ---------------------------------------------------------------- sequencing
  assign busy = (state != K_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= K_IDLE;
      dec_start <= 1'b0;
      pe_start  <= 1'b0;
      done      <= 1'b0;
      cycles    <= '0;
    end else begin
      dec_start <= 1'b0;
      pe_start  <= 1'b0;
      done      <= 1'b0;
      if (state != K_IDLE) cycles <= cycles + 1'b1;
      unique case (state)
        K_IDLE: if (start) begin
          cycles <= '0;
          if (compressed) begin
            dec_start <= 1'b1;
            state     <= K_DECOMP;
          end else begin
            pe_start <= 1'b1;
            state    <= K_UPDATE;
          end
        end
        // dec_busy rises the cycle after dec_start
        K_DECOMP: if (!dec_start && !dec_busy) begin
          pe_start <= 1'b1;
          state    <= K_UPDATE;
        end
        K_UPDATE: state <= K_WAIT;       // PEs leave idle one cycle after pe_start
        K_WAIT: if (pe_busy == '0) begin
          done  <= 1'b1;
          state <= K_IDLE;
        end
        default: state <= K_IDLE;
      endcase
    end
  end

endmodule
