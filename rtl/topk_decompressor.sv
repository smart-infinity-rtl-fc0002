// topk_decompressor -- scatters Top-K compressed gradients into a dense gradient buffer.
//
// The GPU sends, per device, a list of (index, value) pairs: the largest-magnitude
// gradients. Before the update, this block rebuilds the dense gradient vector of the
// current subgroup i in device DRAM:
//   ZERO     writes zeros over the subgroup's gradient array (n_words words),
//   LOAD     reads up to CHUNK (S) indices and the matching values into two BRAM
//            buffers,
//   PRIME    one cycle for the first buffer read,
//   SCATTER  walks the buffered pairs, one per cycle; a pair whose index lies in
//            [sub_lo, sub_lo + n_words*LANES - 1] (that is [i*D, (i+1)*D-1]) is written
//            to word (idx - sub_lo) / LANES of the gradient array with only lane
//            (idx - sub_lo) % LANES enabled by the write strobe; other pairs are
//            skipped and counted in n_dropped.
// LOAD and SCATTER repeat until all nnz pairs are used. The zero fill, the chunked
// loading of S pairs and the range test follow the paper's decompressor; the use of a
// write strobe instead of an on-chip copy of the whole gradient buffer is this design's
// choice (the subgroup buffer of D elements only fits in DRAM). With repeated indices
// the last pair wins. Indices are 32-bit element indices into the device's share of the
// flattened model; index/value arrays are packed LANES per word.
// Interface: start (pulse) with region/n_words/sub_lo/nnz held until busy falls.
// The assertion's disable iff (!rst_n) makes lint see rst_n used synchronously as well as
// as the asynchronous reset; that use is in the checker only, not in the circuit.
module topk_decompressor
  import fp32_pkg::*;
  import si_pkg::*;
#(
  parameter int unsigned CHUNK = 1024,
  localparam int unsigned W    = CHUNK / LANES,
  localparam int unsigned BAW  = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned LB   = $clog2(LANES),
  localparam int unsigned CAW  = $clog2(CHUNK)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  region_t region,
  input  cnt_t    n_words,
  input  idx_t    sub_lo,
  input  cnt_t    nnz,
  output logic    busy,
  output cnt_t    n_dropped,
  mem_if.master   mem
);

  typedef enum logic [2:0] {S_IDLE, S_ZERO, S_NEXT, S_LOAD, S_PRIME, S_SCATTER} state_e;
  state_e state;

  cnt_t         zw;          // zero-fill word counter
  cnt_t         po;          // first pair of the current chunk
  logic [CAW:0] cnt;         // pairs in the current chunk
  logic [BAW:0] nw;          // words in the current chunk (per array)
  logic         l_arr, r_arr, l_done;   // 0 indices, 1 values
  logic [BAW:0] l_w, r_w;
  logic [CAW:0] sj, sj_next;

  // ---------------------------------------------------------------- buffers
  logic           ib_we, vb_we;
  logic [BAW-1:0] b_raddr;
  word_t          ib_rdata, vb_rdata;

  chunk_buffer #(.WIDTH(WORD_W), .DEPTH(W)) u_idx_buf (
    .clk(clk), .we(ib_we), .waddr(r_w[BAW-1:0]), .wdata(mem.rsp_data),
    .raddr(b_raddr), .rdata(ib_rdata));
  chunk_buffer #(.WIDTH(WORD_W), .DEPTH(W)) u_val_buf (
    .clk(clk), .we(vb_we), .waddr(r_w[BAW-1:0]), .wdata(mem.rsp_data),
    .raddr(b_raddr), .rdata(vb_rdata));

  assign ib_we = (state == S_LOAD) && mem.rsp_valid && !r_arr;
  assign vb_we = (state == S_LOAD) && mem.rsp_valid &&  r_arr;

  // ---------------------------------------------------------------- current pair
  logic [LB-1:0] lane;
  idx_t          cur_idx, rel;
  fp32_t         cur_val;
  logic          in_range;
  cnt_t          sub_elems;

  assign lane      = sj[LB-1:0];
  assign cur_idx   = ib_rdata[32*lane +: 32];
  assign cur_val   = vb_rdata[32*lane +: 32];
  assign rel       = cur_idx - sub_lo;
  assign sub_elems = n_words << LB;
  assign in_range  = (cur_idx >= sub_lo) && (cnt_t'(rel) < sub_elems);

  // ---------------------------------------------------------------- memory port
  logic fire;
  assign fire = mem.req_valid && mem.req_ready;

  always_comb begin
    mem.req_valid = 1'b0;
    mem.req_we    = 1'b0;
    mem.req_addr  = '0;
    mem.req_wdata = '0;
    mem.req_wstrb = '0;
    unique case (state)
      S_ZERO: begin
        mem.req_valid = 1'b1;
        mem.req_we    = 1'b1;
        mem.req_addr  = waddr_t'(region.grad + waddr_t'(zw));
        mem.req_wstrb = '1;
      end
      S_LOAD: if (!l_done) begin
        mem.req_valid = 1'b1;
        mem.req_addr  = waddr_t'((l_arr ? region.cval : region.cidx)
                                 + waddr_t'(po >> LB) + waddr_t'(l_w));
      end
      S_SCATTER: if (in_range) begin
        mem.req_valid = 1'b1;
        mem.req_we    = 1'b1;
        mem.req_addr  = waddr_t'(region.grad + waddr_t'(rel >> LB));
        mem.req_wdata = {LANES{cur_val}};
        mem.req_wstrb = LANES'(1) << rel[LB-1:0];
      end
      default: ;
    endcase
  end

  // the pair advances when its write is accepted, or at once when it is out of range
  logic adv;
  assign adv = (state == S_SCATTER) && (!in_range || mem.req_ready);

  always_comb begin
    sj_next = sj;
    if (adv) sj_next = sj + 1'b1;
    b_raddr = (state == S_SCATTER) ? sj_next[CAW-1:LB] : '0;
  end

  // ---------------------------------------------------------------- control
  cnt_t left;
  assign left = nnz - po;
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      zw        <= '0;
      po        <= '0;
      cnt       <= '0;
      nw        <= '0;
      l_arr     <= 1'b0;
      r_arr     <= 1'b0;
      l_done    <= 1'b0;
      l_w       <= '0;
      r_w       <= '0;
      sj        <= '0;
      n_dropped <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          zw        <= '0;
          po        <= '0;
          n_dropped <= '0;
          state     <= (n_words == '0) ? S_NEXT : S_ZERO;
        end
        S_ZERO: if (fire) begin
          zw <= zw + 1'b1;
          if (zw + 1'b1 == n_words) state <= S_NEXT;
        end
        S_NEXT: begin
          if (po >= nnz) begin
            state <= S_IDLE;
          end else begin
            cnt    <= (left >= cnt_t'(CHUNK)) ? (CAW+1)'(CHUNK) : left[CAW:0];
            nw     <= (left >= cnt_t'(CHUNK)) ? (BAW+1)'(W)
                                              : (BAW+1)'((left + cnt_t'(LANES - 1)) >> LB);
            l_arr  <= 1'b0;
            r_arr  <= 1'b0;
            l_w    <= '0;
            r_w    <= '0;
            l_done <= 1'b0;
            state  <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (fire) begin
            if (l_w + 1'b1 == nw) begin
              l_w <= '0;
              if (l_arr) l_done <= 1'b1;
              l_arr <= 1'b1;
            end else begin
              l_w <= l_w + 1'b1;
            end
          end
          if (mem.rsp_valid) begin
            if (r_w + 1'b1 == nw) begin
              r_w   <= '0;
              r_arr <= 1'b1;
              if (r_arr) begin
                sj    <= '0;
                state <= S_PRIME;
              end
            end else begin
              r_w <= r_w + 1'b1;
            end
          end
        end
        S_PRIME: state <= S_SCATTER;   // buffers now hold the chunk: read word 0
        S_SCATTER: begin
          if (adv) begin
            sj <= sj_next;
            if (!in_range) n_dropped <= n_dropped + 1'b1;
            if (sj + 1'b1 == cnt) begin
              po    <= po + cnt_t'(cnt);
              state <= S_NEXT;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A request must stay unchanged until it is accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      mem.req_valid && !mem.req_ready |=> mem.req_valid && $stable(mem.req_addr)
                                         && $stable(mem.req_wdata) && $stable(mem.req_wstrb);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
