// updater_pe -- one updater processing element of the near-storage optimizer.
//
// The subgroup held in device DRAM is cut into chunks of CHUNK elements (S). PE number
// PE_ID of NUM_PE takes chunks PE_ID, PE_ID+NUM_PE, ... and for each chunk
//   LOAD    reads the needed arrays word by word from memory into its BRAM buffers
//           (Adam: momentum, gradient, variance, parameter; SGD: no variance;
//           AdaGrad: no momentum),
//   COMPUTE streams the buffers through the datapath, one LANES-wide vector per cycle:
//           m' = AXPBY(alpha_m, m, beta_m, g), v' = AXPBY(alpha_v, v, beta_v, g*g),
//           then the update unit forms p'. m' and v' go back into their buffers two
//           cycles after the read, p' four cycles after,
//   DRAIN   waits for the pipeline to empty,
//   STORE   writes the parameter first, then the changed optimizer states.
// The buffer set, the two AXPBYs with the squarer between them and the update block
// follow the paper's PE drawing; the chunk order, the load/store order and the
// skipping of unused arrays are this design's choices.
// Interface: start (pulse) with opt/coef/region/n_words held stable until busy falls;
// n_words is the subgroup size in words of LANES elements. Memory access through a
// mem_if master port; reads may all be outstanding, they land directly in the buffers.
// The assertion's disable iff (!rst_n) makes lint see rst_n used synchronously as well as
// as the asynchronous reset; that use is in the checker only, not in the circuit.
module updater_pe
  import fp32_pkg::*;
  import si_pkg::*;
#(
  parameter int unsigned CHUNK  = 1024,
  parameter int unsigned NUM_PE = 4,
  parameter int unsigned PE_ID  = 0,
  localparam int unsigned W     = CHUNK / LANES,
  localparam int unsigned BAW   = (W > 1) ? $clog2(W) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  opt_e      opt,
  input  opt_coef_t coef,
  input  region_t   region,
  input  cnt_t      n_words,
  output logic      busy,
  mem_if.master     mem
);

  // buffer numbering: 0 momentum, 1 gradient, 2 variance, 3 parameter
  localparam logic [1:0] B_M = 2'd0, B_G = 2'd1, B_V = 2'd2, B_P = 2'd3;

  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_LOAD, S_COMPUTE, S_DRAIN, S_STORE} state_e;
  state_e state;

  cnt_t             cw;        // first word of the current chunk
  logic [BAW:0]     len;       // words in the current chunk
  logic [1:0]       l_arr, r_arr, s_arr;
  logic [BAW:0]     l_w, r_w, s_w, c_w, res_cnt;
  logic             l_done;

  // ---------------------------------------------------------------- array order
  function automatic logic uses_m(opt_e o);  return o != OPT_ADAGRAD; endfunction
  function automatic logic uses_v(opt_e o);  return o != OPT_SGD_MOM; endfunction

  function automatic logic [1:0] first_load(opt_e o);
    return uses_m(o) ? B_M : B_G;
  endfunction
  // returns next array to load, or B_M (wrap) once the parameter was loaded
  function automatic logic [1:0] next_load(logic [1:0] a, opt_e o);
    unique case (a)
      B_M:     return B_G;
      B_G:     return uses_v(o) ? B_V : B_P;
      B_V:     return B_P;
      default: return B_M;
    endcase
  endfunction
  // store order: parameter, momentum, variance
  function automatic logic [1:0] next_store(logic [1:0] a, opt_e o);
    unique case (a)
      B_P:     return uses_m(o) ? B_M : (uses_v(o) ? B_V : B_P);
      B_M:     return uses_v(o) ? B_V : B_P;
      default: return B_P;
    endcase
  endfunction
  function automatic logic last_store(logic [1:0] a, opt_e o);
    unique case (a)
      B_P:     return !uses_m(o) && !uses_v(o);
      B_M:     return !uses_v(o);
      default: return 1'b1;
    endcase
  endfunction

  function automatic waddr_t base_of(logic [1:0] a, region_t r);
    unique case (a)
      B_M:     return r.mmt;
      B_G:     return r.grad;
      B_V:     return r.var_;
      default: return r.param;
    endcase
  endfunction

  // ---------------------------------------------------------------- buffers
  logic [3:0]       b_we;
  logic [BAW-1:0]   b_waddr [4];
  word_t            b_wdata [4];
  logic [BAW-1:0]   b_raddr;
  word_t            b_rdata [4];

  for (genvar i = 0; i < 4; i++) begin : g_buf
    chunk_buffer #(.WIDTH(WORD_W), .DEPTH(W)) u_buf (
      .clk   (clk),
      .we    (b_we[i]),
      .waddr (b_waddr[i]),
      .wdata (b_wdata[i]),
      .raddr (b_raddr),
      .rdata (b_rdata[i])
    );
  end

  // ---------------------------------------------------------------- datapath
  logic              rd_vld;                 // b_rdata valid for compute
  logic [BAW-1:0]    rd_tag;
  fp32_t [LANES-1:0] vm, vg, vv, vp, g2, m_new, v_new;
  logic              s1_vld;
  logic [BAW-1:0]    s1_tag, s2_tag, s3_tag;
  fp32_t [LANES-1:0] s1_m, s1_v, s1_g, s1_p;
  logic              u_vld;
  fp32_t [LANES-1:0] u_p;

  assign vm = b_rdata[B_M];
  assign vg = b_rdata[B_G];
  assign vv = b_rdata[B_V];
  assign vp = b_rdata[B_P];

  always_comb begin
    for (int k = 0; k < LANES; k++) g2[k] = fp_mul(vg[k], vg[k]);
  end

  axpby_simd #(.LANES(LANES)) u_axpby_m (
    .alpha(coef.alpha_m), .beta(coef.beta_m), .a(vm), .b(vg), .y(m_new));
  axpby_simd #(.LANES(LANES)) u_axpby_v (
    .alpha(coef.alpha_v), .beta(coef.beta_v), .a(vv), .b(g2), .y(v_new));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vld <= 1'b0;
      s1_tag <= '0;
      s2_tag <= '0;
      s3_tag <= '0;
      s1_m   <= '0;
      s1_v   <= '0;
      s1_g   <= '0;
      s1_p   <= '0;
    end else begin
      s1_vld <= rd_vld;
      s1_tag <= rd_tag;
      s2_tag <= s1_tag;
      s3_tag <= s2_tag;
      s1_m   <= m_new;
      s1_v   <= v_new;
      s1_g   <= vg;
      s1_p   <= vp;
    end
  end

  update_unit #(.LANES(LANES)) u_update (
    .clk       (clk),
    .rst_n     (rst_n),
    .opt       (opt),
    .coef      (coef),
    .in_valid  (s1_vld),
    .m_new     (s1_m),
    .v_new     (s1_v),
    .grad      (s1_g),
    .param     (s1_p),
    .out_valid (u_vld),
    .param_new (u_p)
  );

  // ---------------------------------------------------------------- memory port
  logic fire;
  assign fire = mem.req_valid && mem.req_ready;

  always_comb begin
    mem.req_valid = 1'b0;
    mem.req_we    = 1'b0;
    mem.req_addr  = '0;
    mem.req_wdata = '0;
    mem.req_wstrb = '0;
    if (state == S_LOAD && !l_done) begin
      mem.req_valid = 1'b1;
      mem.req_addr  = waddr_t'(base_of(l_arr, region) + waddr_t'(cw) + waddr_t'(l_w));
    end else if (state == S_STORE) begin
      mem.req_valid = 1'b1;
      mem.req_we    = 1'b1;
      mem.req_addr  = waddr_t'(base_of(s_arr, region) + waddr_t'(cw) + waddr_t'(s_w));
      mem.req_wdata = b_rdata[s_arr];
      mem.req_wstrb = '1;
    end
  end

  // buffer write ports: read responses in LOAD, results in COMPUTE/DRAIN
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      b_we[i]    = 1'b0;
      b_waddr[i] = r_w[BAW-1:0];
      b_wdata[i] = mem.rsp_data;
    end
    if (state == S_LOAD) begin
      b_we[r_arr] = mem.rsp_valid;
    end else begin
      b_we[B_M]    = s1_vld;
      b_waddr[B_M] = s1_tag;
      b_wdata[B_M] = s1_m;
      b_we[B_V]    = s1_vld;
      b_waddr[B_V] = s1_tag;
      b_wdata[B_V] = s1_v;
      b_we[B_P]    = u_vld;
      b_waddr[B_P] = s3_tag;
      b_wdata[B_P] = u_p;
    end
  end

  // buffer read address: compute counter, or the store word that the next cycle shows
  logic [BAW:0] s_w_next;
  always_comb begin
    s_w_next = s_w;
    if (state == S_STORE && fire) s_w_next = (s_w + 1'b1 == len) ? '0 : s_w + 1'b1;
    unique case (state)
      S_COMPUTE: b_raddr = c_w[BAW-1:0];
      S_STORE:   b_raddr = s_w_next[BAW-1:0];
      default:   b_raddr = '0;
    endcase
  end

  // ---------------------------------------------------------------- control
  cnt_t remain;
  assign remain = n_words - cw;
  assign busy   = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cw      <= '0;
      len     <= '0;
      l_arr   <= B_M;
      r_arr   <= B_M;
      s_arr   <= B_P;
      l_w     <= '0;
      r_w     <= '0;
      s_w     <= '0;
      c_w     <= '0;
      res_cnt <= '0;
      l_done  <= 1'b0;
      rd_vld  <= 1'b0;
      rd_tag  <= '0;
    end else begin
      rd_vld <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          cw    <= cnt_t'(PE_ID * W);
          state <= S_NEXT;
        end
        S_NEXT: begin
          if (cw >= n_words) begin
            state <= S_IDLE;
          end else begin
            len    <= (remain >= cnt_t'(W)) ? (BAW+1)'(W) : remain[BAW:0];
            l_arr  <= first_load(opt);
            r_arr  <= first_load(opt);
            l_w    <= '0;
            r_w    <= '0;
            l_done <= 1'b0;
            state  <= S_LOAD;
          end
        end
        S_LOAD: begin
          if (fire) begin
            if (l_w + 1'b1 == len) begin
              l_w <= '0;
              if (l_arr == B_P) l_done <= 1'b1;
              l_arr <= next_load(l_arr, opt);
            end else begin
              l_w <= l_w + 1'b1;
            end
          end
          if (mem.rsp_valid) begin
            if (r_w + 1'b1 == len) begin
              r_w   <= '0;
              r_arr <= next_load(r_arr, opt);
              if (r_arr == B_P) begin
                c_w     <= '0;
                res_cnt <= '0;
                state   <= S_COMPUTE;
              end
            end else begin
              r_w <= r_w + 1'b1;
            end
          end
        end
        S_COMPUTE: begin
          rd_vld <= 1'b1;
          rd_tag <= c_w[BAW-1:0];
          if (c_w + 1'b1 == len) state <= S_DRAIN;
          c_w <= c_w + 1'b1;
        end
        S_DRAIN: begin
          if (res_cnt == len && !s1_vld && !u_vld) begin
            s_arr <= B_P;
            s_w   <= '0;
            state <= S_STORE;
          end
        end
        S_STORE: begin
          if (fire) begin
            s_w <= s_w_next;
            if (s_w + 1'b1 == len) begin
              if (last_store(s_arr, opt)) begin
                cw    <= cw + cnt_t'(NUM_PE * W);
                state <= S_NEXT;
              end else begin
                s_arr <= next_store(s_arr, opt);
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
      if (u_vld) res_cnt <= res_cnt + 1'b1;
    end
  end

  // A request must stay unchanged until it is accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      mem.req_valid && !mem.req_ready |=> mem.req_valid && $stable(mem.req_addr)
                                         && $stable(mem.req_we) && $stable(mem.req_wdata);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
