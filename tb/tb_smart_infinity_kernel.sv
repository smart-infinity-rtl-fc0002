// tb_smart_infinity_kernel -- end-to-end test of the kernel at its default parameters
// (4 PEs, chunks of 1024 elements, 16 lanes) with a 600-word (9600-element) subgroup,
// which is 9 full chunks and one partial chunk over the 4 PEs. Sequence:
//   1. Adam on Top-K compressed gradients at 1% (the design's default ratio), with a few
//      pairs that belong to other subgroups,
//   2. Adam again on compressed gradients at 12%, more pairs than one decompressor chunk,
//   3. SGD with momentum on dense gradients,
//   4. AdaGrad on dense gradients,
//   5. Adam on dense gradients with no memory stalls, checking the cycle count against
//      the memory-bound minimum (7 word transfers per word of elements).
// After each run all parameter, momentum, variance and gradient words are compared with
// the reference optimizer. Each mechanism (compressed and dense mode, each optimizer,
// dropped pairs, several decompressor chunks, a partial PE chunk, every PE active,
// memory stalls, arbitration conflicts) is counted and must occur at least once.
module tb_smart_infinity_kernel;
  import fp32_pkg::*;
  import si_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned NW = 600, NEL = NW * LANES, DEPTH = 4096;
  localparam int unsigned SUB_LO = 9600 * 3;       // subgroup i = 3 of D = 9600
  localparam waddr_t P_B = 0, M_B = 600, V_B = 1200, G_B = 1800, I_B = 2400, V2_B = 2600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             start, compressed, busy, done;
  opt_e             opt;
  opt_coef_t        coef;
  region_t          region;
  cnt_t             n_words, nnz, n_dropped;
  idx_t             sub_lo;
  logic [31:0]      cycles, n_conflict;
  logic             mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  waddr_t           mem_req_addr;
  word_t            mem_req_wdata, mem_rsp_data;
  logic [LANES-1:0] mem_req_wstrb;

  smart_infinity_kernel dut (.*);

  accel_mem_model #(.DEPTH(DEPTH), .LATENCY(8), .STALL_PCT(15)) u_mem (
    .clk(clk), .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req_we(mem_req_we),
    .req_addr(mem_req_addr), .req_wdata(mem_req_wdata), .req_wstrb(mem_req_wstrb),
    .rsp_valid(mem_rsp_valid), .rsp_data(mem_rsp_data));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_comp_runs = 0, n_dense_runs = 0, n_adam = 0, n_sgd = 0, n_adagrad = 0;
  int n_drop_seen = 0, n_multi_chunk = 0, n_partial = 0;
  logic [3:0] pe_seen = '0;

  logic [31:0] P0 [NEL], M0 [NEL], V0 [NEL], G0 [NEL];

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int p = 0; p < 4; p++) if (dut.pe_busy[p]) pe_seen[p] = 1'b1;
  end

  function automatic logic [31:0] rd(waddr_t b, int e);
    return u_mem.mem[int'(b) + e / LANES][32*(e % LANES) +: 32];
  endfunction
  task automatic wr(waddr_t b, int e, logic [31:0] v);
    u_mem.mem[int'(b) + e / LANES][32*(e % LANES) +: 32] = v;
  endtask

  task automatic snapshot();
    for (int e = 0; e < NEL; e++) begin
      P0[e] = rd(P_B, e); M0[e] = rd(M_B, e); V0[e] = rd(V_B, e); G0[e] = rd(G_B, e);
    end
  endtask

  // dense random gradients
  task automatic dense_grads();
    for (int e = 0; e < NEL; e++) wr(G_B, e, rand_fp(110, 121, 1'b1));
  endtask

  // Top-K list: k pairs inside the subgroup plus n_other outside; returns the dense
  // vector the decompressor must produce through G0
  task automatic topk_grads(int k, int n_other, output int total);
    bit used [NEL];
    int j = 0;
    for (int e = 0; e < NEL; e++) begin used[e] = 0; wr(G_B, e, 32'h7f7f_0001); G0[e] = '0; end
    for (int t = 0; t < k + n_other; t++) begin
      logic [31:0] idx, val;
      val = rand_fp(112, 123, 1'b1);
      if (t % (k / n_other + 1) == 1 && n_other > 0 && j < n_other) begin
        idx = (j % 2) ? SUB_LO - 1 - j : SUB_LO + NEL + j;
        j++;
      end else begin
        int r;
        do r = int'($urandom % NEL); while (used[r]);
        used[r] = 1;
        idx = SUB_LO + r;
        G0[r] = val;
      end
      wr(I_B, t, idx);
      wr(V2_B, t, val);
    end
    total = k + n_other;
  endtask

  task automatic go(logic comp, opt_e o, cnt_t pairs);
    compressed = comp; opt = o; nnz = pairs;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    #1;
  endtask

  task automatic compare(opt_e o, string what);
    int bad = 0;
    for (int e = 0; e < NEL; e++) begin
      state_t s;
      s = ref_step(int'(o), coef.alpha_m, coef.beta_m, coef.alpha_v, coef.beta_v,
                   coef.step, coef.denom_scale, coef.eps, M0[e], G0[e], V0[e], P0[e]);
      checks += 4;
      if (rd(P_B, e) !== s.p || rd(M_B, e) !== s.m || rd(V_B, e) !== s.v ||
          rd(G_B, e) !== G0[e]) begin
        bad++;
        if (bad < 5) $display("FAIL %s element %0d: p %h/%h m %h/%h v %h/%h g %h/%h", what, e,
                              rd(P_B, e), s.p, rd(M_B, e), s.m, rd(V_B, e), s.v, rd(G_B, e), G0[e]);
      end
    end
    failures += bad;
    $display("%s: %0d elements, %0d cycles, %0d mismatches", what, NEL, cycles, bad);
  endtask

  task automatic adam_coef(int t);
    coef.alpha_m = r2f(0.9);   coef.beta_m = r2f(0.1);
    coef.alpha_v = r2f(0.999); coef.beta_v = r2f(0.001);
    coef.step = r2f(1.0e-3 / (1.0 - 0.9 ** t));
    coef.denom_scale = r2f(1.0 / $sqrt(1.0 - 0.999 ** t));
    coef.eps = r2f(1.0e-8);
  endtask

  initial begin
    int total;
    start = 0; compressed = 0; opt = OPT_ADAM; nnz = '0;
    n_words = NW; sub_lo = SUB_LO;
    region = '{param: P_B, mmt: M_B, var_: V_B, grad: G_B, cidx: I_B, cval: V2_B};
    for (int e = 0; e < NEL; e++) begin
      wr(P_B, e, rand_fp(115, 125, 1'b1));
      wr(M_B, e, '0);
      wr(V_B, e, '0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. compressed Adam, 1% of the gradients (first step: zero states)
    adam_coef(1);
    snapshot();
    topk_grads(NEL / 100, 4, total);
    go(1'b1, OPT_ADAM, cnt_t'(total));
    compare(OPT_ADAM, "adam top-k 1%");
    n_comp_runs++; n_adam++;
    checks++;
    if (n_dropped != 4) begin failures++; $display("FAIL dropped %0d expected 4", n_dropped); end
    if (n_dropped > 0) n_drop_seen++;

    // 2. compressed Adam, 12%: more pairs than one decompressor chunk (1024)
    adam_coef(2);
    snapshot();
    topk_grads(NEL * 12 / 100, 8, total);
    go(1'b1, OPT_ADAM, cnt_t'(total));
    compare(OPT_ADAM, "adam top-k 12%");
    n_comp_runs++; n_adam++;
    if (total > 1024) n_multi_chunk++;
    checks++;
    if (n_dropped != 8) begin failures++; $display("FAIL dropped %0d expected 8", n_dropped); end

    // 3. SGD with momentum, dense gradients
    coef.alpha_m = r2f(0.9); coef.beta_m = FP_ONE; coef.step = r2f(0.01);
    dense_grads();
    snapshot();
    go(1'b0, OPT_SGD_MOM, '0);
    compare(OPT_SGD_MOM, "sgd momentum");
    n_dense_runs++; n_sgd++;

    // 4. AdaGrad, dense gradients
    coef.alpha_v = FP_ONE; coef.beta_v = FP_ONE; coef.denom_scale = FP_ONE;
    coef.step = r2f(0.01); coef.eps = r2f(1.0e-10);
    dense_grads();
    snapshot();
    go(1'b0, OPT_ADAGRAD, '0);
    compare(OPT_ADAGRAD, "adagrad");
    n_dense_runs++; n_adagrad++;

    // 5. dense Adam without memory stalls: cycle count near the memory bound
    adam_coef(3);
    dense_grads();
    snapshot();
    u_mem.stall_pct = 0;
    go(1'b0, OPT_ADAM, '0);
    compare(OPT_ADAM, "adam dense");
    n_dense_runs++; n_adam++;
    checks++;
    if (cycles < 7 * NW || cycles > 7 * NW + NW / 2 + 400) begin
      failures++; $display("FAIL %0d cycles, memory bound is %0d", cycles, 7 * NW);
    end
    $display("dense Adam: %0d words moved in %0d cycles (%0d bytes/cycle x100)",
             7 * NW, cycles, 7 * NW * 64 * 100 / int'(cycles));

    if (NW % 64 != 0) n_partial++;
    // every mechanism must have happened
    begin
      int mech [10];
      string nm [10];
      mech = '{n_comp_runs, n_dense_runs, n_adam, n_sgd, n_adagrad, n_drop_seen,
               n_multi_chunk, n_partial, int'(pe_seen == 4'hf), u_mem.n_stall};
      nm   = '{"compressed mode", "dense mode", "adam", "sgd", "adagrad", "dropped pairs",
               "multi-chunk decompression", "partial chunk", "all PEs active", "memory stalls"};
      for (int i = 0; i < 10; i++) begin
        checks++;
        $display("mechanism %-26s : %0d", nm[i], mech[i]);
        if (mech[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
      checks++;
      $display("mechanism %-26s : %0d", "arbitration conflicts", n_conflict);
      if (n_conflict == 0) begin failures++; $display("FAIL no arbitration conflict"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
