// tb_updater_pe -- one updater PE (PE_ID 1 of 2, chunks of 64 elements = 4 words) on a
// 14-word subgroup, so it owns chunk 1 (full) and chunk 3 (partial, 2 words) and must
// leave chunks 0 and 2 alone. Runs Adam, SGD with momentum and AdaGrad against the
// memory model with random stalls, then compares every word of all four arrays with
// the reference optimizer step. Also checks that SGD and AdaGrad skip the array they
// do not use (read count), and that the compute phase moves one vector per cycle.
module tb_updater_pe;
  import fp32_pkg::*;
  import si_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned CHUNK = 64, NUM_PE = 2, PE_ID = 1, WPC = CHUNK / LANES;
  localparam int unsigned NW = 14, DEPTH = 256;
  localparam waddr_t P_B = 0, M_B = 64, V_B = 128, G_B = 192;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      start, busy;
  opt_e      opt;
  opt_coef_t coef;
  region_t   region;
  cnt_t      n_words;
  int checks = 0, failures = 0;

  mem_if mif ();

  updater_pe #(.CHUNK(CHUNK), .NUM_PE(NUM_PE), .PE_ID(PE_ID)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .opt(opt), .coef(coef), .region(region),
    .n_words(n_words), .busy(busy), .mem(mif.master));

  accel_mem_model #(.DEPTH(DEPTH), .LATENCY(7), .STALL_PCT(30)) u_mem (
    .clk(clk), .req_valid(mif.req_valid), .req_ready(mif.req_ready), .req_we(mif.req_we),
    .req_addr(mif.req_addr), .req_wdata(mif.req_wdata), .req_wstrb(mif.req_wstrb),
    .rsp_valid(mif.rsp_valid), .rsp_data(mif.rsp_data));

  word_t init_mem [DEPTH];
  int    comp_cycles, comp_runs;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // the compute phase must take exactly one cycle per word of the chunk
  logic in_comp, was_comp = 1'b0;
  assign in_comp = dut.state == 3'd3;   // S_COMPUTE
  always @(posedge clk) begin
    was_comp <= in_comp;
    if (in_comp) comp_cycles++;
    if (!in_comp && was_comp) begin
      checks++;
      comp_runs++;
      if (comp_cycles != int'(dut.len)) begin
        failures++; $display("FAIL compute took %0d cycles for %0d words", comp_cycles, dut.len);
      end
      comp_cycles = 0;
    end
  end

  task automatic fill();
    for (int w = 0; w < NW; w++)
      for (int k = 0; k < LANES; k++) begin
        u_mem.mem[P_B + w][32*k +: 32] = rand_fp(115, 125, 1'b1);
        u_mem.mem[M_B + w][32*k +: 32] = rand_fp(110, 120, 1'b1);
        u_mem.mem[V_B + w][32*k +: 32] = rand_fp(95, 112, 1'b0);
        u_mem.mem[G_B + w][32*k +: 32] = rand_fp(110, 121, 1'b1);
      end
    for (int i = 0; i < DEPTH; i++) init_mem[i] = u_mem.mem[i];
  endtask

  task automatic run(opt_e o, int exp_reads);
    int r0;
    opt = o;
    fill();
    r0 = u_mem.n_reads;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (!busy);
    repeat (3) @(posedge clk);
    checks++;
    if (u_mem.n_reads - r0 != exp_reads) begin
      failures++; $display("FAIL opt %0d read %0d words, expected %0d", o, u_mem.n_reads - r0, exp_reads);
    end
    for (int w = 0; w < NW; w++) begin
      bit owned;
      owned = ((w / WPC) % NUM_PE) == PE_ID;
      for (int k = 0; k < LANES; k++) begin
        state_t s;
        logic [31:0] p0, m0, v0, g0;
        p0 = init_mem[P_B + w][32*k +: 32];
        m0 = init_mem[M_B + w][32*k +: 32];
        v0 = init_mem[V_B + w][32*k +: 32];
        g0 = init_mem[G_B + w][32*k +: 32];
        if (owned)
          s = ref_step(int'(o), coef.alpha_m, coef.beta_m, coef.alpha_v, coef.beta_v,
                       coef.step, coef.denom_scale, coef.eps, m0, g0, v0, p0);
        else begin
          s.p = p0; s.m = m0; s.v = v0;
        end
        checks += 4;
        if (u_mem.mem[P_B + w][32*k +: 32] !== s.p ||
            u_mem.mem[M_B + w][32*k +: 32] !== s.m ||
            u_mem.mem[V_B + w][32*k +: 32] !== s.v ||
            u_mem.mem[G_B + w][32*k +: 32] !== g0) begin
          failures++;
          if (failures < 10)
            $display("FAIL opt %0d word %0d lane %0d: p %h/%h m %h/%h v %h/%h", o, w, k,
                     u_mem.mem[P_B + w][32*k +: 32], s.p, u_mem.mem[M_B + w][32*k +: 32], s.m,
                     u_mem.mem[V_B + w][32*k +: 32], s.v);
        end
      end
    end
  endtask

  initial begin
    start = 0; opt = OPT_ADAM; n_words = NW;
    comp_cycles = 0; comp_runs = 0;
    region = '{param: P_B, mmt: M_B, var_: V_B, grad: G_B, cidx: '0, cval: '0};
    coef.alpha_m = r2f(0.9);   coef.beta_m = r2f(0.1);
    coef.alpha_v = r2f(0.999); coef.beta_v = r2f(0.001);
    coef.step = r2f(1.0e-3 / (1.0 - 0.9 ** 5));
    coef.denom_scale = r2f(1.0 / $sqrt(1.0 - 0.999 ** 5));
    coef.eps = r2f(1.0e-8);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // owned words: 4 + 2 = 6 per array
    run(OPT_ADAM, 4 * 6);
    coef.alpha_m = r2f(0.9); coef.beta_m = FP_ONE; coef.step = r2f(0.01);
    run(OPT_SGD_MOM, 3 * 6);
    coef.alpha_v = FP_ONE; coef.beta_v = FP_ONE; coef.denom_scale = FP_ONE;
    coef.eps = r2f(1.0e-10);
    run(OPT_ADAGRAD, 3 * 6);
    checks++;
    if (comp_runs != 6) begin failures++; $display("FAIL %0d compute phases", comp_runs); end
    $display("memory stalls %0d", u_mem.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
