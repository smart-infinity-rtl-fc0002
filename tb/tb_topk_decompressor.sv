// tb_topk_decompressor -- builds a Top-K list for subgroup [1000, 1128) (8 words of
// 16 elements): 75 unique (index, value) pairs, a few of them outside the subgroup,
// loaded in chunks of 32 pairs (so two full chunks and one partial chunk with a
// partial last word). The gradient array starts filled with garbage. After the run
// every element must be its Top-K value or zero, the word after the array must be
// untouched, and n_dropped must equal the number of out-of-range pairs. A second run
// without memory stalls checks that the scatter phase handles one pair per cycle.
module tb_topk_decompressor;
  import fp32_pkg::*;
  import si_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned CHUNK = 32, NW = 8, NNZ = 75, DEPTH = 64;
  localparam int unsigned SUB_LO = 1000, NEL = NW * LANES;
  localparam waddr_t G_B = 0, I_B = 16, V_B = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    start, busy;
  region_t region;
  cnt_t    n_words, nnz, n_dropped;
  idx_t    sub_lo;
  int checks = 0, failures = 0;

  mem_if mif ();

  topk_decompressor #(.CHUNK(CHUNK)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .region(region), .n_words(n_words),
    .sub_lo(sub_lo), .nnz(nnz), .busy(busy), .n_dropped(n_dropped), .mem(mif.master));

  accel_mem_model #(.DEPTH(DEPTH), .LATENCY(5), .STALL_PCT(30)) u_mem (
    .clk(clk), .req_valid(mif.req_valid), .req_ready(mif.req_ready), .req_we(mif.req_we),
    .req_addr(mif.req_addr), .req_wdata(mif.req_wdata), .req_wstrb(mif.req_wstrb),
    .rsp_valid(mif.rsp_valid), .rsp_data(mif.rsp_data));

  logic [31:0] dense [NEL];
  int          n_out;
  int          scat_cycles, scat_runs, scat_pairs;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_scat, was_scat = 1'b0;
  assign in_scat = dut.state == 3'd5;   // S_SCATTER
  always @(posedge clk) begin
    was_scat <= in_scat;
    if (in_scat) scat_cycles++;
  end

  task automatic build();
    bit used [NEL];
    for (int i = 0; i < NEL; i++) begin dense[i] = '0; used[i] = 0; end
    n_out = 0;
    for (int j = 0; j < NNZ; j++) begin
      logic [31:0] idx, val;
      val = rand_fp(110, 125, 1'b1);
      if (j % 9 == 4) begin
        idx = (j % 2) ? SUB_LO - 1 - ($urandom % 50) : SUB_LO + NEL + ($urandom % 50);
        n_out++;
      end else begin
        int r;
        do r = int'($urandom % NEL); while (used[r]);
        used[r] = 1;
        idx = SUB_LO + r;
        dense[r] = val;
      end
      u_mem.mem[I_B + j / LANES][32*(j % LANES) +: 32] = idx;
      u_mem.mem[V_B + j / LANES][32*(j % LANES) +: 32] = val;
    end
    for (int w = 0; w <= NW; w++)
      for (int k = 0; k < LANES; k++) u_mem.mem[G_B + w][32*k +: 32] = $urandom | 32'h1;
  endtask

  task automatic run(int stall);
    logic [31:0] guard;
    u_mem.stall_pct = stall;
    build();
    guard = u_mem.mem[G_B + NW][31:0];
    scat_cycles = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (!busy);
    repeat (3) @(posedge clk);
    for (int i = 0; i < NEL; i++) begin
      checks++;
      if (u_mem.mem[G_B + i / LANES][32*(i % LANES) +: 32] !== dense[i]) begin
        failures++;
        if (failures < 10) $display("FAIL element %0d: %h expected %h", i,
                                    u_mem.mem[G_B + i / LANES][32*(i % LANES) +: 32], dense[i]);
      end
    end
    checks++;
    if (u_mem.mem[G_B + NW][31:0] !== guard) begin failures++; $display("FAIL guard word written"); end
    checks++;
    if (int'(n_dropped) != n_out) begin
      failures++; $display("FAIL dropped %0d expected %0d", n_dropped, n_out);
    end
    if (stall == 0) begin
      checks++;
      if (scat_cycles != NNZ) begin
        failures++; $display("FAIL scatter took %0d cycles for %0d pairs", scat_cycles, NNZ);
      end
    end
  endtask

  initial begin
    start = 0; n_words = NW; nnz = NNZ; sub_lo = SUB_LO;
    region = '{param: '0, mmt: '0, var_: '0, grad: G_B, cidx: I_B, cval: V_B};
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(30);
    run(0);
    $display("memory stalls %0d", u_mem.n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
