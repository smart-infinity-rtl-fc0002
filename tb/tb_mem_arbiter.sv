// tb_mem_arbiter -- three masters issue random reads and writes through the arbiter to
// the memory model, which stalls at random. Each master owns its own address range and
// keeps a shadow copy, so every read response must carry exactly what that master last
// wrote there, in request order. Also checks that each master gets served (no
// starvation), that requests collide (conflict counter > 0) and that the outstanding-
// read limit (OUTST = 4) is reached and respected.
module tb_mem_arbiter;
  import si_pkg::*;

  localparam int unsigned N = 3, OUTST = 4, RANGE = 32, OPS = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0]     m_req_valid, m_req_ready, m_req_we, m_rsp_valid;
  waddr_t           m_req_addr  [N];
  word_t            m_req_wdata [N];
  logic [LANES-1:0] m_req_wstrb [N];
  word_t            m_rsp_data;
  logic             s_req_valid, s_req_ready, s_req_we, s_rsp_valid;
  waddr_t           s_req_addr;
  word_t            s_req_wdata, s_rsp_data;
  logic [LANES-1:0] s_req_wstrb;
  logic [31:0]      n_conflict;

  int checks = 0, failures = 0;

  mem_arbiter #(.N_MST(N), .OUTST(OUTST)) dut (.*);

  accel_mem_model #(.DEPTH(N * RANGE), .LATENCY(5), .STALL_PCT(25)) u_mem (
    .clk(clk), .req_valid(s_req_valid), .req_ready(s_req_ready), .req_we(s_req_we),
    .req_addr(s_req_addr), .req_wdata(s_req_wdata), .req_wstrb(s_req_wstrb),
    .rsp_valid(s_rsp_valid), .rsp_data(s_rsp_data));

  word_t shadow [N][RANGE];
  word_t expq [N][$];
  int    done_ops [N];
  int    max_out = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outstanding read count seen by the arbiter
  always @(posedge clk) if (dut.cnt > max_out) max_out = dut.cnt;
  always @(posedge clk) if (rst_n && dut.cnt > OUTST) begin
    failures++; $display("FAIL outstanding %0d", dut.cnt);
  end

  // responses
  always @(posedge clk) begin
    #1;
    for (int i = 0; i < N; i++) if (m_rsp_valid[i]) begin
      checks++;
      if (expq[i].size() == 0) begin
        failures++; $display("FAIL unexpected response to %0d", i);
      end else begin
        word_t e;
        e = expq[i].pop_front();
        if (m_rsp_data !== e) begin
          failures++;
          if (failures < 10) $display("FAIL master %0d data mismatch", i);
        end
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_m
    initial begin
      m_req_valid[i] = 0; m_req_we[i] = 0; m_req_addr[i] = '0;
      m_req_wdata[i] = '0; m_req_wstrb[i] = '0;
      done_ops[i] = 0;
      wait (rst_n);
      for (int k = 0; k < RANGE; k++) shadow[i][k] = '0;
      for (int op = 0; op < OPS; op++) begin
        int a;
        @(negedge clk);
        if ($urandom % 4 == 0) begin
          m_req_valid[i] = 0;
          continue;
        end
        a = int'($urandom % RANGE);
        m_req_valid[i] = 1;
        m_req_addr[i]  = waddr_t'(i * RANGE + a);
        m_req_we[i]    = ($urandom % 2) == 0;
        for (int w = 0; w < WORD_W / 32; w++) m_req_wdata[i][32*w +: 32] = $urandom;
        m_req_wstrb[i] = LANES'($urandom);
        do @(posedge clk); while (!m_req_ready[i]);
        if (m_req_we[i]) begin
          for (int k = 0; k < LANES; k++)
            if (m_req_wstrb[i][k]) shadow[i][a][32*k +: 32] = m_req_wdata[i][32*k +: 32];
        end else begin
          expq[i].push_back(shadow[i][a]);
        end
        done_ops[i]++;
      end
      @(negedge clk) m_req_valid[i] = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_ops[0] > 0);
    repeat (OPS * 8) @(posedge clk);
    repeat (20) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (done_ops[i] < OPS / 2) begin failures++; $display("FAIL master %0d starved", i); end
      checks++;
      if (expq[i].size() != 0) begin failures++; $display("FAIL master %0d missing responses", i); end
    end
    checks++;
    if (n_conflict == 0) begin failures++; $display("FAIL no conflicts seen"); end
    checks++;
    if (max_out != OUTST) begin failures++; $display("FAIL outstanding limit not reached (%0d)", max_out); end
    $display("conflict cycles %0d, memory stalls %0d, max outstanding %0d",
             n_conflict, u_mem.n_stall, max_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
