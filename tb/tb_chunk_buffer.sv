// tb_chunk_buffer -- writes random words into the BRAM chunk buffer and reads them back
// against a shadow array: one-cycle read latency, simultaneous read and write of
// different addresses, and old data on a read of the address being written.
module tb_chunk_buffer;
  localparam int unsigned WIDTH = 512, DEPTH = 64, AW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic             we;
  logic [AW-1:0]    waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  chunk_buffer #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  function automatic logic [WIDTH-1:0] rnd();
    logic [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH / 32; i++) r[32*i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = rnd(); shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random mixed traffic
    for (int t = 0; t < 2000; t++) begin
      logic [WIDTH-1:0] expect_q;
      @(negedge clk);
      raddr = AW'($urandom % DEPTH);
      we    = $urandom % 2;
      waddr = ($urandom % 4 == 0) ? raddr : AW'($urandom % DEPTH);
      wdata = rnd();
      expect_q = shadow[raddr];          // old data even when waddr == raddr
      @(posedge clk);
      if (we) shadow[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 5) $display("FAIL t=%0d raddr=%0d", t, raddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
