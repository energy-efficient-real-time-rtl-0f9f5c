// tb_sdp_ram -- self-checking test of the simple dual-port RAM.
// Random writes and reads against a reference array; checks the one-cycle
// read latency and the read-first behaviour on a same-address collision.
module tb_sdp_ram;
  localparam int unsigned DEPTH = 37, W = 8;
  logic clk = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH];

  sdp_ram #(.DEPTH(DEPTH), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = i; wdata = W'($urandom); ref_mem[i] = wdata;
    end
    @(negedge clk); we = 0;
    // random mixed traffic
    for (int n = 0; n < 2000; n++) begin
      logic [W-1:0] expect_q;
      @(negedge clk);
      raddr = $urandom_range(DEPTH - 1);
      we    = $urandom_range(1);
      waddr = (n % 5 == 0) ? raddr : $urandom_range(DEPTH - 1);
      wdata = W'($urandom);
      expect_q = ref_mem[raddr];          // read-first: old value
      if (we) ref_mem[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expect_q) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d addr=%0d got %h exp %h", n, raddr, rdata, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
