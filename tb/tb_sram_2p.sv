// tb_sram_2p: random reads and writes on the two-port SRAM at its default
// 192x24 size, compared with a testbench array; includes reads and writes of
// the same address in one cycle (old data expected) and checks the one-cycle
// read latency.
module tb_sram_2p;
  logic clk = 0;
  logic re = 0, we = 0;
  logic [7:0] raddr = 0, waddr = 0;
  logic [23:0] rdata, wdata = 0;
  logic [23:0] model [192];
  int checks = 0, failures = 0;

  sram_2p dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] expq;
    logic pend;
    pend = 0;
    // fill
    for (int a = 0; a < 192; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = 24'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== expq) begin
          failures++;
          if (failures < 10) $display("read %0d: got %h expected %h", raddr, rdata, expq);
        end
      end
      re = 1'($urandom); we = 1'($urandom);
      raddr = 8'($urandom_range(191));
      waddr = (n % 4 == 0) ? raddr : 8'($urandom_range(191));
      wdata = 24'($urandom);
      pend = re;
      expq = model[raddr];           // old data, even if written in this cycle
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
