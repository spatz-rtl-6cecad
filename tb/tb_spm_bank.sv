// Testbench of spm_bank: random reads and byte-masked writes against a reference array,
// checking the one-cycle read latency. Watchdog included.
module tb_spm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic req, we; logic [9:0] addr; logic [63:0] wdata, rdata; logic [7:0] be;
  logic [63:0] ref_mem [1024];
  int checks = 0, failures = 0;
  spm_bank dut (.clk_i (clk), .req_i (req), .we_i (we), .addr_i (addr), .wdata_i (wdata),
                .be_i (be), .rdata_o (rdata));
  initial begin
    #1000000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); req = 1; we = 1; addr = 10'(i); be = '1; wdata = {$urandom, $urandom};
      ref_mem[i] = wdata;
    end
    for (int i = 0; i < 4000; i++) begin
      logic rd; logic [9:0] ad;
      @(negedge clk);
      rd = $urandom_range(0, 1) == 1; ad = 10'($urandom_range(0, 63));
      req = 1; we = !rd; addr = ad; be = 8'($urandom); wdata = {$urandom, $urandom};
      if (!rd) for (int k = 0; k < 8; k++) if (be[k]) ref_mem[ad][k*8 +: 8] = wdata[k*8 +: 8];
      if (rd) begin
        logic [63:0] e;
        e = ref_mem[ad];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL read %0d: %h vs %h", ad, rdata, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
