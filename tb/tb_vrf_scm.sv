// Testbench of vrf_scm, one latch-based 3R1W VRF bank (32 rows x 32 bytes): random
// byte-masked writes and three random reads per cycle against a reference array. A write
// presented in cycle k must be visible to reads in cycle k + 1. Watchdog included.
module tb_vrf_scm;
  localparam int W = 32, R = 32;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [4:0] waddr; logic [W*8-1:0] wdata; logic [W-1:0] wbe;
  logic [2:0][4:0] raddr; logic [2:0][W*8-1:0] rdata;
  logic [W*8-1:0] ref_mem [R];
  int checks = 0, failures = 0;
  vrf_scm #(.W(W), .R(R)) dut (.clk_i (clk), .we_i (we), .waddr_i (waddr), .wdata_i (wdata),
    .wbe_i (wbe), .raddr_i (raddr), .rdata_o (rdata));
  function automatic logic [W*8-1:0] rnd();
    logic [W*8-1:0] v;
    for (int k = 0; k < W / 4; k++) v[k*32 +: 32] = $urandom;
    return v;
  endfunction
  initial begin
    #1000000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  initial begin
    we = 0; waddr = 0; wdata = 0; wbe = 0; raddr = '0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); we = 1; waddr = 5'(r); wbe = '1; wdata = rnd(); ref_mem[r] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (rdata[p] !== ref_mem[raddr[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL port %0d row %0d", p, raddr[p]);
        end
      end
      we = $urandom_range(0, 3) != 0; waddr = 5'($urandom); wbe = $urandom; wdata = rnd();
      for (int p = 0; p < 3; p++) raddr[p] = 5'($urandom);
      #1;
      // the write becomes visible one cycle later
      fork begin
        logic [4:0] a; logic [W-1:0] m; logic [W*8-1:0] d; logic e;
        a = waddr; m = wbe; d = wdata; e = we;
        @(posedge clk); #1;
        if (e) for (int b = 0; b < W; b++) if (m[b]) ref_mem[a][b*8 +: 8] = d[b*8 +: 8];
      end join_none
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
