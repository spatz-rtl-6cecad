// Testbench of spatz_xbar at its default size (10 masters x 16 banks) with 16 spm_bank
// instances behind it. Every master issues random reads and byte-masked writes within its own
// 64-word region, whose words are spread over all banks, so masters collide on banks. A
// master holds its request until granted; the read data returned (in order per master) is
// compared with a reference updated at grant time. Counts bank conflicts and fails if there
// were none, and checks that no master starves. Watchdog included.
module tb_spatz_xbar;
  import spatz_pkg::*;
  localparam int NM = 10, NS = 16, BW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] rv, gnt; mem_req_t [NM-1:0] rq; mem_rsp_t [NM-1:0] rsp;
  logic [NS-1:0] breq, bwe; logic [NS-1:0][9:0] baddr; logic [NS-1:0][63:0] bwd, brd;
  logic [NS-1:0][7:0] bbe;
  spatz_xbar dut (.clk_i (clk), .rst_ni (rst_n), .req_valid_i (rv), .req_i (rq), .gnt_o (gnt),
    .rsp_o (rsp), .bank_req_o (breq), .bank_we_o (bwe), .bank_addr_o (baddr),
    .bank_wdata_o (bwd), .bank_be_o (bbe), .bank_rdata_i (brd));
  for (genvar s = 0; s < NS; s++) begin : g_b
    spm_bank i_b (.clk_i (clk), .req_i (breq[s]), .we_i (bwe[s]), .addr_i (baddr[s]),
      .wdata_i (bwd[s]), .be_i (bbe[s]), .rdata_o (brd[s]));
  end
  logic [63:0] ref_mem [NM][64];
  logic [63:0] expq [NM][$];
  int checks = 0, failures = 0, conflicts = 0, done_n [NM];
  initial begin
    #2000000;
    $display("FAIL watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (|(rv & ~gnt)) conflicts++;
    for (int m = 0; m < NM; m++) begin
      if (rsp[m].valid) begin
        checks++;
        if (expq[m].size() == 0 || rsp[m].rdata !== expq[m][0]) begin
          failures++;
          if (failures < 10) $display("FAIL master %0d read data %h", m, rsp[m].rdata);
        end
        if (expq[m].size() != 0) void'(expq[m].pop_front());
      end
      if (rv[m] && gnt[m]) begin
        int w;
        w = (int'(rq[m].addr) >> 3) & 63;
        if (rq[m].we) begin
          for (int b = 0; b < 8; b++) if (rq[m].be[b]) ref_mem[m][w][b*8 +: 8] = rq[m].wdata[b*8 +: 8];
        end else expq[m].push_back(ref_mem[m][w]);
        done_n[m]++;
      end
    end
  end
  function automatic mem_req_t newreq(int m, logic first, int w0);
    mem_req_t q;
    int w;
    w = first ? w0 : $urandom_range(0, 63);
    q.addr  = 32'(m * 'h800 + 8 * w);
    q.we    = first ? 1'b1 : ($urandom_range(0, 1) == 1);
    q.be    = first ? 8'hFF : 8'($urandom);
    q.wdata = {$urandom, $urandom};
    return q;
  endfunction
  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      rv[m] = 0; rq[m] = '0;
      wait (rst_n);
      for (int i = 0; i < 64 + 300; i++) begin
        @(negedge clk);
        rq[m] = newreq(m, i < 64, i);
        rv[m] = (i < 64) || ($urandom_range(0, 3) != 0);
        #1;
        while (rv[m] && !gnt[m]) begin @(negedge clk); #1; end
        @(posedge clk); #1 rv[m] = 0;
      end
    end
  end
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20000) @(posedge clk);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflict happened"); end
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (done_n[m] < 64 + 150) begin failures++; $display("FAIL master %0d starved", m); end
    end
    $display("bank conflicts %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
