// tb_dram_arb: the round-robin DRAM arbiter with three requesters. Requesters raise
// requests at random and hold them until granted; the DRAM port is ready at random. Each
// cycle the grant is compared with a round-robin model kept here, the DRAM-side address,
// write enable and data must be the winner's, read returns must reach the tagged requester
// only, and no requester may wait more than NREQ grants while it keeps asking.
module tb_dram_arb;
  localparam int N = 3, AW = 20, LW = 256;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req = 0, we = 0, gnt, rvalid;
  logic [N-1:0][AW-1:0] addr;
  logic [N-1:0][LW-1:0] wdata;
  logic [LW-1:0] rdata, d_wdata, d_rdata;
  logic d_req, d_we, d_ready = 0, d_rvalid = 0;
  logic [AW-1:0] d_addr;
  logic [1:0] d_tag, d_rtag = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  dram_arb #(.NREQ(N), .AW(AW), .LINE_W(LW)) dut (.*);

  initial begin
    int last, exp_w, wait_n [N], grants [N];
    logic any;
    logic [N-1:0] g;
    last = N - 1;
    for (int i = 0; i < N; i++) begin wait_n[i] = 0; grants[i] = 0; end
    addr = '0; wdata = '0; d_rdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) if (!req[i] && $urandom_range(0, 2) == 0) begin
        req[i] = 1; we[i] = $urandom_range(0, 1); addr[i] = AW'($urandom); wdata[i] = {8{$urandom}};
      end
      d_ready = $urandom_range(0, 3) != 0;
      d_rvalid = $urandom_range(0, 1); d_rtag = 2'($urandom_range(0, N - 1)); d_rdata = {8{$urandom}};
      #1;
      any = 0; exp_w = last;
      for (int o = 1; o <= N; o++) if (!any && req[(last + o) % N]) begin any = 1; exp_w = (last + o) % N; end
      checks++;
      if (gnt != ((any && d_ready) ? N'(1) << exp_w : '0)) begin failures++; if (failures < 5) $display("FAIL gnt %b exp %0d", gnt, exp_w); end
      if (any) begin
        checks++;
        if (!d_req || d_addr != addr[exp_w] || d_we != we[exp_w] || d_wdata != wdata[exp_w] || d_tag != 2'(exp_w)) begin
          failures++; $display("FAIL dram side");
        end
      end
      checks++;
      if (rvalid != (d_rvalid ? N'(1) << d_rtag : '0) || rdata != d_rdata) begin failures++; $display("FAIL rvalid"); end
      g = gnt;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (g[i]) begin req[i] = 0; wait_n[i] = 0; grants[i]++; end
        else if (req[i] && |g) wait_n[i]++;
        checks++; if (wait_n[i] >= N) begin failures++; $display("FAIL starvation %0d", i); end
      end
      if (any && d_ready) last = exp_w;
    end
    for (int i = 0; i < N; i++) begin checks++; if (grants[i] < 300) failures++; end
    $display("grants %0d %0d %0d", grants[0], grants[1], grants[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
