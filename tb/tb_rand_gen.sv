// tb_rand_gen: the Rand generator against a xorshift32 model written here: seeding, stepping
// only with next, and four distinct lanes.
module tb_rand_gen;
  logic clk = 0, rst_n = 0, load = 0, next = 0;
  logic [31:0] seed;
  logic [3:0][31:0] rnd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rand_gen #(.NOUT(4)) dut (.clk, .rst_n, .load, .seed, .next, .rnd);
  initial begin
    logic [31:0] m [4];
    repeat (2) @(negedge clk); rst_n = 1;
    seed = 32'h1234_5678; load = 1; @(negedge clk); load = 0;
    for (int j = 0; j < 4; j++) begin
      m[j] = seed ^ (32'(j + 1) * 32'h9E37_79B9);
      if (m[j] == 0) m[j] = 1;
    end
    for (int n = 0; n < 200; n++) begin
      next = (n % 3 != 0);
      for (int j = 0; j < 4; j++) begin
        checks++; if (rnd[j] != m[j]) begin failures++; if (failures < 5) $display("FAIL lane %0d step %0d", j, n); end
      end
      checks++; if (rnd[0] == rnd[1] || rnd[2] == rnd[3]) failures++;
      @(negedge clk);
      if (next) for (int j = 0; j < 4; j++) begin
        m[j] = m[j] ^ (m[j] << 13); m[j] = m[j] ^ (m[j] >> 17); m[j] = m[j] ^ (m[j] << 5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
