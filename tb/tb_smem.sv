// tb_smem: checks the shared memory at its full 256 KB size. Random words
// are written to random addresses and read back on both ports, checking the
// one-cycle read latency and that a port holds its data while not reading.
module tb_smem;
  import crisp_pkg::*;
  localparam int unsigned DEPTH = SMEM_BYTES / WORD_BYTES;

  logic clk = 0;
  always #5 clk = ~clk;
  logic  we = 0, re_a = 0, re_b = 0;
  addr_t waddr = '0, addr_a = '0, addr_b = '0;
  word_t wdata = '0, rdata_a, rdata_b;

  smem dut (.*);

  int checks = 0, failures = 0;
  word_t model [int];
  addr_t used [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd_word();
    word_t w;
    for (int i = 0; i < WORD_BYTES / 4; i++) w[32*i +: 32] = $urandom;
    return w;
  endfunction

  initial begin
    void'($urandom(3));
    // first and last word, then random ones
    for (int i = 0; i < 300; i++) begin
      automatic addr_t a = (i == 0) ? addr_t'(0) : (i == 1) ? addr_t'(DEPTH - 1) : addr_t'($urandom_range(DEPTH - 1));
      automatic word_t w = rnd_word();
      @(negedge clk);
      we = 1; waddr = a; wdata = w;
      model[int'(a)] = w;
      used.push_back(a);
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 300; i++) begin
      automatic addr_t a = used[$urandom_range(used.size() - 1)];
      automatic addr_t b = used[$urandom_range(used.size() - 1)];
      @(negedge clk);
      re_a = 1; addr_a = a; re_b = 1; addr_b = b;
      @(negedge clk);
      re_a = 0; re_b = 0;
      checks += 2;
      if (rdata_a !== model[int'(a)]) begin failures++; $display("port A mismatch at %0d", a); end
      if (rdata_b !== model[int'(b)]) begin failures++; $display("port B mismatch at %0d", b); end
      // hold while idle
      addr_a = addr_t'($urandom_range(DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rdata_a !== model[int'(a)]) begin failures++; $display("port A did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
