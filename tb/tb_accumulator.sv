// tb_accumulator: feeds rows of 1 to 5 random partial sums, with idle
// cycles between some of them, and checks that each row's total comes out
// once, one cycle after its last partial sum, with that partial sum's tag.
module tb_accumulator;
  import crisp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_last = 0;
  logic [15:0] in_tag = '0;
  acc_t psum = '0;
  logic out_valid;
  logic [15:0] out_tag;
  acc_t out_data;

  accumulator dut (.*);

  int checks = 0, failures = 0;
  int expq [$];
  int tagq [$];
  int last_at = -10, cyc = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      checks++;
      if (expq.size() == 0 || out_data != expq[0] || int'(out_tag) != tagq[0] || cyc - last_at != 1) begin
        failures++;
        if (failures < 5) $display("got %0d expected %0d", out_data, expq.size() ? expq[0] : 0);
      end
      if (expq.size()) begin void'(expq.pop_front()); void'(tagq.pop_front()); end
    end
    if (rst_n && in_valid && in_last) last_at = cyc;
  end

  initial begin
    void'($urandom(17));
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int row = 0; row < 200; row++) begin
      automatic int nwin = 1 + $urandom_range(4);
      automatic int s = 0;
      for (int w = 0; w < nwin; w++) begin
        @(negedge clk);
        in_valid = 1;
        in_last = (w == nwin - 1);
        in_tag = 16'(row);
        psum = acc_t'($urandom_range(200000)) - 100000;
        s += int'(psum);
        if (in_last) begin expq.push_back(s); tagq.push_back(row); end
        if ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d rows never came out", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
