// tb_mac_array: streams random windows (with gaps) through the 64-lane
// multiplier array and checks that each partial sum, its tag and its last
// flag appear exactly 2 cycles after the window went in. The first windows
// use -128 x -128 on every lane, the largest possible sum.
module tb_mac_array;
  import crisp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic  in_valid = 0, in_last = 0;
  logic [15:0] in_tag = '0;
  data_t w_val [LANES], a_val [LANES];
  logic  lane_en [LANES];
  logic  out_valid, out_last;
  logic [15:0] out_tag;
  acc_t  psum;

  mac_array dut (.*);

  int checks = 0, failures = 0;
  int exp_sum [int];
  int exp_last [int];
  int sent_at [int];
  int cyc = 0;

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
      if (!exp_sum.exists(int'(out_tag)) || psum != exp_sum[int'(out_tag)] ||
          int'(out_last) != exp_last[int'(out_tag)] || cyc - sent_at[int'(out_tag)] != 2) begin
        failures++;
        if (failures < 5) $display("tag %0d: got %0d expected %0d", out_tag, psum, exp_sum[int'(out_tag)]);
      end
    end
  end

  initial begin
    void'($urandom(13));
    for (int k = 0; k < LANES; k++) begin w_val[k] = '0; a_val[k] = '0; lane_en[k] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(3) != 0);
      in_last = 1'($urandom_range(1));
      in_tag = 16'(t);
      begin
        automatic int s = 0;
        for (int k = 0; k < LANES; k++) begin
          w_val[k] = (t < 4) ? -8'sd128 : data_t'($urandom);
          a_val[k] = (t < 4) ? -8'sd128 : data_t'($urandom);
          lane_en[k] = (t < 4) ? 1'b1 : ($urandom_range(7) != 0);
          if (lane_en[k]) s += int'(w_val[k]) * int'(a_val[k]);
        end
        if (in_valid) begin
          exp_sum[t] = s;
          exp_last[t] = int'(in_last);
          sent_at[t] = cyc + 1;  // the edge that samples it
        end
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (checks < 250) begin failures++; $display("too few results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
