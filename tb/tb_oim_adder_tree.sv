// tb_oim_adder_tree: random and corner vectors for the coupling-sum tree,
// including sums that leave the 8-bit range and must wrap like 8-bit
// adders. Expected values are computed with 32-bit integers and wrapped.
module tb_oim_adder_tree;
  import tb_oim_ref_pkg::*;

  logic signed [7:0][7:0] terms;
  logic signed [7:0]      fs, sum;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  oim_adder_tree dut (.terms(terms), .fs_term(fs), .sum(sum));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t[8], f, ref_sum, wraps;
    wraps = 0;
    for (int n = 0; n < 5000; n++) begin
      ref_sum = 0;
      for (int i = 0; i < 8; i++) begin
        // small terms most of the time, full range otherwise
        t[i] = (n % 3 == 0) ? int'($urandom_range(255)) - 128 : int'($urandom_range(30)) - 15;
        if (n == 1) t[i] = 1 << i;          // each input position distinct
        terms[i] = 8'(t[i]);
        ref_sum += t[i];
      end
      f = int'($urandom_range(255)) - 128;
      fs = 8'(f);
      ref_sum += f;
      if (ref_sum > 127 || ref_sum < -128) wraps++;
      #1;
      checks++;
      if (int'(sum) != wrap8(ref_sum)) begin
        failures++;
        if (failures < 10) $display("FAIL vector %0d: sum=%0d expected %0d", n, sum, wrap8(ref_sum));
      end
    end
    checks++;
    if (wraps == 0) begin
      failures++;
      $display("FAIL no wrapping sum was exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
