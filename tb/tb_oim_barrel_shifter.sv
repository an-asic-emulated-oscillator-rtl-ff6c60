// tb_oim_barrel_shifter: every input value with every shift amount; the
// expected value is floor(din / 2^k) computed by integer division.
module tb_oim_barrel_shifter;
  import tb_oim_ref_pkg::*;

  logic signed [7:0] din, dout;
  logic        [2:0] k;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  oim_barrel_shifter dut (.din(din), .shamt(k), .dout(dout));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 8; s++)
      for (int v = -128; v < 128; v++) begin
        din = 8'(v); k = 3'(s);
        #1;
        checks++;
        if (int'(dout) != shr_floor(v, s)) begin
          failures++;
          if (failures < 10) $display("FAIL %0d >>> %0d = %0d expected %0d", v, s, dout, shr_floor(v, s));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
