// tb_spz_systolic_array: runs the array harness at N = 3 (with the paper's
// two 3x3 examples), N = 4 and N = 8 on random sort and merge micro-ops.
module tb_spz_systolic_array;
  logic clk = 0;
  always #5 clk = ~clk;

  logic d3, d4, d8;
  int   c3, c4, c8, f3, f4, f8;

  tb_spz_array_harness #(.N(3), .NRAND(40), .FIG(1'b1)) h3 (.clk, .done(d3), .checks(c3), .failures(f3));
  tb_spz_array_harness #(.N(4), .NRAND(40), .FIG(1'b0)) h4 (.clk, .done(d4), .checks(c4), .failures(f4));
  tb_spz_array_harness #(.N(8), .NRAND(20), .FIG(1'b0)) h8 (.clk, .done(d8), .checks(c8), .failures(f8));

  initial begin
    wait (d3 && d4 && d8);
    $display("TB_RESULT checks=%0d failures=%0d", c3 + c4 + c8, f3 + f4 + f8);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c3 + c4 + c8, f3 + f4 + f8 + 1);
    $finish;
  end
endmodule
