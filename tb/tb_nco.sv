// tb_nco -- checks the quadrature outputs of the NCO for +fs/4 (default),
// -fs/4 and fs/2 against cos/sin at multiples of 90 degrees.
module tb_nco;
  import ls_tx_pkg::*;

  logic clk = 0, rstn = 0;
  chip_t c1, s1, c3, s3, c2, s2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  nco              dut1 (.clk, .rstn, .cos_out(c1), .sin_out(s1));
  nco #(.FCW(2'd3)) dut3 (.clk, .rstn, .cos_out(c3), .sin_out(s3));
  nco #(.FCW(2'd2)) dut2 (.clk, .rstn, .cos_out(c2), .sin_out(s2));

  localparam int COS [4] = '{1, 0, -1, 0};
  localparam int SIN [4] = '{0, 1, 0, -1};

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #10_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1;
    for (int t = 0; t < 100; t++) begin
      // phase after t steps: t*FCW quarter turns
      check(int'(c1) == COS[t % 4] && int'(s1) == SIN[t % 4], $sformatf("+fs/4 step %0d", t));
      check(int'(c3) == COS[(3 * t) % 4] && int'(s3) == SIN[(3 * t) % 4], $sformatf("-fs/4 step %0d", t));
      check(int'(c2) == COS[(2 * t) % 4] && int'(s2) == SIN[(2 * t) % 4], $sformatf("fs/2 step %0d", t));
      rstn = 1;
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
