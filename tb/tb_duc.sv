// tb_duc -- random I, Q and carrier values through the DUC, compared with
// sat16((I*cos + Q*sin) * 64) one cycle later; includes full-scale inputs to
// exercise saturation in both directions.
module tb_duc;
  import ls_tx_pkg::*;

  logic clk = 0, rstn = 0;
  logic signed [11:0] i_in = '0, q_in = '0;
  chip_t cos_in = CHIP_ZERO, sin_in = CHIP_ZERO;
  logic signed [15:0] out;
  int checks = 0, failures = 0, sat_hi = 0, sat_lo = 0;

  always #5 clk = ~clk;

  duc dut (.clk, .rstn, .i_in, .q_in, .cos_in, .sin_in, .data_out_scaled(out));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  function automatic chip_t rnd_chip();
    int r = $urandom_range(0, 2);
    return (r == 0) ? CHIP_ZERO : (r == 1) ? CHIP_POS : CHIP_NEG;
  endfunction

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    repeat (2) @(posedge clk);
    #1 check(out == 0, "reset");
    rstn = 1;
    for (int t = 0; t < 3000; t++) begin
      if (t % 5 == 0) begin
        i_in = ($urandom_range(0, 1) != 0) ? 12'sd2047 : -12'sd2048;
        q_in = i_in;
      end else begin
        i_in = 12'($urandom_range(0, 2000)) - 12'sd1000;
        q_in = 12'($urandom_range(0, 2000)) - 12'sd1000;
      end
      cos_in = rnd_chip(); sin_in = rnd_chip();
      e = (int'(i_in) * int'(cos_in) + int'(q_in) * int'(sin_in)) * 64;
      if (e > 32767) begin e = 32767; sat_hi++; end
      if (e < -32768) begin e = -32768; sat_lo++; end
      @(posedge clk); #1;
      check(int'(out) == e, $sformatf("t=%0d got %0d want %0d", t, out, e));
    end
    check(sat_hi > 0 && sat_lo > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
