// tb_rrc_filter -- impulse response and random-input check of the 11-tap RRC
// filter against a direct convolution with the printed coefficients
// (39 69 100 127 146 152 146 127 100 69 39) / 1024, and its 2-cycle latency.
module tb_rrc_filter;
  localparam int H [11] = '{39, 69, 100, 127, 146, 152, 146, 127, 100, 69, 39};

  logic clk = 0, rstn = 0;
  logic signed [1:0]  x = '0;
  logic signed [11:0] y;
  int checks = 0, failures = 0;
  int xs [$];

  always #5 clk = ~clk;

  rrc_filter dut (.clk, .rstn, .x, .y);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // expected y after edge t: sum_k H[k] * x(t-1-k), x(t) = input before edge t
  function automatic int expect_y(int t);
    int acc = 0;
    for (int k = 0; k < 11; k++)
      if (t - 1 - k >= 0) acc += H[k] * xs[t - 1 - k];
    return acc;
  endfunction

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v;
    repeat (3) @(posedge clk);
    #1 check(y == 0, "reset");
    rstn = 1;
    for (int t = 0; t < 1500; t++) begin
      if (t < 20)        v = (t == 0) ? 1 : 0;                     // impulse
      else if (t < 40)   v = (t == 20) ? -1 : 0;                   // negative impulse
      else if (t < 600)  v = ((t % 4) == 0) ? (($urandom_range(0, 1) == 0) ? 1 : -1) : 0; // up-sampled chips
      else               v = $urandom_range(0, 2) - 1;             // any ternary input
      x = 2'(v);
      xs.push_back(v);
      @(posedge clk); #1;
      check(int'(y) == expect_y(t), $sformatf("y at %0d: got %0d want %0d", t, y, expect_y(t)));
      if (t >= 1 && t <= 11) check(int'(y) == H[t - 1], "impulse response tap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
