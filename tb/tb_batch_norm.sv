// tb_batch_norm: checks the per-feature scale and offset.
//
// Random features, scales and biases (including full-range values that
// must saturate) are streamed at one vector per clock with idle clocks.
// Each output is compared with the reference and must appear one clock
// after its input; the test fails if saturation was never exercised.
module tb_batch_norm;
  import nn_ref_pkg::*;

  localparam int N = 29;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, valid_o;
  logic [N-1:0][15:0] x_i, scale_i, bias_i, y_o;

  batch_norm dut (.clk, .rst_n, .valid_i, .x_i, .scale_i, .bias_i, .valid_o, .y_o);

  int checks = 0, failures = 0, n_sat = 0;
  logic vq;
  longint exp_y[N];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid_i = 0; x_i = '0; scale_i = '0; bias_i = '0; vq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(posedge clk);
      #1;
      check(valid_o == vq, "valid latency");
      if (vq)
        for (int i = 0; i < N; i++)
          check(sx(y_o[i], 16) == exp_y[i], $sformatf("y[%0d] got %0d exp %0d", i, sx(y_o[i],16), exp_y[i]));
      valid_i = ($urandom_range(0, 3) != 0);
      for (int i = 0; i < N; i++) begin
        automatic bit big = ($urandom_range(0, 7) == 0);
        x_i[i]     = big ? 16'($urandom) : 16'(rr(-4096, 4096));
        scale_i[i] = big ? 16'($urandom) : 16'(rr(-2048, 2048));
        bias_i[i]  = 16'(rr(-8192, 8192));
        exp_y[i]   = ref_bn(sx(x_i[i], 16), sx(scale_i[i], 16), sx(bias_i[i], 16));
        if (valid_i && (exp_y[i] == 32767 || exp_y[i] == -32768)) n_sat++;
      end
      vq = valid_i;
    end
    check(n_sat > 0, "saturation exercised");
    $display("saturated=%0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
