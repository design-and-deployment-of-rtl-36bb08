// tb_input_conv: checks the raw-feature conversion and saturation.
//
// Random raw features, including the extreme 13-bit values, are streamed
// at one track per clock with random idle clocks. Each converted feature,
// the saturation flag and the one-clock latency are compared with the
// reference arithmetic. A small test with RAW_FRAC = 10 (a right shift) is
// run in a second instance.
module tb_input_conv;
  import nn_ref_pkg::*;

  localparam int N = 29, RW = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, valid_o, sat_o, valid2_o, sat2_o;
  logic [N-1:0][RW-1:0] raw_i;
  logic [N-1:0][15:0] x_o, x2_o;

  input_conv dut (.clk, .rst_n, .valid_i, .raw_i, .valid_o, .x_o, .sat_o);
  input_conv #(.RAW_FRAC(10)) dut2 (.clk, .rst_n, .valid_i, .raw_i,
                                    .valid_o(valid2_o), .x_o(x2_o), .sat_o(sat2_o));

  int checks = 0, failures = 0, nsat = 0, nnosat = 0;
  logic [N-1:0][RW-1:0] raw_q;
  logic vq;

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
    valid_i = 0; raw_i = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(posedge clk);
      // compare the previous clock's input with the outputs now visible
      #1;
      if (t > 0) begin
        check(valid_o == vq, "valid latency");
        check(valid2_o == vq, "valid latency 2");
        if (vq) begin
          automatic bit s, s2;
          automatic bit sany = 0, sany2 = 0;
          for (int i = 0; i < N; i++) begin
            automatic longint e  = ref_in(sx(raw_q[i], RW), 0, s);
            automatic longint e2 = ref_in(sx(raw_q[i], RW), 10, s2);
            sany |= s; sany2 |= s2;
            check(sx(x_o[i], 16) == e, $sformatf("x[%0d] got %0d exp %0d", i, sx(x_o[i],16), e));
            check(sx(x2_o[i], 16) == e2, $sformatf("x2[%0d] raw %0d got %0d exp %0d", i, sx(raw_q[i],RW), sx(x2_o[i],16), e2));
          end
          check(sat_o == sany, "sat flag");
          check(sat2_o == sany2, "sat flag 2");
          if (sany) nsat++; else nnosat++;
        end
      end
      valid_i = ($urandom_range(0, 4) != 0);
      for (int i = 0; i < N; i++) begin
        automatic int m = $urandom_range(0, 5);
        raw_i[i] = (m == 0) ? 13'h0FFF : (m == 1) ? 13'h1000 :
                    (m < 4) ? RW'($urandom_range(0, 255) - 128) : RW'($urandom);
      end
      // some tracks with no saturating feature
      if ($urandom_range(0, 3) == 0)
        for (int i = 0; i < N; i++) raw_i[i] = RW'($urandom_range(0, 255) - 128);
      vq = valid_i; raw_q = raw_i;
    end
    check(nsat > 0 && nnosat > 0, "both saturating and clean tracks seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
