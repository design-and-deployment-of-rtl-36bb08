// tb_output_conv: checks rounding and clipping of the output words.
//
// Two instances, the default 8-bit word with a 0.5-unit LSB and a 7-bit
// word with a 1-unit LSB, receive random network outputs over the whole 16-bit range plus
// values at the rounding and clipping boundaries. Each word and clip flag
// is compared with the reference, one clock after the input; the test
// fails if a low clip, a high clip or an exact round-half case never
// occurred.
module tb_output_conv;
  import nn_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, v1, v2, lo1, hi1, lo2, hi2;
  logic [15:0] y_i;
  logic [7:0]  q1;
  logic [6:0]  q2;

  output_conv #(.OUT_FRAC(1)) dut1 (.clk, .rst_n, .valid_i, .y_i, .valid_o(v1), .q_o(q1), .clip_lo_o(lo1), .clip_hi_o(hi1));
  output_conv #(.OUT_W(7), .OUT_FRAC(0)) dut2 (.clk, .rst_n, .valid_i, .y_i, .valid_o(v2), .q_o(q2), .clip_lo_o(lo2), .clip_hi_o(hi2));

  int checks = 0, failures = 0, n_lo = 0, n_hi = 0, n_half = 0;
  logic vq;
  longint e1, e2;
  bit el1, eh1, el2, eh2;

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
    valid_i = 0; y_i = '0; vq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 800; t++) begin
      @(posedge clk);
      #1;
      check(v1 == vq && v2 == vq, "valid latency");
      if (vq) begin
        check(q1 == 8'(e1) && lo1 == el1 && hi1 == eh1, $sformatf("pT word for %0d: got %0d exp %0d", sx(y_i,16), q1, e1));
        check(q2 == 7'(e2) && lo2 == el2 && hi2 == eh2, $sformatf("d0 word for %0d: got %0d exp %0d", sx(y_i,16), q2, e2));
      end
      valid_i = ($urandom_range(0, 3) != 0);
      case ($urandom_range(0, 3))
        0: y_i = 16'($urandom);
        1: y_i = 16'(rr(-600, 600));
        2: y_i = 16'(rr(-4, 300) * 128);             // halves of the pT LSB
        default: y_i = 16'(rr(32400, 32767));      // around the top of the words
      endcase
      e1 = ref_out(sx(y_i, 16), 1, 8, el1, eh1);
      e2 = ref_out(sx(y_i, 16), 0, 7, el2, eh2);
      if (valid_i) begin
        if (el1) n_lo++;
        if (eh1 && eh2) n_hi++;
        if (y_i[6:0] == 7'h40) n_half++;
      end
      vq = valid_i;
    end
    check(n_lo > 0 && n_hi > 0 && n_half > 0, "clip and rounding cases exercised");
    $display("lo=%0d hi=%0d half=%0d", n_lo, n_hi, n_half);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
