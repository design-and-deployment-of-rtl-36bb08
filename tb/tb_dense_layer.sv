// tb_dense_layer: checks the fully connected layer against the reference.
//
// Two instances are driven with random inputs, weights and biases at one
// vector per clock with random idle clocks: the first hidden layer shape
// (29 inputs, 10 ReLU nodes) and the output node shape (8 inputs, 1 linear
// node). Every output is compared bit for bit with the reference, and the
// result must appear exactly two clocks after its input. The test also
// counts how often ReLU clipped a node, how often the output saturated and
// how often the 32-bit accumulator wrapped, and fails if any never happened.
module tb_dense_layer;
  import nn_ref_pkg::*;

  localparam int NI = 29, NO = 10, NI2 = 8;
  localparam int LAT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, valid_o, valid2_o;
  logic [NI-1:0][15:0] x_i;
  logic [NO-1:0][NI-1:0][15:0] w_i;
  logic [NO-1:0][15:0] b_i, y_o;
  logic [0:0][NI2-1:0][15:0] w2_i;
  logic [0:0][15:0] b2_i, y2_o;

  dense_layer dut (.clk, .rst_n, .valid_i, .x_i, .w_i, .b_i, .valid_o, .y_o);
  dense_layer #(.N_IN(NI2), .N_OUT(1), .RELU(1'b0)) dut2 (
    .clk, .rst_n, .valid_i, .x_i(x_i[NI2-1:0]), .w_i(w2_i), .b_i(b2_i),
    .valid_o(valid2_o), .y_o(y2_o));

  typedef struct { longint due; longint y[NO]; longint y2; } exp_t;
  exp_t q[$];
  longint cyc = 0;
  int checks = 0, failures = 0, n_relu = 0, n_sat = 0, n_wrap = 0, n_neg2 = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd(int lo, int hi);
    return longint'($urandom_range(0, hi - lo)) + lo;
  endfunction

  initial begin
    valid_i = 0; x_i = '0; w_i = '0; b_i = '0; w2_i = '0; b2_i = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(posedge clk);
      #1;
      cyc++;
      // outputs
      if (q.size() > 0 && q[0].due == cyc) begin
        automatic exp_t e = q.pop_front();
        check(valid_o && valid2_o, "valid missing at latency");
        for (int j = 0; j < NO; j++)
          check(sx(y_o[j], 16) == e.y[j], $sformatf("y[%0d] got %0d exp %0d", j, sx(y_o[j],16), e.y[j]));
        check(sx(y2_o[0], 16) == e.y2, $sformatf("y2 got %0d exp %0d", sx(y2_o[0],16), e.y2));
      end else begin
        check(!valid_o && !valid2_o, "unexpected valid");
      end
      // new inputs
      valid_i = ($urandom_range(0, 3) != 0);
      begin
        automatic int mode = $urandom_range(0, 3);   // 0: large weights, others small
        for (int i = 0; i < NI; i++) x_i[i] = (mode == 0) ? 16'($urandom) : 16'(rnd(-2048, 2047));
        for (int j = 0; j < NO; j++) begin
          for (int i = 0; i < NI; i++)
            w_i[j][i] = (mode == 0) ? 16'($urandom) : 16'(rnd(-1024, 1023));
          b_i[j] = 16'(rnd(-4096, 4095));
        end
        for (int i = 0; i < NI2; i++) w2_i[0][i] = 16'(rnd(-2048, 2047));
        b2_i[0] = 16'(rnd(-4096, 4095));
      end
      if (valid_i) begin
        automatic exp_t e;
        automatic longint xv[] = new[NI];
        automatic longint wv[] = new[NI];
        automatic longint x2[] = new[NI2];
        automatic longint w2[] = new[NI2];
        e.due = cyc + LAT;
        for (int i = 0; i < NI; i++) xv[i] = sx(x_i[i], 16);
        for (int j = 0; j < NO; j++) begin
          automatic longint full = b_i[j] == 0 ? 0 : sx(b_i[j], 16) * 1024;
          for (int i = 0; i < NI; i++) wv[i] = sx(w_i[j][i], 16);
          for (int i = 0; i < NI; i++) full += xv[i] * wv[i];
          if (full != longint'(int'(full))) n_wrap++;
          if ((full >>> 10) > 32767 || (full >>> 10) < -32768) n_sat++;
          e.y[j] = ref_node(xv, wv, sx(b_i[j], 16), NI, 1'b1);
          if (e.y[j] == 0) n_relu++;
        end
        for (int i = 0; i < NI2; i++) begin x2[i] = xv[i]; w2[i] = sx(w2_i[0][i], 16); end
        e.y2 = ref_node(x2, w2, sx(b2_i[0], 16), NI2, 1'b0);
        if (e.y2 < 0) n_neg2++;
        q.push_back(e);
      end
    end
    check(n_relu > 0, "ReLU clipping exercised");
    check(n_sat > 0, "saturation exercised");
    check(n_wrap > 0, "accumulator wrap exercised");
    check(n_neg2 > 0, "linear node passes negatives");
    $display("relu=%0d sat=%0d wrap=%0d neg_linear=%0d", n_relu, n_sat, n_wrap, n_neg2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
