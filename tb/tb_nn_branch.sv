// tb_nn_branch: checks one three-layer sub-network end to end.
//
// For each of several random coefficient sets, random normalised feature
// vectors are streamed at one per clock with idle clocks; the pipeline is
// drained before the coefficients change. The output is compared with the
// reference model and must appear exactly six clocks after its input.
module tb_nn_branch;
  import dnn_pkg::*;
  import nn_ref_pkg::*;

  localparam int LAT = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             valid_i, valid_o;
  data_t [N_IN-1:0] x_i;
  branch_coef_t     coef_i;
  data_t            y_o;

  nn_branch dut (.clk, .rst_n, .valid_i, .x_i, .coef_i, .valid_o, .y_o);

  typedef struct { longint due; longint y; } exp_t;
  exp_t q[$];
  longint cyc = 0;
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;

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

  task automatic tick();
    @(posedge clk);
    #1;
    cyc++;
    if (q.size() > 0 && q[0].due == cyc) begin
      automatic exp_t e = q.pop_front();
      check(valid_o, $sformatf("valid missing at latency, cycle %0d", cyc));
      check(sx(y_o, 16) == e.y, $sformatf("y got %0d exp %0d", sx(y_o, 16), e.y));
    end else begin
      check(!valid_o, "unexpected valid");
    end
  endtask

  initial begin
    valid_i = 0; x_i = '0; coef_i = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      coef_i = rand_branch(8000);
      for (int t = 0; t < 120; t++) begin
        tick();
        valid_i = ($urandom_range(0, 3) != 0);
        for (int i = 0; i < N_IN; i++) x_i[i] = data_t'(rr(-1500, 1500));
        if (valid_i) begin
          automatic longint xv[] = new[N_IN];
          automatic exp_t e;
          for (int i = 0; i < N_IN; i++) xv[i] = sx(x_i[i], 16);
          e.due = cyc + LAT;
          e.y = ref_branch(xv, coef_i);
          if (e.y > 0) n_pos++; else n_neg++;
          q.push_back(e);
        end
      end
      tick();
      valid_i = 0;
      repeat (LAT + 1) tick();
    end
    check(q.size() == 0, "all results delivered");
    check(n_pos > 0 && n_neg > 0, "outputs of both signs");
    $display("positive=%0d non_positive=%0d", n_pos, n_neg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
