// tb_displaced_nn: checks the stitched network (batch norm + both branches).
//
// For several random coefficient sets, random converted feature vectors
// are streamed at one per clock with idle clocks. The pT and d0 outputs are
// compared with the reference model and must appear exactly seven clocks
// after the input. A check that the pT and d0 results differ guards
// against the two branches being wired to the same coefficients.
module tb_displaced_nn;
  import dnn_pkg::*;
  import nn_ref_pkg::*;

  localparam int LAT = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             valid_i, valid_o;
  data_t [N_IN-1:0] x_i;
  nn_coef_t         coef_i;
  data_t            pt_o, d0_o;

  displaced_nn dut (.clk, .rst_n, .valid_i, .x_i, .coef_i, .valid_o, .pt_o, .d0_o);

  typedef struct { longint due; longint pt; longint d0; } exp_t;
  exp_t q[$];
  longint cyc = 0;
  int checks = 0, failures = 0, n_diff = 0;

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
      check(valid_o, "valid missing at latency");
      check(sx(pt_o, 16) == e.pt, $sformatf("pt got %0d exp %0d", sx(pt_o, 16), e.pt));
      check(sx(d0_o, 16) == e.d0, $sformatf("d0 got %0d exp %0d", sx(d0_o, 16), e.d0));
    end else begin
      check(!valid_o, "unexpected valid");
    end
  endtask

  initial begin
    valid_i = 0; x_i = '0; coef_i = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      coef_i = rand_coef(8000);
      for (int t = 0; t < 120; t++) begin
        tick();
        valid_i = ($urandom_range(0, 3) != 0);
        for (int i = 0; i < N_IN; i++) x_i[i] = data_t'(rr(-20000, 20000));
        if (valid_i) begin
          automatic longint xv[] = new[N_IN];
          automatic longint xn[];
          automatic exp_t e;
          for (int i = 0; i < N_IN; i++) xv[i] = sx(x_i[i], 16);
          ref_bn_all(xv, coef_i, xn);
          e.due = cyc + LAT;
          e.pt = ref_branch(xn, coef_i.pt);
          e.d0 = ref_branch(xn, coef_i.d0);
          if (e.pt != e.d0) n_diff++;
          q.push_back(e);
        end
      end
      tick();
      valid_i = 0;
      repeat (LAT + 1) tick();
    end
    check(q.size() == 0, "all results delivered");
    check(n_diff > 0, "pT and d0 differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
