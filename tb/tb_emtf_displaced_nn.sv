// tb_emtf_displaced_nn: end-to-end test of the whole wrapper at its
// default parameters.
//
// Several random coefficient sets are loaded in turn (the pipeline is
// drained first, as the coefficients must be stable while tracks are in
// flight). For each set, tracks of random raw features are streamed with
// back-to-back runs and idle clocks. Every result is compared with the
// bit-accurate reference model of conversion, normalisation, both
// branches and output conversion, and must leave exactly LATENCY = 10
// clocks after its track. Once, reset is asserted with tracks in flight:
// none of them may come out. The test counts each mechanism (input
// saturation, low and high clipping of both outputs, in-range outputs,
// back-to-back tracks, idle clocks, coefficient reloads, the flush by
// reset) and fails if any never occurred.
module tb_emtf_displaced_nn;
  import dnn_pkg::*;
  import nn_ref_pkg::*;

  localparam int LAT = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic            valid_i, valid_o;
  raw_t [N_IN-1:0] raw_i;
  nn_coef_t        coef_i;
  logic [7:0]      pt_o, d0_o;
  nn_flags_t       flags_o;

  emtf_displaced_nn dut (.clk, .rst_n, .valid_i, .raw_i, .coef_i,
                         .valid_o, .pt_o, .d0_o, .flags_o);

  typedef struct { longint due; longint pt; longint d0; nn_flags_t fl; } exp_t;
  exp_t q[$];
  longint cyc = 0;
  int checks = 0, failures = 0;
  int n_sat = 0, n_ptlo = 0, n_pthi = 0, n_d0lo = 0, n_d0hi = 0, n_mid = 0;
  int n_b2b = 0, n_idle = 0, n_reload = 0, n_flush = 0, n_tracks = 0;
  bit prev_valid = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s (cycle %0d)", what, cyc);
    end
  endtask

  initial begin
    #1000000;
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
      check(valid_o, "result missing at the fixed latency");
      check(pt_o == 8'(e.pt), $sformatf("pT got %0d exp %0d", pt_o, e.pt));
      check(d0_o == 8'(e.d0), $sformatf("d0 got %0d exp %0d", d0_o, e.d0));
      check(flags_o == e.fl, $sformatf("flags got %b exp %b", flags_o, e.fl));
    end else begin
      check(!valid_o, "result outside the fixed latency");
    end
  endtask

  // drive one clock of input; valid tracks get their expected result queued
  task automatic drive(bit v);
    valid_i = v;
    for (int i = 0; i < N_IN; i++) begin
      automatic int m = $urandom_range(0, 40);
      raw_i[i] = (m == 0) ? raw_t'(rr(-4096, 4095)) : raw_t'(rr(-1000, 1000));
    end
    if (v) begin
      automatic longint xv[] = new[N_IN];
      automatic longint xn[];
      automatic exp_t e;
      automatic bit s, sany = 0, lo, hi;
      longint ypt, yd0;
      for (int i = 0; i < N_IN; i++) begin
        xv[i] = ref_in(sx(raw_i[i], RAW_W), RAW_FRAC, s);
        sany |= s;
      end
      ref_bn_all(xv, coef_i, xn);
      ypt = ref_branch(xn, coef_i.pt);
      yd0 = ref_branch(xn, coef_i.d0);
      e.due = cyc + LAT;
      e.fl.in_sat = sany;
      e.pt = ref_out(ypt, PT_OUT_FRAC, OUT_W, lo, hi); e.fl.pt_lo = lo; e.fl.pt_hi = hi;
      e.d0 = ref_out(yd0, D0_OUT_FRAC, OUT_W, lo, hi); e.fl.d0_lo = lo; e.fl.d0_hi = hi;
      q.push_back(e);
      n_tracks++;
      if (sany) n_sat++;
      if (e.fl.pt_lo) n_ptlo++;
      if (e.fl.pt_hi) n_pthi++;
      if (e.fl.d0_lo) n_d0lo++;
      if (e.fl.d0_hi) n_d0hi++;
      if (!e.fl.pt_lo && !e.fl.pt_hi && !e.fl.d0_lo && !e.fl.d0_hi) n_mid++;
      if (prev_valid) n_b2b++;
    end else begin
      n_idle++;
    end
    prev_valid = v;
  endtask

  initial begin
    valid_i = 0; raw_i = '0; coef_i = rand_coef(8000);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int set = 0; set < 6; set++) begin
      if (set > 0) n_reload++;
      coef_i = rand_coef(8000);
      // every other set: output biases near the top of the range
      if (set % 2) begin
        coef_i.pt.b3[0] = data_t'(rr(32000, 32700));
        coef_i.d0.b3[0] = data_t'(rr(32000, 32700));
      end
      for (int t = 0; t < 150; t++) begin
        tick();
        drive($urandom_range(0, 4) != 0);
      end
      tick();
      drive(0);
      repeat (LAT + 1) begin tick(); drive(0); end
    end
    // reset with tracks in flight: they must all be discarded
    for (int t = 0; t < 5; t++) begin tick(); drive(1); end
    tick();
    drive(0);
    rst_n = 0;
    q.delete();
    tick();
    rst_n = 1;
    repeat (LAT + 2) begin tick(); drive(0); end
    n_flush++;
    // traffic after the reset still works
    for (int t = 0; t < 30; t++) begin tick(); drive(1); end
    tick(); drive(0);
    repeat (LAT + 1) begin tick(); drive(0); end
    check(q.size() == 0, "all results delivered");

    $display("tracks=%0d in_sat=%0d pt_lo=%0d pt_hi=%0d d0_lo=%0d d0_hi=%0d in_range=%0d",
             n_tracks, n_sat, n_ptlo, n_pthi, n_d0lo, n_d0hi, n_mid);
    $display("back_to_back=%0d idle=%0d reloads=%0d reset_flush=%0d", n_b2b, n_idle, n_reload, n_flush);
    check(n_sat > 0,    "input saturation happened");
    check(n_ptlo > 0,   "pT low clip happened");
    check(n_pthi > 0,   "pT high clip happened");
    check(n_d0lo > 0,   "d0 low clip happened");
    check(n_d0hi > 0,   "d0 high clip happened");
    check(n_mid > 0,    "in-range result happened");
    check(n_b2b > 0,    "back-to-back tracks happened");
    check(n_idle > 0,   "idle clocks happened");
    check(n_reload > 0, "coefficient reload happened");
    check(n_flush > 0,  "reset flush happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
