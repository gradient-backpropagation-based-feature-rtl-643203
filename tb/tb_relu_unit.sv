// tb_relu_unit: the forward ReLU and the three backward rules.
// First the 3x3 example of the paper's ReLU figure: forward input (1,-1,5, 2,-5,-7, -3,2,4)
// and incoming gradient (-2,3,-1, 6,-3,1, 2,-1,3), whose expected outputs for Saliency,
// DeconvNet and Guided Backpropagation are the printed values. Then 300 random values per
// method against the equations R = (f>0)R, R = (R>0)R and R = (f>0)(R>0)R.
module tb_relu_unit;
  import xai_pkg::*;
  int checks = 0, failures = 0;
  phase_e ph;
  data_t x, ys, yd, yg;
  logic mi, ms, md, mg;

  relu_unit #(.METHOD(SALIENCY))  u_s (.phase(ph), .x, .mask_in(mi), .y(ys), .mask_out(ms));
  relu_unit #(.METHOD(DECONVNET)) u_d (.phase(ph), .x, .mask_in(mi), .y(yd), .mask_out(md));
  relu_unit #(.METHOD(GUIDED))    u_g (.phase(ph), .x, .mask_in(mi), .y(yg), .mask_out(mg));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  int f [9]   = '{1, -1, 5, 2, -5, -7, -3, 2, 4};
  int fo [9]  = '{1, 0, 5, 2, 0, 0, 0, 2, 4};
  int r [9]   = '{-2, 3, -1, 6, -3, 1, 2, -1, 3};
  int sal [9] = '{-2, 0, -1, 6, 0, 0, 0, -1, 3};
  int dec [9] = '{0, 3, 0, 6, 0, 1, 2, 0, 3};
  int gui [9] = '{0, 0, 0, 6, 0, 0, 0, 0, 3};
  logic m [9];

  initial begin
    ph = PH_FP;
    for (int i = 0; i < 9; i++) begin
      x = data_t'(f[i]); mi = 1'b0; #1;
      check(ys == data_t'(fo[i]) && yd == data_t'(fo[i]) && yg == data_t'(fo[i]), "FP ReLU");
      check(ms == (f[i] > 0), "FP mask");
      m[i] = ms;
    end
    ph = PH_BP;
    for (int i = 0; i < 9; i++) begin
      x = data_t'(r[i]); mi = m[i]; #1;
      check(ys == data_t'(sal[i]), $sformatf("saliency %0d: %0d", i, ys));
      check(yd == data_t'(dec[i]), $sformatf("deconvnet %0d: %0d", i, yd));
      check(yg == data_t'(gui[i]), $sformatf("guided %0d: %0d", i, yg));
    end
    for (int n = 0; n < 300; n++) begin
      x = data_t'($urandom); mi = 1'($urandom);
      ph = PH_BP; #1;
      check(ys == (mi ? x : data_t'(0)), "saliency random");
      check(yd == (x > 0 ? x : data_t'(0)), "deconvnet random");
      check(yg == ((mi && x > 0) ? x : data_t'(0)), "guided random");
      ph = PH_FP; #1;
      check(yg == (x > 0 ? x : data_t'(0)) && mg == (x > 0), "FP random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
