// tb_sigmoid_pwl: checks the piecewise-linear sigmoid against the exact sigmoid over the whole
// useful input range (error within 6/256) and at fixed points (0 -> 128, saturation to 0/255),
// and checks symmetry sigma(-z) = 1 - sigma(z).
module tb_sigmoid_pwl;
  import acpc_pkg::*;
  logic [ACT_W-1:0]  z;
  logic [PROB_W-1:0] y;
  int checks = 0, failures = 0;

  sigmoid_pwl dut (.z(z), .y(y));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real zr, ref_y;
    int  yp;
    for (int v = -2400; v <= 2400; v += 7) begin
      z = ACT_W'(v);
      #1;
      zr    = real'(v) / 256.0;
      ref_y = 256.0 / (1.0 + $exp(-zr));
      chk((real'(y) - ref_y) < 6.0 && (ref_y - real'(y)) < 6.0,
          $sformatf("z=%0d y=%0d ref=%f", v, y, ref_y));
      if (v > 0) begin
        yp = int'(y);
        z  = ACT_W'(-v);
        #1;
        chk(int'(y) == 256 - yp || (yp == 255 && y == 0) || (yp == 255 && y == 1),
            $sformatf("symmetry z=%0d %0d %0d", v, yp, y));
      end
    end
    z = 16'd0;      #1; chk(y == 8'd128, "sigma(0)");
    z = 16'h7fff;   #1; chk(y == 8'd255, "sigma(+max)");
    z = 16'h8000;   #1; chk(y == 8'd0,   "sigma(-max)");
    z = 16'd400;    #1; chk(y == 8'd210, "sigma(1.5625) = 0.625 + 1.5625/8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
