// tb_utility_softmax: random probability vectors and valid masks; each U_i is compared with
// exp(y_i)/sum_valid exp(y_j) computed with real arithmetic (tolerance 0.005), invalid lines
// must read 0 and the valid U_i must add up to 1 within 0.01.
module tb_utility_softmax;
  import acpc_pkg::*;
  localparam int WAYS = 8;
  logic [WAYS-1:0]             valid;
  logic [WAYS-1:0][PROB_W-1:0] y;
  logic [WAYS-1:0][Q_W-1:0]    u;
  int checks = 0, failures = 0;

  utility_softmax #(.WAYS(WAYS)) dut (.valid(valid), .y_hat(y), .u(u));

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
    real s, r, tot;
    for (int n = 0; n < 400; n++) begin
      valid = (n % 4 == 0) ? '1 : WAYS'($urandom);
      for (int i = 0; i < WAYS; i++) y[i] = PROB_W'($urandom);
      #1;
      s = 0.0;
      for (int i = 0; i < WAYS; i++) if (valid[i]) s += $exp(real'(y[i]) / 256.0);
      tot = 0.0;
      for (int i = 0; i < WAYS; i++) begin
        if (valid[i]) begin
          r = $exp(real'(y[i]) / 256.0) / s;
          tot += real'(u[i]) / 65536.0;
          chk((real'(u[i]) / 65536.0 - r) < 0.005 && (r - real'(u[i]) / 65536.0) < 0.005,
              $sformatf("U[%0d]=%0d ref=%f", i, u[i], r));
        end else begin
          chk(u[i] == '0, "invalid line has U = 0");
        end
      end
      if (valid != '0) chk(tot > 0.99 && tot < 1.01, $sformatf("sum %f", tot));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
