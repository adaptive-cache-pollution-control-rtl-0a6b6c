// tb_parm: random sets (metadata, alpha). The expected priorities
// P_i = alpha*U_i + (1-alpha)*cnt_i/15 are computed with real arithmetic and compared with the
// module's (tolerance 0.006). The victim must be the lowest invalid way if there is one (no
// eviction), else a way whose reference priority is the minimum (within 0.001, to allow for
// rounding between near-equal lines).
module tb_parm;
  import acpc_pkg::*;
  localparam int WAYS = 8, FREQ_W = 4;
  logic [WAYS-1:0]             valid;
  logic [WAYS-1:0][PROB_W-1:0] y;
  logic [WAYS-1:0][FREQ_W-1:0] f;
  logic [15:0]                 alpha;
  logic [WAYS-1:0][Q_W-1:0]    prio;
  logic [2:0]                  victim;
  logic                        victim_valid;
  int checks = 0, failures = 0;

  parm #(.WAYS(WAYS), .FREQ_W(FREQ_W)) dut (
    .valid, .y_hat(y), .freq(f), .alpha_q(alpha), .prio, .victim, .victim_valid);

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
    real s, a, p[WAYS], pmin;
    int  first_free;
    for (int n = 0; n < 600; n++) begin
      valid = (n % 3 == 0) ? WAYS'($urandom) | WAYS'($urandom) : '1;
      for (int i = 0; i < WAYS; i++) begin
        y[i] = PROB_W'($urandom);
        f[i] = FREQ_W'($urandom);
      end
      case (n % 4)
        0: alpha = 16'h8000;
        1: alpha = 16'hffff;
        2: alpha = 16'h0000;
        default: alpha = 16'($urandom);
      endcase
      #1;
      a = real'(alpha) / 65536.0;
      s = 0.0;
      for (int i = 0; i < WAYS; i++) if (valid[i]) s += $exp(real'(y[i]) / 256.0);
      first_free = -1;
      pmin = 10.0;
      for (int i = WAYS - 1; i >= 0; i--) if (!valid[i]) first_free = i;
      for (int i = 0; i < WAYS; i++) begin
        p[i] = (1.0 - a) * real'(f[i]) / 15.0;
        if (valid[i]) p[i] += a * $exp(real'(y[i]) / 256.0) / s;
        if (valid[i] && p[i] < pmin) pmin = p[i];
        chk((real'(prio[i]) / 65536.0 - p[i]) < 0.006 && (p[i] - real'(prio[i]) / 65536.0) < 0.006,
            $sformatf("P[%0d]=%0d ref=%f", i, prio[i], p[i]));
      end
      if (first_free >= 0) begin
        chk(int'(victim) == first_free && !victim_valid,
            $sformatf("free way %0d expected, got %0d", first_free, victim));
      end else begin
        chk(victim_valid && p[victim] <= pmin + 0.001,
            $sformatf("victim %0d p=%f min=%f", victim, p[victim], pmin));
      end
    end
    // a prefetched line with low predicted reuse loses to an often used line with high reuse
    valid = '1; alpha = 16'h8000;
    for (int i = 0; i < WAYS; i++) begin y[i] = 8'd200; f[i] = 4'd8; end
    y[5] = 8'd20; f[5] = 4'd0;
    #1;
    chk(victim == 3'd5 && victim_valid, "low-reuse line is the victim");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
