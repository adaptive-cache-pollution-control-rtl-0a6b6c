// tb_feature_encoder: directed and random checks of the four features (address fold, type,
// prefetch flag, log-scale locality) against values computed in the testbench.
module tb_feature_encoder;
  import acpc_pkg::*;
  logic [31:0] tag;
  itype_e      itype;
  logic        pf, hit;
  logic [15:0] rd;
  logic [C_IN-1:0][ACT_W-1:0] x;
  int checks = 0, failures = 0;

  feature_encoder #(.TAG_W(32), .RD_W(16)) dut (
    .tag(tag), .itype(itype), .is_prefetch(pf), .hit(hit), .reuse_dist(rd), .x(x));

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
    int exp_fold, exp_loc, lg;
    for (int n = 0; n < 300; n++) begin
      tag   = $urandom;
      itype = itype_e'($urandom_range(0, 3));
      pf    = 1'($urandom);
      hit   = 1'($urandom);
      rd    = 16'($urandom) >> $urandom_range(0, 15);
      #1;
      exp_fold = (tag[7:0] ^ tag[15:8] ^ tag[23:16] ^ tag[31:24]);
      lg = 0;
      for (int v = int'(rd); v > 1; v = v / 2) lg++;
      exp_loc = hit ? 256 - 16 * lg : 0;
      chk(int'(x[0]) == exp_fold, $sformatf("addr feature %0d vs %0d", x[0], exp_fold));
      chk(int'(x[1]) == 64 * int'(itype), "type feature");
      chk(int'(x[2]) == (pf ? 256 : 0), "prefetch feature");
      chk(int'(x[3]) == exp_loc, $sformatf("locality rd=%0d %0d vs %0d", rd, x[3], exp_loc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
