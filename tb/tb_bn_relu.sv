// tb_bn_relu: checks the folded batch norm + ReLU against the reference
// formula for random and corner values, in the three configurations the
// network uses: BN+ReLU (UAC), ReLU only (residual AC), BN only (after the
// skip addition).  Saturation to 32 bits is exercised with large inputs.
module tb_bn_relu;
  import flan_pkg::*;
  import flan_ref_pkg::*;

  int checks = 0, failures = 0;
  acc_t x;
  prm_t scale, shift;
  fm_t  y_br, y_r, y_b;

  bn_relu #(.BN_EN(1'b1), .RELU_EN(1'b1)) u_br (.x, .scale, .shift, .y(y_br));
  bn_relu #(.BN_EN(1'b0), .RELU_EN(1'b1)) u_r  (.x, .scale, .shift, .y(y_r));
  bn_relu #(.BN_EN(1'b1), .RELU_EN(1'b0)) u_b  (.x, .scale, .shift, .y(y_b));

  task automatic check1(longint xv, int sv, int hv);
    x = acc_t'(xv); scale = prm_t'(sv); shift = prm_t'(hv);
    #1;
    checks += 3;
    if (y_br !== ref_bn(xv, sv, hv, 1, 1)) begin failures++; $display("BN+ReLU x=%0d s=%0d h=%0d got %0d exp %0d", xv, sv, hv, y_br, ref_bn(xv, sv, hv, 1, 1)); end
    if (y_r  !== ref_bn(xv, sv, hv, 0, 1)) begin failures++; $display("ReLU x=%0d got %0d", xv, y_r); end
    if (y_b  !== ref_bn(xv, sv, hv, 1, 0)) begin failures++; $display("BN x=%0d s=%0d h=%0d got %0d exp %0d", xv, sv, hv, y_b, ref_bn(xv, sv, hv, 1, 0)); end
  endtask

  initial begin
    // hand-worked values: x = -3.0 (Q16.16), scale = -0.5, shift = 1.0 -> 2.5
    check1(-3 * 65536, -512, 1024);
    if (y_br !== 32'sd163840) begin failures++; $display("hand value got %0d", y_br); end
    checks++;
    // same with scale +0.5 -> -0.5, clipped by ReLU to 0, BN only gives -0.5
    check1(-3 * 65536, 512, 1024);
    if (y_br !== 0 || y_b !== -32768) begin failures++; $display("hand value 2 got %0d %0d", y_br, y_b); end
    checks++;
    // saturation
    check1(longint'(1) <<< 40, 1024, 0);
    if (y_b !== 32'sh7FFF_FFFF) begin failures++; $display("no positive saturation"); end
    check1(-(longint'(1) <<< 40), 1024, 0);
    if (y_b !== 32'sh8000_0000) begin failures++; $display("no negative saturation"); end
    checks += 2;
    for (int i = 0; i < 2000; i++) begin
      automatic longint xv = longint'($signed($urandom)) * longint'($urandom % 64);
      automatic int sv = int'($urandom % 1048576) - 524288;
      automatic int hv = int'($urandom % 1048576) - 524288;
      check1(xv, sv, hv);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
