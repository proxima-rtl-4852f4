// tb_fp16_mac: random operands through all four operations of the FP16 MAC,
// compared with real arithmetic (truncation allows ~2^-9 relative error per
// operation).
module tb_fp16_mac;
  import proxima_pkg::*;
  import tb_util_pkg::*;
  mac_op_e op;
  fp16_t a, b, acc, y;
  int checks = 0, failures = 0;
  fp16_mac dut (.op, .a, .b, .acc, .y);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ra, rb, rc, ex;
    for (int i = 0; i < 2000; i++) begin
      ra = (real'($urandom_range(0, 20000)) - 10000.0) / 997.0;
      rb = (real'($urandom_range(0, 20000)) - 10000.0) / 1013.0;
      rc = (real'($urandom_range(0, 20000)) - 10000.0) / 311.0;
      a = r2f(ra); b = r2f(rb); acc = r2f(rc);
      op = mac_op_e'(i % 4);
      #1;
      unique case (op)
        OP_ADD: ex = f2r(a) + f2r(b);
        OP_SUB: ex = f2r(a) - f2r(b);
        OP_MUL: ex = f2r(a) * f2r(b);
        default: ex = f2r(acc) + f2r(a) * f2r(b);
      endcase
      checks++;
      if (!close(f2r(y), ex, 4e-3, 0.02)) begin
        failures++;
        if (failures < 10) $display("op %0d a=%f b=%f acc=%f got %f exp %f", op, f2r(a), f2r(b), f2r(acc), f2r(y), ex);
      end
    end
    // exact small cases
    op = OP_MUL; a = 16'h4000; b = 16'h4200; #1; checks++; if (y != 16'h4600) failures++; // 2*3=6
    op = OP_ADD; a = 16'h3C00; b = 16'hBC00; #1; checks++; if (y != 16'h0000) failures++; // 1-1=0
    op = OP_MAC; a = 16'h4000; b = 16'h4000; acc = 16'h3C00; #1; checks++; if (y != 16'h4500) failures++; // 1+4=5
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
