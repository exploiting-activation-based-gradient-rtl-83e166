// tb_relu_unit: checks the ReLU / output-bitmap unit.
//
// Forward mode: positive values pass, zero and negative values (and
// subnormals, which the arithmetic flushes to zero) become +0, and the
// bitmap bit is set exactly for the values passed. Backward mode: the value
// passes unchanged and the bit is always set. Corner values plus random
// half-precision patterns.
module tb_relu_unit;
  import sparse_pkg::*;

  mode_e mode;
  fp16_t z, y;
  logic nz;
  relu_unit dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input mode_e md, input fp16_t v);
    bit pos = !v[15] && v[14:10] != 0;
    fp16_t ey = (md == MODE_BP) ? v : (pos ? v : 16'h0000);
    bit enz = (md == MODE_BP) ? 1'b1 : pos;
    mode = md; z = v; #1;
    checks++;
    if (y !== ey || nz !== enz) begin
      failures++; $display("mode %0d z=%h: y=%h nz=%b exp %h %b", md, v, y, nz, ey, enz);
    end
  endtask

  initial begin
    fp16_t corner [6] = '{16'h0000, 16'h8000, 16'h0001, 16'h3c00, 16'hbc00, 16'h7bff};
    foreach (corner[i]) begin check(MODE_FP, corner[i]); check(MODE_BP, corner[i]); end
    for (int t = 0; t < 2000; t++) begin
      check(MODE_FP, fp16_t'($urandom));
      check(MODE_BP, fp16_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
