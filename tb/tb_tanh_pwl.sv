// tb_tanh_pwl -- piece-wise tanh. Every 12-bit input is compared with a real
// arithmetic evaluation of the same seven pieces (allowing 1 LSB of rounding),
// and the pieces are checked to follow tanh(s/32) within 6 % of full scale
// plus 1 LSB. Two scales are run: breakpoints at 16/32/64 and at 64/128/256.
module tb_tanh_pwl;
  import bdt_ref_pkg::*;

  logic signed [11:0] s;
  logic signed [11:0] y0, y2;
  int checks = 0, failures = 0;
  int pieces [7];
  int r;
  real t, err, maxerr;

  tanh_pwl #(.IN_W(12), .Q(7), .SHIFT(0)) dut0 (.s(s), .y(y0));
  tanh_pwl #(.IN_W(12), .Q(7), .SHIFT(2)) dut2 (.s(s), .y(y2));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int piece(int v);
    if (v <= -64) return 0;
    if (v <= -32) return 1;
    if (v <= -16) return 2;
    if (v < 16)   return 3;
    if (v < 32)   return 4;
    if (v < 64)   return 5;
    return 6;
  endfunction

  initial begin
    maxerr = 0.0;
    for (int v = -2048; v < 2048; v++) begin
      s = 12'(v);
      #1;
      r = ref_tanh(v, 7, 0);
      checks++;
      if (int'(y0) - r > 1 || r - int'(y0) > 1) begin
        failures++; $display("FAIL shift0 s=%0d y=%0d ref %0d", v, y0, r);
      end
      r = ref_tanh(v, 7, 2);
      checks++;
      if (int'(y2) - r > 1 || r - int'(y2) > 1) begin
        failures++; $display("FAIL shift2 s=%0d y=%0d ref %0d", v, y2, r);
      end
      t = 127.0 * $tanh(real'(v) / 32.0);
      err = real'(y0) - t;
      if (err < 0) err = -err;
      if (err > maxerr) maxerr = err;
      checks++;
      if (err > 0.06 * 127.0 + 1.0) begin
        failures++; $display("FAIL accuracy s=%0d y=%0d tanh %f", v, y0, t);
      end
      pieces[piece(v)]++;
    end
    // Odd symmetry and saturation.
    s = 12'sd100; #1; checks++;
    if (y0 != 12'sd127) begin failures++; $display("FAIL saturation +"); end
    s = -12'sd100; #1; checks++;
    if (y0 != -12'sd127) begin failures++; $display("FAIL saturation -"); end
    $display("max |error| vs tanh: %0.2f LSB of 127", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
