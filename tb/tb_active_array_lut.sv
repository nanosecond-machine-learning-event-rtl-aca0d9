// tb_active_array_lut -- drives every one-hot vector into two sizes of the
// active-array table (4 bins as in the source example, and 13 bins) and checks
// the index; also checks the printed example [0,0,1,0] -> 2.
module tb_active_array_lut;
  logic [3:0]  in4;
  logic [1:0]  out4;
  logic [12:0] in13;
  logic [3:0]  out13;
  int checks = 0, failures = 0;

  active_array_lut #(.NB(4))  dut4  (.in_active(in4),  .out_index(out4));
  active_array_lut #(.NB(13)) dut13 (.in_active(in13), .out_index(out13));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in4 = 4'b0100;  // in_0..in_3 = 0,0,1,0
    in13 = '0;
    #1;
    checks++;
    if (out4 !== 2'd2) begin failures++; $display("FAIL example: %0d", out4); end
    for (int b = 0; b < 4; b++) begin
      in4 = 4'(1 << b); #1; checks++;
      if (int'(out4) != b) begin failures++; $display("FAIL nb4 b=%0d got %0d", b, out4); end
    end
    for (int b = 0; b < 13; b++) begin
      in13 = 13'(1 << b); #1; checks++;
      if (int'(out13) != b) begin failures++; $display("FAIL nb13 b=%0d got %0d", b, out13); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
