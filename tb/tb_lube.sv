// tb_lube -- Look Up Bin Engine.
// (1) The example of the source design: N=4, thresholds 8, 12, 14; all x,
//     x=13 must give bin 2.
// (2) An 8-bit variable with pseudo-random sorted thresholds, all 256 inputs,
//     compared with a count of the thresholds <= x.
// The index must appear exactly two clocks after x, with a new x every clock.
module tb_lube;
  import bdt_pkg::*;
  import bdt_ref_pkg::*;

  localparam thr_t E = lube_thr(5, 2, 3, 8, 30, 60);
  localparam int unsigned NB2 = E.nb;
  localparam int unsigned BW2 = (NB2 > 1) ? $clog2(NB2) : 1;
  localparam thr_t EFIG = '{nb: 16'd4, edges: {{(B_MAX-3)*N_MAX{1'b0}}, 16'd14, 16'd12, 16'd8}};

  logic clk = 0, rst_n = 0;
  logic [3:0] x1;
  logic [1:0] b1;
  logic [7:0] x2;
  logic [BW2-1:0] b2;
  int checks = 0, failures = 0;

  lube dut1 (.clk(clk), .rst_n(rst_n), .x(x1), .b(b1));
  lube #(.N(8), .NB(NB2), .EDGES(E.edges)) dut2 (.clk(clk), .rst_n(rst_n), .x(x2), .b(b2));

  always #5 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist [$];
  initial begin
    x1 = 0; x2 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Stream all values back to back; compare with the value sent two clocks ago.
    for (int i = 0; i < 260; i++) begin
      @(negedge clk);
      if (i >= 2) begin
        checks += 2;
        if (int'(b1) != ref_bin_thr(EFIG, (i - 2) % 16)) begin
          failures++; $display("FAIL fig x=%0d b=%0d", (i - 2) % 16, b1);
        end
        if (int'(b2) != ref_bin_thr(E, (i - 2) % 256)) begin
          failures++; $display("FAIL thr x=%0d b=%0d exp %0d", i - 2, b2, ref_bin_thr(E, (i - 2) % 256));
        end
        if (i - 2 == 13) begin
          checks++;
          if (b1 != 2'd2) begin failures++; $display("FAIL x=13 must give bin 2"); end
        end
      end
      x1 = 4'(i % 16); x2 = 8'(i % 256);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
