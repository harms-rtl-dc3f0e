// tag_lut_tb: sweeps every distance through two window tables, the
// benchmark configuration (WM=320, ETA=4) and a finer one (WM=100, ETA=10),
// and checks each registered tag one cycle later against the bin search of
// the reference model.
module tag_lut_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [XY_W-1:0] dmax;
  logic [2:0]      tag_a;
  logic [3:0]      tag_b;
  int checks = 0, failures = 0;

  tag_lut dut_a (.clk, .dmax, .tag(tag_a));
  tag_lut #(.WM(100), .ETA(10)) dut_b (.clk, .dmax, .tag(tag_b));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dmax = '0;
    @(negedge clk);
    for (int d = 0; d < (1 << XY_W); d++) begin
      dmax = XY_W'(d);
      @(posedge clk); #1;
      checks += 2;
      if (int'(tag_a) != ref_tag(d, 320, 4)) begin
        failures++;
        $display("tag_a d=%0d got %0d exp %0d", d, tag_a, ref_tag(d, 320, 4));
      end
      if (int'(tag_b) != ref_tag(d, 100, 10)) begin
        failures++;
        $display("tag_b d=%0d got %0d exp %0d", d, tag_b, ref_tag(d, 100, 10));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
