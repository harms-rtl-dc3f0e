// result_ram_tb: the 16 cores write results, several in the same cycle,
// then all entries are read back with the one-cycle read latency and
// compared with what was written last to each index.
module result_ram_tb;
  import harms_pkg::*;

  localparam int P = P_DEF;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [P-1:0] wr_en;
  true_flow_t   wr_data [P];
  logic [3:0]   rd_idx;
  true_flow_t   rd_data;

  result_ram dut (.*);

  int checks = 0, failures = 0;
  true_flow_t model [P];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = '0; rd_idx = '0;
    foreach (wr_data[k]) wr_data[k] = '0;
    for (int r = 0; r < 6; r++) begin
      @(negedge clk);
      wr_en = (r == 0) ? '1 : P'($urandom);
      for (int k = 0; k < P; k++) begin
        wr_data[k] = true_flow_t'({$urandom, $urandom});
        if (wr_en[k]) model[k] = wr_data[k];
      end
      @(negedge clk); wr_en = '0;
      for (int k = 0; k < P; k++) begin
        rd_idx = 4'(k);
        @(posedge clk); #1;
        checks++;
        if (rd_data != model[k]) begin failures++; $display("round %0d entry %0d", r, k); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
