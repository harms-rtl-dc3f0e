// stream_averager_tb: feeds the same random tagged streams to two
// averagers, one with six windows and four dividers (so the dividers are
// used in two rounds) on signed values, one with the default configuration
// on unsigned values. Checks every window average against sums and counts
// kept by the testbench and checks the cycle count from the last element to
// avg_valid: ceil(ETA/NDIV) rounds of (divider width + 2) cycles, so the
// clock edge that first samples avg_valid is LAT+1 edges after the one that
// samples the last element.
module stream_averager_tb;
  import harms_pkg::*;
  import harms_ref_pkg::*;

  localparam int NA = 64, ETA_A = 6, ETA_B = 4, NSTREAM = 12;
  localparam int DIVW_A = 16 + 1 + $clog2(NA + 1) + 8;
  localparam int DIVW_B = 16 + 1 + $clog2(N_DEF + 1) + 8;
  localparam int LAT_A = ((ETA_A + 3) / 4) * (DIVW_A + 2);
  localparam int LAT_B = ((ETA_B + 3) / 4) * (DIVW_B + 2);

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                    in_valid, in_last, in_flag;
  logic [2:0]              in_tag;
  logic [V_W-1:0]          in_value;
  logic                    va, vb;
  logic signed [OUT_W-1:0] avg_a [ETA_A];
  logic signed [OUT_W-1:0] avg_b [ETA_B];

  stream_averager #(.N(NA), .ETA(ETA_A), .NDIV(4), .SIGNED_IN(1'b1)) dut_a (
    .clk, .rst_n, .in_valid, .in_last, .in_flag, .in_tag, .in_value,
    .avg_valid(va), .avg(avg_a));
  stream_averager #(.SIGNED_IN(1'b0)) dut_b (
    .clk, .rst_n, .in_valid, .in_last, .in_flag, .in_tag, .in_value,
    .avg_valid(vb), .avg(avg_b));

  int checks = 0, failures = 0;
  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sa [ETA_A], ca [ETA_A], sb [ETA_B], cb [ETA_B];
    int last_cyc, ta, tb_;
    rst_n = 1'b0; in_valid = 1'b0; in_last = 1'b0; in_flag = 1'b0; in_tag = '0; in_value = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < NSTREAM; s++) begin
      int len;
      len = (s == 0) ? NA : $urandom_range(1, NA);
      foreach (sa[w]) begin sa[w] = 0; ca[w] = 0; end
      foreach (sb[w]) begin sb[w] = 0; cb[w] = 0; end
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        // idle cycles inside the stream are allowed
        while ($urandom_range(0, 4) == 0) begin
          in_valid = 1'b0; @(negedge clk);
        end
        in_valid = 1'b1;
        in_last  = (i == len - 1);
        in_tag   = (i == 0) ? 3'd0 : 3'($urandom_range(0, 4));
        in_flag  = (i == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);
        in_value = (s % 3 == 0) ? 16'h8000 + 16'($urandom_range(0, 1)) * 16'h7fff
                                : V_W'($urandom);
        if (in_flag) begin
          for (int w = 0; w < ETA_A; w++) if (int'(in_tag) <= w) begin
            sa[w] += longint'(signed'(in_value)); ca[w]++;
          end
          for (int w = 0; w < ETA_B; w++) if (int'(in_tag) <= w) begin
            sb[w] += longint'(in_value); cb[w]++;
          end
        end
        last_cyc = cyc;
      end
      @(negedge clk); in_valid = 1'b0; in_last = 1'b0;
      ta = -1; tb_ = -1;
      while (ta < 0 || tb_ < 0) begin
        @(posedge clk);
        if (va && ta < 0) ta = cyc - last_cyc;
        if (vb && tb_ < 0) tb_ = cyc - last_cyc;
        if (cyc - last_cyc > 200) break;
      end
      #1;
      for (int w = 0; w < ETA_A; w++) begin
        checks++;
        if (longint'(avg_a[w]) != ref_avg(sa[w], ca[w])) begin
          failures++;
          $display("stream %0d A win %0d got %0d exp %0d", s, w, avg_a[w], ref_avg(sa[w], ca[w]));
        end
      end
      for (int w = 0; w < ETA_B; w++) begin
        checks++;
        if (longint'(avg_b[w]) != ref_avg(sb[w], cb[w])) begin
          failures++;
          $display("stream %0d B win %0d got %0d exp %0d", s, w, avg_b[w], ref_avg(sb[w], cb[w]));
        end
      end
      checks += 2;
      if (ta != LAT_A + 1) begin failures++; $display("latency A %0d exp %0d", ta, LAT_A); end
      if (tb_ != LAT_B + 1) begin failures++; $display("latency B %0d exp %0d", tb_, LAT_B); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
