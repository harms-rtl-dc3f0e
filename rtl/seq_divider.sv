// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// A pulse on start loads num and den; NUM_W clock cycles later done pulses
// for one cycle with quo = num / den (truncated) valid, and quo holds until
// the next start. A start while busy restarts the division. Division by zero
// returns all ones; the stream averager never divides by zero, because the
// event being processed is in every window. Helper of stream_averager: the
// paper states that the averager reuses a small number of dividers, how a
// divider is built is this design's choice.
module seq_divider #(
  parameter int unsigned NUM_W = 35,
  parameter int unsigned DEN_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NUM_W-1:0] num,
  input  logic [DEN_W-1:0] den,
  output logic             done,
  output logic [NUM_W-1:0] quo
);

  localparam int unsigned CNT_W = $clog2(NUM_W + 1);

  logic [DEN_W:0]   rem;
  logic [DEN_W-1:0] den_q;
  logic [CNT_W-1:0] cnt;
  logic             busy;
  logic [DEN_W:0]   trial;

  // shift in the next numerator bit and try to subtract the divisor
  always_comb trial = {rem[DEN_W-1:0], quo[NUM_W-1]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cnt  <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= CNT_W'(NUM_W);
      end else if (busy) begin
        cnt <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      rem   <= '0;
      quo   <= num;
      den_q <= den;
    end else if (busy) begin
      if (trial >= {1'b0, den_q}) begin
        rem <= trial - {1'b0, den_q};
        quo <= {quo[NUM_W-2:0], 1'b1};
      end else begin
        rem <= trial;
        quo <= {quo[NUM_W-2:0], 1'b0};
      end
    end
  end

endmodule
