// stream_averager: multi-scale window averages of one value stream.
//
// Phase 1 (sums): each cycle one stream element (tag, value, flag) may
// arrive. For every window idx in 0..ETA-1 with tag <= idx and flag set,
// the value is added to WIN_SUM[idx] and WIN_COUNT[idx] is incremented; all
// ETA windows are updated in parallel, so the stream is taken at one
// element per cycle without stalls.
// Phase 2 (averages): after the element marked last, the sums are divided by
// their counts with NDIV sequential dividers (seq_divider), reused in
// ceil(ETA/NDIV) rounds. Each average is |sum| * 2^FRAC_W / count, truncated
// toward zero and given the sign of the sum, i.e. a Q24.8 fixed-point value.
// The sums and counts are then cleared for the next stream.
//
// Timing: if the last element is sampled at clock edge L, avg_valid is high
// for the one cycle after edge L + ceil(ETA/NDIV) * (DIV_W + 2), where
// DIV_W = SUM_W + FRAC_W is the divider width; avg holds until the next
// result. A new stream must not start before avg_valid.
//
// From the paper: the tag rule, the per-window counts, no divide-by-zero
// check (the processed event is in every window) and the limit of four
// reused dividers. This design's choice: the divider type, the rounding and
// the accumulator widths (wide enough for N full-scale values).
module stream_averager
  import harms_pkg::*;
#(
  parameter int unsigned N         = N_DEF,
  parameter int unsigned ETA       = ETA_DEF,
  parameter int unsigned NDIV      = NDIV_DEF,
  parameter bit          SIGNED_IN = 1'b1,
  localparam int unsigned TAG_W = $clog2(ETA + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_last,
  input  logic                    in_flag,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic [V_W-1:0]          in_value,
  output logic                    avg_valid,
  output logic signed [OUT_W-1:0] avg [ETA]
);

  localparam int unsigned CNT_W  = $clog2(N + 1);
  localparam int unsigned SUM_W  = V_W + 1 + CNT_W;
  localparam int unsigned DIV_W  = SUM_W + FRAC_W;
  localparam int unsigned ROUNDS = (ETA + NDIV - 1) / NDIV;
  localparam int unsigned RND_W  = (ROUNDS > 1) ? $clog2(ROUNDS) : 1;

  typedef enum logic [1:0] {S_ACC, S_START, S_WAIT} state_t;

  state_t                  state;
  logic [RND_W-1:0]        round;
  logic signed [SUM_W-1:0] win_sum   [ETA];
  logic [CNT_W-1:0]        win_count [ETA];
  logic signed [SUM_W-1:0] value_ext;

  logic                    div_start;
  logic [NDIV-1:0]         div_done;
  logic [DIV_W-1:0]        div_num  [NDIV];
  logic [CNT_W-1:0]        div_den  [NDIV];
  logic [DIV_W-1:0]        div_quo  [NDIV];
  logic                    div_neg  [NDIV];

  always_comb begin
    if (SIGNED_IN) value_ext = SUM_W'(signed'(in_value));
    else           value_ext = SUM_W'(in_value);
  end

  // divider operands of the current round
  always_comb begin
    for (int unsigned k = 0; k < NDIV; k++) begin
      div_num[k] = '0;
      div_den[k] = CNT_W'(1);
      div_neg[k] = 1'b0;
      if (32'(round) * NDIV + k < ETA) begin
        div_neg[k] = win_sum[32'(round) * NDIV + k] < 0;
        div_num[k] = DIV_W'(div_neg[k] ? SUM_W'(-win_sum[32'(round) * NDIV + k])
                                       : SUM_W'( win_sum[32'(round) * NDIV + k])) << FRAC_W;
        div_den[k] = win_count[32'(round) * NDIV + k];
      end
    end
  end

  assign div_start = (state == S_START);

  for (genvar k = 0; k < NDIV; k++) begin : g_div
    seq_divider #(.NUM_W(DIV_W), .DEN_W(CNT_W)) u_div (
      .clk   (clk),
      .rst_n (rst_n),
      .start (div_start),
      .num   (div_num[k]),
      .den   (div_den[k]),
      .done  (div_done[k]),
      .quo   (div_quo[k])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_ACC;
      round     <= '0;
      avg_valid <= 1'b0;
      for (int unsigned i = 0; i < ETA; i++) begin
        win_sum[i]   <= '0;
        win_count[i] <= '0;
        avg[i]       <= '0;
      end
    end else begin
      avg_valid <= 1'b0;
      unique case (state)
        S_ACC: begin
          if (in_valid) begin
            for (int unsigned i = 0; i < ETA; i++) begin
              if (in_flag && 32'(in_tag) <= i) begin
                win_sum[i]   <= win_sum[i] + value_ext;
                win_count[i] <= win_count[i] + 1'b1;
              end
            end
            if (in_last) begin
              state <= S_START;
              round <= '0;
            end
          end
        end
        S_START: state <= S_WAIT;
        S_WAIT: begin
          if (div_done[0]) begin
            for (int unsigned k = 0; k < NDIV; k++) begin
              if (32'(round) * NDIV + k < ETA) begin
                avg[32'(round) * NDIV + k] <=
                  div_neg[k] ? -signed'(OUT_W'(div_quo[k])) : signed'(OUT_W'(div_quo[k]));
              end
            end
            if (32'(round) == ROUNDS - 1) begin
              state     <= S_ACC;
              avg_valid <= 1'b1;
              for (int unsigned i = 0; i < ETA; i++) begin
                win_sum[i]   <= '0;
                win_count[i] <= '0;
              end
            end else begin
              round <= round + 1'b1;
              state <= S_START;
            end
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // all dividers start together and so finish together
  a_div_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    div_done[0] |-> &div_done);

endmodule
