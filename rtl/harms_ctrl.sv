// harms_ctrl: sequencer of one hARMS hardware call.
//
// A call handles the P events of the event accumulation buffer:
//   LOAD    accept P events from the input stream (valid/ready). Each
//           accepted event is written to the event RAM at its index and
//           appended to the recent flow buffer, so it takes part in its own
//           and the other P-1 events' pooling.
//   START   start streaming the recent flow buffer through all P cores.
//   WAIT    collect the result pulses of the P cores.
//   RD/OUT  read result k from the result RAM and offer it on the output
//           stream (valid/ready, last on the P-th result); repeat P times.
// then back to LOAD. The cores run in lock-step, so in practice all results
// arrive in the same cycle; the controller still waits for every one.
//
// Timing: from the edge that accepts the P-th input to the first out_valid
// there are L + 8 + ceil(ETA/NDIV)*(DIV_W+2) cycles (L: the effective
// length of the buffer stream, DIV_W: see stream_averager); each result then takes two cycles plus any wait for
// out_ready.
//
// From the paper: the order load / buffer update / stream / compute /
// return of results. This design's choice: the handshakes, the state
// split and the fixed call size of P events.
module harms_ctrl #(
  parameter int unsigned P = 16,
  localparam int unsigned IDX_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // input event stream handshake
  input  logic             in_valid,
  output logic             in_ready,
  // event RAM and recent flow buffer writes
  output logic             ev_wr_en,
  output logic [IDX_W-1:0] ev_wr_idx,
  // recent flow buffer stream start
  output logic             rfb_start,
  // results from the cores
  input  logic [P-1:0]     core_done,
  // result RAM read and output stream handshake
  output logic [IDX_W-1:0] res_rd_idx,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             out_last,
  output logic             busy
);

  typedef enum logic [2:0] {S_LOAD, S_START, S_WAIT, S_RD, S_OUT} state_t;

  state_t           state;
  logic [IDX_W-1:0] idx;
  logic [P-1:0]     done_q;

  assign in_ready   = (state == S_LOAD);
  assign ev_wr_en   = in_valid && in_ready;
  assign ev_wr_idx  = idx;
  assign rfb_start  = (state == S_START);
  assign res_rd_idx = idx;
  assign out_valid  = (state == S_OUT);
  assign out_last   = (state == S_OUT) && (32'(idx) == P - 1);
  assign busy       = (state != S_LOAD) || (idx != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      idx    <= '0;
      done_q <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (ev_wr_en) begin
          if (32'(idx) == P - 1) begin
            idx   <= '0;
            state <= S_START;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_START: begin
          done_q <= '0;
          state  <= S_WAIT;
        end
        S_WAIT: begin
          done_q <= done_q | core_done;
          if (&(done_q | core_done)) state <= S_RD;
        end
        S_RD: state <= S_OUT;
        S_OUT: if (out_ready) begin
          if (32'(idx) == P - 1) begin
            idx   <= '0;
            state <= S_LOAD;
          end else begin
            idx   <= idx + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // a result may only arrive while the controller waits for it
  a_done_in_wait: assert property (@(posedge clk) disable iff (!rst_n)
    (|core_done) |-> (state == S_WAIT));

endmodule
