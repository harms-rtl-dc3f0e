// rfb: recent flow buffer, a ring buffer of the last N local-flow events.
//
// Writes go to the slot after the previous write (next_idx wraps from N-1
// to 0), so each new event replaces the oldest one and the buffer always
// holds the N most recent events. The contents survive between hardware
// calls. A pulse on rd_start streams the rd_len most recent slots (all N
// when rd_len is 0 or above N), oldest first, one per clock cycle, with
// out_last on the final one. rd_len is the effective buffer length, which
// may be lowered at run time to trade pooled events for speed; the order
// of the stream does not matter to the window arbitration that follows.
// Each element comes with out_occ, set when its slot has been written since
// reset, so slots never written are ignored downstream instead of being read
// as events at (0,0,t=0).
//
// Timing: memory read latency one cycle; the slot addressed at edge k
// appears after edge k+1; with rd_start sampled at edge S the first element
// is presented after edge S+1 and the stream lasts L cycles (L = effective
// length). Writes and a stream must not overlap (the controller separates
// them); an assertion checks this.
//
// From the paper: ring-buffer organisation, length N, one read per cycle,
// contents kept between calls, an effective length that can change at run
// time up to N. This design's choice: the occupancy tracking (a fill
// counter instead of clearing the memory), streaming the most recent slots
// for a shortened length, and the port timing.
module rfb
  import harms_pkg::*;
#(
  parameter int unsigned N = N_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  // write port
  input  logic        wr_en,
  input  flow_event_t wr_ev,
  // stream port
  input  logic        rd_start,
  input  logic [$clog2(N + 1)-1:0] rd_len,
  output logic        out_valid,
  output logic        out_last,
  output logic        out_occ,
  output flow_event_t out_ev
);

  localparam int unsigned A_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned F_W = $clog2(N + 1);

  flow_event_t    mem [N];
  logic [A_W-1:0] next_idx;
  logic [F_W-1:0] filled;
  logic [A_W-1:0] rd_addr;
  logic           rd_busy;

  // write side: ring index and fill level
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_idx <= '0;
      filled   <= '0;
    end else if (wr_en) begin
      next_idx <= (32'(next_idx) == N - 1) ? '0 : next_idx + 1'b1;
      if (32'(filled) < N) filled <= filled + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[next_idx] <= wr_ev;
  end

  // read side: the L most recent slots, oldest first
  logic [F_W-1:0] len_q, rd_cnt, len_eff;

  always_comb len_eff = (rd_len == '0 || 32'(rd_len) > N) ? F_W'(N) : rd_len;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy   <= 1'b0;
      rd_addr   <= '0;
      rd_cnt    <= '0;
      len_q     <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_occ   <= 1'b0;
    end else begin
      out_valid <= rd_busy;
      out_last  <= rd_busy && (rd_cnt == len_q - 1'b1);
      // the element is the (len_q - 1 - rd_cnt)-th newest one
      out_occ   <= rd_busy && ((len_q - 1'b1 - rd_cnt) < filled);
      if (rd_start) begin
        rd_busy <= 1'b1;
        rd_cnt  <= '0;
        len_q   <= len_eff;
        rd_addr <= (32'(next_idx) >= 32'(len_eff)) ? A_W'(32'(next_idx) - 32'(len_eff))
                                                   : A_W'(32'(next_idx) + N - 32'(len_eff));
      end else if (rd_busy) begin
        rd_cnt  <= rd_cnt + 1'b1;
        rd_addr <= (32'(rd_addr) == N - 1) ? '0 : rd_addr + 1'b1;
        if (rd_cnt == len_q - 1'b1) rd_busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) out_ev <= mem[rd_addr];

  a_no_write_while_streaming: assert property (@(posedge clk) disable iff (!rst_n)
    !(wr_en && rd_busy));

endmodule
