// result_ram: temporary RAM for the P true-flow results of one call.
//
// Each accelerator core k writes its result into entry k when its wr_en[k]
// pulses; several cores may write in the same cycle. The results are then
// read out one at a time at rd_idx for the transfer back to the processor.
//
// Timing: rd_data is registered: the entry addressed at one clock edge
// appears after that edge (one-cycle read latency, as in a block RAM).
// From the paper: a result RAM shared by the cores, read by the DMA. This
// design's choice: one write port per core and the read latency.
module result_ram
  import harms_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  localparam int unsigned IDX_W = (P > 1) ? $clog2(P) : 1
) (
  input  logic             clk,
  input  logic [P-1:0]     wr_en,
  input  true_flow_t       wr_data [P],
  input  logic [IDX_W-1:0] rd_idx,
  output true_flow_t       rd_data
);

  true_flow_t mem [P];

  always_ff @(posedge clk) begin
    for (int unsigned k = 0; k < P; k++) begin
      if (wr_en[k]) mem[k] <= wr_data[k];
    end
    rd_data <= mem[rd_idx];
  end

endmodule
