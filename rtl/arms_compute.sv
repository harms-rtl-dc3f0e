// arms_compute: ARMS compute core of one hARMS accelerator.
//
// Takes the tagged recent-flow stream from the window arbiter. Each element
// is marked valid when its slot is occupied and its timestamp lies within
// TAU microseconds of the processed event (|t_s - t_e| <= TAU); invalid
// elements still pass but add to no window. The vx, vy and mag fields go
// with the tag and the valid flag to three stream averagers working in
// parallel. When the averages are ready, the window with the largest
// average magnitude is selected (the lowest index wins a tie) and the
// average vx and vy of that window are the true-flow result.
//
// Timing: one stream element per cycle, no stalls. The filter adds one
// register stage and the window selection another, so with the last
// element sampled at edge L, res_valid pulses one cycle after edge
// L + 1 + ceil(ETA/NDIV)*(DIV_W + 2) + 1 (DIV_W: see stream_averager).
// res holds until the next result.
//
// From the paper: the temporal filter, the three parallel averagers and the
// argmax selection. This design's choice: the tie rule, the occupancy input
// and the register stages.
module arms_compute
  import harms_pkg::*;
#(
  parameter int unsigned N    = N_DEF,
  parameter int unsigned ETA  = ETA_DEF,
  parameter int unsigned TAU  = TAU_DEF,
  parameter int unsigned NDIV = NDIV_DEF,
  localparam int unsigned TAG_W = $clog2(ETA + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [T_W-1:0]   ev_t,
  input  logic             in_valid,
  input  logic             in_last,
  input  logic             in_occ,
  input  logic [TAG_W-1:0] in_tag,
  input  flow_val_t        in_val,
  output logic             res_valid,
  output true_flow_t       res
);

  localparam int unsigned WIN_W = (ETA > 1) ? $clog2(ETA) : 1;

  logic [T_W-1:0]   dt;
  logic             f_valid, f_last, f_flag;
  logic [TAG_W-1:0] f_tag;
  flow_val_t        f_val;

  always_comb dt = (in_val.t >= ev_t) ? in_val.t - ev_t : ev_t - in_val.t;

  // temporal filter stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) f_valid <= 1'b0;
    else        f_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    f_last <= in_last;
    f_flag <= in_occ && (dt <= T_W'(TAU));
    f_tag  <= in_tag;
    f_val  <= in_val;
  end

  logic                    vx_done, vy_done, mag_done;
  logic signed [OUT_W-1:0] vx_avg  [ETA];
  logic signed [OUT_W-1:0] vy_avg  [ETA];
  logic signed [OUT_W-1:0] mag_avg [ETA];

  stream_averager #(.N(N), .ETA(ETA), .NDIV(NDIV), .SIGNED_IN(1'b1)) u_avg_vx (
    .clk, .rst_n, .in_valid(f_valid), .in_last(f_last), .in_flag(f_flag),
    .in_tag(f_tag), .in_value(f_val.vx), .avg_valid(vx_done), .avg(vx_avg));

  stream_averager #(.N(N), .ETA(ETA), .NDIV(NDIV), .SIGNED_IN(1'b1)) u_avg_vy (
    .clk, .rst_n, .in_valid(f_valid), .in_last(f_last), .in_flag(f_flag),
    .in_tag(f_tag), .in_value(f_val.vy), .avg_valid(vy_done), .avg(vy_avg));

  stream_averager #(.N(N), .ETA(ETA), .NDIV(NDIV), .SIGNED_IN(1'b0)) u_avg_mag (
    .clk, .rst_n, .in_valid(f_valid), .in_last(f_last), .in_flag(f_flag),
    .in_tag(f_tag), .in_value(f_val.mag), .avg_valid(mag_done), .avg(mag_avg));

  // true-flow selection: argmax of the magnitude averages
  logic [WIN_W-1:0] w_max;
  always_comb begin
    w_max = '0;
    for (int unsigned w = 1; w < ETA; w++) begin
      if (mag_avg[w] > mag_avg[w_max]) w_max = WIN_W'(w);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res       <= '0;
    end else begin
      res_valid <= mag_done;
      if (mag_done) res <= '{vx: vx_avg[w_max], vy: vy_avg[w_max]};
    end
  end

  a_avg_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    mag_done |-> (vx_done && vy_done));

endmodule
