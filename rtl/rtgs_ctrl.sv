// rtgs_ctrl: iteration controller and host handshake of the plug-in.
//
// Follows the programming model: after exec (RTGS_execute with frame_id and
// is_keyframe) the plug-in polls input_done (GPU finished preprocessing and
// sorting), renders and backpropagates all subtiles, flushes the Stage Buffer
// and waits for the PEs and the merging tree to drain. For a non-keyframe
// (tracking) it then raises gradient_ready and waits in WAIT_PRUNING for
// pruning_done from the GPU, after which it applies the pose update. For a
// keyframe (mapping) it skips pruning and pose update; the Gaussian updates
// have already left through the gradient stream. status reports IDLE,
// EXECUTING or WAIT_PRUNING as RTGS_check_status does. A new frame_id clears
// the WSU pairings (new_frame). One exec runs one iteration of a frame, a
// choice of this design (the listing's call covers a whole frame).
module rtgs_ctrl import rtgs_pkg::*; (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        exec,
  input  logic [15:0] frame_id,
  input  logic        is_keyframe,
  input  logic        input_done,
  input  logic        pruning_done,
  input  logic        disp_done,
  input  logic        drain_idle,
  input  logic        flush_done,
  output logic        disp_start,
  output logic        sb_flush,
  output logic        mt_clr,
  output logic        new_frame,
  output logic        gradient_ready,
  output logic        pose_update,
  output logic        mapping,
  output status_e     status
);
  typedef enum logic [2:0] {C_IDLE, C_POLL, C_RUN, C_FLUSH, C_DRAIN, C_WAITPR, C_POSE} cst_e;
  cst_e        st;
  logic [15:0] last_frame;
  logic        have_frame;
  logic [2:0]  idle_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; last_frame <= '0; have_frame <= 1'b0; idle_cnt <= '0;
      disp_start <= 1'b0; sb_flush <= 1'b0; mt_clr <= 1'b0; new_frame <= 1'b0;
      gradient_ready <= 1'b0; pose_update <= 1'b0; mapping <= 1'b0;
    end else begin
      disp_start <= 1'b0; sb_flush <= 1'b0; mt_clr <= 1'b0; new_frame <= 1'b0; pose_update <= 1'b0;
      case (st)
        C_IDLE: if (exec) begin
          mapping    <= is_keyframe;
          new_frame  <= !have_frame || frame_id != last_frame;
          last_frame <= frame_id;
          have_frame <= 1'b1;
          mt_clr     <= 1'b1;
          st         <= C_POLL;
        end
        C_POLL: if (input_done) begin disp_start <= 1'b1; st <= C_RUN; end
        C_RUN:  if (disp_done) begin idle_cnt <= '0; st <= C_FLUSH; end
        C_FLUSH: begin
          // wait until REs, GMUs and stage queues are empty, then flush
          idle_cnt <= drain_idle ? idle_cnt + 1'b1 : '0;
          if (idle_cnt == 3'd3) begin sb_flush <= 1'b1; idle_cnt <= '0; st <= C_DRAIN; end
        end
        C_DRAIN: begin
          if (flush_done) idle_cnt <= 3'd1;
          else if (idle_cnt != 0) idle_cnt <= drain_idle ? idle_cnt + 1'b1 : 3'd1;
          if (idle_cnt == 3'd4) begin
            idle_cnt <= '0;
            if (mapping) st <= C_IDLE;
            else begin gradient_ready <= 1'b1; st <= C_WAITPR; end
          end
        end
        C_WAITPR: if (pruning_done) begin gradient_ready <= 1'b0; st <= C_POSE; end
        C_POSE: begin pose_update <= 1'b1; st <= C_IDLE; end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_comb begin
    case (st)
      C_IDLE:   status = ST_IDLE;
      C_WAITPR: status = ST_WAIT_PRUNING;
      default:  status = ST_EXECUTING;
    endcase
  end
endmodule
