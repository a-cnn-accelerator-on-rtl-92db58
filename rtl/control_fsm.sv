// control_fsm: the general finite state machine that runs one layer on the
// engine array. A layer is cut into passes; each pass uses one weight set
// (one bank of the ping-pong weight buffer) and streams one map through the
// engines:
//   standard  : one pass, pixels of 3 channels from the image stream,
//               outputs 0..min(P,40)-1
//   depthwise : one pass per group of 128 channels
//   pointwise : for each block of at most 36 output channels (never crossing
//               a 128-lane group), one pass per 32-channel slice of the
//               input; the first pass adds the bias, later ones add the
//               partial sum read back from the destination (divide and
//               conquer). Norm, ReLU and pooling are applied in the last
//               pass of a block only.
// Weight sets must arrive on the load stream in this pass order.
// States: IDLE -> WAIT_W (wait until the load bank is full, then swap banks
// and clear the engines) -> RUN (one pixel per cycle; M*M pixels, plus M+1
// flush pixels for 3x3 modes; in standard mode only when the image stream
// has data) -> DRAIN (wait for the engine pipeline) -> NEXT (next pass or
// done). Output pixels are written to dst_base + group*dst_stride + n.
// The FSM is named but not described in the paper; the pass order, the
// states and the addressing are this design's choices.
module control_fsm
  import accel_pkg::*;
#(
  parameter int unsigned DRAIN_CYCLES = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  layer_t      layer,
  input  logic [FMB_AW-1:0] dst_stride,
  output logic        busy,
  output logic        done,
  // weight buffer
  input  logic        wb_full,
  output logic        swap,
  // engine array control
  output logic        mme_start,
  output mme_cfg_t    cfg,
  output logic [1:0]  in_chunk,
  output logic [6:0]  lane_base,
  output logic [7:0]  out_limit,
  output logic        arr_in_valid,   // registered, one cycle after the read
  output logic        arr_pad,
  output logic        arr_from_img,
  input  logic        arr_out_valid,
  // feature map buffer
  output logic        re_a,
  output logic [FMB_AW-1:0] raddr_a,
  output logic        re_b,
  output logic [FMB_AW-1:0] raddr_b,
  output logic        we,
  output logic [FMB_AW-1:0] waddr,
  // image stream handshake
  input  logic        img_valid,
  output logic        img_ready,
  // event counters
  output logic [31:0] stat_wait_cycles,
  output logic [31:0] stat_img_stalls,
  output logic [31:0] stat_passes,
  output logic [31:0] stat_psum_passes
);

  typedef enum logic [2:0] {S_IDLE, S_WAIT_W, S_RUN, S_DRAIN, S_NEXT} state_t;
  state_t state;

  layer_t L;
  logic [FMB_AW-1:0] dstride;
  logic [3:0]  grp;       // depthwise channel group
  logic [11:0] oc_base;   // pointwise output block start
  logic [6:0]  ic;        // pointwise input slice
  logic [16:0] p;         // input step within the pass
  logic [16:0] wcnt;      // output pixels written in the pass
  logic [4:0]  dcnt;

  logic [16:0] mm, nsteps;
  logic [6:0]  nic;
  logic        final_pass;
  logic [FMB_AW-1:0] src_pass, dst_pass;
  logic        step;
  logic        last_pass;

  always_comb begin
    mm     = 17'(L.width) * 17'(L.width);
    nsteps = (L.mode == MODE_PW) ? mm : mm + 17'(L.width) + 17'd1;
    nic    = 7'((L.in_ch + 12'd31) >> 5);
    final_pass = (L.mode != MODE_PW) || (ic == nic - 7'd1);
    lane_base = '0;
    in_chunk  = '0;
    out_limit = '0;
    src_pass  = L.src_base;
    dst_pass  = L.dst_base;
    last_pass = 1'b1;
    case (L.mode)
      MODE_DW: begin
        out_limit = 8'((L.in_ch - 12'(grp) * 12'd128) > 12'd128 ? 12'd128 : (L.in_ch - 12'(grp) * 12'd128));
        src_pass  = L.src_base + FMB_AW'(mm * 17'(grp));
        dst_pass  = L.dst_base + FMB_AW'(dstride * FMB_AW'(grp));
        last_pass = (12'(grp) + 12'd1) * 12'd128 >= L.in_ch;
      end
      MODE_PW: begin
        logic [11:0] room, left;
        lane_base = 7'(oc_base % 12'd128);
        room = 12'd128 - 12'(lane_base);
        left = L.out_ch - oc_base;
        out_limit = 8'(12'd36);
        if (room < 12'(out_limit)) out_limit = 8'(room);
        if (left < 12'(out_limit)) out_limit = 8'(left);
        in_chunk  = ic[1:0];
        src_pass  = L.src_base + FMB_AW'(mm * 17'(ic >> 2));
        dst_pass  = L.dst_base + FMB_AW'(dstride * FMB_AW'(oc_base / 12'd128));
        last_pass = final_pass && (oc_base + 12'(out_limit) >= L.out_ch);
      end
      default: begin
        out_limit = (L.out_ch > 12'(NUM_MME * STD_OUT)) ? 8'(NUM_MME * STD_OUT) : 8'(L.out_ch);
      end
    endcase
    cfg.mode       = L.mode;
    cfg.width      = L.width;
    cfg.stride2    = (L.mode != MODE_PW) && L.stride2;
    cfg.psum_en    = (L.mode == MODE_PW) && (ic != 7'd0);
    cfg.norm_en    = final_pass && L.norm_en;
    cfg.relu       = final_pass ? L.relu : RELU_NONE;
    cfg.pool       = final_pass ? L.pool : POOL_NONE;
    cfg.pool_size  = L.pool_size;
    cfg.pool_recip = L.pool_recip;
  end

  // Input stepping.
  always_comb begin
    step      = 1'b0;
    img_ready = 1'b0;
    if (state == S_RUN) begin
      if (L.mode == MODE_STD && p < mm) begin
        img_ready = 1'b1;
        step      = img_valid;
      end else begin
        step = 1'b1;
      end
    end
  end

  assign re_a    = step && (L.mode != MODE_STD) && (p < mm);
  assign raddr_a = src_pass + FMB_AW'(p);
  assign re_b    = step && cfg.psum_en;
  assign raddr_b = dst_pass + FMB_AW'(p);
  assign we      = arr_out_valid && (state == S_RUN || state == S_DRAIN);
  assign waddr   = dst_pass + FMB_AW'(wcnt);
  assign busy    = (state != S_IDLE);
  assign swap    = (state == S_WAIT_W) && wb_full;
  assign mme_start = swap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      L <= '0;
      dstride <= '0;
      grp <= '0; oc_base <= '0; ic <= '0; p <= '0; wcnt <= '0; dcnt <= '0;
      done <= 1'b0;
      arr_in_valid <= 1'b0; arr_pad <= 1'b0; arr_from_img <= 1'b0;
      stat_wait_cycles <= '0; stat_img_stalls <= '0;
      stat_passes <= '0; stat_psum_passes <= '0;
    end else begin
      done <= 1'b0;
      arr_in_valid <= step;
      arr_pad      <= (p >= mm);
      arr_from_img <= (L.mode == MODE_STD);
      if (we) wcnt <= wcnt + 17'd1;
      case (state)
        S_IDLE: if (start) begin
          L <= layer;
          dstride <= dst_stride;
          grp <= '0; oc_base <= '0; ic <= '0;
          state <= S_WAIT_W;
        end
        S_WAIT_W: begin
          if (wb_full) begin
            p <= '0;
            wcnt <= '0;
            stat_passes <= stat_passes + 32'd1;
            if (cfg.psum_en) stat_psum_passes <= stat_psum_passes + 32'd1;
            state <= S_RUN;
          end else begin
            stat_wait_cycles <= stat_wait_cycles + 32'd1;
          end
        end
        S_RUN: begin
          if (img_ready && !img_valid) stat_img_stalls <= stat_img_stalls + 32'd1;
          if (step) begin
            p <= p + 17'd1;
            if (p == nsteps - 17'd1) begin
              dcnt  <= '0;
              state <= S_DRAIN;
            end
          end
        end
        S_DRAIN: begin
          dcnt <= dcnt + 5'd1;
          if (dcnt == 5'(DRAIN_CYCLES - 1)) state <= S_NEXT;
        end
        S_NEXT: begin
          if (last_pass) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            case (L.mode)
              MODE_DW: grp <= grp + 4'd1;
              MODE_PW: begin
                if (!final_pass) ic <= ic + 7'd1;
                else begin
                  ic <= '0;
                  oc_base <= oc_base + 12'(out_limit);
                end
              end
              default: ;
            endcase
            state <= S_WAIT_W;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
