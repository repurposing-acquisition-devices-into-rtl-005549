// transient_recorder: oscilloscope-like transient recorder with pre- and
// post-trigger windows, automatic re-arming and trigger-out.
//
// How it works. After `arm` the recorder is ARMED and writes every valid
// input sample into a circular block-RAM buffer of DEPTH words. When the
// trigger detector (rec_trigger) sees its condition it moves to CHECK, where
// the condition must last cfg.trig.hold samples. On validation it records the
// event: the event counter increments, the trigger sources are latched, a
// TRIG_OUT_LEN-cycle pulse is driven on trig_out, and the pre-trigger length
// is locked to the smaller of cfg.pre and the number of samples written since
// arming (so a trigger right after arming gives a shorter pre-trigger part).
// In POST it keeps writing until cfg.post samples, the validated one
// included, are stored. Acquisition then stops (input samples are dropped)
// and in READ the window of pre_len + post samples, oldest first, is sent on
// the output AXI-Stream; m_tlast marks its last sample and m_tuser carries the
// trigger sources. After the last beat is accepted the recorder re-arms
// (cfg.multi = 1) or goes IDLE. `stop` returns to IDLE from any state.
//
// Configuration is captured when the recorder arms and re-arms: post is
// clamped to 1..DEPTH and pre to DEPTH - post.
//
// Timing. The validated sample is stored at the address written in the fire
// cycle; trig_out rises on the next clock edge. The first output beat is
// valid two cycles after the last post-trigger sample is written, and the
// readout then moves one sample per clock while m_tready is high. With a
// window of W samples and no backpressure, READ lasts W + 1 cycles.
//
// The state sequence, the locked pre-trigger window, the suspended
// acquisition during readout, the re-arm and the trigger-out per event follow
// the rfx_stream recorder as published. The buffer depth, the trigger-out
// width, the clamping rules and the use of tuser/tlast are this design's
// choices.
module transient_recorder
  import thub_pkg::*;
#(
  parameter int unsigned DEPTH        = 16384,
  parameter int unsigned DATA_W       = SAMPLE_W,
  parameter int unsigned TRIG_OUT_LEN = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // input sample stream (no backpressure)
  input  logic [DATA_W-1:0] s_tdata,
  input  logic              s_tvalid,
  // control
  input  rec_cfg_t          cfg,
  input  logic              arm,
  input  logic              stop,
  input  logic              ext_trig,
  input  logic              sw_trig,
  // transient window stream
  output logic [DATA_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output trig_src_t         m_tuser,
  // status
  output logic              trig_out,
  output rec_state_e        state,
  output logic [31:0]       event_count,
  output logic [CNT_W-1:0]  pre_len
);

  localparam int unsigned ADDR_W = $clog2(DEPTH);
  localparam logic [CNT_W-1:0] DEPTH_C = CNT_W'(DEPTH);

  trig_cfg_t         trig_cfg_q;
  logic              multi_q;
  logic [CNT_W-1:0]  post_eff, pre_max;
  logic [ADDR_W-1:0] wptr, trig_addr, raddr;
  logic [CNT_W-1:0]  filled, post_left, rd_left;
  logic [$clog2(TRIG_OUT_LEN+1)-1:0] tout_cnt;

  // ---------------------------------------------------------------- trigger
  logic      trig_en, hit, checking, fire;
  trig_src_t src;

  assign trig_en = (state == REC_ARMED) || (state == REC_CHECK);

  rec_trigger #(.DATA_W(DATA_W)) u_trig (
    .clk, .rst_n,
    .enable       (trig_en && !stop),
    .sample       (s_tdata),
    .sample_valid (s_tvalid),
    .ext_trig, .sw_trig,
    .cfg          (trig_cfg_q),
    .hit, .checking, .fire, .src
  );

  // ----------------------------------------------------------------- buffer
  logic we, re;
  assign we = s_tvalid && (trig_en || state == REC_POST) && !stop;
  assign re = (state == REC_READ) && (!m_tvalid || m_tready);

  rec_buffer #(.DEPTH(DEPTH), .DATA_W(DATA_W)) u_buf (
    .clk,
    .we, .waddr(wptr), .wdata(s_tdata),
    .re, .raddr, .rdata(m_tdata)
  );

  // Clamped window sizes from a configuration word.
  function automatic logic [CNT_W-1:0] clamp_post(input logic [CNT_W-1:0] p);
    if (p == '0)         return CNT_W'(1);
    else if (p > DEPTH_C) return DEPTH_C;
    else                 return p;
  endfunction

  logic [CNT_W-1:0] post_c, pre_c;
  always_comb begin
    post_c = clamp_post(cfg.post);
    pre_c  = (cfg.pre > DEPTH_C - post_c) ? DEPTH_C - post_c : cfg.pre;
  end

  logic rearm_now;  // last beat of the window accepted
  assign rearm_now = (state == REC_READ) && (!m_tvalid || m_tready) && (rd_left == '0);

  // ------------------------------------------------------------ controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= REC_IDLE;
      trig_cfg_q  <= '0;
      multi_q     <= 1'b0;
      post_eff    <= CNT_W'(1);
      pre_max     <= '0;
      wptr        <= '0;
      trig_addr   <= '0;
      raddr       <= '0;
      filled      <= '0;
      post_left   <= '0;
      rd_left     <= '0;
      pre_len     <= '0;
      event_count <= '0;
      m_tvalid    <= 1'b0;
      m_tlast     <= 1'b0;
      m_tuser     <= '0;
      tout_cnt    <= '0;
    end else begin
      if (tout_cnt != '0) tout_cnt <= tout_cnt - 1'b1;

      if (we) wptr <= wptr + 1'b1;

      if (stop) begin
        state    <= REC_IDLE;
        m_tvalid <= 1'b0;
        m_tlast  <= 1'b0;
      end else begin
        unique case (state)
          REC_IDLE: if (arm) begin
            state    <= REC_ARMED;
            trig_cfg_q <= cfg.trig;
            multi_q  <= cfg.multi;
            post_eff <= post_c;
            pre_max  <= pre_c;
            filled   <= '0;
          end

          REC_ARMED, REC_CHECK: if (s_tvalid) begin
            if (fire) begin
              event_count <= event_count + 1'b1;
              m_tuser     <= src;
              tout_cnt    <= ($bits(tout_cnt))'(TRIG_OUT_LEN);
              trig_addr   <= wptr;
              pre_len     <= (filled < pre_max) ? filled : pre_max;
              if (post_eff == CNT_W'(1)) begin
                state   <= REC_READ;
                raddr   <= wptr - ADDR_W'((filled < pre_max) ? filled : pre_max);
                rd_left <= ((filled < pre_max) ? filled : pre_max) + 1'b1;
              end else begin
                state     <= REC_POST;
                post_left <= post_eff - 1'b1;
              end
            end else begin
              state <= hit ? REC_CHECK : REC_ARMED;
              if (filled < pre_max) filled <= filled + 1'b1;
            end
          end

          REC_POST: if (s_tvalid) begin
            post_left <= post_left - 1'b1;
            if (post_left == CNT_W'(1)) begin
              state   <= REC_READ;
              raddr   <= trig_addr - ADDR_W'(pre_len);
              rd_left <= pre_len + post_eff;
            end
          end

          REC_READ: if (!m_tvalid || m_tready) begin
            m_tvalid <= (rd_left != '0);
            m_tlast  <= (rd_left == CNT_W'(1));
            if (rd_left != '0) begin
              raddr   <= raddr + 1'b1;
              rd_left <= rd_left - 1'b1;
            end
            if (rearm_now) begin
              if (multi_q) begin
                state    <= REC_ARMED;
                trig_cfg_q <= cfg.trig;
            multi_q  <= cfg.multi;
                post_eff <= post_c;
                pre_max  <= pre_c;
                filled   <= '0;
              end else begin
                state <= REC_IDLE;
              end
            end
          end

          default: state <= REC_IDLE;
        endcase
      end
    end
  end

  assign trig_out = (tout_cnt != '0);

  // An output beat that is not accepted stays valid and unchanged.
  property p_axis_hold;
    @(posedge clk) disable iff (!rst_n || stop)
      (m_tvalid && !m_tready) |=> (m_tvalid && $stable(m_tdata) && $stable(m_tlast));
  endproperty
  a_axis_hold: assert property (p_axis_hold);

  // The CHECK state mirrors the detector's duration count.
  a_check_state: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == REC_CHECK) == checking);

  initial begin
    assert ((DEPTH & (DEPTH - 1)) == 0 && DEPTH >= 2)
      else $error("transient_recorder: DEPTH must be a power of two");
  end

endmodule
