// dma_arbiter: shares port b of the vector memory between the two stream
// directions of the DMA engine.
//
// MM2S (memory-mapped to stream, DDR -> vector memory): each 512-bit beat of
// the incoming stream is written to the next vector-memory row, split over
// the banks (bank k takes bits [64k+63:64k]).
// S2MM (stream to memory-mapped, vector memory -> DDR): consecutive rows are
// read and sent as 512-bit stream beats, the last one flagged with tlast.
//
// The DMA controller starts a direction with a start pulse, the first row
// and the number of beats; the arbiter pulses *_done after the last beat.
// Both directions can be active at once. Each cycle at most one of them uses
// the port; when both want it the grant alternates (round robin), so an
// active transfer in one direction never starves the other.
// Because a read returns data one cycle later, S2MM reads go into a 2-entry
// output buffer and a read is only issued when the buffer (including the
// read in flight) has room, so the output stream can stall freely.
//
// Published: the arbiter connects the two DataMover stream ports to the
// second vector-memory port, generates the memory addresses and spreads the
// stream data over the parallel banks, under an FSM. This design's own
// choices: round-robin per beat, one 512-bit beat per row, the buffer, and
// length counted in beats (MM2S tlast is not used).
module dma_arbiter #(
  parameter int unsigned ROW_W    = 13,
  parameter int unsigned BANKS    = 8,
  parameter int unsigned STREAM_W = 512,
  parameter int unsigned LEN_W    = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // control from the DMA controller
  input  logic                 mm2s_start,
  input  logic [ROW_W-1:0]     mm2s_row,
  input  logic [LEN_W-1:0]     mm2s_beats,
  output logic                 mm2s_busy,
  output logic                 mm2s_done,
  input  logic                 s2mm_start,
  input  logic [ROW_W-1:0]     s2mm_row,
  input  logic [LEN_W-1:0]     s2mm_beats,
  output logic                 s2mm_busy,
  output logic                 s2mm_done,
  // MM2S stream in (from the DataMover)
  input  logic [STREAM_W-1:0]  s_mm2s_tdata,
  input  logic                 s_mm2s_tvalid,
  output logic                 s_mm2s_tready,
  // S2MM stream out (to the DataMover)
  output logic [STREAM_W-1:0]  m_s2mm_tdata,
  output logic                 m_s2mm_tvalid,
  input  logic                 m_s2mm_tready,
  output logic                 m_s2mm_tlast,
  // vector memory port b
  output logic                 mem_en,
  output logic [BANKS-1:0]     mem_we,
  output logic [ROW_W-1:0]     mem_row,
  output logic [STREAM_W-1:0]  mem_wdata,
  input  logic [STREAM_W-1:0]  mem_rdata,
  // one pulse per cycle in which both directions wanted the port
  output logic                 ev_conflict
);

  typedef enum logic [1:0] {CH_IDLE, CH_ACTIVE, CH_DRAIN} ch_state_e;

  ch_state_e          mm_state, s2_state;
  logic [ROW_W-1:0]   mm_row_q, s2_row_q;
  logic [LEN_W-1:0]   mm_left, s2_rd_left, s2_out_left;
  logic               last_grant_mm;     // 1: MM2S had the port last time both asked

  // S2MM output buffer (2 entries) and read in flight
  logic [STREAM_W-1:0] buf_q [2];
  logic                buf_wp, buf_rp;
  logic [1:0]          buf_cnt;
  logic                rd_inflight;

  logic want_mm, want_s2, grant_mm, grant_s2;
  logic push, pop;

  always_comb begin
    want_mm  = (mm_state == CH_ACTIVE) && s_mm2s_tvalid;
    want_s2  = (s2_state == CH_ACTIVE) && (s2_rd_left != '0) &&
               ((32'(buf_cnt) + 32'(rd_inflight)) < 2);
    if (want_mm && want_s2) begin
      grant_mm = !last_grant_mm;
      grant_s2 = last_grant_mm;
    end else begin
      grant_mm = want_mm;
      grant_s2 = want_s2;
    end
    ev_conflict = want_mm && want_s2;

    s_mm2s_tready = (mm_state == CH_ACTIVE) && grant_mm;

    mem_en    = grant_mm || grant_s2;
    mem_we    = grant_mm ? {BANKS{1'b1}} : '0;
    mem_row   = grant_mm ? mm_row_q : s2_row_q;
    mem_wdata = s_mm2s_tdata;

    push          = rd_inflight;
    m_s2mm_tvalid = (buf_cnt != 2'd0);
    m_s2mm_tdata  = buf_q[buf_rp];
    m_s2mm_tlast  = (s2_out_left == LEN_W'(1));
    pop           = m_s2mm_tvalid && m_s2mm_tready;

    mm2s_busy = (mm_state != CH_IDLE);
    s2mm_busy = (s2_state != CH_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm_state      <= CH_IDLE;
      s2_state      <= CH_IDLE;
      mm_row_q      <= '0;
      s2_row_q      <= '0;
      mm_left       <= '0;
      s2_rd_left    <= '0;
      s2_out_left   <= '0;
      last_grant_mm <= 1'b0;
      buf_wp        <= 1'b0;
      buf_rp        <= 1'b0;
      buf_cnt       <= '0;
      rd_inflight   <= 1'b0;
      mm2s_done     <= 1'b0;
      s2mm_done     <= 1'b0;
    end else begin
      mm2s_done <= 1'b0;
      s2mm_done <= 1'b0;
      if (want_mm && want_s2) last_grant_mm <= grant_mm;

      // MM2S channel FSM
      unique case (mm_state)
        CH_IDLE: if (mm2s_start) begin
          mm_row_q <= mm2s_row;
          mm_left  <= mm2s_beats;
          mm_state <= (mm2s_beats == '0) ? CH_DRAIN : CH_ACTIVE;
        end
        CH_ACTIVE: if (grant_mm) begin
          mm_row_q <= mm_row_q + 1'b1;
          mm_left  <= mm_left - 1'b1;
          if (mm_left == LEN_W'(1)) mm_state <= CH_DRAIN;
        end
        default: begin                  // CH_DRAIN: report completion
          mm2s_done <= 1'b1;
          mm_state  <= CH_IDLE;
        end
      endcase

      // S2MM channel FSM
      unique case (s2_state)
        CH_IDLE: if (s2mm_start) begin
          s2_row_q    <= s2mm_row;
          s2_rd_left  <= s2mm_beats;
          s2_out_left <= s2mm_beats;
          s2_state    <= (s2mm_beats == '0) ? CH_DRAIN : CH_ACTIVE;
        end
        CH_ACTIVE: begin
          if (grant_s2) begin
            s2_row_q   <= s2_row_q + 1'b1;
            s2_rd_left <= s2_rd_left - 1'b1;
          end
          if (pop) begin
            s2_out_left <= s2_out_left - 1'b1;
            if (s2_out_left == LEN_W'(1)) s2_state <= CH_DRAIN;
          end
        end
        default: begin
          s2mm_done <= 1'b1;
          s2_state  <= CH_IDLE;
        end
      endcase

      // output buffer
      rd_inflight <= grant_s2;
      if (push) begin
        buf_wp <= ~buf_wp;
      end
      if (pop) begin
        buf_rp <= ~buf_rp;
      end
      buf_cnt <= buf_cnt + 2'(push) - 2'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) buf_q[buf_wp] <= mem_rdata;
  end

  a_buf_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    !(buf_cnt == 2'd2 && push && !pop));
  a_one_user: assert property (@(posedge clk) disable iff (!rst_n)
    !(grant_mm && grant_s2));
  a_stream_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_s2mm_tvalid && !m_s2mm_tready) |=> m_s2mm_tvalid);

endmodule
