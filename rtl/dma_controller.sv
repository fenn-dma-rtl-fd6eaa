// dma_controller: register file and command sequencer of the DMA engine.
//
// Software describes a transfer in a small register file and starts it; the
// controller then issues one command to the external AXI DataMover, starts
// the arbiter that moves the stream data into or out of the vector memory,
// and waits for both the DataMover's status word and the arbiter's
// completion before flagging the transfer done (or failed).
//
// Two masters reach the same registers:
//   * the processing system, through an AXI4-Lite slave (byte address
//     4*index), and
//   * the vector core's host CPU, as custom CSRs 0x800 + index, with a
//     combinational read and a write on csr_en && csr_we.
// A CSR write wins over an AXI4-Lite write to the same register in the same
// cycle.
//
// Register map (index):
//   0 MM2S_SRC   DDR byte address to read from
//   1 MM2S_DST   vector-memory byte address to write to (64-byte aligned)
//   2 MM2S_LEN   bytes to copy (multiple of 64)
//   3 S2MM_SRC   vector-memory byte address to read from
//   4 S2MM_DST   DDR byte address to write to
//   5 S2MM_LEN   bytes to copy
//   6 CTRL       write 1 to bit 0 to start MM2S, bit 1 to start S2MM
//   7 STATUS     bit0 MM2S busy, bit1 S2MM busy, bit2 MM2S done, bit3 S2MM
//                done, bit4 MM2S error, bit5 S2MM error (done/error clear
//                when the direction is started again)
// A start is ignored while that direction is busy.
//
// Commands use the DataMover's 72-bit layout: BTT[22:0], Type[23]=1 (INCR),
// EOF[30]=1, SADDR[63:32], TAG[67:64]. Status words are 8 bits with OKAY at
// bit 7; a status without OKAY sets the error bit.
//
// Published: the controller is an FSM that issues commands to the DataMover
// and checks transaction status, and its registers are both AXI-Lite
// memory-mapped and exposed as CSRs. The register map, CSR numbers and
// write priority are this design's own choices.
module dma_controller #(
  parameter int unsigned ROW_W = 13,
  parameter int unsigned LEN_W = 17
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic [4:0]         s_axil_awaddr,
  input  logic               s_axil_awvalid,
  output logic               s_axil_awready,
  input  logic [31:0]        s_axil_wdata,
  input  logic [3:0]         s_axil_wstrb,
  input  logic               s_axil_wvalid,
  output logic               s_axil_wready,
  output logic [1:0]         s_axil_bresp,
  output logic               s_axil_bvalid,
  input  logic               s_axil_bready,
  input  logic [4:0]         s_axil_araddr,
  input  logic               s_axil_arvalid,
  output logic               s_axil_arready,
  output logic [31:0]        s_axil_rdata,
  output logic [1:0]         s_axil_rresp,
  output logic               s_axil_rvalid,
  input  logic               s_axil_rready,
  // CSR port from the host core
  input  logic               csr_en,
  input  logic               csr_we,
  input  logic [11:0]        csr_addr,
  input  logic [31:0]        csr_wdata,
  output logic [31:0]        csr_rdata,
  // DataMover MM2S command / status
  output logic [71:0]        m_mm2s_cmd_tdata,
  output logic               m_mm2s_cmd_tvalid,
  input  logic               m_mm2s_cmd_tready,
  input  logic [7:0]         s_mm2s_sts_tdata,
  input  logic               s_mm2s_sts_tvalid,
  output logic               s_mm2s_sts_tready,
  // DataMover S2MM command / status
  output logic [71:0]        m_s2mm_cmd_tdata,
  output logic               m_s2mm_cmd_tvalid,
  input  logic               m_s2mm_cmd_tready,
  input  logic [7:0]         s_s2mm_sts_tdata,
  input  logic               s_s2mm_sts_tvalid,
  output logic               s_s2mm_sts_tready,
  // arbiter control
  output logic               arb_mm2s_start,
  output logic [ROW_W-1:0]   arb_mm2s_row,
  output logic [LEN_W-1:0]   arb_mm2s_beats,
  input  logic               arb_mm2s_done,
  output logic               arb_s2mm_start,
  output logic [ROW_W-1:0]   arb_s2mm_row,
  output logic [LEN_W-1:0]   arb_s2mm_beats,
  input  logic               arb_s2mm_done
);

  localparam logic [11:0] CSR_BASE = 12'h800;

  typedef enum logic [1:0] {ST_IDLE, ST_CMD, ST_WAIT} dma_state_e;

  logic [31:0] regs [6];           // indices 0..5
  dma_state_e  mm_st, s2_st;
  logic        mm_done, s2_done, mm_err, s2_err;
  logic        mm_got_sts, mm_got_dat, s2_got_sts, s2_got_dat;
  logic [3:0]  tag;
  logic [71:0] mm_cmd_q, s2_cmd_q;

  // ---------------------------------------------------------- AXI4-Lite
  logic        aw_full, w_full;
  logic [2:0]  aw_idx;
  logic [31:0] w_data;
  logic [3:0]  w_strb;
  logic        axil_wr;

  assign s_axil_awready = !aw_full && !s_axil_bvalid;
  assign s_axil_wready  = !w_full  && !s_axil_bvalid;
  assign s_axil_bresp   = 2'b00;
  assign s_axil_rresp   = 2'b00;
  assign s_axil_arready = !s_axil_rvalid;
  assign axil_wr        = aw_full && w_full && !s_axil_bvalid;

  function automatic logic [31:0] read_reg(logic [2:0] idx);
    if (idx == 3'd7)
      return {26'd0, s2_err, mm_err, s2_done, mm_done, s2_st != ST_IDLE, mm_st != ST_IDLE};
    else if (idx == 3'd6)
      return '0;
    else
      return regs[idx];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_full       <= 1'b0;
      w_full        <= 1'b0;
      aw_idx        <= '0;
      w_data        <= '0;
      w_strb        <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
    end else begin
      if (s_axil_awvalid && s_axil_awready) begin
        aw_full <= 1'b1;
        aw_idx  <= s_axil_awaddr[4:2];
      end
      if (s_axil_wvalid && s_axil_wready) begin
        w_full <= 1'b1;
        w_data <= s_axil_wdata;
        w_strb <= s_axil_wstrb;
      end
      if (axil_wr) begin
        aw_full       <= 1'b0;
        w_full        <= 1'b0;
        s_axil_bvalid <= 1'b1;
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end
      if (s_axil_arvalid && s_axil_arready) begin
        s_axil_rvalid <= 1'b1;
        s_axil_rdata  <= read_reg(s_axil_araddr[4:2]);
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------- CSR port
  logic       csr_hit, csr_wr;
  logic [2:0] csr_idx;
  assign csr_hit   = (csr_addr[11:3] == CSR_BASE[11:3]);
  assign csr_idx   = csr_addr[2:0];
  assign csr_wr    = csr_en && csr_we && csr_hit;
  assign csr_rdata = csr_hit ? read_reg(csr_idx) : '0;

  // ------------------------------------------------- register write merge
  logic        wr_en;
  logic [2:0]  wr_idx;
  logic [31:0] wr_data;
  always_comb begin
    if (csr_wr) begin
      wr_en   = 1'b1;
      wr_idx  = csr_idx;
      wr_data = csr_wdata;
    end else begin
      wr_en   = axil_wr;
      wr_idx  = aw_idx;
      wr_data = regs[aw_idx[2:0] > 3'd5 ? 3'd0 : aw_idx];
      for (int k = 0; k < 4; k++)
        if (w_strb[k]) wr_data[k*8 +: 8] = w_data[k*8 +: 8];
    end
  end

  logic start_mm, start_s2;
  assign start_mm = wr_en && (wr_idx == 3'd6) && wr_data[0] && (mm_st == ST_IDLE);
  assign start_s2 = wr_en && (wr_idx == 3'd6) && wr_data[1] && (s2_st == ST_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < 6; r++) regs[r] <= '0;
    end else if (wr_en && wr_idx <= 3'd5) begin
      regs[wr_idx] <= wr_data;
    end
  end

  // --------------------------------------------------- command sequencers
  function automatic logic [71:0] make_cmd(logic [31:0] addr, logic [31:0] len, logic [3:0] t);
    logic [71:0] c;
    c        = '0;
    c[22:0]  = len[22:0];
    c[23]    = 1'b1;
    c[30]    = 1'b1;
    c[63:32] = addr;
    c[67:64] = t;
    return c;
  endfunction

  function automatic logic [LEN_W-1:0] beats_of(logic [31:0] len);
    logic [31:0] b;
    b = (len + 32'd63) >> 6;
    return b[LEN_W-1:0];
  endfunction

  assign m_mm2s_cmd_tdata  = mm_cmd_q;
  assign m_s2mm_cmd_tdata  = s2_cmd_q;
  assign m_mm2s_cmd_tvalid = (mm_st == ST_CMD);
  assign m_s2mm_cmd_tvalid = (s2_st == ST_CMD);
  assign s_mm2s_sts_tready = (mm_st != ST_IDLE) && !mm_got_sts;
  assign s_s2mm_sts_tready = (s2_st != ST_IDLE) && !s2_got_sts;

  assign arb_mm2s_start = start_mm;
  assign arb_mm2s_row   = regs[1][ROW_W+5:6];
  assign arb_mm2s_beats = beats_of(regs[2]);
  assign arb_s2mm_start = start_s2;
  assign arb_s2mm_row   = regs[3][ROW_W+5:6];
  assign arb_s2mm_beats = beats_of(regs[5]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm_st <= ST_IDLE;  s2_st <= ST_IDLE;
      mm_done <= 1'b0;   s2_done <= 1'b0;
      mm_err <= 1'b0;    s2_err <= 1'b0;
      mm_got_sts <= 1'b0; mm_got_dat <= 1'b0;
      s2_got_sts <= 1'b0; s2_got_dat <= 1'b0;
      tag <= '0;
      mm_cmd_q <= '0;    s2_cmd_q <= '0;
    end else begin
      // tags: one per command, MM2S takes precedence when both start together
      tag <= tag + 4'(start_mm) + 4'(start_s2);

      // MM2S
      unique case (mm_st)
        ST_IDLE: if (start_mm) begin
          mm_cmd_q   <= make_cmd(regs[0], regs[2], tag);
          mm_done    <= 1'b0;
          mm_err     <= 1'b0;
          mm_got_sts <= 1'b0;
          mm_got_dat <= 1'b0;
          mm_st      <= ST_CMD;
        end
        ST_CMD: if (m_mm2s_cmd_tready) mm_st <= ST_WAIT;
        default: if ((mm_got_sts || s_mm2s_sts_tvalid) && (mm_got_dat || arb_mm2s_done)) begin
          mm_st   <= ST_IDLE;
          mm_done <= 1'b1;
        end
      endcase
      if (s_mm2s_sts_tvalid && s_mm2s_sts_tready) begin
        mm_got_sts <= 1'b1;
        if (!s_mm2s_sts_tdata[7]) mm_err <= 1'b1;
      end
      if (mm_st != ST_IDLE && arb_mm2s_done) mm_got_dat <= 1'b1;

      // S2MM
      unique case (s2_st)
        ST_IDLE: if (start_s2) begin
          s2_cmd_q   <= make_cmd(regs[4], regs[5], tag + 4'(start_mm));
          s2_done    <= 1'b0;
          s2_err     <= 1'b0;
          s2_got_sts <= 1'b0;
          s2_got_dat <= 1'b0;
          s2_st      <= ST_CMD;
        end
        ST_CMD: if (m_s2mm_cmd_tready) s2_st <= ST_WAIT;
        default: if ((s2_got_sts || s_s2mm_sts_tvalid) && (s2_got_dat || arb_s2mm_done)) begin
          s2_st   <= ST_IDLE;
          s2_done <= 1'b1;
        end
      endcase
      if (s_s2mm_sts_tvalid && s_s2mm_sts_tready) begin
        s2_got_sts <= 1'b1;
        if (!s_s2mm_sts_tdata[7]) s2_err <= 1'b1;
      end
      if (s2_st != ST_IDLE && arb_s2mm_done) s2_got_dat <= 1'b1;
    end
  end

  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (m_mm2s_cmd_tvalid && !m_mm2s_cmd_tready) |=> (m_mm2s_cmd_tvalid && $stable(m_mm2s_cmd_tdata)));
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (s_axil_bvalid && !s_axil_bready) |=> s_axil_bvalid);

endmodule
