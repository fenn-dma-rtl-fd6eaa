// tb_dma_arbiter: runs the arbiter against a reduced vector memory.
//   1. MM2S alone with a stream valid every cycle: all beats land in
//      consecutive rows, one beat per cycle.
//   2. S2MM alone with random backpressure: the rows come out in order with
//      tlast on the last beat.
//   3. both at once with random stream timing: both finish, the data is
//      right, and the port was contended (round robin exercised).
module tb_dma_arbiter;
  localparam int ROWS = 256;
  logic clk = 0, rst_n = 0;
  logic mm2s_start, s2mm_start, mm2s_busy, mm2s_done, s2mm_busy, s2mm_done;
  logic [7:0] mm2s_row, s2mm_row;
  logic [16:0] mm2s_beats, s2mm_beats;
  logic [511:0] s_tdata, m_tdata, wdata, rdata;
  logic s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;
  logic mem_en;
  logic [7:0] mem_we, mem_row;
  logic ev_conflict;
  int checks = 0, failures = 0, conflicts = 0, mm_done_n = 0, s2_done_n = 0;

  dma_arbiter #(.ROW_W(8)) dut (.clk, .rst_n, .mm2s_start, .mm2s_row, .mm2s_beats, .mm2s_busy, .mm2s_done,
    .s2mm_start, .s2mm_row, .s2mm_beats, .s2mm_busy, .s2mm_done,
    .s_mm2s_tdata(s_tdata), .s_mm2s_tvalid(s_tvalid), .s_mm2s_tready(s_tready),
    .m_s2mm_tdata(m_tdata), .m_s2mm_tvalid(m_tvalid), .m_s2mm_tready(m_tready), .m_s2mm_tlast(m_tlast),
    .mem_en, .mem_we, .mem_row, .mem_wdata(wdata), .mem_rdata(rdata), .ev_conflict);
  vector_memory #(.ROWS(ROWS)) u_vm (.clk, .a_en(1'b0), .a_we(1'b0), .a_row('0), .a_wdata('0), .a_rdata(),
    .b_en(mem_en), .b_we(mem_we), .b_row(mem_row), .b_wdata(wdata), .b_rdata(rdata));

  always #5 clk = ~clk;
  // events are sampled just before the rising edge, when they are settled
  always @(negedge clk) begin
    #4;
    conflicts += int'(ev_conflict);
    mm_done_n += int'(mm2s_done);
    s2_done_n += int'(s2mm_done);
  end

  function automatic logic [511:0] pat(int r, int salt);
    logic [511:0] v;
    for (int k = 0; k < 16; k++) v[k*32 +: 32] = 32'(r * 1000003 + k * 7919 + salt);
    return v;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // stream source: sends n beats of pattern pat(first+k, salt)
  int src_gap = 0;
  task automatic source(int first, int n, int salt);
    bit ok;
    for (int k = 0; k < n; k++) begin
      @(negedge clk);
      while ($urandom_range(0, 99) < src_gap) @(negedge clk);
      s_tvalid = 1; s_tdata = pat(first + k, salt);
      ok = 0;
      while (!ok) begin #4; ok = s_tready; @(posedge clk); if (!ok) @(negedge clk); end
      #1 s_tvalid = 0;
    end
  endtask

  // stream sink: expects n beats equal to pat(first+k, salt)
  int sink_gap = 0;
  task automatic sink(int first, int n, int salt);
    int k;
    k = 0;
    while (k < n) begin
      @(negedge clk);
      m_tready = ($urandom_range(0, 99) >= sink_gap);
      #4;
      if (m_tvalid && m_tready) begin
        chk(m_tdata === pat(first + k, salt), $sformatf("s2mm beat %0d data", k));
        chk(m_tlast === (k == n - 1), $sformatf("s2mm beat %0d tlast", k));
        k++;
      end
      @(posedge clk);
    end
    #1 m_tready = 0;
  endtask

  task automatic start(bit mm, int row, int n);
    @(negedge clk);
    while (mm ? mm2s_busy : s2mm_busy) @(negedge clk);
    if (mm) begin mm2s_start = 1; mm2s_row = 8'(row); mm2s_beats = 17'(n); end
    else    begin s2mm_start = 1; s2mm_row = 8'(row); s2mm_beats = 17'(n); end
    @(negedge clk); mm2s_start = 0; s2mm_start = 0;
  endtask

  initial begin
    #2ms;
    failures++;
    $display("watchdog expired mm=%0d s2=%0d mmleft=%0d s2rd=%0d s2out=%0d buf=%0d", dut.mm_state, dut.s2_state, dut.mm_left, dut.s2_rd_left, dut.s2_out_left, dut.buf_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    mm2s_start = 0; s2mm_start = 0; mm2s_row = 0; s2mm_row = 0; mm2s_beats = 0; s2mm_beats = 0;
    s_tvalid = 0; s_tdata = 0; m_tready = 0;
    repeat (3) @(posedge clk); rst_n = 1;

    // 1. MM2S 64 beats into rows 10.., full rate
    start(1, 10, 64);
    t0 = $time;
    source(10, 64, 1);
    t1 = $time;
    chk((t1 - t0) / 10 <= 65, $sformatf("64 beats took %0d cycles", (t1 - t0) / 10));
    wait (mm_done_n == 1);
    for (int r = 10; r < 74; r++) chk(u_vm.g_bank[3].mem[r] === pat(r, 1)[3*64 +: 64], "bank 3 row");
    for (int r = 10; r < 74; r++) chk(u_vm.g_bank[7].mem[r] === pat(r, 1)[7*64 +: 64], "bank 7 row");

    // 2. S2MM 64 beats from rows 10.. with backpressure
    sink_gap = 40;
    start(0, 10, 64);
    sink(10, 64, 1);
    wait (s2_done_n == 1);

    // 3. both: MM2S rows 100..199 new data while S2MM reads rows 10..73
    src_gap = 20; sink_gap = 20;
    @(negedge clk);
    while (mm2s_busy || s2mm_busy) @(negedge clk);
    mm2s_start = 1; mm2s_row = 8'd100; mm2s_beats = 17'd100;
    s2mm_start = 1; s2mm_row = 8'd10;  s2mm_beats = 17'd64;
    @(negedge clk);
    mm2s_start = 0; s2mm_start = 0;
    fork
      source(100, 100, 2);
      sink(10, 64, 1);
    join
    wait (mm_done_n == 2 && s2_done_n == 2);
    sink_gap = 0;
    start(0, 100, 100);
    sink(100, 100, 2);
    wait (s2_done_n == 3);
    chk(conflicts > 0, "port never contended");
    chk(!mm2s_busy && !s2mm_busy, "busy after done");
    $display("conflicts=%0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
