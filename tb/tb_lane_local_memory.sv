// tb_lane_local_memory: every lane gets its own random address each cycle
// (gather/scatter); reads are checked one cycle later against a shadow copy
// per lane.
module tb_lane_local_memory;
  localparam int DEPTH = 64;
  logic clk = 0;
  logic en, we;
  logic [32*6-1:0] addr;
  logic [511:0] wdata, rdata, exp_r;
  logic [15:0] shadow [32][DEPTH];
  logic pend;
  int checks = 0, failures = 0;

  lane_local_memory #(.LANES(32), .DEPTH(DEPTH)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; pend = 0;
    for (int d = 0; d < DEPTH; d++) begin
      @(negedge clk); en = 1; we = 1;
      for (int l = 0; l < 32; l++) begin
        addr[l*6 +: 6] = 6'(d); wdata[l*16 +: 16] = 16'($urandom); shadow[l][d] = wdata[l*16 +: 16];
      end
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (pend) for (int l = 0; l < 32; l++) begin
        checks++;
        if (rdata[l*16 +: 16] !== exp_r[l*16 +: 16]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d", l);
        end
      end
      en = $urandom_range(0, 3) != 0; we = $urandom_range(0, 1);
      for (int l = 0; l < 32; l++) begin
        addr[l*6 +: 6]   = 6'($urandom);
        wdata[l*16 +: 16] = 16'($urandom);
        exp_r[l*16 +: 16] = shadow[l][addr[l*6 +: 6]];
        if (en && we) shadow[l][addr[l*6 +: 6]] = wdata[l*16 +: 16];
      end
      pend = en;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
