// tb_gps_timestamp: self-checking test of the time-stamp counter with a
// short second (TICKS_PER_SEC = 100).  Checks that a PPS edge loads the
// second and clears the ticks three clocks later, that ticks count one per
// clock, that the counter rolls into the next second without a PPS, and that
// latch captures the running value.
module tb_gps_timestamp;
  import topo_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       pps;
  logic [31:0] pps_sec;
  logic       latch;
  timestamp_t now, stamp;

  int checks = 0, failures = 0;

  gps_timestamp #(.TICKS_PER_SEC(100)) dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    timestamp_t prev;
    pps = 0; pps_sec = 32'd1000; latch = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    @(negedge clk); pps = 1;
    // synchroniser: load on the third edge after pps rises
    @(posedge clk); #0; @(posedge clk); #0; @(posedge clk); #0;
    @(negedge clk);
    check(now.sec == 32'd1000 && now.sub == '0, $sformatf("pps load: %0d.%0d", now.sec, now.sub));
    pps = 0;
    for (int i = 1; i <= 150; i++) begin
      @(negedge clk);
      check(now.sec == 32'(1000 + i / 100) && now.sub == 29'(i % 100),
            $sformatf("tick %0d: %0d.%0d", i, now.sec, now.sub));
    end
    // latch
    prev = now;
    latch = 1; @(negedge clk); latch = 0;
    check(stamp == prev, "latch captures running value");
    @(negedge clk);
    check(stamp == prev, "stamp holds");
    // a new pps in the middle of a second re-aligns
    pps_sec = 32'd2000; pps = 1;
    repeat (3) @(negedge clk);
    check(now.sec == 32'd2000 && now.sub == '0, $sformatf("re-align: %0d.%0d", now.sec, now.sub));
    @(negedge clk);
    check(now.sub == 29'd1, "counting after re-align");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
