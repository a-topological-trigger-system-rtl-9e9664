// tb_l2_framer: self-checking test of the L2 frame transmitter with a word
// slot every 4 clocks.  Random events are sent; the testbench rebuilds every
// field from the captured words (its own unpacking), checks the header flag,
// the XOR check word and that consecutive words are exactly WORD_DIV clocks
// apart, and checks that an event offered while a frame is going out is
// dropped and counted.
module tb_l2_framer;
  import topo_pkg::*;

  localparam int DIV = 4;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  l2_event_t   ev;
  logic        ev_valid;
  logic        busy;
  logic [15:0] tx_data;
  logic        tx_k, tx_valid;
  logic [15:0] drop_count;

  int checks = 0, failures = 0;
  int cyc = 0;

  l2_framer #(.WORD_DIV(DIV)) dut (.*);

  always #1 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] w [9];
    int t_last, n, drops;
    logic [15:0] x;
    ev = '0; ev_valid = 0; drops = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 30; e++) begin
      @(negedge clk);
      ev.tel_id = 4'($urandom); ev.ts.sec = $urandom; ev.ts.sub = 29'($urandom);
      ev.npix = 10'($urandom); ev.sx2 = 16'($urandom); ev.sr = 16'($urandom);
      ev_valid = 1;
      @(negedge clk); ev_valid = 0;
      if (e % 3 == 1) begin
        // offer a second event while busy: must be dropped
        @(negedge clk); ev_valid = 1; @(negedge clk); ev_valid = 0;
        drops++;
      end
      n = 0; t_last = -1;
      while (n < 9) begin
        @(posedge clk); #0;
        if (tx_valid) begin
          w[n] = tx_data;
          check(tx_k == (n == 0), $sformatf("k flag on word %0d", n));
          if (t_last >= 0) check(cyc - t_last == DIV, $sformatf("word spacing %0d", cyc - t_last));
          t_last = cyc;
          n++;
        end
      end
      x = '0;
      for (int i = 0; i < 9; i++) x ^= w[i];
      check(x == '0, "check word");
      check(w[0] == {8'hBC, 4'h0, ev.tel_id}, "header");
      check({w[1], w[2]} == ev.ts.sec, "seconds");
      check({w[3][12:0], w[4]} == ev.ts.sub && w[3][15:13] == 3'b0, "ticks");
      check(w[5] == {6'b0, ev.npix}, "npix");
      check(w[6] == ev.sx2 && w[7] == ev.sr, "moments");
      repeat (DIV + 2) @(negedge clk);
      check(!busy, "idle after frame");
    end
    check(drop_count == 16'(drops), $sformatf("drop_count %0d exp %0d", drop_count, drops));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
