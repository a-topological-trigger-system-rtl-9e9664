// tb_l3_deframer: self-checking test of the L3 frame receiver.  The
// testbench encodes random events itself (header 0xBC, fields, XOR check
// word) with random gaps between words, and checks that each good frame
// yields exactly one event with all fields intact, that a frame with a
// corrupted word yields none and counts an error, and that a header inside a
// frame restarts reception and counts an error.
module tb_l3_deframer;
  import topo_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic [15:0] rx_data;
  logic        rx_k, rx_valid;
  l2_event_t   ev;
  logic        ev_valid;
  logic [15:0] err_count;

  int checks = 0, failures = 0, nev = 0;
  l2_event_t last;

  l3_deframer dut (.*);

  always #1 clk = ~clk;
  always @(posedge clk) if (rst_n && ev_valid) begin nev++; last = ev; end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(l2_event_t e, int corrupt, int cut);
    logic [15:0] w [9];
    w[0] = {8'hBC, 4'h0, e.tel_id};
    w[1] = e.ts.sec[31:16]; w[2] = e.ts.sec[15:0];
    w[3] = {3'b0, e.ts.sub[28:16]}; w[4] = e.ts.sub[15:0];
    w[5] = {6'b0, e.npix}; w[6] = e.sx2; w[7] = e.sr;
    w[8] = '0;
    for (int i = 0; i < 8; i++) w[8] ^= w[i];
    if (corrupt >= 0) w[corrupt] ^= 16'h0040;
    for (int i = 0; i < 9; i++) begin
      if (i == cut) return;
      @(negedge clk); rx_data = w[i]; rx_k = (i == 0); rx_valid = 1;
      @(negedge clk); rx_valid = 0; rx_k = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  function automatic l2_event_t rnd();
    l2_event_t e;
    e.tel_id = 4'($urandom); e.ts.sec = $urandom; e.ts.sub = 29'($urandom);
    e.npix = 10'($urandom); e.sx2 = 16'($urandom); e.sr = 16'($urandom);
    return e;
  endfunction

  initial begin
    l2_event_t e;
    int n0, errs;
    rx_data = '0; rx_k = 0; rx_valid = 0; errs = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      e = rnd();
      n0 = nev;
      case (t % 4)
        1: begin send(e, 1 + $urandom_range(0, 7), -1); errs++;
                 repeat (3) @(negedge clk); check(nev == n0, "corrupt frame gives no event"); end
        2: begin send(rnd(), -1, 4); errs++; n0 = nev;
                 send(e, -1, -1); repeat (3) @(negedge clk);
                 check(nev == n0 + 1 && last == e, "frame after truncated frame"); end
        default: begin send(e, -1, -1); repeat (3) @(negedge clk);
                 check(nev == n0 + 1, "one event per frame");
                 check(last == e, "event fields"); end
      endcase
    end
    check(err_count == 16'(errs), $sformatf("err_count %0d exp %0d", err_count, errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
