// tb_ts_coincidence: self-checking test of the L3 time-stamp coincidence
// (4 telescopes, window 40 ticks, at least 3, collection 50 clocks, 1000
// ticks per second).  Each trial offers events from a random subset of
// telescopes at random clocks inside the collection period with random
// stamp offsets; the expected mask (stamps within the window of the first
// event) and the accept/low-multiplicity decision are worked out here.  Some
// trials straddle a second boundary.  arr_valid must come exactly
// COLLECT_CYCLES + 1 clocks after the first event.
module tb_ts_coincidence;
  import topo_pkg::*;

  localparam int NT = 4, WIN = 40, MINT = 3, COL = 50, TPS = 1000;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  l2_event_t       ev [NT];
  logic [NT-1:0]   ev_valid;
  logic            arr_valid;
  logic [NT-1:0]   arr_mask;
  timestamp_t      arr_ts;
  l2_event_t       arr_ev [NT];
  logic [31:0]     n_coinc, n_lowmult;

  int checks = 0, failures = 0;

  ts_coincidence #(.NTEL(NT), .WINDOW_TICKS(WIN), .MIN_TEL(MINT),
                   .COLLECT_CYCLES(COL), .TICKS_PER_SEC(TPS)) dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int at [NT];
    longint abs_t [NT];
    bit     sent [NT];
    int first_t, first_i, cyc, got, nexp, exp_acc, exp_low, seen_cyc;
    logic [NT-1:0] emask;
    longint base, d;
    for (int i = 0; i < NT; i++) ev[i] = '0;
    ev_valid = '0; exp_acc = 0; exp_low = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      base = longint'(5000 + t) * TPS + ((t % 5 == 0) ? TPS - 20 : $urandom_range(100, 800));
      first_t = 1000; first_i = -1;
      for (int i = 0; i < NT; i++) begin
        sent[i] = ($urandom_range(0, 3) != 0);
        at[i] = $urandom_range(0, 30);
        abs_t[i] = base + $urandom_range(0, 70);
        if (sent[i] && (at[i] < first_t)) begin first_t = at[i]; first_i = i; end
      end
      if (first_i < 0) continue;
      // reference = first arriving (lowest index among those arriving together)
      for (int i = 0; i < NT; i++) if (sent[i] && at[i] == first_t) begin first_i = i; break; end
      emask = '0; nexp = 0;
      for (int i = 0; i < NT; i++) if (sent[i]) begin
        d = abs_t[i] - abs_t[first_i];
        if (d < 0) d = -d;
        if (d <= WIN) begin emask[i] = 1; nexp++; end
      end
      got = 0; seen_cyc = -1;
      for (cyc = 0; cyc < COL + 40; cyc++) begin
        @(negedge clk);
        for (int i = 0; i < NT; i++) begin
          ev_valid[i] = sent[i] && (at[i] == cyc);
          ev[i].tel_id = 4'(i);
          ev[i].ts.sec = 32'(abs_t[i] / TPS);
          ev[i].ts.sub = 29'(abs_t[i] % TPS);
          ev[i].npix = 10'(i + 7);
        end
        @(posedge clk); #0;
        if (arr_valid) begin got++; seen_cyc = cyc; end
      end
      ev_valid = '0;
      if (nexp >= MINT) begin
        exp_acc++;
        check(got == 1, $sformatf("trial %0d: %0d outputs, expected 1", t, got));
        check(arr_mask == emask, $sformatf("trial %0d mask %b exp %b", t, arr_mask, emask));
        check(arr_ts.sec == 32'(abs_t[first_i] / TPS) && arr_ts.sub == 29'(abs_t[first_i] % TPS), "reference stamp");
        check(seen_cyc - first_t == COL + 1, $sformatf("latency %0d", seen_cyc - first_t));
        for (int i = 0; i < NT; i++) if (emask[i]) check(arr_ev[i].npix == 10'(i + 7), "event payload");
      end else begin
        exp_low++;
        check(got == 0, $sformatf("trial %0d: low multiplicity gave output", t));
      end
    end
    check(n_coinc == 32'(exp_acc) && n_lowmult == 32'(exp_low), $sformatf("counters %0d %0d exp %0d %0d", n_coinc, n_lowmult, exp_acc, exp_low));
    check(exp_acc > 5 && exp_low > 5, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
