// tb_event_reader_fsm: self-checking test of event_reader_fsm.
// A behavioural first-word-fall-through FIFO feeds it a list of (AE,TS)
// words that includes input spikes, a label (AE = -2) and an end marker
// (AE = -1); a consumer with random ready takes the decoded events. Each
// event must match the decoding worked out here from the word, every word
// must be delivered once and in order, and with the consumer always ready
// the reader must deliver one event per clock.
module tb_event_reader_fsm;
  import reckon_pl_pkg::*;

  logic clk = 0, rst_n = 0;
  logic fifo_empty, fifo_rd, evt_valid, evt_ready;
  logic [31:0] fifo_data;
  event_t evt;
  logic [31:0] n_read;
  int checks = 0, failures = 0;
  logic [31:0] words[$];
  int rp = 0;
  bit always_ready = 0;

  event_reader_fsm dut (.clk(clk), .rst_n(rst_n), .fifo_empty(fifo_empty), .fifo_data(fifo_data),
    .fifo_rd(fifo_rd), .evt_valid(evt_valid), .evt(evt), .evt_ready(evt_ready), .n_read(n_read));

  always #5 clk = ~clk;

  // behavioural FIFO: read pointer advanced with a non-blocking update
  assign fifo_empty = (rp >= words.size());
  assign fifo_data  = fifo_empty ? 32'h0 : words[rp];
  always @(posedge clk) if (rst_n && fifo_rd) rp <= rp + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected decoding, written independently of the package function
  function automatic event_t expect_evt(input logic [31:0] w);
    event_t e;
    e.ts = w[15:0];
    if (w[31:16] == 16'hFFFE)      begin e.kind = EV_LABEL; e.addr = w[7:0]; end
    else if (w[31:16] == 16'hFFFF) begin e.kind = EV_END;   e.addr = 8'd0;   end
    else                           begin e.kind = EV_INPUT; e.addr = w[23:16]; end
    return e;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int got = 0, streak = 0, best_streak = 0;
  always @(posedge clk) if (rst_n) begin
    if (evt_valid && evt_ready) begin
      event_t e;
      e = expect_evt(words[got]);
      check(evt == e, $sformatf("event %0d: got kind %0d addr %0d ts %0d, expected kind %0d addr %0d ts %0d",
            got, evt.kind, evt.addr, evt.ts, e.kind, e.addr, e.ts));
      got++;
      streak++;
      if (streak > best_streak) best_streak = streak;
    end else if (always_ready) streak = 0;
  end

  initial begin
    int n;
    evt_ready = 0;
    for (int i = 0; i < 200; i++) words.push_back({16'($urandom_range(0, 23)), 16'(i * 3)});
    words.push_back({16'hFFFE, 16'd1});
    words.push_back({16'hFFFF, 16'd2250});
    n = words.size();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random-ready phase
    while (got < 100) begin
      @(negedge clk);
      evt_ready = evt_valid && ($urandom_range(0, 1) == 1);
    end
    // always-ready phase: one event per clock
    always_ready = 1;
    streak = 0; best_streak = 0;
    while (got < n) begin
      @(negedge clk);
      evt_ready = evt_valid;
    end
    @(negedge clk); evt_ready = 0;
    repeat (3) @(posedge clk);
    check(got == n, "all events delivered");
    check(n_read == n, $sformatf("n_read %0d vs %0d", n_read, n));
    check(!evt_valid, "nothing left");
    check(best_streak >= 90, $sformatf("back-to-back rate: streak %0d", best_streak));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
