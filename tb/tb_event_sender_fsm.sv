// tb_event_sender_fsm: self-checking test of event_sender_fsm with short
// ticks (TICK_CYCLES = 10, LABEL_TICK = 30, OUT_TIMEOUT_TICKS = 4).
// A behavioural event source offers decoded events; a four-phase AER sink
// with a random ack delay records each event with the tick count (counted
// here from the time_tick pulses) at which req rose. Checked: tick spacing,
// SAMPLE rising with the first event and falling at the end marker's tick,
// each input spike sent on the first tick not earlier than its timestamp
// and not earlier than the previous event, the label sent with bit 8 set
// only for a training sample at LABEL_TICK, learn_en/infer_en timing,
// ok_dma after the output is seen or after the timeout, timing-error count,
// and the event rate with an immediately answering sink (the published
// peak is 3.8 M events/s, i.e. at most 26 clocks per event at 100 MHz).
module tb_event_sender_fsm;
  import reckon_pl_pkg::*;
  localparam int TC = 10, LT = 30, TO = 4;

  logic clk = 0, rst_n = 0;
  logic enable, train, evt_valid, evt_ready;
  event_t evt;
  logic time_tick, sample, learn_en, infer_en, timing_err, out_clear, out_seen, ok_dma;
  sender_status_t status;
  aer_if #(.W(AERIN_W)) bus ();
  int checks = 0, failures = 0;

  event_sender_fsm #(.TICK_CYCLES(TC), .LABEL_TICK(LT), .OUT_TIMEOUT_TICKS(TO)) dut (
    .clk(clk), .rst_n(rst_n), .enable(enable), .train(train), .evt_valid(evt_valid), .evt(evt),
    .evt_ready(evt_ready), .aer(bus), .time_tick(time_tick), .sample(sample), .learn_en(learn_en),
    .infer_en(infer_en), .timing_err(timing_err), .out_clear(out_clear), .out_seen(out_seen),
    .ok_dma(ok_dma), .status(status));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- event source ----------------
  event_t src[$];
  int rp = 0;
  assign evt_valid = (rp < src.size());
  assign evt       = evt_valid ? src[rp] : '0;
  always @(posedge clk) if (evt_valid && evt_ready) rp <= rp + 1;

  // ---------------- tick counter and AER sink ----------------
  int cyc = 0, tick_n = 0, last_tick_cyc = -1, bad_spacing = 0;
  int ack_delay_max = 3;
  int got_addr[$], got_tick[$], got_cyc[$];
  int req_rise_cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (sample && !$past(sample)) begin tick_n <= 0; last_tick_cyc <= -1; end
    else if (time_tick) begin
      tick_n <= tick_n + 1;
      if (last_tick_cyc >= 0 && cyc - last_tick_cyc != TC) bad_spacing++;
      last_tick_cyc <= cyc;
    end
  end
  initial begin
    bus.ack = 0;
    forever begin
      @(posedge clk);
      if (bus.req && !bus.ack) begin
        got_addr.push_back(int'(bus.addr));
        got_tick.push_back(tick_n);
        got_cyc.push_back(cyc);
        repeat ($urandom_range(0, ack_delay_max)) @(posedge clk);
        bus.ack <= 1;
        do @(posedge clk); while (bus.req);
        repeat ($urandom_range(0, ack_delay_max)) @(posedge clk);
        bus.ack <= 0;
      end
    end
  end

  // learn_en / infer_en rise ticks
  int learn_rise_tick, infer_rise_tick, sample_fall_tick, ok_cyc, sample_fall_cyc;
  always @(posedge clk) begin
    if ($rose(learn_en)) learn_rise_tick = tick_n;
    if ($rose(infer_en)) infer_rise_tick = tick_n;
    if ($fell(sample)) begin sample_fall_tick = tick_n; sample_fall_cyc = cyc; end
    if ($rose(ok_dma)) ok_cyc = cyc;
  end

  function automatic event_t mk(input ev_kind_e k, input int a, input int ts);
    event_t e; e.kind = k; e.addr = 8'(a); e.ts = 16'(ts); return e;
  endfunction

  // run one sample and check it against the expected schedule
  task automatic run_sample(input bit is_train, input int n_in, input int end_ts, input bit give_out);
    int ts_list[$], addr_list[$];
    int base, exp_tick, prev_tick, label_val;
    int n_exp;
    src.delete(); rp = 0;
    got_addr.delete(); got_tick.delete(); got_cyc.delete();
    learn_rise_tick = -1; infer_rise_tick = -1;
    label_val = $urandom_range(0, 1);
    for (int i = 0; i < n_in; i++) begin
      int t = (i == 0) ? $urandom_range(0, 2) : ts_list[i-1] + $urandom_range(0, 3);
      ts_list.push_back(t);
      addr_list.push_back($urandom_range(0, 23));
      src.push_back(mk(EV_INPUT, addr_list[i], t));
    end
    src.push_back(mk(EV_LABEL, label_val, 0));
    src.push_back(mk(EV_END, 0, end_ts));
    train = is_train;
    @(negedge clk);
    check(ok_dma, "ok_dma high before the sample");
    enable = 1;
    wait (sample);
    @(negedge clk);
    check(!ok_dma, "ok_dma low during the sample");
    enable = 0;
    // output arrives two ticks after SAMPLE falls, if at all
    wait (!sample);
    if (give_out) begin
      repeat (2 * TC) @(posedge clk);
      @(negedge clk) out_seen = 1;
    end
    wait (ok_dma);
    @(negedge clk) out_seen = 0;
    repeat (2) @(posedge clk);   // let the edge monitors catch up
    // expected AER events
    n_exp = n_in + (is_train ? 1 : 0);
    check(got_addr.size() == n_exp, $sformatf("sent %0d events, expected %0d", got_addr.size(), n_exp));
    prev_tick = 0;
    for (int i = 0; i < n_in && i < got_addr.size(); i++) begin
      check(got_addr[i] == addr_list[i], $sformatf("event %0d addr %0d expected %0d", i, got_addr[i], addr_list[i]));
      // sent at the first tick >= its timestamp (events sent back-to-back may
      // spill into a later tick only if the previous one was still in flight)
      exp_tick = (ts_list[i] > prev_tick) ? ts_list[i] : prev_tick;
      check(got_tick[i] >= ts_list[i] && got_tick[i] <= exp_tick + 1,
            $sformatf("event %0d sent at tick %0d, timestamp %0d", i, got_tick[i], ts_list[i]));
      prev_tick = got_tick[i];
    end
    if (is_train) begin
      check(got_addr.size() > n_in && got_addr[n_in] == (256 | label_val),
            "training label sent with label flag");
      check(got_tick.size() > n_in && got_tick[n_in] == LT, "label sent at LABEL_TICK");
      check(learn_rise_tick == LT, $sformatf("learn_en rose at tick %0d", learn_rise_tick));
    end else begin
      check(learn_rise_tick == -1, "no learning for a test sample");
    end
    check(infer_rise_tick == LT, $sformatf("infer_en rose at tick %0d", infer_rise_tick));
    check(sample_fall_tick == end_ts, $sformatf("SAMPLE fell at tick %0d, end %0d", sample_fall_tick, end_ts));
    check(!learn_en && !infer_en, "learning and inference off after the sample");
    check(status.out_timeout == !give_out, "output timeout flag");
    if (give_out)
      check(ok_cyc - sample_fall_cyc <= 2 * TC + 3, "ok_dma follows the output event");
    else
      check(ok_cyc - sample_fall_cyc >= (TO - 1) * TC && ok_cyc - sample_fall_cyc <= TO * TC + 2,
            $sformatf("ok_dma after the timeout (%0d cycles)", ok_cyc - sample_fall_cyc));
  endtask

  initial begin
    int t0, n_burst, sent0, samples0;
    enable = 0; train = 0; timing_err = 0; out_seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_sample(1, 20, 35, 1);   // training sample, output present
    run_sample(0, 15, 33, 0);   // test sample, no output: timeout
    run_sample(1, 10, 31, 1);
    check(bad_spacing == 0, "tick spacing is TICK_CYCLES");
    check(status.samples_done == 3, "samples_done");
    // timing errors: three pulses of various lengths
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) timing_err = 1;
      repeat (i + 1) @(negedge clk);
      timing_err = 0;
      @(negedge clk);
    end
    repeat (2) @(posedge clk);
    check(status.timing_errs == 3, $sformatf("timing errors %0d", status.timing_errs));
    // rate: 50 events at timestamp 0, sink answers in the next clock
    ack_delay_max = 0;
    src.delete(); rp = 0; got_cyc.delete(); got_addr.delete(); got_tick.delete();
    for (int i = 0; i < 50; i++) src.push_back(mk(EV_INPUT, i, 0));
    src.push_back(mk(EV_LABEL, 0, 0));
    src.push_back(mk(EV_END, 0, LT + 1));
    train = 0; sent0 = status.events_sent;
    @(negedge clk) enable = 1;
    wait (sample);
    @(negedge clk) enable = 0;
    wait (got_cyc.size() == 50);
    t0 = got_cyc[49] - got_cyc[0];
    $display("50 events in %0d clocks (%0d clocks/event)", t0, t0 / 49);
    check(t0 <= 49 * 6, $sformatf("event period %0d/49 clocks", t0));
    check(t0 <= 49 * 26, "at least 3.8 M events/s at 100 MHz");
    out_seen = 1;
    wait (ok_dma);
    @(negedge clk) out_seen = 0;
    check(status.events_sent - sent0 == 50, "events_sent counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
