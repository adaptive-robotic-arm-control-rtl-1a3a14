// tb_reckon_pl_system: end-to-end test of reckon_pl_system with short ticks
// (TICK_CYCLES = 20, LABEL_TICK = 40) and a 16-word FIFO, around the
// behavioural accelerator reckon_model. The test plays the processor: it
// streams samples as (AE,TS) words through the AXI4-Stream port with random
// gaps, sets the GPIO controls and reads the GPIO status.
//
// Samples: training with output, test (inference only) with output, a test
// sample whose output never comes (timeout), a training sample with a
// burst that overloads a tick (timing error), a sample with the output
// forwarded to the board, and a burst from the board's AER sensor with the
// input mux switched. Per sample it checks that the accelerator received
// exactly the sample's input addresses in order, each at the tick named by
// its timestamp (or later only while an earlier event was still in flight),
// the label only for training samples and with learning enabled, the class
// reported through GPIO, and the status counters. Each mechanism is
// counted; one that never happened is a failure.
module tb_reckon_pl_system;
  import reckon_pl_pkg::*;
  localparam int TC = 20, LT = 40, DEPTH = 16, TO = 4;

  logic clk = 0, rst_n = 0;
  logic [31:0] tdata; logic tvalid, tready;
  logic en, train, in_sel, out_fwd, ok_dma, out_seen;
  sender_status_t st;
  logic [$clog2(DEPTH)+1:0] level;
  logic [31:0] words_read;
  logic [7:0] out_last; logic [15:0] out_count; logic [15:0][15:0] class_cnt; logic [3:0] top_class;
  logic s_req, s_ack; logic [7:0] s_addr;
  logic r_in_req, r_in_ack, r_tick, r_sample, r_learn, r_infer, r_terr, r_out_req, r_out_ack;
  logic [8:0] r_in_addr; logic [7:0] r_out_addr;
  logic b_req, b_ack; logic [7:0] b_addr;
  logic respond;
  int checks = 0, failures = 0;

  reckon_pl_system #(.FIFO_DEPTH(DEPTH), .TICK_CYCLES(TC), .LABEL_TICK(LT), .OUT_TIMEOUT_TICKS(TO)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(tdata), .s_axis_tvalid(tvalid), .s_axis_tready(tready),
    .gpio_enable(en), .gpio_train(train), .gpio_in_sel(in_sel), .gpio_out_fwd(out_fwd),
    .gpio_ok_dma(ok_dma), .gpio_status(st), .gpio_fifo_level(level), .gpio_words_read(words_read),
    .gpio_out_last_addr(out_last), .gpio_out_count(out_count), .gpio_out_class_count(class_cnt),
    .gpio_out_top_class(top_class), .gpio_out_seen(out_seen),
    .sensor_aer_req(s_req), .sensor_aer_addr(s_addr), .sensor_aer_ack(s_ack),
    .reckon_aer_in_req(r_in_req), .reckon_aer_in_addr(r_in_addr), .reckon_aer_in_ack(r_in_ack),
    .reckon_time_tick(r_tick), .reckon_sample(r_sample), .reckon_learn_en(r_learn),
    .reckon_infer_en(r_infer), .reckon_timing_err(r_terr),
    .reckon_aer_out_req(r_out_req), .reckon_aer_out_addr(r_out_addr), .reckon_aer_out_ack(r_out_ack),
    .board_aer_out_req(b_req), .board_aer_out_addr(b_addr), .board_aer_out_ack(b_ack));

  reckon_model #(.ACK_DELAY(1), .OUT_DELAY(5), .MAX_EVT_PER_TICK(3)) rk (
    .clk(clk), .rst_n(rst_n), .aer_in_req(r_in_req), .aer_in_addr(r_in_addr), .aer_in_ack(r_in_ack),
    .time_tick(r_tick), .sample(r_sample), .learn_en(r_learn), .infer_en(r_infer), .timing_err(r_terr),
    .aer_out_req(r_out_req), .aer_out_addr(r_out_addr), .aer_out_ack(r_out_ack), .respond(respond));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // board side of the forwarded output
  int board_rx = 0;
  initial begin
    b_ack = 0;
    forever begin
      @(posedge clk);
      if (b_req && !b_ack) begin
        board_rx++;
        repeat (2) @(posedge clk);
        b_ack <= 1;
        do @(posedge clk); while (b_req);
        b_ack <= 0;
      end
    end
  end

  // mechanism counters
  int n_backpressure = 0, n_tick_wait = 0, n_label_learn = 0, n_label_infer = 0;
  int n_out_captured = 0, n_timeout = 0, n_timing_err = 0, n_sensor = 0, n_forward = 0;
  always @(posedge clk) if (rst_n && tvalid && !tready) n_backpressure++;

  // DMA model: push words with random gaps
  task automatic dma_send(input logic [31:0] w[$]);
    foreach (w[i]) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin tvalid = 0; @(negedge clk); end
      tdata = w[i]; tvalid = 1;
      do @(posedge clk); while (!tready);
      #1 tvalid = 0;
    end
  endtask

  // build and run one sample, then check what the accelerator saw
  task automatic run_sample(input bit is_train, input int n_in, input int burst, input bit resp, input bit fwd);
    logic [31:0] w[$];
    int addrs[$], tss[$];
    int t, exp_class, log0, prev, lab, got_in, got_lab, got_lab_learn;
    logic [15:0] terr0, done0;
    t = 0;
    for (int i = 0; i < n_in; i++) begin
      if (i >= burst) t += $urandom_range(0, 2);
      addrs.push_back($urandom_range(0, 23));
      tss.push_back(t);
      w.push_back({16'(addrs[i]), 16'(t)});
    end
    lab = $urandom_range(0, 1);
    w.push_back({16'hFFFE, 16'(lab)});
    w.push_back({16'hFFFF, 16'(LT + 5)});
    exp_class = n_in % 2;
    train = is_train; respond = resp; out_fwd = fwd;
    log0 = rk.in_addr.size(); terr0 = st.timing_errs; done0 = st.samples_done;
    fork
      dma_send(w);
      begin wait (!ok_dma); wait (ok_dma); end
    join
    repeat (3) @(posedge clk);
    // accelerator input log
    got_in = 0; got_lab = 0; got_lab_learn = 0; prev = 0;
    for (int i = log0; i < rk.in_addr.size(); i++) begin
      if (rk.in_addr[i] >= 256) begin
        got_lab++;
        check(rk.in_addr[i] == 256 + lab, "label value");
        check(rk.in_tick[i] == LT, $sformatf("label at tick %0d", rk.in_tick[i]));
        if (rk.in_learn[i]) got_lab_learn++;
      end else begin
        if (got_in < n_in) begin
          check(rk.in_addr[i] == addrs[got_in], $sformatf("input %0d addr", got_in));
          check(rk.in_tick[i] >= tss[got_in] && rk.in_tick[i] <= ((tss[got_in] > prev) ? tss[got_in] : prev) + 1,
                $sformatf("input %0d at tick %0d, timestamp %0d", got_in, rk.in_tick[i], tss[got_in]));
          if (tss[got_in] > prev && rk.in_tick[i] == tss[got_in]) n_tick_wait++;
          prev = rk.in_tick[i];
        end
        got_in++;
      end
    end
    check(got_in == n_in, $sformatf("accelerator got %0d inputs, expected %0d", got_in, n_in));
    if (is_train) begin
      check(got_lab == 1 && got_lab_learn == 1, "one label with learning enabled");
      if (got_lab == 1) n_label_learn++;
    end else begin
      check(got_lab == 0, "no label in a test sample");
      n_label_infer++;
    end
    check(!r_learn && !r_infer, "learning/inference off at the end");
    check(st.samples_done == done0 + 16'd1, "samples_done");
    if (resp) begin
      check(!st.out_timeout && out_seen, "output received");
      check(top_class == 4'(exp_class) && out_count == 1 && out_last == 8'(exp_class),
            $sformatf("class %0d expected %0d", top_class, exp_class));
      if (fwd) n_forward++; else n_out_captured++;
    end else begin
      check(st.out_timeout && !out_seen, "output timeout flagged");
      n_timeout++;
    end
    if (st.timing_errs != terr0) n_timing_err++;
    if (burst > 3) check(st.timing_errs > terr0, "overloaded tick reported as timing error");
  endtask

  initial begin
    int fwd0;
    tvalid = 0; tdata = 0; en = 0; train = 0; in_sel = 0; out_fwd = 0; respond = 1;
    s_req = 0; s_addr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) en = 1;
    run_sample(1, 30, 0, 1, 0);    // training, long sample through a 16-word FIFO
    run_sample(0, 25, 0, 1, 0);    // test
    run_sample(0, 10, 0, 0, 0);    // test, no output -> timeout
    run_sample(1, 20, 8, 1, 0);    // training, burst of 8 at tick 0 -> timing error
    fwd0 = board_rx;
    run_sample(0, 12, 0, 1, 1);    // test, output forwarded to the board
    check(board_rx == fwd0 + 1, "output reached the board");
    @(negedge clk) out_fwd = 0;
    // sensor path: switch the mux and send events straight from the sensor
    begin
      int log0;
      log0 = rk.in_addr.size();
      @(negedge clk) in_sel = 1;
      for (int i = 0; i < 6; i++) begin
        @(negedge clk) begin s_addr = 8'(100 + i); s_req = 1; end
        wait (s_ack); @(negedge clk) s_req = 0; wait (!s_ack);
      end
      repeat (2) @(posedge clk);
      check(rk.in_addr.size() == log0 + 6, "sensor events reached the accelerator");
      for (int i = 0; i < 6 && log0 + i < rk.in_addr.size(); i++)
        check(rk.in_addr[log0 + i] == 100 + i, "sensor address");
      n_sensor = rk.in_addr.size() - log0;
      @(negedge clk) in_sel = 0;
    end
    $display("backpressure=%0d tick_wait=%0d label_learn=%0d label_infer=%0d captured=%0d timeout=%0d timing_err=%0d sensor=%0d forward=%0d",
             n_backpressure, n_tick_wait, n_label_learn, n_label_infer, n_out_captured, n_timeout, n_timing_err, n_sensor, n_forward);
    check(n_backpressure > 0, "DMA back-pressure happened");
    check(n_tick_wait > 0, "events waited for their tick");
    check(n_label_learn > 0, "label sent with learning");
    check(n_label_infer > 0, "inference-only sample");
    check(n_out_captured > 0, "output captured for the processor");
    check(n_timeout > 0, "output timeout");
    check(n_timing_err > 0, "timing error");
    check(n_sensor > 0, "sensor input selected");
    check(n_forward > 0, "output forwarded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
