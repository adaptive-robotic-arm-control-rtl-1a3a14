// tb_reckon_pl_system_full: one complete training sample through
// reckon_pl_system at its default parameters (100000-clock ticks, i.e. 1 ms
// at 100 MHz, label at tick 2100, 1024-word FIFO), around reckon_model.
// The sample is sized like one of the robot-arm samples: 2250 ticks long,
// input addresses from 24 input channels, with 4 events every 50 ticks
// (180 events). The test streams the words, waits for ok_dma and checks
// that every event arrived in order at the tick of its timestamp, that the
// label arrived at tick 2100 with learning enabled (and learning stayed
// on for the events after it), that SAMPLE lasted 2250
// ticks and that the class reached the GPIO status. It simulates about
// 225 million clocks.
module tb_reckon_pl_system_full;
  import reckon_pl_pkg::*;
  localparam int TC = 100000, LT = 2100, END_TS = 2250;

  logic clk = 0, rst_n = 0;
  logic [31:0] tdata; logic tvalid, tready;
  logic ok_dma, out_seen;
  sender_status_t st;
  logic [11:0] level;
  logic [31:0] words_read;
  logic [7:0] out_last; logic [15:0] out_count; logic [15:0][15:0] class_cnt; logic [3:0] top_class;
  logic s_ack;
  logic r_in_req, r_in_ack, r_tick, r_sample, r_learn, r_infer, r_terr, r_out_req, r_out_ack;
  logic [8:0] r_in_addr; logic [7:0] r_out_addr;
  logic b_req; logic [7:0] b_addr;
  int checks = 0, failures = 0;

  reckon_pl_system dut (
    .clk(clk), .rst_n(rst_n),
    .s_axis_tdata(tdata), .s_axis_tvalid(tvalid), .s_axis_tready(tready),
    .gpio_enable(1'b1), .gpio_train(1'b1), .gpio_in_sel(1'b0), .gpio_out_fwd(1'b0),
    .gpio_ok_dma(ok_dma), .gpio_status(st), .gpio_fifo_level(level), .gpio_words_read(words_read),
    .gpio_out_last_addr(out_last), .gpio_out_count(out_count), .gpio_out_class_count(class_cnt),
    .gpio_out_top_class(top_class), .gpio_out_seen(out_seen),
    .sensor_aer_req(1'b0), .sensor_aer_addr(8'd0), .sensor_aer_ack(s_ack),
    .reckon_aer_in_req(r_in_req), .reckon_aer_in_addr(r_in_addr), .reckon_aer_in_ack(r_in_ack),
    .reckon_time_tick(r_tick), .reckon_sample(r_sample), .reckon_learn_en(r_learn),
    .reckon_infer_en(r_infer), .reckon_timing_err(r_terr),
    .reckon_aer_out_req(r_out_req), .reckon_aer_out_addr(r_out_addr), .reckon_aer_out_ack(r_out_ack),
    .board_aer_out_req(b_req), .board_aer_out_addr(b_addr), .board_aer_out_ack(1'b0));

  reckon_model #(.ACK_DELAY(2), .OUT_DELAY(10), .MAX_EVT_PER_TICK(8)) rk (
    .clk(clk), .rst_n(rst_n), .aer_in_req(r_in_req), .aer_in_addr(r_in_addr), .aer_in_ack(r_in_ack),
    .time_tick(r_tick), .sample(r_sample), .learn_en(r_learn), .infer_en(r_infer), .timing_err(r_terr),
    .aer_out_req(r_out_req), .aer_out_addr(r_out_addr), .aer_out_ack(r_out_ack), .respond(1'b1));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (240_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // SAMPLE length in clocks
  longint rise_cyc = 0, fall_cyc = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (r_sample && rise_cyc == 0) rise_cyc = cyc;
    if (!r_sample && rise_cyc != 0 && fall_cyc == 0) fall_cyc = cyc;
  end

  initial begin
    int addrs[$], tss[$], n, lab, li;
    logic [31:0] w[$];
    for (int t = 0; t < END_TS; t += 50)
      for (int k = 0; k < 4; k++) begin
        addrs.push_back($urandom_range(0, 23));
        tss.push_back(t + k);
      end
    n = addrs.size();
    // words are handled in stream order, so the label goes where its time
    // (tick 2100) falls among the events
    lab = 1;
    foreach (addrs[i]) begin
      if (tss[i] >= LT && (i == 0 || tss[i-1] < LT)) w.push_back({16'hFFFE, 16'(lab)});
      w.push_back({16'(addrs[i]), 16'(tss[i])});
    end
    w.push_back({16'hFFFF, 16'(END_TS)});
    tvalid = 0; tdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // the whole sample fits in the FIFO: stream it in one burst
    foreach (w[i]) begin
      @(negedge clk) begin tdata = w[i]; tvalid = 1; end
      do @(posedge clk); while (!tready);
    end
    @(negedge clk) tvalid = 0;
    wait (!ok_dma);
    wait (ok_dma);
    repeat (3) @(posedge clk);
    check(rk.in_addr.size() == n + 1, $sformatf("%0d events reached the accelerator", rk.in_addr.size()));
    li = 0;
    for (int i = 0; i < rk.in_addr.size(); i++) begin
      if (rk.in_addr[i] >= 256) begin
        check(rk.in_addr[i] == 256 + lab && rk.in_tick[i] == LT && rk.in_learn[i], "label at tick 2100 with learning");
      end else if (li < n) begin
        check(rk.in_addr[i] == addrs[li] && rk.in_tick[i] == tss[li],
              $sformatf("event %0d addr %0d tick %0d expected %0d/%0d", li, rk.in_addr[i], rk.in_tick[i], addrs[li], tss[li]));
        li++;
      end
    end
    check(fall_cyc - rise_cyc >= longint'(END_TS) * TC && fall_cyc - rise_cyc <= longint'(END_TS) * TC + 10,
          $sformatf("SAMPLE lasted %0d clocks", fall_cyc - rise_cyc));
    check(st.samples_done == 1 && !st.out_timeout && out_seen, "output received");
    check(top_class == 4'(n % 2), "class reported");
    check(st.timing_errs == 0, "no timing errors");
    check(!r_learn && !r_infer, "learning/inference off");
    $display("sample of %0d events, SAMPLE high for %0d clocks", n, fall_cyc - rise_cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
