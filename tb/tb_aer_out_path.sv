// tb_aer_out_path: self-checking test of aer_out_path with 16 outputs.
// A four-phase source plays the accelerator's AER output. In capture mode
// the block must answer every event itself (ack one clock after req) and
// record the last address, the event count and per-neuron counts; top_class
// must be the neuron with most events (lowest index on a tie). In forward
// mode req/addr must appear on the board port, the board's ack must come
// back, and the events are still recorded. clear must empty the record.
module tb_aer_out_path;
  localparam int N = 16;
  logic clk = 0, rst_n = 0, fwd, clear;
  aer_if #(.W(8)) rk ();
  aer_if #(.W(8)) bd ();
  logic [7:0] last_addr;
  logic [15:0] evt_count;
  logic [N-1:0][15:0] class_count;
  logic [3:0] top_class;
  logic seen;
  int checks = 0, failures = 0;

  aer_out_path #(.N_OUT(N)) dut (.clk(clk), .rst_n(rst_n), .fwd(fwd), .clear(clear), .from_reckon(rk),
    .to_board(bd), .last_addr(last_addr), .evt_count(evt_count), .class_count(class_count),
    .top_class(top_class), .seen(seen));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // board sink for forward mode
  int board_rx[$];
  initial begin
    bd.ack = 0;
    forever begin
      @(posedge clk);
      if (bd.req && !bd.ack) begin
        board_rx.push_back(int'(bd.addr));
        repeat ($urandom_range(1, 3)) @(posedge clk);
        bd.ack <= 1;
        do @(posedge clk); while (bd.req);
        bd.ack <= 0;
      end
    end
  end

  task automatic send(input int a, output int ack_lat);
    int c = 0;
    @(negedge clk) begin rk.addr = 8'(a); rk.req = 1; end
    do begin @(posedge clk); #1 c++; end while (!rk.ack);
    ack_lat = c;
    @(negedge clk) rk.req = 0;
    wait (!rk.ack);
  endtask

  task automatic do_clear();
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
  endtask

  initial begin
    int cnt[N];
    int lat, best, besti, total, last;
    rk.req = 0; rk.addr = 0; fwd = 0; clear = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      fwd = round[0];
      do_clear();
      @(negedge clk);
      check(!seen && evt_count == 0 && class_count == '0, "record empty after clear");
      foreach (cnt[i]) cnt[i] = 0;
      total = 0;
      board_rx.delete();
      for (int i = 0; i < 40; i++) begin
        int a = $urandom_range(0, 255);
        if (round == 2) a = (i < 20) ? 5 : 9;   // tie -> lowest index
        send(a, lat);
        cnt[a % N]++; total++; last = a;
        if (!fwd) check(lat == 1, $sformatf("capture ack latency %0d", lat));
      end
      repeat (2) @(posedge clk); #1;
      best = cnt[0]; besti = 0;
      for (int i = 1; i < N; i++) if (cnt[i] > best) begin best = cnt[i]; besti = i; end
      check(seen, "seen");
      check(evt_count == total, $sformatf("count %0d expected %0d", evt_count, total));
      check(last_addr == last, "last address");
      for (int i = 0; i < N; i++) check(class_count[i] == cnt[i], $sformatf("class %0d count", i));
      check(top_class == besti, $sformatf("top class %0d expected %0d", top_class, besti));
      if (fwd) check(board_rx.size() == total, $sformatf("forwarded %0d of %0d", board_rx.size(), total));
      else     check(board_rx.size() == 0, "nothing forwarded in capture mode");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
