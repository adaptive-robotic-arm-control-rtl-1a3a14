// tb_aer_in_mux: self-checking test of aer_in_mux.
// Two four-phase AER sources (the event path and a sensor) each try to send
// a list of random addresses; a sink acknowledges with random delays and
// records what it receives. sel is switched between bursts, only while the
// link is idle. Checked: the sink receives exactly the selected source's
// addresses in order, the unselected source never sees ack, and nothing
// from it leaks through.
module tb_aer_in_mux;
  logic clk = 0, rst_n = 0, sel;
  aer_if #(.W(9)) fsm ();
  aer_if #(.W(9)) sen ();
  aer_if #(.W(9)) out ();
  int checks = 0, failures = 0;

  aer_in_mux dut (.clk(clk), .rst_n(rst_n), .sel(sel), .from_fsm(fsm), .from_sensor(sen), .to_reckon(out));

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

  // sink
  int rx[$];
  initial begin
    out.ack = 0;
    forever begin
      @(posedge clk);
      if (out.req && !out.ack) begin
        rx.push_back(int'(out.addr));
        repeat ($urandom_range(0, 2)) @(posedge clk);
        out.ack <= 1;
        do @(posedge clk); while (out.req);
        out.ack <= 0;
      end
    end
  end

  // ack seen by the unselected source
  int stray_ack = 0;
  always @(posedge clk) begin
    if (sel && fsm.ack) stray_ack++;
    if (!sel && sen.ack) stray_ack++;
  end

  task automatic send_fsm(input int a);
    @(negedge clk) begin fsm.addr = 9'(a); fsm.req = 1; end
    wait (fsm.ack); @(negedge clk) fsm.req = 0;
    wait (!fsm.ack);
  endtask
  task automatic send_sen(input int a);
    @(negedge clk) begin sen.addr = 9'(a); sen.req = 1; end
    wait (sen.ack); @(negedge clk) sen.req = 0;
    wait (!sen.ack);
  endtask

  initial begin
    int exp[$];
    fsm.req = 0; fsm.addr = 0; sen.req = 0; sen.addr = 0; sel = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int burst = 0; burst < 8; burst++) begin
      @(negedge clk) sel = burst[0];
      repeat (2) @(posedge clk);
      for (int i = 0; i < 10; i++) begin
        int a = $urandom_range(0, 511);
        exp.push_back(a);
        if (sel) begin
          // the idle FSM source holds a request it must not get through
          fork
            send_sen(a);
          join
        end else send_fsm(a);
      end
      // the unselected source raises req: it must stay blocked
      if (burst == 3) begin
        @(negedge clk) begin fsm.addr = 9'h1AA; fsm.req = 1; end
        repeat (10) @(posedge clk);
        check(!fsm.ack, "unselected source not acknowledged");
        check(rx.size() == exp.size(), "unselected request did not reach the sink");
        @(negedge clk) fsm.req = 0;
      end
    end
    repeat (5) @(posedge clk);
    check(rx.size() == exp.size(), $sformatf("received %0d of %0d", rx.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < rx.size(); i++)
      check(rx[i] == exp[i], $sformatf("event %0d: %0d expected %0d", i, rx[i], exp[i]));
    check(stray_ack == 0, "no ack to the unselected source");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
