// tb_event_fifo: self-checking test of event_fifo with a small depth.
// A random producer (random tvalid) and a random consumer (random rd_en)
// run against a queue model: every popped word must equal the model's
// head, empty and level must match the model's count, tready must be low
// exactly when the array is full, and a word pushed into an empty FIFO must
// be readable two clocks later. The full state must be reached at least once.
module tb_event_fifo;
  localparam int DEPTH = 8;
  localparam int W     = 32;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] tdata;
  logic tvalid, tready, rd_en, empty;
  logic [W-1:0] rd_data;
  logic [$clog2(DEPTH)+1:0] level;
  int checks = 0, failures = 0;
  int full_seen = 0;
  logic [W-1:0] model[$];

  event_fifo #(.DEPTH(DEPTH), .DATA_W(W)) dut (
    .clk(clk), .rst_n(rst_n), .s_axis_tdata(tdata), .s_axis_tvalid(tvalid),
    .s_axis_tready(tready), .rd_en(rd_en), .rd_data(rd_data), .empty(empty), .level(level));

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

  initial begin
    int pushed = 0;
    tvalid = 0; tdata = 0; rd_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && level == 0 && tready, "empty after reset");
    // latency: push one word, it must show two edges later
    tdata = 32'hCAFE_0001; tvalid = 1;
    @(posedge clk); #1 tvalid = 0; model.push_back(32'hCAFE_0001);
    check(empty, "word not yet visible after one edge");
    @(posedge clk); #1;
    check(!empty && rd_data == 32'hCAFE_0001, "word visible after two edges");
    // random traffic; first phase fills (consumer slow), second drains
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare state before this edge
      check(level == model.size(), $sformatf("level %0d vs %0d", level, model.size()));
      check(tready == (model.size() - (empty ? 0 : 1) < DEPTH), "tready vs fill");
      if (!tready) full_seen++;
      tvalid = ($urandom_range(0, 99) < (cyc < 1500 ? 80 : 30));
      tdata  = $urandom;
      rd_en  = !empty && ($urandom_range(0, 99) < (cyc < 1500 ? 30 : 80));
      if (rd_en) begin
        check(model.size() > 0 && rd_data == model[0],
              $sformatf("pop data %h expected %h", rd_data, model.size() ? model[0] : '0));
      end
      @(posedge clk);
      if (rd_en) void'(model.pop_front());
      if (tvalid && tready) begin model.push_back(tdata); pushed++; end
    end
    @(negedge clk); tvalid = 0; rd_en = 0;
    check(full_seen > 0, "FIFO never became full");
    check(pushed > 100, "enough traffic");
    $display("pushed %0d words, full for %0d cycles", pushed, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
