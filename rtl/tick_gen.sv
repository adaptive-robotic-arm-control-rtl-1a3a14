// tick_gen: time reference of the event sender.
//
// While run is high it divides the clock by PERIOD and emits a one-cycle
// tick at the end of every period, counting the ticks in count. clear
// (synchronous, has priority) restarts both the divider and the count, so
// the first tick after a clear comes PERIOD cycles later and count then
// reads 1. With the default PERIOD of 100000 cycles and a 100 MHz clock a
// tick is 1 ms. The clock frequency and the tick period are this design's
// choices; the published system only says the FSMs provide ticks that define
// the time reference of a sample.
module tick_gen #(
  parameter int PERIOD  = 100000,
  parameter int COUNT_W = 32
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               run,
  output logic               tick,
  output logic [COUNT_W-1:0] count
);

  localparam int DW = (PERIOD > 1) ? $clog2(PERIOD) : 1;
  logic [DW-1:0] div;
  logic          wrap;

  assign wrap = run && (div == DW'(PERIOD-1));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      div   <= '0;
      count <= '0;
      tick  <= 1'b0;
    end else begin
      tick <= wrap;
      if (run) div <= wrap ? '0 : div + 1'b1;
      if (wrap) count <= count + 1'b1;
    end
  end

endmodule
