// aer_out_path: receives the accelerator's AER output events.
//
// The accelerator reports its readout neurons as AER events, one per time
// step for regression or at the end of a sample for classification. With
// fwd = 0 this block answers the four-phase handshake itself and keeps the
// result for the processor, which reads it through GPIO: the last address,
// the number of events and one counter per output neuron (the low
// log2(N_OUT) address bits select it), plus top_class, the neuron with the
// largest count (lowest index on a tie), which is the classification.
// With fwd = 1 req and addr go to the board's output connector and the
// board's ack is returned; the events are still recorded on the completed
// handshake so the processor sees them as well. The address is held while
// req waits for ack, and an event is recorded on the clock after ack rises.
// clear (one clock, from the
// sender at the start of a sample) empties the record; seen says at least
// one event was recorded since.
//
// Timing: in capture mode ack rises one clock after req and falls one clock
// after req falls; the record is updated one clock after ack rises.
// fwd must only change while the link is idle.
//
// Either sending the output to the processor through GPIO or forwarding it
// off the board follows the published system; the per-neuron counters,
// top_class and recording in forward mode are this design's choices.
module aer_out_path #(
  parameter int N_OUT = 16,
  parameter int CNT_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       fwd,
  input  logic                       clear,
  aer_if.dst                         from_reckon,
  aer_if.src                         to_board,
  output logic [7:0]                 last_addr,
  output logic [CNT_W-1:0]           evt_count,
  output logic [N_OUT-1:0][CNT_W-1:0] class_count,
  output logic [$clog2(N_OUT)-1:0]   top_class,
  output logic                       seen
);

  localparam int IW = $clog2(N_OUT);

  logic cap_ack;
  logic ack_q;
  logic ack_now;
  logic [7:0] addr_hold;

  assign to_board.req    = fwd && from_reckon.req;
  assign to_board.addr   = from_reckon.addr;
  assign ack_now         = fwd ? to_board.ack : cap_ack;
  assign from_reckon.ack = ack_now;

  // capture-mode handshake
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cap_ack <= 1'b0;
    end else if (!fwd) begin
      if (from_reckon.req && !cap_ack)      cap_ack <= 1'b1;
      else if (!from_reckon.req && cap_ack) cap_ack <= 1'b0;
    end else begin
      cap_ack <= 1'b0;
    end
  end

  // record each event once, when its ack rises
  // the address is only valid while req is high and not yet acknowledged;
  // hold it so the event can be recorded when ack rises
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ack_q     <= 1'b0;
      addr_hold <= '0;
    end else begin
      ack_q <= ack_now;
      if (from_reckon.req && !ack_now) addr_hold <= from_reckon.addr;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      last_addr   <= '0;
      evt_count   <= '0;
      class_count <= '0;
      seen        <= 1'b0;
    end else begin
      if (ack_now && !ack_q) begin
        last_addr <= addr_hold;
        evt_count <= evt_count + 1'b1;
        class_count[addr_hold[IW-1:0]] <= class_count[addr_hold[IW-1:0]] + 1'b1;
        seen      <= 1'b1;
      end
    end
  end

  // arg-max over the per-neuron counters
  always_comb begin
    logic [CNT_W-1:0] best;
    best      = class_count[0];
    top_class = '0;
    for (int i = 1; i < N_OUT; i++) begin
      if (class_count[i] > best) begin
        best      = class_count[i];
        top_class = IW'(i);
      end
    end
  end

  a_fwd_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    $changed(fwd) |-> !$past(from_reckon.req) && !cap_ack && !to_board.ack)
    else $error("aer_out_path: fwd changed during a handshake");

endmodule
