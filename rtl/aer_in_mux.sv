// aer_in_mux: chooses where the accelerator's AER input comes from.
//
// sel = 0 connects the event sender (dataset samples replayed from the
// processor through the DMA FIFO); sel = 1 connects an AER sensor wired to
// the board. req and addr of the selected source go to the accelerator and
// its ack goes back to that source only; the other source sees ack = 0 and
// is simply stalled. The mux is combinational (no added latency); any
// synchronisation of an asynchronous sensor request is left to the
// receiving AER interface. sel must only change while the link is idle,
// which an assertion checks.
//
// The two selectable sources follow the published system; the sel encoding
// and the stalling of the unselected source are this design's choices.
module aer_in_mux (
  input  logic clk,
  input  logic rst_n,
  input  logic sel,
  aer_if.dst   from_fsm,
  aer_if.dst   from_sensor,
  aer_if.src   to_reckon
);

  always_comb begin
    to_reckon.req   = sel ? from_sensor.req  : from_fsm.req;
    to_reckon.addr  = sel ? from_sensor.addr : from_fsm.addr;
    from_fsm.ack    = !sel && to_reckon.ack;
    from_sensor.ack =  sel && to_reckon.ack;
  end

  a_sel_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    $changed(sel) |-> !$past(to_reckon.req) && !to_reckon.ack)
    else $error("aer_in_mux: sel changed during a handshake");

endmodule
