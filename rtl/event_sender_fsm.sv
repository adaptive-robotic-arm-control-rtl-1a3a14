// event_sender_fsm: second of the two chained event FSMs; it owns the timing
// of a sample.
//
// It takes decoded events from event_reader_fsm and replays them to the
// accelerator at the right tick:
//   1. When enable is high and an event is waiting, raise SAMPLE, restart the
//      tick counter and clear the output capture (out_clear pulse). ok_dma
//      falls.
//   2. For each event, wait until the tick count since SAMPLE rose reaches
//      its target: TS for an input spike or for the end marker, LABEL_TICK
//      for the label.
//   3. Input spike: send {1'b0, addr} on the AER bus (four-phase req/ack).
//      Label: when train is high, send {1'b1, label} and raise learn_en;
//      in both cases raise infer_en once the label is handled.
//      End marker: lower SAMPLE.
//   4. After SAMPLE falls, wait until the output path has seen an output
//      event (out_seen) or OUT_TIMEOUT_TICKS ticks have passed, then lower
//      learn_en and infer_en, raise ok_dma (the processor may send the next
//      sample) and return to idle.
// Ticks (time_tick, one clock wide, every TICK_CYCLES clocks) run from the
// start of a sample until the return to idle. Rising edges of timing_err
// from the accelerator are counted in status.
//
// Timing: an event whose target tick has already passed leaves on the AER
// bus two clocks after it is offered; with an accelerator that answers in
// one clock each phase, one event costs five clocks (20 M events/s at
// 100 MHz).
//
// The sequence (SAMPLE, tick waits, label handling with learning only for
// training samples, output read-back, learning/inference disabled at the
// end) and the 2100-tick label time follow the published flow. TS read as
// an absolute tick within the sample, the AER label encoding, the start
// condition, the output timeout and the tick period are this design's
// choices.
module event_sender_fsm
  import reckon_pl_pkg::*;
#(
  parameter int TICK_CYCLES       = 100000,
  parameter int LABEL_TICK        = 2100,
  parameter int OUT_TIMEOUT_TICKS = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  // control from the processor
  input  logic           enable,
  input  logic           train,
  // decoded events from the reader
  input  logic           evt_valid,
  input  event_t         evt,
  output logic           evt_ready,
  // AER input bus towards the accelerator
  aer_if.src             aer,
  // accelerator control
  output logic           time_tick,
  output logic           sample,
  output logic           learn_en,
  output logic           infer_en,
  input  logic           timing_err,
  // output path
  output logic           out_clear,
  input  logic           out_seen,
  // status to the processor
  output logic           ok_dma,
  output sender_status_t status
);

  typedef enum logic [2:0] {
    S_IDLE, S_NEXT, S_WAIT, S_REQ, S_REL, S_OUT
  } sd_state_e;

  sd_state_e   state;
  ev_kind_e    cur_kind;   // event being handled (its ts is folded into target)
  logic [7:0]  cur_addr;
  logic [31:0] target;
  logic [31:0] ticks;
  logic [31:0] out_ticks;
  logic        tick;
  logic        start;
  logic        terr_q;

  assign start     = (state == S_IDLE) && enable && evt_valid;
  assign evt_ready = (state == S_NEXT) && evt_valid;
  assign time_tick = tick;

  tick_gen #(.PERIOD(TICK_CYCLES), .COUNT_W(32)) u_tick (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (start),
    .run   (state != S_IDLE),
    .tick  (tick),
    .count (ticks)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_kind  <= EV_INPUT;
      cur_addr  <= '0;
      target    <= '0;
      out_ticks <= '0;
      sample    <= 1'b0;
      learn_en  <= 1'b0;
      infer_en  <= 1'b0;
      ok_dma    <= 1'b1;
      out_clear <= 1'b0;
      aer.req   <= 1'b0;
      aer.addr  <= '0;
      terr_q    <= 1'b0;
      status    <= '0;
    end else begin
      out_clear    <= 1'b0;
      terr_q       <= timing_err;
      status.ticks <= ticks;
      if (timing_err && !terr_q) status.timing_errs <= status.timing_errs + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          sample    <= 1'b1;
          ok_dma    <= 1'b0;
          out_clear <= 1'b1;
          state     <= S_NEXT;
        end

        S_NEXT: if (evt_valid) begin
          cur_kind <= evt.kind;
          cur_addr <= evt.addr;
          target <= (evt.kind == EV_LABEL) ? 32'(LABEL_TICK) : 32'(evt.ts);
          state  <= S_WAIT;
        end

        S_WAIT: if (ticks >= target) begin
          unique case (cur_kind)
            EV_INPUT: begin
              aer.addr <= {1'b0, cur_addr};
              aer.req  <= 1'b1;
              state    <= S_REQ;
            end
            EV_LABEL: begin
              if (train) begin
                aer.addr <= {1'b1, cur_addr};
                aer.req  <= 1'b1;
                learn_en <= 1'b1;
                state    <= S_REQ;
              end else begin
                infer_en <= 1'b1;
                state    <= S_NEXT;
              end
            end
            default: begin   // EV_END
              sample    <= 1'b0;
              out_ticks <= '0;
              state     <= S_OUT;
            end
          endcase
        end

        S_REQ: if (aer.ack) begin
          aer.req <= 1'b0;
          state   <= S_REL;
        end

        S_REL: if (!aer.ack) begin
          status.events_sent <= status.events_sent + 1'b1;
          if (cur_kind == EV_LABEL) infer_en <= 1'b1;
          state <= S_NEXT;
        end

        S_OUT: begin
          if (tick) out_ticks <= out_ticks + 1'b1;
          if (out_seen || (tick && out_ticks + 1 >= 32'(OUT_TIMEOUT_TICKS))) begin
            learn_en            <= 1'b0;
            infer_en            <= 1'b0;
            ok_dma              <= 1'b1;
            status.out_timeout  <= !out_seen;
            status.samples_done <= status.samples_done + 1'b1;
            state               <= S_IDLE;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // four-phase source rules: address stable while req is high,
  // req only falls after ack, req only rises after ack has fallen
  a_addr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aer.req && $past(aer.req) |-> $stable(aer.addr)) else $error("event_sender_fsm: addr changed during req");
  a_req_holds: assert property (@(posedge clk) disable iff (!rst_n)
    $fell(aer.req) |-> $past(aer.ack)) else $error("event_sender_fsm: req dropped before ack");
  a_req_rises: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(aer.req) |-> !$past(aer.ack)) else $error("event_sender_fsm: req raised while ack high");

endmodule
