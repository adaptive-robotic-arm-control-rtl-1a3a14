// event_reader_fsm: first of the two chained event FSMs.
//
// It keeps reading the event FIFO, decodes each 32-bit (AE,TS) word into an
// event_t (input spike, label or end of sample, see reckon_pl_pkg) and offers
// it to the event sender with a valid/ready handshake. It holds one decoded
// event; while the sender waits for that event's timestamp the next word
// already sits at the FIFO head, so a new event can be handed over in the
// same cycle the previous one is taken (one event per clock at best).
//
// States: RD_FETCH (nothing held; pop the FIFO as soon as it is not empty)
// and RD_HOLD (event held; when the sender takes it, pop the next word in
// the same cycle if there is one, else go back to RD_FETCH). Latency: a word
// at the FIFO head becomes evt one clock later.
//
// Splitting the sequencing into a FIFO-reading FSM and a timing FSM follows
// the published system; the valid/ready hand-off between them is this
// design's choice.
module event_reader_fsm
  import reckon_pl_pkg::*;
#(
  parameter int DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // event FIFO (first-word-fall-through)
  input  logic              fifo_empty,
  input  logic [DATA_W-1:0] fifo_data,
  output logic              fifo_rd,
  // decoded events to the sender
  output logic              evt_valid,
  output event_t            evt,
  input  logic              evt_ready,
  // status
  output logic [31:0]       n_read
);

  typedef enum logic {RD_FETCH, RD_HOLD} rd_state_e;
  rd_state_e state;

  // pop when nothing is held, or when the held event leaves this cycle
  assign fifo_rd   = !fifo_empty && (state == RD_FETCH || evt_ready);
  assign evt_valid = (state == RD_HOLD);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= RD_FETCH;
      evt    <= '0;
      n_read <= '0;
    end else begin
      if (fifo_rd) begin
        evt    <= decode_word(fifo_data[WORD_W-1:0]);
        n_read <= n_read + 1;
        state  <= RD_HOLD;
      end else if (state == RD_HOLD && evt_ready) begin
        state  <= RD_FETCH;
      end
    end
  end

  a_ready_only_when_valid: assert property (@(posedge clk) disable iff (!rst_n)
    evt_ready |-> evt_valid) else $error("event_reader_fsm: ready without valid");

endmodule
