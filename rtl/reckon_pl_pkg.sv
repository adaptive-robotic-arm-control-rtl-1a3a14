// reckon_pl_pkg: types and constants shared by the programmable-logic wrapper
// that streams dataset samples into the ReckOn spiking-network accelerator.
//
// A sample arrives from the processor as a list of 32-bit words, one per
// (AE,TS) tuple: AE (address-event) is a signed 16-bit field in bits [31:16],
// TS (timestamp, in ticks from the start of the sample) an unsigned 16-bit
// field in bits [15:0]. Two AE values are reserved, as in the original flow:
// AE = -2 carries the sample's label (its value in the TS field) and AE = -1
// marks the end of the sample. The 32-bit word layout and the field widths
// are this design's choice; the two reserved codes follow the published flow.
//
// On the AER input bus of the accelerator an address is 9 bits wide:
// bit 8 = 1 marks a label/target event, bits [7:0] hold the input neuron
// index (256 inputs) or the label value. This encoding is this design's
// choice. The AER output bus carries an 8-bit address.
package reckon_pl_pkg;

  localparam int WORD_W    = 32;
  localparam int AE_W      = 16;
  localparam int TS_W      = 16;
  localparam int AERIN_W   = 9;
  localparam int AEROUT_W  = 8;

  localparam logic signed [AE_W-1:0] AE_LABEL = -16'sd2;
  localparam logic signed [AE_W-1:0] AE_END   = -16'sd1;

  // Kind of a decoded (AE,TS) tuple.
  typedef enum logic [1:0] {
    EV_INPUT = 2'd0,   // spike of input neuron addr at tick ts
    EV_LABEL = 2'd1,   // sample label (value in addr)
    EV_END   = 2'd2    // end of sample at tick ts
  } ev_kind_e;

  typedef struct packed {
    ev_kind_e          kind;
    logic [7:0]        addr;
    logic [TS_W-1:0]   ts;
  } event_t;

  // Status of the event sender, read by the processor.
  typedef struct packed {
    logic [31:0] ticks;         // ticks since the current/last sample started
    logic [15:0] timing_errs;   // rising edges of the accelerator's timing error
    logic [31:0] events_sent;   // AER events (inputs and labels) sent since reset
    logic [15:0] samples_done;  // samples completed since reset
    logic        out_timeout;   // last sample ended without an output event
  } sender_status_t;

  // Split a FIFO word into its fields.
  function automatic event_t decode_word(input logic [WORD_W-1:0] w);
    event_t                  e;
    logic signed [AE_W-1:0]  ae;
    ae     = w[31:16];
    e.ts   = w[15:0];
    if (ae == AE_LABEL) begin
      e.kind = EV_LABEL;
      e.addr = w[7:0];
    end else if (ae == AE_END) begin
      e.kind = EV_END;
      e.addr = 8'd0;
    end else begin
      e.kind = EV_INPUT;
      e.addr = w[23:16];
    end
    return e;
  endfunction

endpackage
