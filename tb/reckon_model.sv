// reckon_model: behavioural stand-in for the ReckOn accelerator, for
// system testbenches only (not synthesizable, no network inside).
//
// It has the accelerator-side pins of reckon_pl_system and does just enough
// to exercise the wrapper:
//  - AER input: four-phase slave, ack after ACK_DELAY clocks; every event
//    is logged (address, tick count since SAMPLE rose, learn_en/infer_en).
//  - Timing error: if more than MAX_EVT_PER_TICK events arrive between two
//    ticks the model raises timing_err for one clock, imitating an
//    accelerator that could not finish its work within a tick.
//  - AER output: when SAMPLE falls while infer_en is high and respond is
//    set, it sends one output event whose address is the class decided
//    here as (number of input events in the sample) mod 2, after
//    OUT_DELAY clocks.
module reckon_model #(
  parameter int ACK_DELAY        = 1,
  parameter int OUT_DELAY        = 5,
  parameter int MAX_EVT_PER_TICK = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       aer_in_req,
  input  logic [8:0] aer_in_addr,
  output logic       aer_in_ack,
  input  logic       time_tick,
  input  logic       sample,
  input  logic       learn_en,
  input  logic       infer_en,
  output logic       timing_err,
  output logic       aer_out_req,
  output logic [7:0] aer_out_addr,
  input  logic       aer_out_ack,
  input  logic       respond
);

  int in_addr[$];
  int in_tick[$];
  bit in_learn[$];
  int tick_n = 0;
  int evt_this_tick = 0;
  int n_inputs = 0;
  int n_labels = 0;
  int out_sent = 0;
  bit sample_q = 0;

  initial begin
    aer_in_ack = 0; timing_err = 0; aer_out_req = 0; aer_out_addr = 0;
  end

  // input handshake and log
  always begin
    @(posedge clk);
    if (rst_n && aer_in_req && !aer_in_ack) begin
      in_addr.push_back(int'(aer_in_addr));
      in_tick.push_back(tick_n);
      in_learn.push_back(learn_en);
      if (aer_in_addr[8]) n_labels++; else n_inputs++;
      evt_this_tick++;
      repeat (ACK_DELAY - 1) @(posedge clk);
      aer_in_ack <= 1;
      do @(posedge clk); while (aer_in_req);
      aer_in_ack <= 0;
    end
  end

  // ticks and timing errors
  always @(posedge clk) begin
    timing_err <= 0;
    sample_q   <= sample;
    if (sample && !sample_q) begin tick_n <= 0; n_inputs = 0; end
    if (time_tick) begin
      tick_n <= tick_n + 1;
      if (evt_this_tick > MAX_EVT_PER_TICK) timing_err <= 1;
      evt_this_tick = 0;
    end
  end

  // one output event at the end of an inference sample
  always begin
    @(posedge clk);
    if (rst_n && sample_q && !sample && infer_en && respond) begin
      repeat (OUT_DELAY) @(posedge clk);
      aer_out_addr <= 8'(n_inputs % 2);
      aer_out_req  <= 1;
      do @(posedge clk); while (!aer_out_ack);
      aer_out_req  <= 0;
      do @(posedge clk); while (aer_out_ack);
      out_sent++;
    end
  end

endmodule
