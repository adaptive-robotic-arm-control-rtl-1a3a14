// reckon_pl_system: programmable-logic wrapper that lets a processor drive
// the ReckOn recurrent spiking-network accelerator with recorded datasets.
//
// Data path: the processor's DMA streams the (AE,TS) words of one sample
// into event_fifo. event_reader_fsm decodes them; event_sender_fsm replays
// them in real time, one AER event per word at the tick its timestamp
// names, while driving SAMPLE, the time tick, learning and inference enables
// of the accelerator. aer_in_mux lets an AER sensor on the board replace the
// replayed stream (gpio_in_sel = 1). aer_out_path receives the accelerator's
// output events and either keeps them for the processor or forwards them to
// the board (gpio_out_fwd = 1).
//
// Ports: s_axis_* is the AXI4-Stream from the DMA; gpio_* are the control
// and status bits read and written by the processor through AXI GPIO;
// sensor_aer_* the board's AER input; reckon_* connect to the accelerator;
// board_aer_* the forwarded AER output. The accelerator's SPI configuration
// port is driven by the processor's SPI controller directly and does not
// pass through this module. All logic runs on clk with an active-low
// synchronous reset.
//
// The block structure follows the published system; widths, encodings, the
// tick period (TICK_CYCLES clocks per 1 ms tick, 100 MHz assumed), the FIFO
// depth and the output timeout are this design's choices.
module reckon_pl_system
  import reckon_pl_pkg::*;
#(
  parameter int FIFO_DEPTH        = 1024,
  parameter int TICK_CYCLES       = 100000,
  parameter int LABEL_TICK        = 2100,
  parameter int OUT_TIMEOUT_TICKS = 16,
  parameter int N_OUT             = 16
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // AXI4-Stream from the DMA
  input  logic [WORD_W-1:0]           s_axis_tdata,
  input  logic                        s_axis_tvalid,
  output logic                        s_axis_tready,
  // GPIO: control from the processor
  input  logic                        gpio_enable,
  input  logic                        gpio_train,
  input  logic                        gpio_in_sel,
  input  logic                        gpio_out_fwd,
  // GPIO: status to the processor
  output logic                        gpio_ok_dma,
  output sender_status_t              gpio_status,
  output logic [$clog2(FIFO_DEPTH)+1:0] gpio_fifo_level,
  output logic [31:0]                 gpio_words_read,
  output logic [7:0]                  gpio_out_last_addr,
  output logic [15:0]                 gpio_out_count,
  output logic [N_OUT-1:0][15:0]      gpio_out_class_count,
  output logic [$clog2(N_OUT)-1:0]    gpio_out_top_class,
  output logic                        gpio_out_seen,
  // AER sensor on the board
  input  logic                        sensor_aer_req,
  input  logic [7:0]                  sensor_aer_addr,
  output logic                        sensor_aer_ack,
  // accelerator
  output logic                        reckon_aer_in_req,
  output logic [AERIN_W-1:0]          reckon_aer_in_addr,
  input  logic                        reckon_aer_in_ack,
  output logic                        reckon_time_tick,
  output logic                        reckon_sample,
  output logic                        reckon_learn_en,
  output logic                        reckon_infer_en,
  input  logic                        reckon_timing_err,
  input  logic                        reckon_aer_out_req,
  input  logic [AEROUT_W-1:0]         reckon_aer_out_addr,
  output logic                        reckon_aer_out_ack,
  // AER output forwarded to the board
  output logic                        board_aer_out_req,
  output logic [AEROUT_W-1:0]         board_aer_out_addr,
  input  logic                        board_aer_out_ack
);

  logic [WORD_W-1:0] fifo_data;
  logic              fifo_empty, fifo_rd;
  logic              evt_valid, evt_ready;
  event_t            evt;
  logic              out_clear;

  aer_if #(.W(AERIN_W))  fsm_aer ();
  aer_if #(.W(AERIN_W))  sensor_aer ();
  aer_if #(.W(AERIN_W))  reckon_in ();
  aer_if #(.W(AEROUT_W)) reckon_out ();
  aer_if #(.W(AEROUT_W)) board_out ();

  event_fifo #(.DEPTH(FIFO_DEPTH), .DATA_W(WORD_W)) u_fifo (
    .clk           (clk),
    .rst_n         (rst_n),
    .s_axis_tdata  (s_axis_tdata),
    .s_axis_tvalid (s_axis_tvalid),
    .s_axis_tready (s_axis_tready),
    .rd_en         (fifo_rd),
    .rd_data       (fifo_data),
    .empty         (fifo_empty),
    .level         (gpio_fifo_level)
  );

  event_reader_fsm #(.DATA_W(WORD_W)) u_reader (
    .clk        (clk),
    .rst_n      (rst_n),
    .fifo_empty (fifo_empty),
    .fifo_data  (fifo_data),
    .fifo_rd    (fifo_rd),
    .evt_valid  (evt_valid),
    .evt        (evt),
    .evt_ready  (evt_ready),
    .n_read     (gpio_words_read)
  );

  event_sender_fsm #(
    .TICK_CYCLES       (TICK_CYCLES),
    .LABEL_TICK        (LABEL_TICK),
    .OUT_TIMEOUT_TICKS (OUT_TIMEOUT_TICKS)
  ) u_sender (
    .clk        (clk),
    .rst_n      (rst_n),
    .enable     (gpio_enable),
    .train      (gpio_train),
    .evt_valid  (evt_valid),
    .evt        (evt),
    .evt_ready  (evt_ready),
    .aer        (fsm_aer.src),
    .time_tick  (reckon_time_tick),
    .sample     (reckon_sample),
    .learn_en   (reckon_learn_en),
    .infer_en   (reckon_infer_en),
    .timing_err (reckon_timing_err),
    .out_clear  (out_clear),
    .out_seen   (gpio_out_seen),
    .ok_dma     (gpio_ok_dma),
    .status     (gpio_status)
  );

  // board sensor: input neuron addresses only, never labels
  assign sensor_aer.req  = sensor_aer_req;
  assign sensor_aer.addr = {1'b0, sensor_aer_addr};
  assign sensor_aer_ack  = sensor_aer.ack;

  aer_in_mux u_in_mux (
    .clk         (clk),
    .rst_n       (rst_n),
    .sel         (gpio_in_sel),
    .from_fsm    (fsm_aer.dst),
    .from_sensor (sensor_aer.dst),
    .to_reckon   (reckon_in.src)
  );

  assign reckon_aer_in_req  = reckon_in.req;
  assign reckon_aer_in_addr = reckon_in.addr;
  assign reckon_in.ack      = reckon_aer_in_ack;

  assign reckon_out.req     = reckon_aer_out_req;
  assign reckon_out.addr    = reckon_aer_out_addr;
  assign reckon_aer_out_ack = reckon_out.ack;

  aer_out_path #(.N_OUT(N_OUT), .CNT_W(16)) u_out (
    .clk         (clk),
    .rst_n       (rst_n),
    .fwd         (gpio_out_fwd),
    .clear       (out_clear),
    .from_reckon (reckon_out.dst),
    .to_board    (board_out.src),
    .last_addr   (gpio_out_last_addr),
    .evt_count   (gpio_out_count),
    .class_count (gpio_out_class_count),
    .top_class   (gpio_out_top_class),
    .seen        (gpio_out_seen)
  );

  assign board_aer_out_req  = board_out.req;
  assign board_aer_out_addr = board_out.addr;
  assign board_out.ack      = board_aer_out_ack;

endmodule
