// event_fifo: buffer between the processor's DMA stream and the event FSMs.
//
// The DMA engine writes the (AE,TS) words of a dataset sample through an
// AXI4-Stream slave port (tdata/tvalid/tready; tlast is not needed because
// the sample end is marked in the data by AE = -1). The reader side is
// first-word-fall-through: rd_data shows the head word whenever empty is
// low, and rd_en pops it.
//
// How it works: words are kept in a DEPTH-entry array that is written and
// read synchronously, so it maps to one block RAM; a one-word output
// register in front of it gives the fall-through behaviour. A word accepted
// on the stream appears on rd_data two clock edges later at the earliest.
// The reader can pop one word per cycle. s_axis_tready drops when the array
// is full, which back-pressures the DMA, so a sample longer than the buffer
// still streams through. Capacity is DEPTH words in the array plus one in
// the output register; level counts both.
//
// The published system uses a DMA-fed FIFO holding the (AE,TS) tuples; its
// depth, word format and read timing are this design's choices.
module event_fifo #(
  parameter int DEPTH  = 1024,
  parameter int DATA_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // AXI4-Stream slave (from the DMA)
  input  logic [DATA_W-1:0]        s_axis_tdata,
  input  logic                     s_axis_tvalid,
  output logic                     s_axis_tready,
  // first-word-fall-through read port
  input  logic                     rd_en,
  output logic [DATA_W-1:0]        rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH)+1:0] level
);

  localparam int AW = $clog2(DEPTH);

  logic [DATA_W-1:0] mem [DEPTH];
  logic [AW-1:0]     wr_ptr, rd_ptr;
  logic [AW:0]       mem_count;
  logic              out_valid;
  logic              push, fetch;

  assign s_axis_tready = (mem_count < (AW+1)'(DEPTH));
  assign push          = s_axis_tvalid && s_axis_tready;
  // refill the output register when it is empty or being popped
  assign fetch         = (mem_count != '0) && (!out_valid || rd_en);
  assign empty         = !out_valid;
  assign level         = {1'b0, mem_count} + (AW+2)'(out_valid);

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= s_axis_tdata;
  end

  always_ff @(posedge clk) begin
    if (fetch) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      mem_count <= '0;
      out_valid <= 1'b0;
    end else begin
      if (push)  wr_ptr <= (wr_ptr == AW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      if (fetch) rd_ptr <= (rd_ptr == AW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      mem_count <= mem_count + (AW+1)'(push) - (AW+1)'(fetch);
      if (fetch)      out_valid <= 1'b1;
      else if (rd_en) out_valid <= 1'b0;
    end
  end

  // popping an empty FIFO is a protocol error of the reader
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> out_valid)
    else $error("event_fifo: read while empty");

endmodule
