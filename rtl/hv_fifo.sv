// hv_fifo: synchronous first-in first-out buffer of hypervector words.
//
// Holds the query hypervectors H_q^t, word by word, between the encoder side
// and the attention unit (the "FIFO" of blocks C and D). wr_en pushes wr_data;
// rd_en pops the oldest word, which appears on rd_data with rd_valid one cycle
// later (registered read, as a block RAM would give). Depth is a parameter;
// the pipeline sizes it for all L query hypervectors. full/empty are exact;
// pushing into a full or popping from an empty FIFO is a protocol error,
// checked by assertions. The FIFO itself is named in the paper; its depth,
// read latency and flags are this design's choices.
module hv_fifo #(
  parameter int unsigned W     = 128,
  parameter int unsigned DEPTH = 2000
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty
);
  localparam int unsigned AW = (DEPTH < 2) ? 1 : $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;

  assign full  = (cnt == (AW+1)'(DEPTH));
  assign empty = (cnt == '0);

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp] <= wr_data;
    if (rd_en && !empty) rd_data <= mem[rp];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; rd_valid <= 1'b0;
    end else if (clear) begin
      wp <= '0; rp <= '0; cnt <= '0; rd_valid <= 1'b0;
    end else begin
      rd_valid <= rd_en && !empty;
      if (wr_en && !full) wp <= nxt(wp);
      if (rd_en && !empty) rp <= nxt(rp);
      cnt <= cnt + (AW+1)'(wr_en && !full) - (AW+1)'(rd_en && !empty);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
