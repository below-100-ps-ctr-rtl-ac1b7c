// sync_fifo: single-clock first-in first-out queue.
//
// Used as the per-channel FIFO in which processed pulses wait for the
// arbiter's grant. DEPTH entries (a power of two) of W bits held in a
// register array, with read and write pointers one bit wider than the
// address so that full and empty are told apart. The head entry is visible
// on `rd_data` while `empty` is low (first-word fall-through); `rd_en` pops
// it. A write while full is dropped and flagged on `overflow` for one cycle.
// The paper gives no depth; DEPTH = 8 is this design's choice.
`timescale 1ps/1ps
module sync_fifo #(
  parameter int unsigned W     = 36,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic         overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;

  assign empty   = (wp == rp);
  assign full    = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign rd_data = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; overflow <= 1'b0;
    end else begin
      overflow <= wr_en & full;
      if (wr_en && !full) wp <= wp + 1'b1;
      if (rd_en && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  // popping an empty queue is a protocol error of the reader
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("sync_fifo: read while empty");
endmodule
