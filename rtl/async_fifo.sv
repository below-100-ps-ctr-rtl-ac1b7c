// async_fifo: dual-clock FIFO used as the global FIFO of the link.
//
// The arbiter side writes 64-bit words at 40 MHz; the serializer side reads
// them in the VCO bit-clock domain. Read and write pointers are one bit wider
// than the address, kept in Gray code and passed to the other domain through
// two flip-flops each (the usual Gray-pointer scheme). `wr_afull` is high when
// at most one free entry is left as seen from the write side, which lets a
// registered producer stop one cycle ahead. The head word is visible on
// rd_data while rd_empty is low (first-word fall-through). The paper names
// the global FIFO only; the dual-clock structure and DEPTH = 16 are this
// design's choices.
`timescale 1ps/1ps
module async_fifo #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         wr_full,
  output logic         wr_afull,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         rd_empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wb, wg, rb, rg;          // binary and Gray pointers
  logic [AW:0]  rg_w1, rg_w2, wg_r1, wg_r2;
  logic [AW:0]  rb_w, wb_next, used_w;

  function automatic logic [AW:0] g2b(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write domain
  assign wb_next  = wb + 1'b1;
  assign rb_w     = g2b(rg_w2);
  assign used_w   = wb - rb_w;
  assign wr_full  = (used_w == (AW+1)'(DEPTH));
  assign wr_afull = (used_w >= (AW+1)'(DEPTH - 1));

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wb <= '0; wg <= '0; rg_w1 <= '0; rg_w2 <= '0;
    end else begin
      rg_w1 <= rg; rg_w2 <= rg_w1;
      if (wr_en && !wr_full) begin
        wb <= wb_next;
        wg <= wb_next ^ (wb_next >> 1);
      end
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wb[AW-1:0]] <= wr_data;
  end

  // read domain
  logic [AW:0] rb_next;
  assign rb_next  = rb + 1'b1;
  assign rd_empty = (rg == wg_r2);
  assign rd_data  = mem[rb[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rb <= '0; rg <= '0; wg_r1 <= '0; wg_r2 <= '0;
    end else begin
      wg_r1 <= wg; wg_r2 <= wg_r1;
      if (rd_en && !rd_empty) begin
        rb <= rb_next;
        rg <= rb_next ^ (rb_next >> 1);
      end
    end
  end

  assert property (@(posedge wr_clk) disable iff (!wr_rst_n) !(wr_en && wr_full))
    else $error("async_fifo: write while full");
endmodule
