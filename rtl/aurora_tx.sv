// aurora_tx: 64B/66B block encoder, scrambler and serializer of the link.
//
// Runs on the VCO clock (1.28 GHz). A bit is shifted out every 2^rate clock
// cycles, giving 1.28 Gb/s (rate 0) down to 80 Mb/s (rate 4), the range the
// paper gives. Every 66 bits a new block is loaded: a data block (sync
// header bits 0,1 on the line) holding the next word of the global FIFO, or,
// when the FIFO is empty, an idle control block (header bits 1,0, block type
// 0x1E, rest zero). The 64 payload bits are scrambled with the
// self-synchronous scrambler 1 + x^39 + x^58 in transmit order and sent
// least significant bit first, after the two header bits. This is the block
// format of 64B/66B coding on which Aurora 64B/66B is built; the Aurora
// lane initialisation, clock compensation and channel bonding sequences
// are not part of this design.
`timescale 1ps/1ps
module aurora_tx
  import fastic_pkg::*;
(
  input  logic              clk,        // VCO clock
  input  logic              rst_n,
  input  logic [2:0]        rate,       // bit period = 2^rate clocks, 0..4
  input  logic              fifo_empty,
  input  logic [WORD_W-1:0] fifo_data,
  output logic              fifo_rd,    // pops the word loaded now
  output logic              serial_out,
  output logic              block_start // one clock at each block load
);
  localparam logic [63:0] IDLE_BLOCK = {56'h0, 8'h1E};

  logic [65:0] sr;
  logic [6:0]  bitcnt;
  logic [4:0]  divcnt;
  logic [57:0] scr;
  logic        tick, load;

  assign tick = (divcnt == 5'((1 << rate) - 1)) || (rate == 3'd0);
  assign load = tick && (bitcnt == 7'd65);

  // scramble one 64-bit payload, LSB first
  logic [63:0] pay, pay_s;
  logic [57:0] scr_n;
  always_comb begin
    pay   = fifo_empty ? IDLE_BLOCK : fifo_data;
    scr_n = scr;
    for (int i = 0; i < 64; i++) begin
      pay_s[i] = pay[i] ^ scr_n[38] ^ scr_n[57];
      scr_n    = {scr_n[56:0], pay_s[i]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr <= '0; bitcnt <= 7'd65; divcnt <= '0; scr <= '1;
      block_start <= 1'b0;
    end else begin
      block_start <= 1'b0;
      divcnt <= tick ? '0 : divcnt + 1'b1;
      if (load) begin
        // line order: sr[0], sr[1], then payload bit 0 .. 63
        sr          <= {pay_s, fifo_empty ? 2'b01 : 2'b10};
        scr         <= scr_n;
        bitcnt      <= '0;
        block_start <= 1'b1;
      end else if (tick) begin
        sr     <= {1'b0, sr[65:1]};
        bitcnt <= bitcnt + 1'b1;
      end
    end
  end

  assign fifo_rd    = load && !fifo_empty;
  assign serial_out = sr[0];
endmodule
