// i2c_config: I2C slave with the chip's configuration registers.
//
// NREG 8-bit registers are written and read over I2C. Protocol (standard
// register-pointer style): START, 7-bit device address + R/W, ACK; for a
// write, a register pointer byte then data bytes, each acknowledged, with
// the pointer incremented after every byte; for a read (usually after a
// write that set the pointer and a repeated START), data bytes from the
// pointer on, acknowledged by the master, until it answers NACK and STOP.
// SCL and SDA are sampled with the 40 MHz clock through two flip-flops, so
// SCL up to 1 MHz is served; the slave drives SDA only low (`sda_oe`).
// The paper says only that the registers are reached through I2C; the
// address, the register count, the pointer protocol and the register map
// (see fastic_plus_top) are this design's choices.
`timescale 1ps/1ps
module i2c_config #(
  parameter logic [6:0]  DEV_ADDR = 7'h20,
  parameter int unsigned NREG     = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       scl,
  input  logic       sda_in,
  output logic       sda_oe,
  output logic [7:0] regs [NREG]
);
  localparam int unsigned PW = $clog2(NREG);

  typedef enum logic [2:0] {S_IDLE, S_ADDR, S_REG, S_WDATA, S_RDATA} st_e;

  logic [2:0] scl_s, sda_s;
  logic       scl_r, scl_f, start, stop;
  st_e        st;
  logic [3:0] bc;
  logic [7:0] sh, tx;
  logic       ack_on, rw, nack;
  logic [PW-1:0] ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin scl_s <= '1; sda_s <= '1; end
    else begin scl_s <= {scl_s[1:0], scl}; sda_s <= {sda_s[1:0], sda_in}; end
  end

  assign scl_r = scl_s[1] & ~scl_s[2];
  assign scl_f = ~scl_s[1] & scl_s[2];
  assign start = scl_s[1] & scl_s[2] & ~sda_s[1] & sda_s[2];
  assign stop  = scl_s[1] & scl_s[2] & sda_s[1] & ~sda_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bc <= '0; sh <= '0; tx <= '0; ack_on <= 1'b0;
      rw <= 1'b0; nack <= 1'b0; ptr <= '0; sda_oe <= 1'b0;
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
    end else if (start) begin
      st <= S_ADDR; bc <= '0; ack_on <= 1'b0; sda_oe <= 1'b0;
    end else if (stop) begin
      st <= S_IDLE; sda_oe <= 1'b0; ack_on <= 1'b0;
    end else if (st == S_RDATA) begin
      if (scl_r) begin
        if (bc == 4'd8) nack <= sda_s[1];
        bc <= bc + 1'b1;
      end else if (scl_f) begin
        if (bc < 4'd8)       sda_oe <= ~tx[3'(7 - bc)];
        else if (bc == 4'd8) sda_oe <= 1'b0;            // master's ACK slot
        else if (nack)       begin sda_oe <= 1'b0; st <= S_IDLE; end
        else begin
          tx <= regs[ptr]; ptr <= ptr + 1'b1;
          sda_oe <= ~regs[ptr][7]; bc <= '0;
        end
      end
    end else if (st != S_IDLE) begin
      if (scl_r && bc < 4'd8) begin
        sh <= {sh[6:0], sda_s[1]};
        bc <= bc + 1'b1;
      end else if (scl_f && ack_on) begin
        ack_on <= 1'b0; sda_oe <= 1'b0; bc <= '0;
        unique case (st)
          S_ADDR: if (rw) begin
                    st <= S_RDATA; tx <= regs[ptr]; ptr <= ptr + 1'b1;
                    sda_oe <= ~regs[ptr][7];
                  end else st <= S_REG;
          S_REG:  st <= S_WDATA;
          default: ;
        endcase
      end else if (scl_f && bc == 4'd8) begin
        unique case (st)
          S_ADDR: if (sh[7:1] == DEV_ADDR) begin
                    ack_on <= 1'b1; sda_oe <= 1'b1; rw <= sh[0];
                  end else st <= S_IDLE;
          S_REG:  begin ptr <= PW'(sh); ack_on <= 1'b1; sda_oe <= 1'b1; end
          S_WDATA: begin
                    regs[ptr] <= sh; ptr <= ptr + 1'b1;
                    ack_on <= 1'b1; sda_oe <= 1'b1;
                  end
          default: ;
        endcase
      end
    end
  end
endmodule
