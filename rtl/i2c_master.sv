// i2c_master: byte-level I2C master on the Wishbone bus, used by the
// start-up software to configure the jitter-cleaner PLL chip.
//
// Software issues one command at a time: an optional START (or repeated
// START), then optionally one byte written or read, then an optional STOP.
// Each bit takes four quarter periods of (PRESC+1) clocks: data is changed in
// the first quarter while SCL is low, SCL is released in the second, the bus
// is sampled in the third once SCL is seen high (a slave may stretch the clock)
// and SCL is pulled low in the fourth. START and STOP use the same four
// quarters. The outputs are open-drain enables: scl_oe_o/sda_oe_o = 1 pull the
// line low, 0 release it; scl_i/sda_i read the lines.
// Registers (word offsets, address bits [1:0]):
//   0 PRESC  RW [15:0] quarter-bit period minus one (reset DEFAULT_PRESC)
//   1 CMD    W  [7:0] byte to send, [8] START, [9] STOP, [10] WRITE,
//               [11] READ, [12] NACK (answer a read byte with NACK);
//               ignored while busy
//   2 STATUS R  [7:0] byte read, [8] busy, [9] acknowledge bit received after
//               a written byte (1 = NACK)
// Accesses are acknowledged one clock after stb. The paper-level design only
// names an I2C master next to the jitter cleaner; the command set, the
// register layout and the timing are this design's choice.
`timescale 1ns/1fs
module i2c_master
  import gbtxemu_pkg::*;
#(
  parameter logic [15:0] DEFAULT_PRESC = 16'd49
) (
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  input  logic    scl_i,
  input  logic    sda_i,
  output logic    scl_oe_o,
  output logic    sda_oe_o
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_BITS, S_STOP} state_e;

  state_e      state;
  logic [15:0] presc, tcnt;
  logic [1:0]  q;
  logic [3:0]  bitn;
  logic [7:0]  txsr, rxsr, rxdata;
  logic        f_stop, f_wr, f_rd, f_nack, rx_nack;
  logic        acc, stall;

  assign acc = wb_i.cyc && wb_i.stb && !wb_o.ack;

  // Stretching: a quarter that needs SCL high waits for it.
  assign stall = (q == 2'd2) && !scl_i;

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_o     <= WB_S2M_IDLE;
      state    <= S_IDLE;
      presc    <= DEFAULT_PRESC;
      tcnt     <= '0;
      q        <= '0;
      bitn     <= '0;
      txsr     <= '0;
      rxsr     <= '0;
      rxdata   <= '0;
      f_stop   <= 1'b0;
      f_wr     <= 1'b0;
      f_rd     <= 1'b0;
      f_nack   <= 1'b0;
      rx_nack  <= 1'b0;
      scl_oe_o <= 1'b0;
      sda_oe_o <= 1'b0;
    end else begin
      // ---------------- bus side ----------------
      wb_o.ack <= acc;
      wb_o.err <= 1'b0;
      if (acc) begin
        wb_o.dat <= '0;
        unique case (wb_i.adr[1:0])
          2'd0: if (wb_i.we) presc <= wb_i.dat[15:0];
                else         wb_o.dat <= {16'd0, presc};
          2'd1: if (wb_i.we && state == S_IDLE) begin
                  txsr   <= wb_i.dat[7:0];
                  f_stop <= wb_i.dat[9];
                  f_wr   <= wb_i.dat[10];
                  f_rd   <= wb_i.dat[11] && !wb_i.dat[10];
                  f_nack <= wb_i.dat[12];
                  q      <= '0;
                  bitn   <= '0;
                  tcnt   <= '0;
                  if (wb_i.dat[8])                     state <= S_START;
                  else if (wb_i.dat[10] || wb_i.dat[11]) state <= S_BITS;
                  else if (wb_i.dat[9])                state <= S_STOP;
                end else if (!wb_i.we) begin
                  wb_o.dat <= {22'd0, rx_nack, state != S_IDLE, rxdata};
                end
          2'd2: if (!wb_i.we) wb_o.dat <= {22'd0, rx_nack, state != S_IDLE, rxdata};
          default: ;
        endcase
      end

      // ---------------- line side ----------------
      if (state != S_IDLE) begin
        if (tcnt != presc) begin
          tcnt <= tcnt + 16'd1;
        end else if (!stall) begin
          tcnt <= '0;
          q    <= q + 2'd1;
          unique case (state)
            S_START: unique case (q)
              2'd0: sda_oe_o <= 1'b0;          // SDA high (SCL left as it is)
              2'd1: scl_oe_o <= 1'b0;          // SCL high
              2'd2: sda_oe_o <= 1'b1;          // SDA falls while SCL high
              2'd3: begin
                scl_oe_o <= 1'b1;
                if (f_wr || f_rd) state <= S_BITS;
                else if (f_stop)  state <= S_STOP;
                else              state <= S_IDLE;
              end
            endcase
            S_BITS: unique case (q)
              2'd0: if (bitn < 4'd8) sda_oe_o <= f_wr ? !txsr[7] : 1'b0;
                    else             sda_oe_o <= f_rd ? !f_nack : 1'b0;
              2'd1: scl_oe_o <= 1'b0;
              2'd2: if (bitn < 4'd8) begin
                      rxsr <= {rxsr[6:0], sda_i};
                      txsr <= {txsr[6:0], 1'b0};
                    end else begin
                      rx_nack <= f_wr ? sda_i : rx_nack;
                    end
              2'd3: begin
                scl_oe_o <= 1'b1;
                bitn     <= bitn + 4'd1;
                if (bitn == 4'd8) begin
                  bitn   <= '0;
                  rxdata <= f_rd ? rxsr : rxdata;
                  state  <= f_stop ? S_STOP : S_IDLE;
                end
              end
            endcase
            S_STOP: unique case (q)
              2'd0: sda_oe_o <= 1'b1;          // SDA low while SCL low
              2'd1: scl_oe_o <= 1'b0;          // SCL high
              2'd2: sda_oe_o <= 1'b0;          // SDA rises while SCL high
              2'd3: state <= S_IDLE;
            endcase
            default: state <= S_IDLE;
          endcase
        end
      end
    end
  end

  // The master never changes SDA while it lets SCL go high, except in the
  // START and STOP quarters.
  a_sda_stable: assert property (@(posedge clk) disable iff (rst)
    (state == S_BITS && !scl_oe_o && $past(!scl_oe_o)) |-> $stable(sda_oe_o));
endmodule
