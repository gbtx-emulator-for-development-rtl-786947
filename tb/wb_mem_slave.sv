// wb_mem_slave: Wishbone slave used by the testbenches, a 64-word memory
// (addressed by adr[5:0]) that answers every access after 0 to MAX_WAIT
// random wait states with a registered ack. It counts the accesses it served.
`timescale 1ns/1fs
module wb_mem_slave
  import gbtxemu_pkg::*;
#(
  parameter int unsigned MAX_WAIT = 3
) (
  input  logic    clk,
  input  logic    rst,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output int      served
);
  logic [31:0] mem [64];
  int          wait_left;
  logic        busy;

  always @(posedge clk) begin
    if (rst) begin
      wb_o      <= WB_S2M_IDLE;
      busy      <= 1'b0;
      served    <= 0;
      for (int i = 0; i < 64; i++) mem[i] <= '0;
    end else begin
      wb_o.ack <= 1'b0;
      if (wb_i.cyc && wb_i.stb && !wb_o.ack) begin
        if (!busy) begin
          busy      <= 1'b1;
          wait_left <= int'($urandom_range(MAX_WAIT, 0));
        end else if (wait_left > 0) begin
          wait_left <= wait_left - 1;
        end else begin
          busy     <= 1'b0;
          wb_o.ack <= 1'b1;
          served   <= served + 1;
          if (wb_i.we) mem[wb_i.adr[5:0]] <= wb_i.dat;
          wb_o.dat <= mem[wb_i.adr[5:0]];
        end
      end
    end
  end
endmodule
