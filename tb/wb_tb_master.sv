// wb_tb_master: Wishbone master for the testbenches. transfer() performs one
// classic single read or write: it raises cyc and stb a little after a clock
// edge, waits for ack or err, lets the transfer complete on the next edge and
// then drops cyc for at least one clock. It returns the read data, the err
// flag and the number of clocks from raising cyc to the completing edge.
`timescale 1ns/1fs
module wb_tb_master
  import gbtxemu_pkg::*;
(
  input  logic    clk,
  output wb_m2s_t wb_o,
  input  wb_s2m_t wb_i
);
  initial wb_o = WB_M2S_IDLE;

  task automatic transfer(input logic we, input logic [31:0] adr, input logic [31:0] dat,
                          output logic [31:0] rdat, output logic err, output int clocks);
    clocks = 0;
    wb_o.cyc = 1'b1; wb_o.stb = 1'b1; wb_o.we = we;
    wb_o.adr = adr;  wb_o.dat = dat;  wb_o.sel = '1;
    forever begin
      @(posedge clk);
      #1;
      clocks++;
      if (wb_i.ack || wb_i.err) break;
      if (clocks > 1000) break;
    end
    rdat = wb_i.dat;
    err  = wb_i.err;
    @(posedge clk);
    #1;
    clocks++;
    wb_o = WB_M2S_IDLE;
    @(posedge clk);
    #1;
  endtask

  task automatic write(input logic [31:0] adr, input logic [31:0] dat);
    logic [31:0] d; logic e; int c;
    transfer(1'b1, adr, dat, d, e, c);
  endtask

  task automatic read(input logic [31:0] adr, output logic [31:0] rdat);
    logic e; int c;
    transfer(1'b0, adr, 32'd0, rdat, e, c);
  endtask
endmodule
