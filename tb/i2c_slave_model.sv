// i2c_slave_model: behavioural I2C slave for the testbenches, standing in for
// a clock chip's register interface. Address ADDR (7 bits). A write sends
// the register pointer, then data bytes stored at pointer, pointer+1, ...;
// a read returns bytes from the pointer onwards until the master answers
// NACK. SDA is changed only while SCL is low. After every SCL falling edge
// once it has acknowledged its address the slave may hold SCL low for STRETCH ns
// (clock stretching).
// It counts START and STOP conditions and the bytes it acknowledged.
`timescale 1ns/1fs
module i2c_slave_model #(
  parameter logic [6:0] ADDR    = 7'h68,
  parameter real        STRETCH = 0.0
) (
  input  logic scl,
  input  logic sda,
  output logic sda_oe,
  output logic scl_oe,
  output int   n_start,
  output int   n_stop,
  output int   n_ack
);
  typedef enum {S_IDLE, S_ADDR, S_PTR, S_WDATA, S_READ} st_e;
  st_e        st;
  int         bitn;
  logic [7:0] sr, tx, ptr;
  logic       rw, m_ack;
  logic [7:0] mem [256];

  initial begin
    st = S_IDLE; bitn = 0; sda_oe = 1'b0; scl_oe = 1'b0;
    n_start = 0; n_stop = 0; n_ack = 0; ptr = '0; sr = '0; tx = '0; rw = 1'b0; m_ack = 1'b0;
    for (int i = 0; i < 256; i++) mem[i] = 8'(i * 7 + 3);
  end

  always @(negedge sda) if (scl) begin
    n_start++;
    st = S_ADDR; bitn = 0; sda_oe = 1'b0;
  end

  always @(posedge sda) if (scl) begin
    n_stop++;
    st = S_IDLE; sda_oe = 1'b0;
  end

  // bitn counts the SCL rising edges of the current byte (9 with the
  // acknowledge clock); SDA is only changed on falling edges.
  always @(posedge scl) begin
    if (st != S_IDLE) begin
      if ((st == S_ADDR || st == S_PTR || st == S_WDATA) && bitn < 8) sr = {sr[6:0], sda};
      if (st == S_READ && bitn == 8) m_ack = !sda;
      bitn++;
    end
  end

  // Clock stretching: hold SCL low for STRETCH after each falling edge.
  always @(negedge scl) begin
    if (STRETCH > 0.0 && st != S_IDLE && st != S_ADDR) begin
      scl_oe = 1'b1;
      #(STRETCH);
      scl_oe = 1'b0;
    end
  end

  always @(negedge scl) begin
    unique case (st)
      S_ADDR, S_PTR, S_WDATA: begin
        if (bitn == 8) begin
          if (st == S_ADDR) begin
            rw = sr[0];
            if (sr[7:1] == ADDR) begin sda_oe = 1'b1; n_ack++; end
            else st = S_IDLE;
          end else begin
            sda_oe = 1'b1;
            n_ack++;
            if (st == S_PTR) ptr = sr;
            else begin mem[ptr] = sr; ptr++; end
          end
        end else if (bitn == 9) begin
          sda_oe = 1'b0;
          bitn   = 0;
          if (st == S_ADDR && rw) begin
            st = S_READ;
            tx = mem[ptr]; ptr++;
            sda_oe = !tx[7];
          end else if (st == S_ADDR) st = S_PTR;
          else st = S_WDATA;
        end
      end
      S_READ: begin
        if (bitn < 8) begin
          sda_oe = !tx[7 - bitn];
        end else if (bitn == 8) begin
          sda_oe = 1'b0;
        end else if (m_ack) begin
          tx = mem[ptr]; ptr++;
          bitn = 0;
          sda_oe = !tx[7];
        end else begin
          st = S_IDLE;
          sda_oe = 1'b0;
        end
      end
      default: ;
    endcase
  end
endmodule
