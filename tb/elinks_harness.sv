// elinks_harness: drives one elinks instance and checks it against a
// cycle-level reference model written independently of the RTL.
//
// The clock period is 25 ns / RATIO. Every clock a new random downlink frame
// is offered (the block must take it only on frame_stb), and every E-Link
// input gets two new random half-bit values, changed a quarter period before
// each clock edge so that the rising and the falling edge each see a known
// value. The model keeps, per E-Link, the downlink shift register and the
// history of sampled half-bits, and from them predicts elink_dout_o after
// every clock and ul_frame_o after every frame. It also checks that
// frame_stb comes exactly once per RATIO clocks, that ul_valid_o follows it by
// one clock and that uplink bits not owned by any E-Link are zero. Half way
// through, the sampling edge of every E-Link is inverted (checks pause while
// the change passes the synchronizer).
`timescale 1ns/1fs
module elinks_harness
  import gbtxemu_pkg::*;
#(
  parameter int unsigned RATIO  = 1,
  parameter int unsigned N      = max_elinks(RATIO),
  parameter int unsigned CYCLES = 400
) (
  output int   checks,
  output int   failures,
  output logic done
);
  localparam realtime T  = 25.0 / RATIO;
  localparam int      UW = 2 * RATIO;
  localparam int      H  = 16;

  logic clk, rst;
  logic [GBT_DL_BITS-1:0] dl, dl_prev;
  logic [GBT_UL_BITS-1:0] ul;
  logic                   ulv, stb, stb_prev, rst_prev;
  logic [N-1:0]           esel, dout, din;

  elinks #(.EL_RATIO(RATIO), .N_ELINKS(N)) dut (
    .clk, .rst, .dl_frame_i(dl), .ul_frame_o(ul), .ul_valid_o(ulv),
    .frame_stb_o(stb), .edge_sel_i(esel), .elink_dout_o(dout), .elink_din_i(din)
  );

  initial begin
    clk = 1'b0;
    forever #(T / 2) clk = ~clk;
  end

  logic [N-1:0]     rs [H];      // value seen by the rising edge of cycle c
  logic [N-1:0]     fs [H];      // value seen by the falling edge of cycle c
  logic [RATIO-1:0] msr [N];     // model of the downlink shift registers
  int               cyc, quiet_until, since_stb, n_frames;

  function automatic logic [N-1:0] rnd_n();
    logic [N-1:0] v;
    for (int i = 0; i < N; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  function automatic logic [GBT_DL_BITS-1:0] rnd_dl();
    logic [GBT_DL_BITS-1:0] v;
    for (int i = 0; i < GBT_DL_BITS; i++) v[i] = 1'($urandom);
    return v;
  endfunction

  // Bit pair formed at clock edge m for link i.
  function automatic logic [1:0] pair_at(int m, int i, logic e);
    logic [N-1:0] r1, f1, f2;
    r1 = rs[(m - 1) % H];
    f1 = fs[(m - 1) % H];
    f2 = fs[(m - 2) % H];
    return e ? {f2[i], r1[i]} : {r1[i], f1[i]};
  endfunction

  task automatic check(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("elinks_harness R=%0d cycle %0d: %s", RATIO, cyc, what);
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    rst = 1'b1; rst_prev = 1'b1; stb_prev = 1'b0;
    cyc = 0; quiet_until = 6; since_stb = 0; n_frames = 0;
    for (int h = 0; h < H; h++) begin rs[h] = rnd_n(); fs[h] = rnd_n(); end
    for (int i = 0; i < N; i++) msr[i] = '0;
    esel = rnd_n();
    dl = rnd_dl(); dl_prev = dl;
    din = rs[0];
    while (cyc < CYCLES) begin
      @(posedge clk);
      cyc++;
      rs[(cyc + 2) % H] = rnd_n();
      fs[(cyc + 2) % H] = rnd_n();
      #(T / 8);
      // --- state after clock edge 'cyc' ---
      for (int i = 0; i < N; i++) begin
        if (rst_prev)      msr[i] = '0;
        else if (stb_prev) msr[i] = dl_prev[i*RATIO +: RATIO];
        else               msr[i] = msr[i] << 1;
      end
      if (!rst_prev) begin
        for (int i = 0; i < N; i++)
          check(dout[i] == msr[i][RATIO-1], $sformatf("downlink E-Link %0d", i));
        check(ulv == stb_prev, "ul_valid timing");
        if (stb_prev) begin
          check(since_stb == RATIO || n_frames == 0, "frame strobe period");
          since_stb = 0;
          n_frames++;
          if (cyc > quiet_until) begin
            for (int i = 0; i < N; i++) begin
              logic [UW-1:0] exp_w;
              for (int j = 0; j < RATIO; j++)
                exp_w[2*j +: 2] = pair_at(cyc - j, i, esel[i]);
              check(ul[i*UW +: UW] == exp_w, $sformatf("uplink E-Link %0d", i));
            end
            for (int b = N * UW; b < GBT_UL_BITS; b++)
              check(ul[b] == 1'b0, $sformatf("unused uplink bit %0d", b));
          end
        end
        since_stb++;
      end
      if (cyc == 4) rst = 1'b0;
      if (cyc == CYCLES / 2) begin
        esel = ~esel;
        quiet_until = cyc + 4 + RATIO;
      end
      rst_prev = rst;
      stb_prev = stb;
      dl       = rnd_dl();
      dl_prev  = dl;
      #(T / 8);
      din = fs[cyc % H];
      #(T / 2);
      din = rs[(cyc + 1) % H];
    end
    check(n_frames >= CYCLES / RATIO - 6, "frame count");
    done = 1'b1;
  end
endmodule
