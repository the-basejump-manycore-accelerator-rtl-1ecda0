// End-to-end test of bsg_manycore_mesh (reduced size: 4 x 3 tiles, 4 credits
// per endpoint). The testbench attaches a behavioural core to every tile: a
// memory that sometimes delays taking requests and answers loads 1-6 cycles
// late, plus a traffic program. The program:
//   1. tile (0,0) unfreezes the master example in the south I/O row with a
//      configuration store; the master writes and reads back 16 words in the
//      I/O memory at column 1 while the mesh is otherwise idle, and must
//      report no errors and a first-load round trip of 7 cycles;
//   2. tile (0,0) swaps a word in tile (1,0), toggles the arbiter-priority bit
//      of tile (1,1), unfreezes tile (1,0) and reads its freeze register back;
//   3. every active tile runs rounds (the first one all aimed at tile
//      (NX-1,0) to make a hot spot, the rest at a random destination (any tile or
//      any I/O memory), store 6 words to a private address range there, load
//      them back, check the data and wait until all credits are back (fence).
// Counted mechanisms (each must occur): credit stall, network back-pressure,
// router output contention, S->W/E turn of responses from the I/O row,
// fence wait, swap, freeze/unfreeze, arbiter-priority toggle, request held
// back for lack of a response slot.
// FULL = 1 (with NX = NY = 16, MAXC = 80 and no parameter list on the top)
// turns this into a full-size run: only tiles at multiples of 5 generate
// traffic, and the credit-stall and held checks are skipped because 80
// credits are never used up by 6-word bursts.
`include "bsg_manycore_packet.svh"
module tb_bsg_manycore_mesh;
  import bsg_manycore_pkg::*;
  localparam int NX = 4, NY = 3, MAXC = 4, ROUNDS = 4;
  localparam bit FULL = 0;
  localparam int XW = (NX > 1) ? $clog2(NX) : 1, YW = $clog2(NY + 1), DW = 32, AW = 20, S = 6;
  localparam int FW = `bsg_manycore_packet_width(AW, DW, XW, YW);
  localparam int CW = $clog2(MAXC + 1);
  typedef `bsg_manycore_packet_s(AW, DW, XW, YW) packet_s;

  logic clk = 0, reset = 1;
  always #5 clk = ~clk;

  logic [NY-1:0][NX-1:0] in_v, in_yumi, in_we, returning_v, out_v, out_ready, returned_v, freeze, arb;
  logic [NY-1:0][NX-1:0][DW-1:0] in_data, returning_data, returned_data;
  logic [NY-1:0][NX-1:0][3:0] in_mask;
  logic [NY-1:0][NX-1:0][AW-1:0] in_addr;
  logic [NY-1:0][NX-1:0][FW-1:0] out_packet;
  logic [NY-1:0][NX-1:0][CW-1:0] credits;
  logic m_done; logic [15:0] m_errors, m_latency;

  bsg_manycore_mesh #(.num_tiles_x_p(NX), .num_tiles_y_p(NY), .max_out_credits_p(MAXC)) dut (
    .clk_i(clk), .reset_i(reset),
    .in_v_o(in_v), .in_yumi_i(in_yumi), .in_data_o(in_data), .in_mask_o(in_mask), .in_addr_o(in_addr), .in_we_o(in_we),
    .returning_v_i(returning_v), .returning_data_i(returning_data),
    .out_v_i(out_v), .out_packet_i(out_packet), .out_ready_o(out_ready),
    .returned_data_r_o(returned_data), .returned_v_r_o(returned_v), .out_credits_o(credits),
    .freeze_r_o(freeze), .reverse_arb_pr_o(arb),
    .master_dest_x_i(XW'(1)), .master_dest_y_i(YW'(NY)),
    .master_done_o(m_done), .master_errors_o(m_errors), .master_latency_o(m_latency));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (t=%0t)", msg, $time); end
  endtask

  function automatic logic [DW-1:0] init_word(input int y, input int x, input int a);
    return DW'(32'h5000_0000 + (y << 16) + (x << 8) + a);
  endfunction
  function automatic bit active(input int y, input int x);
    if (!FULL) return 1;
    return (x % 5 == 0) && (y % 5 == 0);
  endfunction

  // ---------------- behavioural core, slave side ----------------
  logic [DW-1:0] tmem [NY][NX][256];
  logic [DW-1:0] rq_d [NY][NX][$];
  longint        rq_t [NY][NX][$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial for (int t = 0; t < NX * NY * 256; t++) tmem[t / (NX * 256)][(t / 256) % NX][t % 256] = init_word(t / (NX * 256), (t / 256) % NX, t % 256);

  logic [NY-1:0][NX-1:0] take_en;
  always @(negedge clk) for (int t = 0; t < NX * NY; t++) take_en[t / NX][t % NX] <= ($urandom % 8) != 0;
  assign in_yumi = in_v & take_en;

  always @(posedge clk) begin
    for (int t = 0; t < NX * NY; t++) begin
      automatic int y = t / NX, x = t % NX;
      returning_v[y][x] <= 1'b0;
      if (!reset) begin
        if (in_yumi[y][x]) begin
          if (in_we[y][x]) begin
            for (int b = 0; b < 4; b++) if (in_mask[y][x][b]) tmem[y][x][in_addr[y][x][7:0]][8*b+:8] = in_data[y][x][8*b+:8];
          end else begin
            longint t = cyc + 1 + ($urandom % 6);
            if (rq_t[y][x].size() > 0 && rq_t[y][x][$] >= t) t = rq_t[y][x][$] + 1;
            rq_d[y][x].push_back(tmem[y][x][in_addr[y][x][7:0]]); rq_t[y][x].push_back(t);
          end
        end
        if (rq_t[y][x].size() > 0 && rq_t[y][x][0] <= cyc) begin
          returning_v[y][x] <= 1'b1;
          returning_data[y][x] <= rq_d[y][x].pop_front(); void'(rq_t[y][x].pop_front());
        end
      end
    end
  end

  // ---------------- behavioural core, master side ----------------
  typedef enum {sWait, sSpecial, sStore, sLoad, sFence, sDone} st_e;
  st_e st [NY][NX];
  int  rnd [NY][NX], j [NY][NX], spc [NY][NX];
  int  dx [NY][NX], dy [NY][NX];
  logic [DW-1:0] exp_q [NY][NX][$];
  int  m_credit_stall = 0, m_backpressure = 0, m_fence = 0, m_contention = 0, m_south_turn = 0;
  int  m_swap = 0, m_freeze = 0, m_arb = 0, m_held = 0, m_loads_checked = 0;
  bit  master_checked = 0;

  localparam int NSPC = 5;
  function automatic packet_s special(input int k, input int y, input int x);
    packet_s p = '0;
    p.src_x_cord = XW'(x); p.src_y_cord = YW'(y); p.op_ex = 4'hf;
    case (k)
      0: begin p.op = e_remote_store;   p.x_cord = 0; p.y_cord = YW'(NY); p.addr = {1'b1, 19'd0}; p.data = 0; end // unfreeze master
      1: begin p.op = e_remote_swap_aq; p.x_cord = 1; p.y_cord = 0; p.addr = 3; p.data = 32'hA5A5_0003; end
      2: begin p.op = e_remote_store;   p.x_cord = 1; p.y_cord = YW'(1 % NY); p.addr = {1'b1, 19'd4}; end       // toggle arb
      3: begin p.op = e_remote_store;   p.x_cord = 1; p.y_cord = 0; p.addr = {1'b1, 19'd0}; p.data = 0; end    // unfreeze
      default: begin p.op = e_remote_load; p.x_cord = 1; p.y_cord = 0; p.addr = {1'b1, 19'd0}; end             // read freeze
    endcase
    return p;
  endfunction

  function automatic logic [DW-1:0] word(input int y, input int x, input int r, input int k);
    return DW'((y << 24) ^ (x << 16) ^ (r << 8) ^ k ^ 32'h0bad_0000);
  endfunction

  always @(posedge clk) begin
    for (int t = 0; t < NX * NY; t++) begin
      automatic int y = t / NX, x = t % NX;
      automatic packet_s p = '0;
      automatic bit fire = out_v[y][x] && out_ready[y][x];
      if (reset) begin
        st[y][x] <= (y == 0 && x == 0) ? sSpecial : sWait;
        rnd[y][x] <= 0; j[y][x] <= 0; spc[y][x] <= 0; out_v[y][x] <= 0;
      end else begin
        if (returned_v[y][x]) begin
          check(exp_q[y][x].size() > 0 && returned_data[y][x] == exp_q[y][x][0],
                $sformatf("tile (%0d,%0d) load data %h", x, y, returned_data[y][x]));
          void'(exp_q[y][x].pop_front()); m_loads_checked++;
        end
        if (out_v[y][x] && !out_ready[y][x]) begin
          if (credits[y][x] == 0) m_credit_stall++; else m_backpressure++;
        end
        p.src_x_cord = XW'(x); p.src_y_cord = YW'(y); p.op_ex = 4'hf;
        p.x_cord = XW'(dx[y][x]); p.y_cord = YW'(dy[y][x]);
        case (st[y][x])
          sWait: if (m_done && st[0][0] != sSpecial && active(y, x)) begin
                   st[y][x] <= sFence;   // starts a round
                 end
          sSpecial: begin
            if (fire) begin
              if (spc[y][x] == 1) exp_q[y][x].push_back(init_word(0, 1, 3));
              if (spc[y][x] == 4) exp_q[y][x].push_back(32'h0);
              spc[y][x] <= spc[y][x] + 1;
            end
            if (spc[y][x] == 0 && fire) begin out_v[y][x] <= 0; end
            else if (spc[y][x] == 0 && !out_v[y][x]) begin out_v[y][x] <= 1; out_packet[y][x] <= special(0, y, x); end
            else if (spc[y][x] >= 1 && spc[y][x] < NSPC && m_done) begin
              out_v[y][x] <= 1; out_packet[y][x] <= special(spc[y][x] + (fire ? 1 : 0), y, x);
              if (fire && spc[y][x] == NSPC - 1) begin out_v[y][x] <= 0; st[y][x] <= sFence; end
            end
          end
          sStore, sLoad: begin
            if (fire) begin
              if (st[y][x] == sLoad) exp_q[y][x].push_back(word(y, x, rnd[y][x], j[y][x]));
              if (j[y][x] == S - 1) begin
                j[y][x] <= 0;
                st[y][x] <= (st[y][x] == sStore) ? sLoad : sFence;
                out_v[y][x] <= (st[y][x] == sStore);
              end else j[y][x] <= j[y][x] + 1;
            end
            begin
              automatic int jj = fire ? ((j[y][x] == S - 1) ? 0 : j[y][x] + 1) : j[y][x];
              automatic bit  ld = (st[y][x] == sLoad) || (fire && j[y][x] == S - 1);
              p.op   = ld ? e_remote_load : e_remote_store;
              p.addr = AW'(64 + (y * NX + x) * 8 + jj);
              p.data = word(y, x, rnd[y][x], jj);
              out_packet[y][x] <= p;
            end
          end
          sFence: begin
            if (credits[y][x] != CW'(MAXC) || exp_q[y][x].size() != 0) m_fence++;
            else if (rnd[y][x] == ROUNDS) st[y][x] <= sDone;
            else begin
              // the first round is a hot spot: every tile targets tile (NX-1, 0)
              automatic int t = (rnd[y][x] == 0) ? NX - 1 : $urandom % (NX * NY + NX - 1);
              automatic int ddx = (t < NX * NY) ? t % NX : 1 + (t - NX * NY);
              automatic int ddy = (t < NX * NY) ? t / NX : NY;
              dx[y][x] <= ddx; dy[y][x] <= ddy;
              rnd[y][x] <= rnd[y][x] + 1;
              p.x_cord = XW'(ddx); p.y_cord = YW'(ddy);
              p.op = e_remote_store; p.addr = AW'(64 + (y * NX + x) * 8); p.data = word(y, x, rnd[y][x] + 1, 0);
              out_packet[y][x] <= p; out_v[y][x] <= 1; j[y][x] <= 0; st[y][x] <= sStore;
            end
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- mechanism monitors ----------------
  for (genvar y = 0; y < NY; y++) begin : g_my
    for (genvar x = 0; x < NX; x++) begin : g_mx
      wire [4:0] r0 = dut.g_y[y].g_x[x].tile.node.fwd_router.g_out[0].reqs;
      wire [4:0] r1 = dut.g_y[y].g_x[x].tile.node.fwd_router.g_out[1].reqs;
      wire [4:0] r2 = dut.g_y[y].g_x[x].tile.node.fwd_router.g_out[2].reqs;
      wire [4:0] r3 = dut.g_y[y].g_x[x].tile.node.fwd_router.g_out[3].reqs;
      wire [4:0] r4 = dut.g_y[y].g_x[x].tile.node.fwd_router.g_out[4].reqs;
      wire contend = ($countones(r0) > 1) || ($countones(r1) > 1) || ($countones(r2) > 1) || ($countones(r3) > 1) || ($countones(r4) > 1);
      wire held = dut.g_y[y].g_x[x].tile.endpoint.fifo_v & ~dut.g_y[y].g_x[x].tile.endpoint.pend_ready;
      always @(posedge clk) if (!reset) begin
        if (contend) m_contention++;
        if (held) m_held++;
      end
      if (y == NY - 1) begin : g_bot
        wire turn = dut.g_y[y].g_x[x].tile.node.rev_router.grant[1][4] | dut.g_y[y].g_x[x].tile.node.rev_router.grant[2][4];
        always @(posedge clk) if (!reset && turn) m_south_turn++;
      end
    end
  end

  logic arb_prev, frz_prev;
  always @(posedge clk) begin
    arb_prev <= arb[1 % NY][1]; frz_prev <= freeze[0][1];
    if (!reset && arb[1 % NY][1] && !arb_prev) m_arb++;
    if (!reset && !freeze[0][1] && frz_prev) m_freeze++;
    if (!reset && m_done && !master_checked) begin
      master_checked <= 1;
      check(m_errors == 0, "master example read back what it wrote");
      check(m_latency == 16'd7, $sformatf("master example first round trip = %0d cycles (7 expected)", m_latency));
      $display("mech master_round_trip=%0d", m_latency);
    end
  end

  // ---------------- end ----------------
  function automatic bit all_done();
    for (int t = 0; t < NX * NY; t++)
      if (active(t / NX, t % NX) && st[t / NX][t % NX] != sDone) return 0;
    return 1;
  endfunction

  task automatic report();
    m_swap = (tmem[0][1][3] == 32'hA5A5_0003);
    $display("mech credit_stall=%0d backpressure=%0d contention=%0d south_turn=%0d fence_wait=%0d swap=%0d freeze=%0d arb_toggle=%0d held=%0d loads_checked=%0d",
             m_credit_stall, m_backpressure, m_contention, m_south_turn, m_fence, m_swap, m_freeze, m_arb, m_held, m_loads_checked);
    if (!FULL) check(m_credit_stall > 0, "credit stall happened");
    check(m_backpressure > 0, "network back-pressure happened");
    check(m_contention > 0, "router output contention happened");
    check(m_south_turn > 0, "S->W/E turn happened");
    check(m_fence > 0, "fence wait happened");
    check(m_swap > 0, "swap happened");
    check(m_freeze > 0, "unfreeze happened");
    check(m_arb > 0, "arbiter priority toggle happened");
    if (!FULL) check(m_held > 0, "request held for a response slot");
    check(master_checked, "master example finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    report();
  end

  initial begin
    repeat (4) @(posedge clk);
    reset = 0;
    while (!m_done || !all_done()) @(posedge clk);
    repeat (5) @(posedge clk);
    report();
  end
endmodule
