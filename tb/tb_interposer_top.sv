// tb_interposer_top: end-to-end test of the secure interposer at its
// default size (8 chiplets, 4 memory controllers, 3x4 mesh, 64 regions).
//
// The testbench plays the secure OS (programs every APU table), the
// chiplets' network interfaces and the memory controllers' directories,
// and checks what each link receives against messages worked out here.
//   1. Legal traffic: every chiplet sends GETS/GETX/PUT to the home memory
//      controller of shared and private regions, at the same time, with
//      random back-pressure on the egress links; the controllers answer
//      with data responses. Every message must arrive intact at exactly
//      the right link.
//   2. GETX-spy: a spy in chiplet 0 writes to its private region; the home
//      directory broadcasts each write. Only chiplet 0 may see the
//      broadcast: the Trojan's chiplet (7) and all others must see none,
//      and the requester receives one NACK per excluded chiplet. A
//      broadcast for a region open to all reaches all eight chiplets.
//   3. Attack: chiplet 5 forges a request with chiplet 2's core ID. The
//      machine check must fire, no flit of the forged message may leave the
//      interposer, and the other chiplets' links must stop taking messages.
// Each mechanism (legal check passed, broadcast forwarded, broadcast
// converted to NACK, back-pressure stall, exception, halt) is counted and
// a mechanism that never happened counts as a failure.
module tb_interposer_top;
  import cmc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic            chip_in_valid  [N_CHIPLETS];
  link_flit_t      chip_in_flit   [N_CHIPLETS];
  logic            chip_in_ready  [N_CHIPLETS];
  logic            chip_out_valid [N_CHIPLETS];
  noc_flit_t       chip_out_flit  [N_CHIPLETS];
  logic [N_VN-1:0] chip_out_ready [N_CHIPLETS];
  logic            mc_in_valid    [N_MC];
  link_flit_t      mc_in_flit     [N_MC];
  logic            mc_in_ready    [N_MC];
  logic            mc_out_valid   [N_MC];
  noc_flit_t       mc_out_flit    [N_MC];
  logic [N_VN-1:0] mc_out_ready   [N_MC];
  logic            apu_wr_en = 0;
  logic [N_NODES-1:0]  apu_wr_sel = '0;
  logic [REGION_W-1:0] apu_wr_idx = '0;
  logic [ENTRY_W-1:0]  apu_wr_entry = '0;
  logic            mce;
  logic [N_CHIPLETS-1:0] chip_exception, chip_chk_pass;
  viol_e           chip_viol [N_CHIPLETS];
  logic [N_MC-1:0] mc_nack_sent, mc_bcast_seen;

  interposer_top dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  bit random_bp = 0;
  // mechanism counters
  int n_pass = 0, n_nack = 0, n_bcast = 0, n_stall = 0, n_fwd_copy = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- egress monitors: whole messages, stored per link ----
  // link index: 0..7 chiplets, 8..11 memory controllers
  typedef struct { logic [63:0] head; logic [63:0] addr; int nflits; } msg_t;
  msg_t got [12][$];
  msg_t exp [12][$];
  msg_t cur [12][4];   // packets of different virtual networks may interleave
  int   cnt [12][4];

  task automatic observe(input int l, input logic v, input noc_flit_t f, input logic [N_VN-1:0] rdy);
    if (!rst_n) return;   // buffers hold no valid flit before reset
    if (v && rdy[f.vn]) begin
      if (f.head) begin cur[l][f.vn].head = f.data; cnt[l][f.vn] = 1; end
      else begin
        if (cnt[l][f.vn] == 1) cur[l][f.vn].addr = f.data;
        cnt[l][f.vn]++;
      end
      if (f.tail) begin
        cur[l][f.vn].nflits = cnt[l][f.vn];
        got[l].push_back(cur[l][f.vn]);
      end
    end
  endtask

  always @(posedge clk) begin
    for (int c = 0; c < 8; c++) observe(c, chip_out_valid[c], chip_out_flit[c], chip_out_ready[c]);
    for (int m = 0; m < 4; m++) observe(8 + m, mc_out_valid[m], mc_out_flit[m], mc_out_ready[m]);
    // back-pressure: a link flit held because the checker or network is busy
    for (int c = 0; c < 8; c++) if (chip_in_valid[c] && !chip_in_ready[c]) n_stall++;
    for (int m = 0; m < 4; m++) if (mc_in_valid[m] && !mc_in_ready[m]) n_stall++;
    n_pass += $countones(chip_chk_pass);
    n_nack += $countones(mc_nack_sent);
    n_bcast += $countones(mc_bcast_seen);
  end

  always @(negedge clk) begin
    for (int c = 0; c < 8; c++) chip_out_ready[c] = random_bp ? 4'($urandom) : 4'hF;
    for (int m = 0; m < 4; m++) mc_out_ready[m] = random_bp ? 4'($urandom) : 4'hF;
  end

  // ---- link drivers ----
  task automatic chip_put(input int c, input logic hd, input logic tl, input logic [63:0] d);
    @(negedge clk);
    chip_in_valid[c] = 1;
    chip_in_flit[c].head = hd; chip_in_flit[c].tail = tl; chip_in_flit[c].data = d;
    @(posedge clk);
    while (!chip_in_ready[c]) @(posedge clk);
    #1 chip_in_valid[c] = 0;
  endtask

  task automatic mc_put(input int m, input logic hd, input logic tl, input logic [63:0] d);
    @(negedge clk);
    mc_in_valid[m] = 1;
    mc_in_flit[m].head = hd; mc_in_flit[m].tail = tl; mc_in_flit[m].data = d;
    @(posedge clk);
    while (!mc_in_ready[m]) @(posedge clk);
    #1 mc_in_valid[m] = 0;
  endtask

  function automatic head_t mk(logic [4:0] t, logic [7:0] s, logic [7:0] d, logic [1:0] vn);
    head_t h = '0;
    h.mtype = t; h.sender = s; h.dest = d; h.vn = vn;
    h.unused = 32'($urandom);
    return h;
  endfunction

  // link a destination ID lands on (chiplet of a core, or 8 + MC number)
  function automatic int link_of(logic [7:0] id);
    return (id >= 64) ? 8 + int'(id) - 64 : int'(id) / 8;
  endfunction

  task automatic chip_send(input int c, input head_t h, input logic [63:0] a, input bit expect_it);
    int nd = (h.mtype == MT_DATA || h.mtype == MT_DATA_SHARED || h.mtype == MT_DATA_EXCLUSIVE ||
              h.mtype == MT_WB_DIRTY) ? 8 : 0;
    if (expect_it) exp[link_of(h.dest)].push_back('{head: h, addr: a, nflits: 2 + nd});
    chip_put(c, 1, 0, h);
    chip_put(c, 0, nd == 0, a);
    for (int i = 0; i < nd; i++) chip_put(c, 0, i == nd - 1, {32'(c), 32'(i)});
  endtask

  task automatic mc_send(input int m, input head_t h, input logic [63:0] a, input int nd);
    if (h.dest != BCAST_ID) exp[link_of(h.dest)].push_back('{head: h, addr: a, nflits: 2 + nd});
    mc_put(m, 1, 0, h);
    mc_put(m, 0, nd == 0, a);
    for (int i = 0; i < nd; i++) mc_put(m, 0, i == nd - 1, 64'(i));
  endtask

  function automatic logic [63:0] addr_of(int region, int mc, int blk);
    return {32'd0, 6'(region), 18'(blk), 2'(mc), 6'd0};
  endfunction

  // compare received with expected, order-independent per link
  task automatic compare_links(input string phase);
    for (int l = 0; l < 12; l++) begin
      check(got[l].size() == exp[l].size(),
            $sformatf("%s: link %0d got %0d messages, expected %0d", phase, l, got[l].size(), exp[l].size()));
      foreach (exp[l][i]) begin
        int hit = -1;
        foreach (got[l][j])
          if (hit < 0 && got[l][j].head == exp[l][i].head && got[l][j].addr == exp[l][i].addr &&
              got[l][j].nflits == exp[l][i].nflits) hit = j;
        check(hit >= 0, $sformatf("%s: link %0d missing message %h", phase, l, exp[l][i].head));
        if (hit >= 0) got[l].delete(hit);
      end
      got[l].delete();
      exp[l].delete();
    end
  endtask

  task automatic wait_quiet(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int R_SPY = 1, R_SHARED = 2, R_ALL = 3;

  // legal traffic of one chiplet: requests to the home controllers of the
  // open, private and shared regions, writebacks and data to a neighbour
  task automatic chip_stream(input int c);
    for (int n = 0; n < 6; n++) begin
      int m = (c + n) % 4;
      chip_send(c, mk(MT_GETX, 8'(8 * c + n), 8'(64 + m), VN_REQ), addr_of(R_ALL, m, n), 1);
      chip_send(c, mk(MT_GETS, 8'(8 * c + n), 8'(64 + m), VN_REQ), addr_of(8 + c, m, n), 1);
      if (c < 4)
        chip_send(c, mk(MT_GETS, 8'(8 * c + 7), 8'(64 + m), VN_REQ), addr_of(R_SHARED, m, n), 1);
      chip_send(c, mk(MT_WB_DIRTY, 8'(8 * c + 1), 8'(64 + m), VN_RESP), addr_of(R_ALL, m, n + 8), 1);
      chip_send(c, mk(MT_DATA, 8'(8 * c + 2), 8'(8 * ((c + 1) % 8)), VN_RESP), addr_of(R_ALL, m, n), 1);
    end
  endtask

  // memory-controller traffic: data responses and writeback acks to cores
  task automatic mc_stream(input int m);
    for (int n = 0; n < 6; n++) begin
      mc_send(m, mk(MT_DATA_EXCLUSIVE, 8'(64 + m), 8'(n * 11 % 64), VN_RESP), addr_of(R_ALL, m, n), 8);
      mc_send(m, mk(MT_WB_ACK, 8'(64 + m), 8'(n * 7 % 64), VN_FWD), addr_of(R_ALL, m, n), 0);
    end
  endtask

  initial begin
    for (int c = 0; c < 8; c++) begin chip_in_valid[c] = 0; chip_in_flit[c] = '0; end
    for (int m = 0; m < 4; m++) begin mc_in_valid[m] = 0; mc_in_flit[m] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- secure OS programs every table ----
    @(negedge clk);
    apu_wr_en = 1; apu_wr_sel = '1;
    apu_wr_idx = R_SPY;    apu_wr_entry = 16'b00_00_00_00_00_00_00_11;  // chiplet 0 only
    @(negedge clk);
    apu_wr_idx = R_SHARED; apu_wr_entry = 16'b00_00_00_00_01_01_11_11;  // 0,1 rw; 2,3 ro
    @(negedge clk);
    apu_wr_idx = R_ALL;    apu_wr_entry = 16'hFFFF;
    for (int c = 0; c < 8; c++) begin                                   // private regions 8+c
      @(negedge clk);
      apu_wr_idx = 6'(8 + c); apu_wr_entry = 16'(2'b11) << (2 * c);
    end
    @(negedge clk);
    apu_wr_en = 0;

    // ---- 1. legal traffic from all chiplets at once ----
    random_bp = 1;
    fork
      chip_stream(0); chip_stream(1); chip_stream(2); chip_stream(3);
      chip_stream(4); chip_stream(5); chip_stream(6); chip_stream(7);
      mc_stream(0); mc_stream(1); mc_stream(2); mc_stream(3);
    join
    random_bp = 0;
    wait_quiet(300);
    compare_links("legal traffic");
    check(!mce, "no exception for legal traffic");

    // ---- 2. GETX-spy: broadcasts for the spy's private region ----
    for (int n = 0; n < 16; n++) begin
      int m = n % 4;
      mc_send(m, mk(MT_FWD_GETX, 8'd0, BCAST_ID, VN_FWD), addr_of(R_SPY, m, n), 0);
    end
    wait_quiet(400);
    begin
      int trojan_getx = 0, nacks_to_spy = 0, fwd_to_spy = 0;
      for (int l = 1; l < 12; l++)
        foreach (got[l][j]) if (got[l][j].head[63:59] == MT_FWD_GETX) trojan_getx++;
      foreach (got[0][j]) begin
        head_t h;
        h = got[0][j].head;
        if (h.mtype == MT_NACK && h.dest == 8'd0) nacks_to_spy++;
        if (h.mtype == MT_FWD_GETX) fwd_to_spy++;
      end
      check(trojan_getx == 0, $sformatf("other chiplets saw %0d spy GETX broadcasts", trojan_getx));
      check(fwd_to_spy == 16, $sformatf("spy's chiplet got %0d forwards, expected 16", fwd_to_spy));
      check(nacks_to_spy == 16 * 7, $sformatf("requester got %0d NACKs, expected 112", nacks_to_spy));
      check(got[0].size() == 16 * 8, "nothing else reached chiplet 0");
      n_fwd_copy += fwd_to_spy;
    end
    for (int l = 0; l < 12; l++) begin got[l].delete(); exp[l].delete(); end

    // a broadcast for a region everyone may read reaches all eight chiplets
    mc_send(2, mk(MT_FWD_GETS, 8'd20, BCAST_ID, VN_FWD), addr_of(R_ALL, 2, 1), 0);
    wait_quiet(100);
    for (int c = 0; c < 8; c++)
      check(got[c].size() == 1 && got[c][0].head[63:59] == MT_FWD_GETS,
            $sformatf("chiplet %0d got the open broadcast", c));
    n_fwd_copy += 8;
    for (int l = 0; l < 12; l++) got[l].delete();

    // ---- 3. masquerading attack from chiplet 5 ----
    check(!mce, "no exception before the attack");
    chip_send(5, mk(MT_GETS, 8'd17, 8'd64, VN_REQ), addr_of(R_SHARED, 0, 3), 0);
    wait_quiet(5);
    check(mce && chip_exception == 8'b0010_0000, "machine check raised by chiplet 5's checker");
    check(chip_viol[5] == VIOL_MASQUERADE, "reason is masquerading");
    wait_quiet(50);
    for (int l = 0; l < 12; l++)
      check(got[l].size() == 0, $sformatf("no flit of the forged message on link %0d", l));
    // system halted: other chiplets' links no longer take messages
    @(negedge clk);
    chip_in_valid[1] = 1; chip_in_flit[1].head = 1; chip_in_flit[1].tail = 0;
    chip_in_flit[1].data = mk(MT_GETS, 8'd9, 8'd64, VN_REQ);
    repeat (4) begin
      #1 check(!chip_in_ready[1], "halted interposer takes no new message");
      @(negedge clk);
    end
    check(chip_exception == 8'b0010_0000, "only the attacker's checker raised the exception");
    chip_in_valid[1] = 0;

    // ---- mechanisms exercised ----
    $display("mechanisms: checked-legal=%0d broadcasts=%0d forwarded-copies=%0d nacks=%0d stalls=%0d exceptions=%0d",
             n_pass, n_bcast, n_fwd_copy, n_nack, n_stall, $countones(chip_exception));
    check(n_pass > 0, "legal messages passed the checkers");
    check(n_bcast == 17, $sformatf("%0d broadcasts seen by CMC-2, expected 17", n_bcast));
    check(n_nack == 112, $sformatf("%0d NACK conversions, expected 112", n_nack));
    check(n_fwd_copy > 0, "broadcast copies forwarded");
    check(n_stall > 0, "back-pressure held link flits");
    check(mce, "exception and halt happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
