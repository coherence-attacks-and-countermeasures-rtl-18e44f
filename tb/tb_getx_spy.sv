// tb_getx_spy: the GETX-spy covert channel run through the full-size
// interposer, once with the receiving chiplet allowed to see the spy's
// memory region and once with the region private to the spy.
//
// The channel: a spy process on core 3 of chiplet 0 sends a 128-bit
// message. For each bit it writes (GETX) a block of its own region in one
// of two cache sets, set 1 for a '0' and set 2 for a '1'. The home
// directory answers a write miss by broadcasting a forward (FWD_GETX) to
// all chiplets; a Trojan in the network interface of chiplet 7 watches the
// forwards that reach it and reads the bit from the set of the address.
//
// The testbench models the spy (it waits for its own copy of each
// broadcast before sending the next bit), the four directories (each GETX
// that reaches a memory controller becomes a FWD_GETX broadcast with the
// requester as sender) and the Trojan (it decodes every FWD_GETX that
// reaches chiplet 7). Run A programs the spy's region readable by chiplet
// 7, which gives the Trojan the view every chiplet has in an interposer
// without checkers: all 128 bits must be decoded. Run B programs the
// region private to chiplet 0, as the secure OS would: the Trojan must
// see no forward at all, and the spy must get one NACK per excluded
// chiplet (7 per bit). The message size follows the published attack;
// core, cache and directory timing are not modelled, so the cycle count
// printed is the interposer's share only.
module tb_getx_spy;
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

  localparam int MSG_BITS = 128;
  localparam int SPY_CORE = 3, TROJAN_CHIPLET = 7;
  localparam int R_OPEN = 4, R_PRIVATE = 5;

  int checks = 0, failures = 0, cycle = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- egress monitors: head and address of every whole message ----
  logic [63:0] cur_head [12][4], cur_addr [12][4];
  int          cur_cnt  [12][4];
  logic [63:0] req_head [N_MC][$], req_addr [N_MC][$];   // messages reaching each directory
  int          spy_fwd = 0, spy_nack = 0, trojan_fwd = 0, other_fwd = 0;
  logic [MSG_BITS-1:0] decoded;
  int          n_decoded = 0;

  task automatic observe(input int l, input logic v, input noc_flit_t f, input logic [N_VN-1:0] rdy);
    head_t h;
    if (!rst_n) return;   // buffers hold no valid flit before reset
    if (!(v && rdy[f.vn])) return;
    if (f.head) begin cur_head[l][f.vn] = f.data; cur_cnt[l][f.vn] = 1; end
    else begin
      if (cur_cnt[l][f.vn] == 1) cur_addr[l][f.vn] = f.data;
      cur_cnt[l][f.vn]++;
    end
    if (!f.tail) return;
    h = cur_head[l][f.vn];
    if (l >= 8) begin
      req_head[l - 8].push_back(cur_head[l][f.vn]);
      req_addr[l - 8].push_back(cur_addr[l][f.vn]);
    end else if (h.mtype == MT_FWD_GETX) begin
      if (l == 0) spy_fwd++;
      else other_fwd++;
      if (l == TROJAN_CHIPLET) begin
        // the Trojan reads the bit from the cache set of the address
        trojan_fwd++;
        if (cur_addr[l][f.vn][15:8] == 8'd2) decoded[n_decoded] = 1'b1;
        else if (cur_addr[l][f.vn][15:8] == 8'd1) decoded[n_decoded] = 1'b0;
        if (n_decoded < MSG_BITS - 1) n_decoded++;
      end
    end else if (h.mtype == MT_NACK && l == 0 && h.dest == 8'(SPY_CORE)) begin
      spy_nack++;
    end
  endtask

  always @(posedge clk) begin
    for (int c = 0; c < 8; c++) observe(c, chip_out_valid[c], chip_out_flit[c], chip_out_ready[c]);
    for (int m = 0; m < 4; m++) observe(8 + m, mc_out_valid[m], mc_out_flit[m], mc_out_ready[m]);
  end

  initial begin
    for (int c = 0; c < 8; c++) chip_out_ready[c] = '1;
    for (int m = 0; m < 4; m++) mc_out_ready[m] = '1;
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
    return h;
  endfunction

  // directory of memory controller m: every write miss is broadcast
  task automatic directory(input int m);
    forever begin
      @(posedge clk);
      while (req_head[m].size() != 0) begin
        head_t h;
        logic [63:0] a;
        h = req_head[m].pop_front();
        a = req_addr[m].pop_front();
        if (h.mtype == MT_GETX) begin
          mc_put(m, 1, 0, mk(MT_FWD_GETX, h.sender, BCAST_ID, VN_FWD));
          mc_put(m, 0, 1, a);
        end
      end
    end
  endtask

  // the spy sends one bit per write and waits for its own forward
  task automatic spy_send(input int region, input logic [MSG_BITS-1:0] msg, output int cycles);
    int t0 = cycle;
    for (int b = 0; b < MSG_BITS; b++) begin
      int m = b % 4;
      int seen = spy_fwd;
      logic [63:0] a = {32'd0, 6'(region), 10'(b), 8'(msg[b] ? 2 : 1), 2'(m), 6'd0};
      chip_put(0, 1, 0, mk(MT_GETX, 8'(SPY_CORE), 8'(64 + m), VN_REQ));
      chip_put(0, 0, 1, a);
      while (spy_fwd == seen) @(posedge clk);
    end
    repeat (30) @(posedge clk);
    cycles = cycle - t0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [MSG_BITS-1:0] msg;
    int cyc_a, cyc_b;
    msg = {$urandom, $urandom, $urandom, $urandom};
    for (int c = 0; c < 8; c++) begin chip_in_valid[c] = 0; chip_in_flit[c] = '0; end
    for (int m = 0; m < 4; m++) begin mc_in_valid[m] = 0; mc_in_flit[m] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    apu_wr_en = 1; apu_wr_sel = '1;
    apu_wr_idx = R_OPEN;    apu_wr_entry = 16'b01_00_00_00_00_00_00_11;  // spy rw, Trojan ro
    @(negedge clk);
    apu_wr_idx = R_PRIVATE; apu_wr_entry = 16'b00_00_00_00_00_00_00_11;  // spy only
    @(negedge clk);
    apu_wr_en = 0;

    fork directory(0); directory(1); directory(2); directory(3); join_none

    // ---- run A: the Trojan's chiplet sees the spy's broadcasts ----
    decoded = '0; n_decoded = 0;
    spy_send(R_OPEN, msg, cyc_a);
    check(trojan_fwd == MSG_BITS, $sformatf("run A: Trojan saw %0d forwards, expected %0d", trojan_fwd, MSG_BITS));
    check(decoded == msg, $sformatf("run A: Trojan decoded %h, sent %h", decoded, msg));
    check(spy_nack == 6 * MSG_BITS, $sformatf("run A: %0d NACKs, expected %0d", spy_nack, 6 * MSG_BITS));
    $display("run A: %0d bits in %0d interposer cycles, decoded %h", MSG_BITS, cyc_a, decoded);

    // ---- run B: region private to the spy ----
    trojan_fwd = 0; other_fwd = 0; spy_fwd = 0; spy_nack = 0;
    decoded = '0; n_decoded = 0;
    spy_send(R_PRIVATE, ~msg, cyc_b);
    check(trojan_fwd == 0, $sformatf("run B: Trojan saw %0d forwards, expected none", trojan_fwd));
    check(other_fwd == 0, $sformatf("run B: other chiplets saw %0d forwards", other_fwd));
    check(spy_fwd == MSG_BITS, $sformatf("run B: spy's chiplet got %0d forwards", spy_fwd));
    check(spy_nack == 7 * MSG_BITS, $sformatf("run B: %0d NACKs, expected %0d", spy_nack, 7 * MSG_BITS));
    check(!mce, "no machine check for the spy's legal writes");
    $display("run B: %0d bits in %0d interposer cycles, Trojan saw %0d forwards",
             MSG_BITS, cyc_b, trojan_fwd);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
