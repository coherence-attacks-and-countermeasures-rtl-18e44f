// tb_noc_router: self-checking test of one interposer mesh router.
//
// The router under test sits at column 1, row 1 (router 76). Each of its
// five inputs sends a stream of random packets (1 to 10 flits, random
// virtual network, random destination router) while every output applies
// random back-pressure. Each flit carries its packet number and position.
// The test checks that every flit leaves on the port X-then-Y routing
// gives (computed here from the mesh coordinates), that flits of a packet
// stay in order and are not interleaved with another packet of the same
// virtual network on the same output, that every packet is delivered,
// and that an idle router forwards a flit in one cycle.
module tb_noc_router;
  import cmc_pkg::*;

  localparam int RX = 1, RY = 1, NPKT = 300;

  logic clk = 0, rst_n = 0;
  logic            in_valid  [5];
  noc_flit_t       in_flit   [5];
  logic [N_VN-1:0] in_ready  [5];
  logic            out_valid [5];
  noc_flit_t       out_flit  [5];
  logic [N_VN-1:0] out_ready [5];
  int checks = 0, failures = 0, cycle = 0;
  bit random_bp = 0;

  noc_router #(.X(RX), .Y(RY)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int xy_port(int dst);
    int dx = dst % 3, dy = dst / 3;
    if (dx > RX) return 2;
    if (dx < RX) return 4;
    if (dy > RY) return 3;
    if (dy < RY) return 1;
    return 0;
  endfunction

  // packet table
  int pkt_len [5*NPKT], pkt_dst [5*NPKT], pkt_vn [5*NPKT], pkt_next [5*NPKT];
  int busy_pkt [5][4];       // packet in progress per (output, vn), -1 if none
  int delivered = 0;

  initial begin
    for (int o = 0; o < 5; o++) begin
      in_valid[o] = 0; in_flit[o] = '0; out_ready[o] = '1;
      for (int v = 0; v < 4; v++) busy_pkt[o][v] = -1;
    end
  end

  always @(negedge clk) if (random_bp) for (int o = 0; o < 5; o++) out_ready[o] = 4'($urandom);

  always @(posedge clk) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && out_ready[o][out_flit[o].vn]) begin
        int pid, idx, v;
        pid = int'(out_flit[o].data[63:32]);
        idx = int'(out_flit[o].data[31:0]);
        v   = int'(out_flit[o].vn);
        check(o == xy_port(pkt_dst[pid]), $sformatf("packet %0d left on port %0d", pid, o));
        check(idx == pkt_next[pid], $sformatf("packet %0d flit %0d out of order", pid, idx));
        check(out_flit[o].head == (idx == 0) && out_flit[o].tail == (idx == pkt_len[pid] - 1),
              "head/tail marks kept");
        if (idx == 0) begin
          check(busy_pkt[o][v] == -1, "packet starts on a free output/network");
          busy_pkt[o][v] = pid;
        end else begin
          check(busy_pkt[o][v] == pid, "no interleaving within a network");
        end
        if (idx == pkt_len[pid] - 1) begin
          busy_pkt[o][v] = -1;
          delivered++;
        end
        pkt_next[pid] = idx + 1;
      end
    end
  end

  task automatic source(input int p);
    for (int n = 0; n < NPKT; n++) begin
      int pid = p * NPKT + n;
      for (int i = 0; i < pkt_len[pid]; i++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) @(negedge clk);
        in_flit[p].head = (i == 0);
        in_flit[p].tail = (i == pkt_len[pid] - 1);
        in_flit[p].vn   = 2'(pkt_vn[pid]);
        in_flit[p].dst  = 4'(pkt_dst[pid]);
        in_flit[p].data = {32'(pid), 32'(i)};
        while (!in_ready[p][pkt_vn[pid]]) begin in_valid[p] = 0; @(negedge clk); end
        in_valid[p] = 1;
        @(posedge clk);
        #1 in_valid[p] = 0;
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (int k = 0; k < 5 * NPKT; k++) begin
      pkt_len[k] = ($urandom % 3 == 0) ? 10 : 1 + $urandom % 3;
      pkt_dst[k] = $urandom % 12;
      pkt_vn[k]  = $urandom % 4;
      pkt_next[k] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // one-cycle hop through an idle router: flit written at one edge
    // leaves at the next
    @(negedge clk);
    pkt_len[0] = 1; pkt_dst[0] = 5; pkt_vn[0] = 2;
    in_flit[4] = '{head: 1'b1, tail: 1'b1, vn: 2'd2, dst: 4'd5, data: 64'd0};
    in_valid[4] = 1;
    @(negedge clk);
    in_valid[4] = 0;
    check(out_valid[2] && out_flit[2].dst == 4'd5, "idle router forwards a flit in one cycle");
    @(negedge clk);
    check(delivered == 1, "single flit delivered");
    pkt_next[0] = 0; delivered = 0;
    pkt_len[0] = 1 + $urandom % 3;
    pkt_dst[0] = $urandom % 12;

    random_bp = 1;
    fork
      source(0); source(1); source(2); source(3); source(4);
    join
    t0 = cycle;
    random_bp = 0;
    for (int o = 0; o < 5; o++) out_ready[o] = '1;
    while (delivered < 5 * NPKT && cycle - t0 < 1000) @(posedge clk);
    check(delivered == 5 * NPKT, $sformatf("%0d of %0d packets delivered", delivered, 5 * NPKT));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
