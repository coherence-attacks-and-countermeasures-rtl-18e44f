// tb_cmc2: self-checking test of the memory-controller-side checker CMC-2.
//
// A directory broadcast (FWD_GETX/FWD_GETS to 8'hFF) for a region shared by
// some chiplets must come out as eight two-flit messages in chiplet order:
// the unchanged forward to each allowed chiplet's router, a NACK to the
// original requester for each chiplet without access. Unicast forwards and
// data responses must pass unchanged. The test also checks the published
// three-stage latency (first flit out 3 cycles after the head flit
// arrives), the NACK count and behaviour under random back-pressure.
module tb_cmc2;
  import cmc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  link_flit_t in_flit = '0;
  logic in_ready, out_valid, nack_sent, bcast_seen;
  noc_flit_t out_flit;
  logic [N_VN-1:0] out_ready = '1;
  logic apu_wr_en = 0;
  logic [REGION_W-1:0] apu_wr_idx = 0;
  logic [ENTRY_W-1:0] apu_wr_entry = 0;
  int checks = 0, failures = 0, nacks = 0, bcasts = 0;
  int cycle = 0, head_in_cycle = 0, first_out_cycle = -1;
  bit random_bp = 0;

  cmc2 dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(negedge clk) if (random_bp) out_ready = 4'($urandom);

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  noc_flit_t exp_q[$];

  always @(posedge clk) begin
    if (nack_sent) nacks++;
    if (bcast_seen) bcasts++;
    if (out_valid && out_ready[out_flit.vn]) begin
      noc_flit_t e;
      if (first_out_cycle < 0) first_out_cycle = cycle;
      if (exp_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL: unexpected flit %h", out_flit);
      end else begin
        e = exp_q.pop_front();
        check(out_flit == e, $sformatf("flit %h expected %h", out_flit, e));
      end
    end
  end

  function automatic head_t mk(logic [4:0] t, logic [7:0] s, logic [7:0] d, logic [1:0] vn);
    head_t h = '0;
    h.mtype = t; h.sender = s; h.dest = d; h.vn = vn;
    h.cur_owner = 8'h21; h.dirty = 1'b1; h.unused = 32'h1234_5678;
    return h;
  endfunction

  function automatic noc_flit_t nf(logic hd, logic tl, logic [1:0] vn, logic [3:0] dst,
                                   logic [63:0] d);
    noc_flit_t f;
    f.head = hd; f.tail = tl; f.vn = vn; f.dst = dst; f.data = d;
    return f;
  endfunction

  // interface routers of chiplets 0..7 (mesh drawing, row-major numbering)
  localparam int CHIP_NODE [8] = '{0, 3, 6, 9, 2, 5, 8, 11};

  task automatic put(input logic hd, input logic tl, input logic [63:0] d);
    @(negedge clk);
    in_valid = 1; in_flit.head = hd; in_flit.tail = tl; in_flit.data = d;
    if (hd) head_in_cycle = cycle;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  task automatic send_bcast(input head_t h, input logic [63:0] a, input logic [15:0] entry);
    for (int c = 0; c < 8; c++) begin
      if (entry[2*c +: 2] == 2'b01 || entry[2*c +: 2] == 2'b11) begin
        exp_q.push_back(nf(1, 0, 2'd1, 4'(CHIP_NODE[c]), h));
        exp_q.push_back(nf(0, 1, 2'd1, 4'(CHIP_NODE[c]), a));
      end else begin
        head_t n = '0;
        n.mtype = 5'd15; n.sender = 8'(8 * c); n.dest = h.sender; n.vn = 2'd2;
        n.unused = h.unused;
        exp_q.push_back(nf(1, 0, 2'd2, 4'(CHIP_NODE[h.sender / 8]), n));
        exp_q.push_back(nf(0, 1, 2'd2, 4'(CHIP_NODE[h.sender / 8]), a));
      end
    end
    put(1, 0, h);
    put(0, 1, a);
  endtask

  task automatic send_plain(input head_t h, input logic [63:0] a, input int dst, input int nd);
    exp_q.push_back(nf(1, 0, h.vn, 4'(dst), h));
    exp_q.push_back(nf(0, nd == 0, h.vn, 4'(dst), a));
    for (int i = 0; i < nd; i++) exp_q.push_back(nf(0, i == nd - 1, h.vn, 4'(dst), 64'(i * 3)));
    put(1, 0, h);
    put(0, nd == 0, a);
    for (int i = 0; i < nd; i++) put(0, i == nd - 1, 64'(i * 3));
  endtask

  task automatic drain();
    int t = 0;
    while (exp_q.size() != 0 && t < 400) begin @(posedge clk); t++; end
    check(exp_q.size() == 0, "all expected flits delivered");
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] a_sh, a_all;
  logic [15:0] e_sh, e_all;
  initial begin
    a_sh  = {32'd0, 6'd10, 26'h40};
    a_all = {32'd0, 6'd11, 26'h80};
    e_sh  = 16'b00_00_00_00_00_01_11_11;    // chiplets 0,1 rw; 2 ro; 3..7 none
    e_all = 16'hFFFF;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    apu_wr_en = 1; apu_wr_idx = 10; apu_wr_entry = e_sh;
    @(negedge clk);
    apu_wr_idx = 11; apu_wr_entry = e_all;
    @(negedge clk);
    apu_wr_en = 0;

    // GETX-spy case: broadcast of a write by core 3 in chiplet 0
    first_out_cycle = -1;
    send_bcast(mk(MT_FWD_GETX, 8'd3, 8'hFF, 2'd1), a_sh, e_sh);
    drain();
    check(first_out_cycle - head_in_cycle == 3,
          $sformatf("first flit after %0d cycles, expected 3", first_out_cycle - head_in_cycle));
    check(nacks == 5, $sformatf("%0d NACKs, expected 5", nacks));

    // region open to all chiplets: eight forwards, no NACK
    send_bcast(mk(MT_FWD_GETS, 8'd45, 8'hFF, 2'd1), a_all, e_all);
    drain();
    check(nacks == 5, "no NACK for a region open to everyone");

    // unicast forward and data response pass unchanged
    send_plain(mk(MT_FWD_GETX, 8'd3, 8'd20, 2'd1), a_sh, 6, 0);
    send_plain(mk(MT_DATA_EXCLUSIVE, 8'd64, 8'd50, 2'd2), a_sh, 8, 8);
    send_plain(mk(MT_WB_ACK, 8'd65, 8'd9, 2'd1), a_sh, 3, 0);
    drain();

    // random back-pressure
    random_bp = 1;
    for (int n = 0; n < 10; n++) begin
      send_bcast(mk(MT_FWD_GETX, 8'(n * 6), 8'hFF, 2'd1), a_sh, e_sh);
      send_plain(mk(MT_DATA, 8'd66, 8'(n * 5), 2'd2), a_all, CHIP_NODE[(n * 5) / 8], 8);
    end
    drain();
    check(nacks == 55, $sformatf("%0d NACKs in total, expected 55", nacks));
    check(bcasts == 12, $sformatf("%0d broadcasts seen, expected 12", bcasts));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
