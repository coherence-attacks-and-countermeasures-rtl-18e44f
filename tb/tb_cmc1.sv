// tb_cmc1: self-checking test of the chiplet-side checker CMC-1.
//
// The APU table is programmed through its write port, then the test sends
// legal control and data messages, with random back-pressure from the
// router, and compares every flit that leaves with the expected one
// (framing, virtual network, destination router, payload). It checks the
// published timing (head leaves 3 cycles after it arrives: head, address
// plus lookup, check), that a halted checker takes no new message, and
// that an illegal message raises the exception with the right reason
// while none of its flits reach the router.
module tb_cmc1;
  import cmc_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  link_flit_t in_flit = '0;
  logic in_ready, out_valid, exception, chk_pass;
  noc_flit_t out_flit;
  logic [N_VN-1:0] out_ready = '1;
  logic halt = 0;
  viol_e viol_code;
  logic apu_wr_en = 0;
  logic [REGION_W-1:0] apu_wr_idx = 0;
  logic [ENTRY_W-1:0] apu_wr_entry = 0;
  int checks = 0, failures = 0;
  int cycle = 0;
  bit random_bp = 0;

  cmc1 #(.CHIPLET(1)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected output flits
  noc_flit_t exp_q[$];
  int head_in_cycle, head_out_cycle;

  always @(negedge clk) if (random_bp) out_ready = 4'($urandom);

  always @(posedge clk) begin
    if (out_valid && out_ready[out_flit.vn]) begin
      if (out_flit.head) head_out_cycle = cycle;
      if (exp_q.size() == 0) begin
        checks++; failures++;
        $display("FAIL: unexpected flit %h", out_flit);
      end else begin
        noc_flit_t e;
        e = exp_q.pop_front();
        check(out_flit == e, $sformatf("flit %h expected %h", out_flit, e));
      end
    end
  end

  function automatic head_t mk(logic [4:0] t, logic [7:0] s, logic [7:0] d);
    head_t h = '0;
    h.mtype = t; h.sender = s; h.dest = d; h.vn = vn_of_type(t);
    h.cur_owner = 8'h5A; h.unused = 32'hDEAD_BEEF;
    return h;
  endfunction

  task automatic put(input logic hd, input logic tl, input logic [63:0] d);
    @(negedge clk);
    in_valid = 1; in_flit.head = hd; in_flit.tail = tl; in_flit.data = d;
    if (hd) head_in_cycle = cycle;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
  endtask

  function automatic noc_flit_t nf(logic hd, logic tl, logic [1:0] vn, logic [7:0] dest,
                                   logic [63:0] d);
    noc_flit_t f;
    f.head = hd; f.tail = tl; f.vn = vn; f.data = d;
    // destination router worked out from the mesh drawing: chiplets 0-3 in
    // column 0, 4-7 in column 2, memory controllers in column 1
    if (dest >= 64) f.dst = NODE_W'(3 * (dest - 64) + 1);
    else if (dest < 32) f.dst = NODE_W'(3 * (dest / 8));
    else f.dst = NODE_W'(3 * (dest / 8 - 4) + 2);
    return f;
  endfunction

  task automatic send(input head_t h, input logic [63:0] a, input bit legal);
    int nd = has_data(h.mtype) ? 8 : 0;
    if (legal) begin
      exp_q.push_back(nf(1'b1, 1'b0, h.vn, h.dest, h));
      exp_q.push_back(nf(1'b0, nd == 0, h.vn, h.dest, a));
      for (int i = 0; i < nd; i++)
        exp_q.push_back(nf(1'b0, i == nd - 1, h.vn, h.dest, {a[31:0], 32'(i)}));
    end
    put(1'b1, 1'b0, h);
    put(1'b0, nd == 0, a);
    for (int i = 0; i < nd; i++) put(1'b0, i == nd - 1, {a[31:0], 32'(i)});
  endtask

  task automatic drain();
    int t = 0;
    while (exp_q.size() != 0 && t < 200) begin @(posedge clk); t++; end
    check(exp_q.size() == 0, "all expected flits delivered");
    repeat (3) @(posedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] a_rw, a_ro, a_none;
  initial begin
    // region 3: chiplet 1 read/write; region 4: read-only; region 7: no access
    a_rw   = {32'd0, 6'd3, 18'd0, 8'h40};   // home MC 1 (id 65)
    a_ro   = {32'd0, 6'd4, 18'd0, 8'hC0};   // home MC 3 (id 67)
    a_none = {32'd0, 6'd7, 18'd0, 8'h00};   // home MC 0 (id 64)
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    apu_wr_en = 1; apu_wr_idx = 3; apu_wr_entry = 16'b00_00_00_00_00_00_11_11;
    @(negedge clk);
    apu_wr_idx = 4; apu_wr_entry = 16'b00_00_00_00_00_00_01_00;
    @(negedge clk);
    apu_wr_en = 0;

    // latency of an unobstructed control message
    send(mk(MT_GETX, 8'd9, 8'd65), a_rw, 1);
    drain();
    check(head_out_cycle - head_in_cycle == 3,
          $sformatf("head latency %0d cycles, expected 3", head_out_cycle - head_in_cycle));

    send(mk(MT_GETS, 8'd12, 8'd67), a_ro, 1);
    send(mk(MT_DATA, 8'd15, 8'd3), a_rw, 1);          // data to chiplet 0, 10 flits
    send(mk(MT_ACK, 8'd8, 8'd2), a_rw, 1);            // plain ack to chiplet 0
    send(mk(MT_UNBLOCKS, 8'd10, 8'd67), a_ro, 1);
    drain();

    // random back-pressure from the router
    random_bp = 1;
    for (int n = 0; n < 20; n++) begin
      send(mk(MT_GETX, 8'(8 + n % 8), 8'd65), a_rw, 1);
      send(mk(MT_DATA_EXCLUSIVE, 8'(8 + n % 8), 8'(n % 8)), a_rw, 1);
    end
    drain();
    random_bp = 0; out_ready = '1;

    // halt: no new message is taken
    halt = 1;
    @(negedge clk);
    in_valid = 1; in_flit.head = 1; in_flit.tail = 0; in_flit.data = mk(MT_GETS, 8'd9, 8'd65);
    repeat (4) begin
      @(posedge clk); #1;
      check(!in_ready && !out_valid, "halted checker takes nothing");
    end
    in_valid = 0; halt = 0;

    check(!exception, "no exception for legal traffic");

    // modifying: GETX to a read-only region -> exception, nothing forwarded
    send(mk(MT_GETX, 8'd9, 8'd67), a_ro, 0);
    repeat (3) @(posedge clk);
    check(exception, "exception raised on GETX to read-only region");
    check(viol_code == VIOL_PERMISSION, "reason is permission");
    @(negedge clk);
    in_valid = 1; in_flit.head = 1; in_flit.tail = 0; in_flit.data = mk(MT_GETS, 8'd9, 8'd65);
    repeat (3) begin
      @(posedge clk); #1;
      check(!in_ready && !out_valid, "stopped after exception");
    end
    in_valid = 0;

    // masquerading after a reset
    rst_n = 0; @(negedge clk); rst_n = 1;
    @(negedge clk);
    apu_wr_en = 1; apu_wr_idx = 3; apu_wr_entry = 16'b00_00_00_00_00_00_11_11;
    @(negedge clk); apu_wr_en = 0;
    send(mk(MT_GETS, 8'd2, 8'd65), a_rw, 0);           // core 2 belongs to chiplet 0
    repeat (3) @(posedge clk);
    check(exception && viol_code == VIOL_MASQUERADE, "masquerading detected");
    check(exp_q.size() == 0, "no flit of a rejected message left the checker");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
