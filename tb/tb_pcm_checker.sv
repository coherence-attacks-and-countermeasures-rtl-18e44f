// tb_pcm_checker: self-checking test of the CMC-1 checking rules.
//
// Part 1 runs hand-written cases, one per rule and per threat (legal
// GETS/GETX/data, masquerading, modifying, diverting, malformed), with the
// expected verdict written out. Part 2 drives random messages and compares
// with a reference written as a per-type requirement table.
module tb_pcm_checker;
  import cmc_pkg::*;

  logic [2:0]  chiplet;
  head_t       head;
  logic [63:0] addr;
  logic [15:0] entry;
  logic        ok;
  viol_e       viol;
  int checks = 0, failures = 0;

  pcm_checker dut (.*);

  function automatic head_t mk(logic [4:0] t, logic [7:0] s, logic [7:0] d, logic [1:0] v);
    head_t h = '0;
    h.mtype = t; h.sender = s; h.dest = d; h.vn = v;
    return h;
  endfunction

  task automatic expect_v(input logic [2:0] c, input head_t h, input logic [63:0] a,
                          input logic [15:0] e, input viol_e exp, input string what);
    chiplet = c; head = h; addr = a; entry = e;
    #1;
    checks++;
    if (viol !== exp || ok !== (exp == VIOL_NONE)) begin
      failures++;
      $display("FAIL: %s: viol=%0d expected %0d", what, viol, exp);
    end
  endtask

  // Reference: required permission of the sender (0 none, 1 read, 2 write),
  // required destination kind (0 home MC, 1 core), or -1 when a chiplet may
  // not send the type at all.
  function automatic int req_perm(logic [4:0] t);
    case (t)
      0, 2, 14, 18: return 2;     // GETX, PUT, WB_DIRTY, UNBLOCKM
      1, 9, 10, 11, 12, 13, 16, 17: return 1;
      8: return 0;                // ACK
      default: return -1;
    endcase
  endfunction
  function automatic int req_dest(logic [4:0] t);
    return (t >= 8 && t <= 12) ? 1 : 0;
  endfunction
  function automatic int vn_ref(logic [4:0] t);
    if (t < 3) return 0;
    if (t < 8) return 1;
    if (t < 16) return 2;
    return 3;
  endfunction

  function automatic viol_e ref_model(logic [2:0] c, head_t h, logic [63:0] a, logic [15:0] e);
    int rp = req_perm(h.mtype);
    int myp = e[2*c +: 2] == 2'b11 ? 2 : (e[2*c +: 2] == 2'b01 ? 1 : 0);
    int home = 64 + int'(a[7:6]);
    if (rp < 0 || int'(h.vn) != vn_ref(h.mtype)) return VIOL_FORMAT;
    if (int'(h.sender) < 8*c || int'(h.sender) > 8*c + 7) return VIOL_MASQUERADE;
    if (a[63:32] != 0) return VIOL_ADDRESS;
    if (req_dest(h.mtype) == 0 && int'(h.dest) != home) return VIOL_DIVERT;
    if (req_dest(h.mtype) == 1) begin
      int dc = int'(h.dest) / 8;
      if (h.dest >= 64) return VIOL_DIVERT;
      if (e[2*dc +: 2] != 2'b01 && e[2*dc +: 2] != 2'b11) return VIOL_DIVERT;
    end
    if (myp < rp) return VIOL_PERMISSION;
    return VIOL_NONE;
  endfunction

  initial begin
    logic [15:0] e01;
    logic [63:0] a;
    // region 5 (address bits 31:26 = 5), block interleave bits 7:6 = 2 -> home MC id 66
    a   = {32'd0, 6'd5, 18'd0, 8'b1000_0000};
    // Fig. 12 entry: chiplets 0 and 1 read/write, others none; chiplet 2 read-only
    e01 = 16'b00_00_00_00_00_01_11_11;

    expect_v(0, mk(MT_GETS, 8'd3, 8'd66, VN_REQ),  a, e01, VIOL_NONE,       "legal GETS");
    expect_v(0, mk(MT_GETX, 8'd3, 8'd66, VN_REQ),  a, e01, VIOL_NONE,       "legal GETX");
    expect_v(2, mk(MT_GETS, 8'd17, 8'd66, VN_REQ), a, e01, VIOL_NONE,       "read-only GETS");
    expect_v(2, mk(MT_GETX, 8'd17, 8'd66, VN_REQ), a, e01, VIOL_PERMISSION, "modifying: GETX to read-only region");
    expect_v(3, mk(MT_GETS, 8'd25, 8'd66, VN_REQ), a, e01, VIOL_PERMISSION, "GETS without access");
    expect_v(1, mk(MT_GETS, 8'd3, 8'd66, VN_REQ),  a, e01, VIOL_MASQUERADE, "masquerading: foreign sender ID");
    expect_v(1, mk(MT_GETS, 8'd70, 8'd66, VN_REQ), a, e01, VIOL_MASQUERADE, "masquerading: MC as sender");
    expect_v(0, mk(MT_GETS, 8'd3, 8'd65, VN_REQ),  a, e01, VIOL_DIVERT,     "diverting: wrong home MC");
    expect_v(0, mk(MT_GETX, 8'd3, 8'd12, VN_REQ),  a, e01, VIOL_DIVERT,     "diverting: request sent to a core");
    expect_v(0, mk(MT_DATA, 8'd3, 8'd9, VN_RESP),  a, e01, VIOL_NONE,       "data to permitted core");
    expect_v(0, mk(MT_DATA, 8'd3, 8'd40, VN_RESP), a, e01, VIOL_DIVERT,     "diverting: data to chiplet 5");
    expect_v(3, mk(MT_ACK, 8'd24, 8'd3, VN_RESP),  a, e01, VIOL_NONE,       "plain ACK needs no permission");
    expect_v(3, mk(MT_ACK_SHARED, 8'd24, 8'd3, VN_RESP), a, e01, VIOL_PERMISSION, "ACK_SHARED without access");
    expect_v(0, mk(MT_GETS, 8'd3, 8'd66, VN_RESP), a, e01, VIOL_FORMAT,     "wrong virtual network");
    expect_v(0, mk(5'd7, 8'd3, 8'd66, VN_FWD),     a, e01, VIOL_FORMAT,     "undefined type 7");
    expect_v(0, mk(5'd25, 8'd3, 8'd66, VN_UNBLOCK), a, e01, VIOL_FORMAT,    "undefined type 25");
    expect_v(0, mk(MT_FWD_GETX, 8'd3, 8'hFF, VN_FWD), a, e01, VIOL_FORMAT,  "forged directory broadcast");
    expect_v(0, mk(MT_NACK, 8'd3, 8'd9, VN_RESP),  a, e01, VIOL_FORMAT,     "forged NACK");
    expect_v(0, mk(MT_GETS, 8'd3, 8'd66, VN_REQ),  a | 64'h1_0000_0000, e01, VIOL_ADDRESS, "address beyond 4 GB");
    expect_v(2, mk(MT_WB_DIRTY, 8'd16, 8'd66, VN_RESP), a, e01, VIOL_PERMISSION, "dirty writeback from read-only");
    expect_v(1, mk(MT_UNBLOCKM, 8'd15, 8'd66, VN_UNBLOCK), a, e01, VIOL_NONE, "UNBLOCKM with read/write");
    expect_v(0, mk(MT_GETS, 8'd3, 8'd66, VN_REQ),  a, 16'b00_00_00_00_00_00_00_10, VIOL_PERMISSION, "encoding 10 is no access");

    // random messages against the reference table
    for (int n = 0; n < 20000; n++) begin
      logic [2:0] c = 3'($urandom);
      head_t h = head_t'({$urandom, $urandom});
      logic [63:0] ad = {$urandom, $urandom};
      logic [15:0] e = 16'($urandom);
      if ($urandom % 4 != 0) h.mtype = 5'($urandom % 19);
      if ($urandom % 4 != 0) h.vn = 2'(vn_ref(h.mtype));
      if ($urandom % 4 != 0) h.sender = {2'b00, c, 3'($urandom)};
      if ($urandom % 4 != 0) ad[63:32] = 0;
      if ($urandom % 2 != 0) h.dest = (req_dest(h.mtype) == 0) ? 8'(64 + ad[7:6]) : 8'($urandom % 64);
      expect_v(c, h, ad, e, ref_model(c, h, ad, e), $sformatf("random %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
