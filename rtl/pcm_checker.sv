// pcm_checker: the checking stage of the Packet Checker/Modifier (PCM) in a
// chiplet-side coherence message checker (CMC-1).
//
// Given the head flit and address flit of one coherence message sent by
// chiplet `chiplet`, and the APU entry of the region the address falls in,
// it decides whether the message may enter the interposer. Purely
// combinational; the CMC registers its result (the "packet checking" stage).
//
// Rules, in priority order (the first that fails is reported in `viol`):
//  1. Format: the message type must be defined and carried on its own
//     virtual network; directory-only types (forwards, writeback acks,
//     negative acks) may not come from a chiplet.
//  2. Masquerading: the sender ID must be one of the chiplet's own cores
//     (chiplet c owns cores 8c..8c+7).
//  3. Address: the physical address must lie inside the 4 GB main memory.
//  4. Diversion: requests, writebacks and unblocks must go to the home
//     memory controller of the address; acks and data must go to a core,
//     and that core's chiplet must itself be allowed to read the region.
//  5. Permission: GETS, ACK_SHARED, data responses, clean writebacks and
//     unblocks need read permission of the sender's chiplet; GETX, PUT,
//     dirty writebacks and UNBLOCKM need read/write permission. A plain ACK
//     (a cache that does not hold the line) needs none.
// The kinds of check follow the published design (type, VN, sender,
// destination and address are checked; the permission is looked up per
// chiplet). The exact table of which type needs what is this design's
// reading of MOESI Hammer.
module pcm_checker
  import cmc_pkg::*;
(
  input  logic [2:0]            chiplet,  // chiplet attached to this link
  input  head_t                 head,
  input  logic [FLIT_W-1:0]     addr,
  input  logic [ENTRY_W-1:0]    entry,    // APU entry of addr's region
  output logic                  ok,
  output viol_e                 viol
);

  logic [1:0] my_perm, dst_perm;
  logic       need_read, need_write, to_home, to_core, dir_only;
  logic       home_ok, core_ok;

  always_comb begin
    my_perm  = entry[2*chiplet +: 2];
    dst_perm = entry[2*chiplet_of(head.dest) +: 2];
    home_ok  = head.dest == MC_ID_BASE + 8'(home_mc(addr));
    core_ok  = is_core_id(head.dest) && perm_can_read(dst_perm);

    need_read  = 1'b0;
    need_write = 1'b0;
    to_home    = 1'b0;
    to_core    = 1'b0;
    dir_only   = 1'b0;
    unique case (head.mtype)
      MT_GETS:                       begin to_home = 1'b1; need_read  = 1'b1; end
      MT_GETX, MT_PUT:               begin to_home = 1'b1; need_write = 1'b1; end
      MT_ACK:                        begin to_core = 1'b1; end
      MT_ACK_SHARED, MT_DATA, MT_DATA_SHARED, MT_DATA_EXCLUSIVE:
                                     begin to_core = 1'b1; need_read  = 1'b1; end
      MT_WB_CLEAN:                   begin to_home = 1'b1; need_read  = 1'b1; end
      MT_WB_DIRTY:                   begin to_home = 1'b1; need_write = 1'b1; end
      MT_UNBLOCK, MT_UNBLOCKS:       begin to_home = 1'b1; need_read  = 1'b1; end
      MT_UNBLOCKM:                   begin to_home = 1'b1; need_write = 1'b1; end
      default:                       dir_only = 1'b1;   // forwards, WB acks, NACK, undefined
    endcase

    if (!type_defined(head.mtype) || head.vn != vn_of_type(head.mtype) || dir_only)
      viol = VIOL_FORMAT;
    else if (!is_core_id(head.sender) || chiplet_of(head.sender) != chiplet)
      viol = VIOL_MASQUERADE;
    else if (addr[FLIT_W-1:PADDR_W] != '0)
      viol = VIOL_ADDRESS;
    else if ((to_home && !home_ok) || (to_core && !core_ok))
      viol = VIOL_DIVERT;
    else if ((need_read && !perm_can_read(my_perm)) || (need_write && !perm_can_write(my_perm)))
      viol = VIOL_PERMISSION;
    else
      viol = VIOL_NONE;

    ok = (viol == VIOL_NONE);
  end

endmodule
