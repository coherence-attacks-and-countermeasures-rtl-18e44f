// cmc2: Coherence Message Checker on a memory controller's link (CMC-2).
//
// MOESI Hammer keeps no per-core sharer list, so on some requests (a GETX
// or GETS that misses in the home directory) the directory broadcasts the
// forwarded request to every core. A chiplet that may not access the
// region can then watch those broadcasts, which is the GETX-spy covert and
// side channel. CMC-2 stops it: it looks up the region's APU entry and,
// for every chiplet without access, replaces that chiplet's copy of the
// broadcast with a negative acknowledgement (NACK) sent straight back to
// the original requester. This is legal in the protocol, because a chiplet
// with no access to a region can hold none of its lines. Chiplets with
// access receive the broadcast unchanged.
//
// How it works. Three pipeline stages, as published: lookup (the address
// flit indexes the APU table), check (the entry gives the mask of chiplets
// allowed to read the region), modification (the broadcast is expanded, in
// chiplet order 0..7, into one two-flit message per chiplet: the forward
// itself, routed to that chiplet's interface router, or a NACK). Messages
// that are not broadcasts pass through unchanged, data flits included.
//
// Choices of this design, where the published description is silent:
//  - a broadcast is a FWD_GETX or FWD_GETS whose destination ID is 8'hFF,
//    and its sender ID is the original requester;
//  - the NACK is a one-flit-head, one-flit-address message of type NACK on
//    the response network, sent "on behalf of" the chiplet with the
//    chiplet's first core (8c) as sender ID; one NACK per chiplet;
//  - the broadcast is expanded into per-chiplet unicasts here, since the
//    interposer routers only route unicast.
//
// Interface and timing: in_* is the valid/ready link from the memory
// controller, out_* the flit to the router (out_ready per virtual network),
// apu_* the secure OS's write port. A message leaves 3 cycles after its
// head flit arrives; a broadcast then occupies the output for 16 cycles.
module cmc2
  import cmc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  link_flit_t           in_flit,
  output logic                 in_ready,
  output logic                 out_valid,
  output noc_flit_t            out_flit,
  input  logic [N_VN-1:0]      out_ready,
  output logic                 nack_sent,   // pulses per NACK head flit sent
  output logic                 bcast_seen,  // pulses per broadcast checked
  input  logic                 apu_wr_en,
  input  logic [REGION_W-1:0]  apu_wr_idx,
  input  logic [ENTRY_W-1:0]   apu_wr_entry
);

  typedef enum logic [2:0] {S_HEAD, S_ADDR, S_LOOK, S_SEND_H, S_SEND_A, S_BODY, S_MOD_H, S_MOD_A} state_e;
  state_e state_q;

  head_t                 head_q;
  logic [FLIT_W-1:0]     addr_q;
  logic [3:0]            body_cnt_q;
  logic [2:0]            chip_q;       // chiplet being served in the modification stage
  logic [N_CHIPLETS-1:0] allow_q;      // chiplets allowed to read the region
  logic [ENTRY_W-1:0]    entry;
  logic                  is_bcast;
  head_t                 mod_head;
  logic [NODE_W-1:0]     mod_dst;
  logic [1:0]            mod_vn;

  apu_table u_apu (
    .clk      (clk),
    .rst_n    (rst_n),
    .rd_en    (state_q == S_ADDR && in_valid),
    .rd_idx   (region_of(in_flit.data)),
    .rd_entry (entry),
    .wr_en    (apu_wr_en),
    .wr_idx   (apu_wr_idx),
    .wr_entry (apu_wr_entry)
  );

  assign is_bcast = head_q.dest == BCAST_ID &&
                    (head_q.mtype == MT_FWD_GETX || head_q.mtype == MT_FWD_GETS);

  // Modification stage: the copy of the broadcast for chiplet chip_q.
  always_comb begin
    mod_head = head_q;
    mod_dst  = chiplet_node(chip_q);
    mod_vn   = VN_FWD;
    if (!allow_q[chip_q]) begin
      mod_head.mtype     = MT_NACK;
      mod_head.sender    = {2'b00, chip_q, 3'b000};
      mod_head.dest      = head_q.sender;
      mod_head.vn        = VN_RESP;
      mod_head.cur_owner = '0;
      mod_head.dirty     = 1'b0;
      mod_dst            = node_of_id(head_q.sender);
      mod_vn             = VN_RESP;
    end
  end

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_flit  = '{head: 1'b0, tail: 1'b0, vn: head_q.vn, dst: node_of_id(head_q.dest), data: '0};
    unique case (state_q)
      S_HEAD, S_ADDR: in_ready = 1'b1;
      S_SEND_H: begin
        out_valid     = 1'b1;
        out_flit.head = 1'b1;
        out_flit.data = head_q;
      end
      S_SEND_A: begin
        out_valid     = 1'b1;
        out_flit.tail = !has_data(head_q.mtype);
        out_flit.data = addr_q;
      end
      S_BODY: begin
        in_ready      = out_ready[head_q.vn];
        out_valid     = in_valid;
        out_flit.tail = (body_cnt_q == 4'(DATA_FLITS - 1));
        out_flit.data = in_flit.data;
      end
      S_MOD_H: begin
        out_valid = 1'b1;
        out_flit  = '{head: 1'b1, tail: 1'b0, vn: mod_vn, dst: mod_dst, data: mod_head};
      end
      S_MOD_A: begin
        out_valid = 1'b1;
        out_flit  = '{head: 1'b0, tail: 1'b1, vn: mod_vn, dst: mod_dst, data: addr_q};
      end
      default: ;
    endcase
  end

  assign nack_sent  = state_q == S_MOD_H && !allow_q[chip_q] && out_ready[mod_vn];
  assign bcast_seen = state_q == S_LOOK && is_bcast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_HEAD;
      head_q     <= '0;
      addr_q     <= '0;
      body_cnt_q <= '0;
      chip_q     <= '0;
      allow_q    <= '0;
    end else begin
      unique case (state_q)
        S_HEAD: if (in_valid) begin
          head_q  <= in_flit.data;
          state_q <= S_ADDR;
        end
        S_ADDR: if (in_valid) begin
          addr_q  <= in_flit.data;
          state_q <= S_LOOK;
        end
        S_LOOK: begin
          for (int c = 0; c < int'(N_CHIPLETS); c++)
            allow_q[c] <= perm_can_read(entry[2*c +: 2]);
          chip_q  <= '0;
          state_q <= is_bcast ? S_MOD_H : S_SEND_H;
        end
        S_SEND_H: if (out_ready[head_q.vn]) state_q <= S_SEND_A;
        S_SEND_A: if (out_ready[head_q.vn]) begin
          body_cnt_q <= '0;
          state_q    <= has_data(head_q.mtype) ? S_BODY : S_HEAD;
        end
        S_BODY: if (in_valid && out_ready[head_q.vn]) begin
          body_cnt_q <= body_cnt_q + 4'd1;
          if (body_cnt_q == 4'(DATA_FLITS - 1)) state_q <= S_HEAD;
        end
        S_MOD_H: if (out_ready[mod_vn]) state_q <= S_MOD_A;
        S_MOD_A: if (out_ready[mod_vn]) begin
          chip_q  <= chip_q + 3'd1;
          state_q <= (chip_q == 3'(N_CHIPLETS - 1)) ? S_HEAD : S_MOD_H;
        end
        default: state_q <= S_HEAD;
      endcase
    end
  end

  // A chiplet without access never receives a copy of a broadcast.
  assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && out_flit.head && state_q == S_MOD_H && !allow_q[chip_q]
      |-> out_flit.vn == VN_RESP && out_flit.data[FLIT_W-1 -: 5] == MT_NACK);

endmodule
