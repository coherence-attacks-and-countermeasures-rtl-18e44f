// cmc1: Coherence Message Checker on a chiplet's ingress link (CMC-1).
//
// Sits between the physical link from an untrusted chiplet and the input
// buffers of the interface router it is attached to. Every message is
// held here until it has been checked, so no flit of an illegal message
// ever reaches the interposer network.
//
// How it works. The link carries 64-bit flits; a control message is a head
// flit and an address flit, a data response adds eight data flits. The
// checker accepts the head flit (cycle 1: control fields), then the address
// flit (cycle 2: address, and the APU table read of the region indexed by
// the address's upper bits), then checks the message against the APU entry
// and the protocol rules in pcm_checker (cycle 3). A legal message is sent
// on to the router, head and address flit first, then its data flits
// passed straight through. An illegal one raises `exception` (the machine
// check) and the checker stops taking flits until reset. `halt` stops it
// taking new messages when another checker has raised its exception.
// CMC-1 only checks, so the packet-modification stage of the checker is
// bypassed here, as published.
//
// The checker, not the chiplet, frames the packet inside the interposer:
// it derives the virtual network from the head flit, the destination
// router from the destination ID, and the tail from the message type.
//
// Interface and timing:
//   in_*   : valid/ready link from the chiplet, one flit per cycle.
//   out_*  : flit to the router's input port; out_ready has one bit per
//            virtual network (space in that network's input buffer).
//   apu_*  : write port of this checker's APU table (secure OS only).
//   Latency from the head flit entering to it leaving is 3 cycles; a
//   control message occupies the checker for 5 cycles.
// The sequential one-message-at-a-time schedule is this design's choice.
module cmc1
  import cmc_pkg::*;
#(
  parameter int unsigned CHIPLET = 0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // from the chiplet
  input  logic                 in_valid,
  input  link_flit_t           in_flit,
  output logic                 in_ready,
  // to the router
  output logic                 out_valid,
  output noc_flit_t            out_flit,
  input  logic [N_VN-1:0]      out_ready,
  // system halt and machine check
  input  logic                 halt,
  output logic                 exception,
  output viol_e                viol_code,
  output logic                 chk_pass,   // pulses once per message checked legal
  // APU table programming
  input  logic                 apu_wr_en,
  input  logic [REGION_W-1:0]  apu_wr_idx,
  input  logic [ENTRY_W-1:0]   apu_wr_entry
);

  typedef enum logic [2:0] {S_HEAD, S_ADDR, S_LOOK, S_SEND_H, S_SEND_A, S_BODY, S_HALT} state_e;
  state_e state_q;

  head_t             head_q;
  logic [FLIT_W-1:0] addr_q;
  logic [3:0]        body_cnt_q;
  logic [ENTRY_W-1:0] entry;
  logic              chk_ok;
  viol_e             chk_viol;
  logic [NODE_W-1:0] dst;
  logic [1:0]        vn;

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

  pcm_checker u_chk (
    .chiplet (3'(CHIPLET)),
    .head    (head_q),
    .addr    (addr_q),
    .entry   (entry),
    .ok      (chk_ok),
    .viol    (chk_viol)
  );

  assign dst = node_of_id(head_q.dest);
  assign vn  = head_q.vn;

  always_comb begin
    in_ready  = 1'b0;
    out_valid = 1'b0;
    out_flit  = '{head: 1'b0, tail: 1'b0, vn: vn, dst: dst, data: '0};
    unique case (state_q)
      S_HEAD:   in_ready = !halt;
      S_ADDR:   in_ready = 1'b1;
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
        in_ready      = out_ready[vn];
        out_valid     = in_valid;
        out_flit.tail = (body_cnt_q == 4'(DATA_FLITS - 1));
        out_flit.data = in_flit.data;
      end
      default: ;
    endcase
  end

  assign chk_pass = (state_q == S_LOOK) && chk_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_HEAD;
      head_q     <= '0;
      addr_q     <= '0;
      body_cnt_q <= '0;
      exception  <= 1'b0;
      viol_code  <= VIOL_NONE;
    end else begin
      unique case (state_q)
        S_HEAD: if (in_valid && in_ready) begin
          head_q <= in_flit.data;
          if (!in_flit.head) begin          // stray body flit: framing error
            exception <= 1'b1;
            viol_code <= VIOL_FORMAT;
            state_q   <= S_HALT;
          end else begin
            state_q <= S_ADDR;
          end
        end
        S_ADDR: if (in_valid) begin
          addr_q  <= in_flit.data;
          state_q <= S_LOOK;
        end
        S_LOOK: begin
          if (chk_ok) begin
            state_q <= S_SEND_H;
          end else begin
            exception <= 1'b1;
            viol_code <= chk_viol;
            state_q   <= S_HALT;
          end
        end
        S_SEND_H: if (out_ready[vn]) state_q <= S_SEND_A;
        S_SEND_A: if (out_ready[vn]) begin
          body_cnt_q <= '0;
          state_q    <= has_data(head_q.mtype) ? S_BODY : S_HEAD;
        end
        S_BODY: if (in_valid && out_ready[vn]) begin
          body_cnt_q <= body_cnt_q + 4'd1;
          if (body_cnt_q == 4'(DATA_FLITS - 1)) state_q <= S_HEAD;
        end
        S_HALT: ;
        default: state_q <= S_HALT;
      endcase
    end
  end

  // A flit offered to the router stays put until it is taken.
  property p_out_stable;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready[out_flit.vn] && state_q != S_BODY |=> out_valid && $stable(out_flit);
  endproperty
  assert property (p_out_stable);

  // Nothing leaves the checker once it has raised its exception.
  assert property (@(posedge clk) disable iff (!rst_n) exception |-> !out_valid);

endmodule
