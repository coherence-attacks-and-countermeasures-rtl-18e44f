// noc_router: one router of the interposer's 3x4 2D mesh (routers 72..83).
//
// Five ports: 0 local (the chiplet's or memory controller's link, entered
// through its coherence message checker), 1 north (row y-1), 2 east
// (column x+1), 3 south (row y+1), 4 west (column x-1).
//
// How it works. Every input port has one flit buffer per virtual network
// (four networks), so messages of different networks never block each
// other. Flits are routed dimension-ordered, X first then Y, on the
// destination router carried with the flit, which is deadlock-free on a
// mesh. Switching is wormhole: a head flit claims its output port for its
// virtual network until the tail flit has passed, so the flits of one
// packet stay in order and are not interleaved with another packet of the
// same network; packets of different networks may interleave on a link.
// Each output grants one flit per cycle among the (input, network) buffers
// that want it, round robin, if the next router's buffer for that network
// has room (out_ready, one bit per network: credit-free ready/valid).
//
// Interface and timing: a flit written into an input buffer can leave on
// the next cycle, so each hop costs one cycle plus any wait for the output.
// in_ready[p][v] is low when input p's buffer for network v is full.
//
// Relation to the published design: the mesh size, the per-virtual-network
// input buffers and the crossbar follow it; the published router has
// several virtual channels per virtual network (vc_per_vnet of 4 in the
// main configuration, two drawn in the router diagram) whereas this router
// keeps one buffer per network. Routing, switching and arbitration are
// this design's own choice, the paper does not describe them.
module noc_router
  import cmc_pkg::*;
#(
  parameter int unsigned X     = 0,
  parameter int unsigned Y     = 0,
  parameter int unsigned DEPTH = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid  [5],
  input  noc_flit_t       in_flit   [5],
  output logic [N_VN-1:0] in_ready  [5],
  output logic            out_valid [5],
  output noc_flit_t       out_flit  [5],
  input  logic [N_VN-1:0] out_ready [5]
);

  localparam int unsigned NP = 5;
  localparam int unsigned NK = NP * N_VN;   // (input port, network) pairs
  localparam int unsigned KW = $clog2(NK);
  localparam int unsigned FW = $bits(noc_flit_t);

  localparam logic [2:0] P_L = 3'd0, P_N = 3'd1, P_E = 3'd2, P_S = 3'd3, P_W = 3'd4;

  function automatic logic [2:0] route(logic [NODE_W-1:0] dst);
    int unsigned dx, dy;
    dx = int'(dst) % MESH_X;
    dy = int'(dst) / MESH_X;
    if (dx > X) return P_E;
    if (dx < X) return P_W;
    if (dy > Y) return P_S;
    if (dy < Y) return P_N;
    return P_L;
  endfunction

  // ---- input buffers ----
  noc_flit_t       front   [NK];
  logic            empty   [NK];
  logic            full    [NK];
  logic            pop     [NK];
  logic [2:0]      want    [NK];   // output port the front flit needs
  logic [2:0]      route_q [NK];   // output port of the packet in progress

  for (genvar p = 0; p < NP; p++) begin : g_in
    for (genvar v = 0; v < N_VN; v++) begin : g_vn
      localparam int K = p * N_VN + v;
      logic [FW-1:0] front_bits;
      flit_fifo #(.WIDTH(FW), .DEPTH(DEPTH)) u_buf (
        .clk   (clk),
        .rst_n (rst_n),
        .push  (in_valid[p] && in_flit[p].vn == 2'(v) && !full[K]),
        .din   (in_flit[p]),
        .pop   (pop[K]),
        .front (front_bits),
        .full  (full[K]),
        .empty (empty[K])
      );
      assign front[K]       = noc_flit_t'(front_bits);
      assign in_ready[p][v] = !full[K];
      assign want[K]        = front[K].head ? route(front[K].dst) : route_q[K];
    end
  end

  // ---- output allocation ----
  logic          lock_q    [NP][N_VN];
  logic [2:0]    lock_in_q [NP][N_VN];
  logic [KW-1:0] rr_q      [NP];
  logic          gnt_v     [NP];
  logic [KW-1:0] gnt_k     [NP];

  always_comb begin
    for (int k = 0; k < int'(NK); k++) pop[k] = 1'b0;
    for (int o = 0; o < int'(NP); o++) begin
      gnt_v[o] = 1'b0;
      gnt_k[o] = '0;
      for (int i = 0; i < int'(NK); i++) begin
        int k, p, v;
        logic eligible;
        k = int'(rr_q[o]) + i;
        if (k >= int'(NK)) k = k - int'(NK);
        p = k / int'(N_VN);
        v = k % int'(N_VN);
        eligible = !empty[k] && want[k] == 3'(o) && out_ready[o][v] &&
                   (front[k].head ? !lock_q[o][v]
                                  : (lock_q[o][v] && lock_in_q[o][v] == 3'(p)));
        if (eligible && !gnt_v[o]) begin
          gnt_v[o] = 1'b1;
          gnt_k[o] = KW'(k);
        end
      end
      out_valid[o] = gnt_v[o];
      out_flit[o]  = front[gnt_k[o]];
      if (gnt_v[o]) pop[gnt_k[o]] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < int'(NP); o++) begin
        rr_q[o] <= '0;
        for (int v = 0; v < int'(N_VN); v++) begin
          lock_q[o][v]    <= 1'b0;
          lock_in_q[o][v] <= '0;
        end
      end
      for (int k = 0; k < int'(NK); k++) route_q[k] <= '0;
    end else begin
      for (int o = 0; o < int'(NP); o++) begin
        if (gnt_v[o]) begin
          automatic int k = int'(gnt_k[o]);
          automatic int v = k % int'(N_VN);
          rr_q[o] <= (k == int'(NK) - 1) ? '0 : KW'(k + 1);
          if (front[k].head) route_q[k] <= 3'(o);
          if (front[k].head && !front[k].tail) begin
            lock_q[o][v]    <= 1'b1;
            lock_in_q[o][v] <= 3'(k / int'(N_VN));
          end else if (front[k].tail) begin
            lock_q[o][v]    <= 1'b0;
          end
        end
      end
    end
  end

endmodule
