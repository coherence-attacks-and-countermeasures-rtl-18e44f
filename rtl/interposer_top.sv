// interposer_top: the secure active interposer.
//
// Eight untrusted chiplets (eight cores each) and four memory controllers
// talk to each other only through this interposer, which is built in a
// trusted process and therefore serves as the system's root of trust. It
// holds a 3x4 mesh of routers (routers 72..83, row major: column 0 serves
// chiplets 0..3, column 2 chiplets 4..7, column 1 memory controllers 0..3),
// a CMC-1 on each chiplet's ingress link and a CMC-2 on each memory
// controller's link, each checker with its own APU table.
//
//   chiplet c --link--> CMC-1 --> local port of its router --mesh--> ...
//   MC m      --link--> CMC-2 --> local port of its router --mesh--> ...
//   router local outputs --> chiplet / memory-controller egress links
//
// Mechanisms:
//  - CMC-1 admits a message only if its type, virtual network, sender,
//    destination and address are legal for that chiplet under the APU
//    table; otherwise it raises the machine-check exception `mce`. Once
//    any checker has raised it, every CMC-1 stops taking new messages
//    (system halt).
//  - CMC-2 turns each chiplet's copy of a directory broadcast into a NACK
//    to the requester when the chiplet may not access the region.
//  - The secure OS (off this block) programs the APU tables through the
//    apu_* port; apu_wr_sel[n] selects the table of the checker at router
//    72+n, so tables may be written together or one by one.
//
// Interface: all links are valid/ready with 64-bit flits. Ingress links
// carry link_flit_t (head/tail marks and data), egress links carry the
// mesh's noc_flit_t, with one ready bit per virtual network. One clock for
// the whole interposer; the published interposer runs at 250 MHz against
// 1 GHz chiplets, and crossing between the two clocks is left to the
// chiplets' side of the links.
module interposer_top
  import cmc_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // chiplet ingress
  input  logic                 chip_in_valid  [N_CHIPLETS],
  input  link_flit_t           chip_in_flit   [N_CHIPLETS],
  output logic                 chip_in_ready  [N_CHIPLETS],
  // chiplet egress
  output logic                 chip_out_valid [N_CHIPLETS],
  output noc_flit_t            chip_out_flit  [N_CHIPLETS],
  input  logic [N_VN-1:0]      chip_out_ready [N_CHIPLETS],
  // memory-controller ingress
  input  logic                 mc_in_valid    [N_MC],
  input  link_flit_t           mc_in_flit     [N_MC],
  output logic                 mc_in_ready    [N_MC],
  // memory-controller egress
  output logic                 mc_out_valid   [N_MC],
  output noc_flit_t            mc_out_flit    [N_MC],
  input  logic [N_VN-1:0]      mc_out_ready   [N_MC],
  // secure OS: APU table programming
  input  logic                 apu_wr_en,
  input  logic [N_NODES-1:0]   apu_wr_sel,
  input  logic [REGION_W-1:0]  apu_wr_idx,
  input  logic [ENTRY_W-1:0]   apu_wr_entry,
  // security status
  output logic                 mce,
  output logic [N_CHIPLETS-1:0] chip_exception,
  output viol_e                chip_viol      [N_CHIPLETS],
  output logic [N_CHIPLETS-1:0] chip_chk_pass,
  output logic [N_MC-1:0]      mc_nack_sent,
  output logic [N_MC-1:0]      mc_bcast_seen
);

  localparam int unsigned NP = 5;
  localparam int P_L = 0, P_N = 1, P_E = 2, P_S = 3, P_W = 4;

  logic            r_in_valid  [N_NODES][NP];
  noc_flit_t       r_in_flit   [N_NODES][NP];
  logic [N_VN-1:0] r_in_ready  [N_NODES][NP];
  logic            r_out_valid [N_NODES][NP];
  noc_flit_t       r_out_flit  [N_NODES][NP];
  logic [N_VN-1:0] r_out_ready [N_NODES][NP];

  // ---- mesh ----
  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int N = y * MESH_X + x;

      noc_router #(.X(x), .Y(y), .DEPTH(BUF_DEPTH)) u_router (
        .clk       (clk),
        .rst_n     (rst_n),
        .in_valid  (r_in_valid[N]),
        .in_flit   (r_in_flit[N]),
        .in_ready  (r_in_ready[N]),
        .out_valid (r_out_valid[N]),
        .out_flit  (r_out_flit[N]),
        .out_ready (r_out_ready[N])
      );

      if (y > 0) begin : g_n
        assign r_in_valid[N][P_N]  = r_out_valid[N-MESH_X][P_S];
        assign r_in_flit[N][P_N]   = r_out_flit[N-MESH_X][P_S];
        assign r_out_ready[N][P_N] = r_in_ready[N-MESH_X][P_S];
      end else begin : g_n_edge
        assign r_in_valid[N][P_N]  = 1'b0;
        assign r_in_flit[N][P_N]   = '0;
        assign r_out_ready[N][P_N] = '0;
      end
      if (y < MESH_Y - 1) begin : g_s
        assign r_in_valid[N][P_S]  = r_out_valid[N+MESH_X][P_N];
        assign r_in_flit[N][P_S]   = r_out_flit[N+MESH_X][P_N];
        assign r_out_ready[N][P_S] = r_in_ready[N+MESH_X][P_N];
      end else begin : g_s_edge
        assign r_in_valid[N][P_S]  = 1'b0;
        assign r_in_flit[N][P_S]   = '0;
        assign r_out_ready[N][P_S] = '0;
      end
      if (x < MESH_X - 1) begin : g_e
        assign r_in_valid[N][P_E]  = r_out_valid[N+1][P_W];
        assign r_in_flit[N][P_E]   = r_out_flit[N+1][P_W];
        assign r_out_ready[N][P_E] = r_in_ready[N+1][P_W];
      end else begin : g_e_edge
        assign r_in_valid[N][P_E]  = 1'b0;
        assign r_in_flit[N][P_E]   = '0;
        assign r_out_ready[N][P_E] = '0;
      end
      if (x > 0) begin : g_w
        assign r_in_valid[N][P_W]  = r_out_valid[N-1][P_E];
        assign r_in_flit[N][P_W]   = r_out_flit[N-1][P_E];
        assign r_out_ready[N][P_W] = r_in_ready[N-1][P_E];
      end else begin : g_w_edge
        assign r_in_valid[N][P_W]  = 1'b0;
        assign r_in_flit[N][P_W]   = '0;
        assign r_out_ready[N][P_W] = '0;
      end
    end
  end

  // ---- CMC-1 on every chiplet link ----
  for (genvar c = 0; c < N_CHIPLETS; c++) begin : g_chip
    localparam int N = (c < 4) ? c * MESH_X : (c - 4) * MESH_X + 2;

    cmc1 #(.CHIPLET(c)) u_cmc1 (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid     (chip_in_valid[c]),
      .in_flit      (chip_in_flit[c]),
      .in_ready     (chip_in_ready[c]),
      .out_valid    (r_in_valid[N][P_L]),
      .out_flit     (r_in_flit[N][P_L]),
      .out_ready    (r_in_ready[N][P_L]),
      .halt         (mce),
      .exception    (chip_exception[c]),
      .viol_code    (chip_viol[c]),
      .chk_pass     (chip_chk_pass[c]),
      .apu_wr_en    (apu_wr_en && apu_wr_sel[N]),
      .apu_wr_idx   (apu_wr_idx),
      .apu_wr_entry (apu_wr_entry)
    );

    assign chip_out_valid[c]   = r_out_valid[N][P_L];
    assign chip_out_flit[c]    = r_out_flit[N][P_L];
    assign r_out_ready[N][P_L] = chip_out_ready[c];
  end

  // ---- CMC-2 on every memory-controller link ----
  for (genvar m = 0; m < N_MC; m++) begin : g_mc
    localparam int N = m * MESH_X + 1;

    cmc2 u_cmc2 (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid     (mc_in_valid[m]),
      .in_flit      (mc_in_flit[m]),
      .in_ready     (mc_in_ready[m]),
      .out_valid    (r_in_valid[N][P_L]),
      .out_flit     (r_in_flit[N][P_L]),
      .out_ready    (r_in_ready[N][P_L]),
      .nack_sent    (mc_nack_sent[m]),
      .bcast_seen   (mc_bcast_seen[m]),
      .apu_wr_en    (apu_wr_en && apu_wr_sel[N]),
      .apu_wr_idx   (apu_wr_idx),
      .apu_wr_entry (apu_wr_entry)
    );

    assign mc_out_valid[m]     = r_out_valid[N][P_L];
    assign mc_out_flit[m]      = r_out_flit[N][P_L];
    assign r_out_ready[N][P_L] = mc_out_ready[m];
  end

  assign mce = |chip_exception;

endmodule
