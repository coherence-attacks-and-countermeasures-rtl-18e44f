// flit_fifo: small synchronous FIFO used as one virtual-network input
// buffer of an interposer router.
//
// push/pop in the same cycle are allowed when the FIFO is neither empty
// (for pop) nor full (for push). `full` and `empty` come straight from the
// occupancy register, so the upstream ready does not depend combinationally
// on the downstream side. The front entry is shown on `front` whenever
// `empty` is low. Depth 4 follows the four flit slots drawn per virtual
// channel in the published router diagram.
module flit_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] front,
  output logic             full,
  output logic             empty
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [PW:0]      cnt_q;

  assign full  = cnt_q == (PW+1)'(DEPTH);
  assign empty = cnt_q == '0;
  assign front = mem[rd_q];

  always_ff @(posedge clk) begin
    if (push && !full) mem[wr_q] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push && !full) wr_q <= (wr_q == PW'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      if (pop && !empty) rd_q <= (rd_q == PW'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      cnt_q <= cnt_q + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
