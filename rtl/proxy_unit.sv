// proxy_unit: data proxy on one side of the chip.
//
// The mesh has a proxy unit on each of its four sides. Outbound, the proxy
// merges the packets leaving the N edge routers of its side (packets addressed
// beyond the mesh, such as probe responses for the host or spikes for a
// neighbouring chip) onto one off-chip link, round-robin. Inbound, it hands a
// packet from the off-chip link to the edge router of the row (west and east
// proxies) or column (north and south proxies) of its destination, clamped to
// the mesh; from there ordinary mesh routing takes it on. The packet format is
// unchanged: the paper says the proxies convert between on-chip and off-chip
// packets and route off-chip with the same algorithm, but it gives no chip
// addressing, so this proxy does no conversion.
//
// Interface: N edge links each way (valid/ready, packet_t) and one off-chip
// link each way. VERTICAL = 1 for the west/east proxies (edge links indexed by
// row, y), 0 for north/south (indexed by column, x).
module proxy_unit
  import taibai_pkg::*;
#(
  parameter int N        = 12,
  parameter bit VERTICAL = 1'b1
) (
  input  logic              clk,
  input  logic              rst,
  // from the edge routers
  input  logic    [N-1:0]   edge_in_valid,
  output logic    [N-1:0]   edge_in_ready,
  input  packet_t [N-1:0]   edge_in_data,
  // to the edge routers
  output logic    [N-1:0]   edge_out_valid,
  input  logic    [N-1:0]   edge_out_ready,
  output packet_t [N-1:0]   edge_out_data,
  // off-chip link
  output logic              ext_out_valid,
  input  logic              ext_out_ready,
  output packet_t           ext_out_data,
  input  logic              ext_in_valid,
  output logic              ext_in_ready,
  input  packet_t           ext_in_data
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] rr;
  logic [IW-1:0] sel;
  logic          any;

  // outbound round-robin merge
  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 0; k < N; k++) begin
      int i;
      i = (int'(rr) + k) % N;
      if (!any && edge_in_valid[i]) begin
        any = 1'b1;
        sel = IW'(i);
      end
    end
    ext_out_valid = any;
    ext_out_data  = edge_in_data[sel];
    edge_in_ready = '0;
    if (any) edge_in_ready[sel] = ext_out_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) rr <= '0;
    else if (any && ext_out_ready) rr <= (int'(sel) == N - 1) ? '0 : sel + 1'b1;
  end

  // inbound: pick the edge router by the destination's row or column
  int signed c;
  int        tgt;
  always_comb begin
    c   = VERTICAL ? coord(ext_in_data.dest.y0) : coord(ext_in_data.dest.x0);
    tgt = (c < 0) ? 0 : (c > N - 1) ? N - 1 : c;
    edge_out_valid = '0;
    for (int i = 0; i < N; i++) edge_out_data[i] = ext_in_data;
    edge_out_valid[tgt] = ext_in_valid;
    ext_in_ready = edge_out_ready[tgt];
  end
endmodule
