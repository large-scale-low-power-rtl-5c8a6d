// dor_router: routing decision of the APErouter (Dimension-Ordered Routing).
//
// For the header at the head of an input port it picks the output port and
// the virtual channel. Dimensions are visited in the order held by the
// priority register dim_order (entry k, bits 2k+1:2k, names the dimension
// visited k-th: 0=X, 1=Y, 2=Z); the first enabled dimension whose
// destination coordinate differs from this node's coordinate is the one the
// packet moves along, through the inter-tile port of that dimension. When
// all coordinates match, the packet goes to the intra-tile port named in the
// destination field. Following the paper, the upper virtual channel (1) is
// used when the offset destination - current is greater than zero and the
// lower one (0) otherwise.
//
// Design choices: inter-tile port k serves dimension k in its positive
// direction (X+, Y+ as on the two-link prototype), so a negative offset is
// covered by wrapping around the ring; a dimension with no port, disabled
// in dim_en, or with lattice size <= 1 is skipped. Purely combinational;
// one instance per input gate, so several packets are routed at once.
module dor_router
  import exanet_pkg::*;
#(
  parameter int unsigned N_INTRA = 2,
  parameter int unsigned N_INTER = 2,
  localparam int unsigned N_OUT = N_INTRA + N_INTER,
  localparam int unsigned OW = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  coord_t           dest,
  input  coord_t           my_coord,
  input  coord_t           lattice,   // lattice size per dimension in x, y, z
  input  logic [5:0]       dim_order,
  input  logic [2:0]       dim_en,
  output logic [OW-1:0]    out_port,
  output logic             out_vc,
  output logic             is_local
);
  logic [COORD_W-1:0] cur [3];
  logic [COORD_W-1:0] dst [3];
  logic [COORD_W-1:0] len [3];
  logic               found;
  logic [1:0]         d;

  always_comb begin
    cur[0] = my_coord.x; cur[1] = my_coord.y; cur[2] = my_coord.z;
    dst[0] = dest.x;     dst[1] = dest.y;     dst[2] = dest.z;
    len[0] = lattice.x;  len[1] = lattice.y;  len[2] = lattice.z;
    found    = 1'b0;
    out_port = (32'(dest.port) < N_INTRA) ? OW'(dest.port) : '0;
    out_vc   = 1'b0;
    is_local = 1'b1;
    for (int k = 0; k < 3; k++) begin
      d = dim_order[2*k +: 2];
      if (!found && d != 2'd3 && 32'(d) < N_INTER && dim_en[d] && len[d] > 1
          && cur[d] != dst[d]) begin
        found    = 1'b1;
        is_local = 1'b0;
        out_port = OW'(N_INTRA + 32'(d));
        out_vc   = (dst[d] > cur[d]);
      end
    end
  end
endmodule
