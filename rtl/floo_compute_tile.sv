// floo_compute_tile: the network part of one compute tile, i.e. the narrow-wide AXI network
// interface (floo_nw_chimney) joined to the multilink 5x5 router (floo_multilink_router).
//
// The tile's cluster is outside this module: its narrow (64-bit) and wide (512-bit) AXI buses
// attach through the narrow_/wide_ in (cluster master -> network) and out (network -> cluster
// slave) ports. The router's local port connects to the NI; its four cardinal ports are the
// tile's link ports, indexed North=0, East=1, South=2, West=3, each carrying three links
// (narrow_req, narrow_rsp, wide) in both directions. Tiles abut: the East output of tile (x,y)
// feeds the West input of tile (x+1,y), and North goes to y+1. id_i is the tile's mesh
// coordinate; a request addressed to tile (x,y) is routed by XY routing to it, or through the
// static RouteTable (3-bit output port per destination id) when RouteAlgo = IdTable.
//
// Latency: a hop costs two cycles (router input FIFO + output elastic buffer); the NI adds
// no cycle on its own. The composition (NI + one router per link, router local port to NI)
// follows the paper; the port order and link indexing are this design's choices.
module floo_compute_tile
  import floo_pkg::*;
#(
  parameter int unsigned NarrowRobSize = 256,
  parameter int unsigned WideRobSize   = 128,
  parameter route_algo_e RouteAlgo     = XyRouting,
  parameter logic [3*NumNodeIds-1:0] RouteTable = '0
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  id_t              id_i,
  // cluster AXI buses
  input  narrow_req_t      narrow_in_req_i,
  output narrow_rsp_t      narrow_in_rsp_o,
  output narrow_req_t      narrow_out_req_o,
  input  narrow_rsp_t      narrow_out_rsp_i,
  input  wide_req_t        wide_in_req_i,
  output wide_rsp_t        wide_in_rsp_o,
  output wide_req_t        wide_out_req_o,
  input  wide_rsp_t        wide_out_rsp_i,
  // links to the four neighbours
  input  logic [3:0]       nreq_valid_i,
  output logic [3:0]       nreq_ready_o,
  input  narrow_req_flit_t nreq_data_i [4],
  output logic [3:0]       nreq_valid_o,
  input  logic [3:0]       nreq_ready_i,
  output narrow_req_flit_t nreq_data_o [4],
  input  logic [3:0]       nrsp_valid_i,
  output logic [3:0]       nrsp_ready_o,
  input  narrow_rsp_flit_t nrsp_data_i [4],
  output logic [3:0]       nrsp_valid_o,
  input  logic [3:0]       nrsp_ready_i,
  output narrow_rsp_flit_t nrsp_data_o [4],
  input  logic [3:0]       wide_valid_i,
  output logic [3:0]       wide_ready_o,
  input  wide_flit_t       wide_data_i [4],
  output logic [3:0]       wide_valid_o,
  input  logic [3:0]       wide_ready_i,
  output wide_flit_t       wide_data_o [4]
);
  localparam int unsigned L = int'(Eject);

  logic [4:0]       r_nreq_vi, r_nreq_ro, r_nreq_vo, r_nreq_ri;
  narrow_req_flit_t r_nreq_di [5], r_nreq_do [5];
  logic [4:0]       r_nrsp_vi, r_nrsp_ro, r_nrsp_vo, r_nrsp_ri;
  narrow_rsp_flit_t r_nrsp_di [5], r_nrsp_do [5];
  logic [4:0]       r_wide_vi, r_wide_ro, r_wide_vo, r_wide_ri;
  wide_flit_t       r_wide_di [5], r_wide_do [5];

  for (genvar d = 0; d < 4; d++) begin : gen_dir
    assign r_nreq_vi[d] = nreq_valid_i[d];
    assign r_nreq_di[d] = nreq_data_i[d];
    assign r_nreq_ri[d] = nreq_ready_i[d];
    assign nreq_ready_o[d] = r_nreq_ro[d];
    assign nreq_valid_o[d] = r_nreq_vo[d];
    assign nreq_data_o[d]  = r_nreq_do[d];
    assign r_nrsp_vi[d] = nrsp_valid_i[d];
    assign r_nrsp_di[d] = nrsp_data_i[d];
    assign r_nrsp_ri[d] = nrsp_ready_i[d];
    assign nrsp_ready_o[d] = r_nrsp_ro[d];
    assign nrsp_valid_o[d] = r_nrsp_vo[d];
    assign nrsp_data_o[d]  = r_nrsp_do[d];
    assign r_wide_vi[d] = wide_valid_i[d];
    assign r_wide_di[d] = wide_data_i[d];
    assign r_wide_ri[d] = wide_ready_i[d];
    assign wide_ready_o[d] = r_wide_ro[d];
    assign wide_valid_o[d] = r_wide_vo[d];
    assign wide_data_o[d]  = r_wide_do[d];
  end

  floo_multilink_router #(.RouteAlgo(RouteAlgo), .RouteTable(RouteTable)) i_router (
    .clk_i, .rst_ni, .id_i,
    .nreq_valid_i (r_nreq_vi), .nreq_ready_o (r_nreq_ro), .nreq_data_i (r_nreq_di),
    .nreq_valid_o (r_nreq_vo), .nreq_ready_i (r_nreq_ri), .nreq_data_o (r_nreq_do),
    .nrsp_valid_i (r_nrsp_vi), .nrsp_ready_o (r_nrsp_ro), .nrsp_data_i (r_nrsp_di),
    .nrsp_valid_o (r_nrsp_vo), .nrsp_ready_i (r_nrsp_ri), .nrsp_data_o (r_nrsp_do),
    .wide_valid_i (r_wide_vi), .wide_ready_o (r_wide_ro), .wide_data_i (r_wide_di),
    .wide_valid_o (r_wide_vo), .wide_ready_i (r_wide_ri), .wide_data_o (r_wide_do)
  );

  floo_nw_chimney #(.NarrowRobSize(NarrowRobSize), .WideRobSize(WideRobSize)) i_ni (
    .clk_i, .rst_ni, .id_i,
    .narrow_in_req_i, .narrow_in_rsp_o, .narrow_out_req_o, .narrow_out_rsp_i,
    .wide_in_req_i, .wide_in_rsp_o, .wide_out_req_o, .wide_out_rsp_i,
    .nreq_valid_o (r_nreq_vi[L]), .nreq_ready_i (r_nreq_ro[L]), .nreq_data_o (r_nreq_di[L]),
    .nreq_valid_i (r_nreq_vo[L]), .nreq_ready_o (r_nreq_ri[L]), .nreq_data_i (r_nreq_do[L]),
    .nrsp_valid_o (r_nrsp_vi[L]), .nrsp_ready_i (r_nrsp_ro[L]), .nrsp_data_o (r_nrsp_di[L]),
    .nrsp_valid_i (r_nrsp_vo[L]), .nrsp_ready_o (r_nrsp_ri[L]), .nrsp_data_i (r_nrsp_do[L]),
    .wide_valid_o (r_wide_vi[L]), .wide_ready_i (r_wide_ro[L]), .wide_data_o (r_wide_di[L]),
    .wide_valid_i (r_wide_vo[L]), .wide_ready_o (r_wide_ri[L]), .wide_data_i (r_wide_do[L])
  );
endmodule
