// floo_multilink_router: three independent 5x5 routers, one per physical link (narrow_req,
// narrow_rsp, wide). The three networks share nothing: no virtual channels, no common
// arbitration, so wide bursts cannot delay narrow latency-sensitive messages and requests and
// responses can never block each other (no message-level deadlock). Each router is a
// floo_router with the flit type of its link; all three use the same tile id and routing
// (XY by default, or the same static table for every link when RouteAlgo = IdTable) and, by
// default, the two-cycle configuration with output elastic buffers.
// One router per link follows the paper; the parameter set is shared for simplicity.
module floo_multilink_router
  import floo_pkg::*;
#(
  parameter int unsigned NumPorts       = NumDirections,
  parameter int unsigned InFifoDepth    = 2,
  parameter bit          EnOutputBuffer = 1'b1,
  parameter route_algo_e RouteAlgo      = XyRouting,
  parameter logic [3*NumNodeIds-1:0] RouteTable = '0
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  id_t                 id_i,
  // narrow_req link
  input  logic [NumPorts-1:0] nreq_valid_i,
  output logic [NumPorts-1:0] nreq_ready_o,
  input  narrow_req_flit_t    nreq_data_i  [NumPorts],
  output logic [NumPorts-1:0] nreq_valid_o,
  input  logic [NumPorts-1:0] nreq_ready_i,
  output narrow_req_flit_t    nreq_data_o  [NumPorts],
  // narrow_rsp link
  input  logic [NumPorts-1:0] nrsp_valid_i,
  output logic [NumPorts-1:0] nrsp_ready_o,
  input  narrow_rsp_flit_t    nrsp_data_i  [NumPorts],
  output logic [NumPorts-1:0] nrsp_valid_o,
  input  logic [NumPorts-1:0] nrsp_ready_i,
  output narrow_rsp_flit_t    nrsp_data_o  [NumPorts],
  // wide link
  input  logic [NumPorts-1:0] wide_valid_i,
  output logic [NumPorts-1:0] wide_ready_o,
  input  wide_flit_t          wide_data_i  [NumPorts],
  output logic [NumPorts-1:0] wide_valid_o,
  input  logic [NumPorts-1:0] wide_ready_i,
  output wide_flit_t          wide_data_o  [NumPorts]
);
  floo_router #(.flit_t(narrow_req_flit_t), .NumPorts(NumPorts), .InFifoDepth(InFifoDepth),
                .EnOutputBuffer(EnOutputBuffer), .RouteAlgo(RouteAlgo),
                .RouteTable(RouteTable)) i_narrow_req_router (
    .clk_i, .rst_ni, .id_i,
    .valid_i (nreq_valid_i), .ready_o (nreq_ready_o), .data_i (nreq_data_i),
    .valid_o (nreq_valid_o), .ready_i (nreq_ready_i), .data_o (nreq_data_o)
  );
  floo_router #(.flit_t(narrow_rsp_flit_t), .NumPorts(NumPorts), .InFifoDepth(InFifoDepth),
                .EnOutputBuffer(EnOutputBuffer), .RouteAlgo(RouteAlgo),
                .RouteTable(RouteTable)) i_narrow_rsp_router (
    .clk_i, .rst_ni, .id_i,
    .valid_i (nrsp_valid_i), .ready_o (nrsp_ready_o), .data_i (nrsp_data_i),
    .valid_o (nrsp_valid_o), .ready_i (nrsp_ready_i), .data_o (nrsp_data_o)
  );
  floo_router #(.flit_t(wide_flit_t), .NumPorts(NumPorts), .InFifoDepth(InFifoDepth),
                .EnOutputBuffer(EnOutputBuffer), .RouteAlgo(RouteAlgo),
                .RouteTable(RouteTable)) i_wide_router (
    .clk_i, .rst_ni, .id_i,
    .valid_i (wide_valid_i), .ready_o (wide_ready_o), .data_i (wide_data_i),
    .valid_o (wide_valid_o), .ready_i (wide_ready_i), .data_o (wide_data_o)
  );
endmodule
