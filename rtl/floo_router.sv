// floo_router: wormhole router for one physical link, NumPorts x NumPorts (5x5 by default:
// North, East, South, West and the local port), with dimension-ordered XY routing.
//
// Every input has a FIFO (input buffering): a flit entering in cycle t leaves the FIFO in cycle
// t+1. The head flit of each input FIFO computes its output port from its header destination
// and this router's id_i (XY: x first, then y). Each output port has a round-robin arbiter
// that, once it grants an input, holds it until a flit with the header tail bit set has passed
// (wormhole switching), so packets never interleave on an output. Handshakes are valid/ready on
// every port. With EnOutputBuffer the outputs are registered by a second FIFO (elastic buffer),
// giving two cycles per hop; without it one cycle per hop. With XyOpt the switch omits the
// connections XY routing never uses: a port back to itself (loopback) and turns from the y to
// the x dimension. With RouteAlgo = IdTable the output port is read from a static table
// (parameter RouteTable) indexed by the destination id instead; the switch is then complete.
//
// Input buffering, the one-cycle latency, the optional output elastic buffer, valid/ready
// wormhole flow control, XY and table-based routing and the pruned switch follow the paper. FIFO depths,
// round-robin arbitration and the port numbering are this design's choices. The two-cycle
// configuration (output buffer on) is the default because it is the one the tile uses.
module floo_router
  import floo_pkg::*;
#(
  parameter type         flit_t         = narrow_req_flit_t,
  parameter int unsigned NumPorts       = NumDirections,
  parameter int unsigned InFifoDepth    = 2,
  parameter bit          EnOutputBuffer = 1'b1,
  parameter int unsigned OutFifoDepth   = 2,
  parameter bit          XyOpt          = 1'b1,
  parameter route_algo_e RouteAlgo      = XyRouting,
  // IdTable only: output port of destination id d is RouteTable[3*d +: 3]
  parameter logic [3*NumNodeIds-1:0] RouteTable = '0
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  id_t                 id_i,
  input  logic [NumPorts-1:0] valid_i,
  output logic [NumPorts-1:0] ready_o,
  input  flit_t               data_i  [NumPorts],
  output logic [NumPorts-1:0] valid_o,
  input  logic [NumPorts-1:0] ready_i,
  output flit_t               data_o  [NumPorts]
);
  // Is the switch connection from input port i to output port o built?
  function automatic bit conn(int unsigned i, int unsigned o);
    if (!XyOpt || RouteAlgo != XyRouting || NumPorts != NumDirections) return 1'b1;
    if (i == o) return 1'b0;                                      // loopback
    if ((i == int'(North) || i == int'(South)) && (o == int'(East) || o == int'(West)))
      return 1'b0;                                                // y -> x turn
    return 1'b1;
  endfunction

  logic [NumPorts-1:0] in_valid, in_ready;
  flit_t               in_data [NumPorts];
  route_dir_e          in_route [NumPorts];

  for (genvar i = 0; i < NumPorts; i++) begin : gen_in
    floo_fifo #(.T(flit_t), .Depth(InFifoDepth)) i_in_fifo (
      .clk_i, .rst_ni,
      .in_valid_i  (valid_i[i]),
      .in_ready_o  (ready_o[i]),
      .in_data_i   (data_i[i]),
      .out_valid_o (in_valid[i]),
      .out_ready_i (in_ready[i]),
      .out_data_o  (in_data[i])
    );
    if (RouteAlgo == IdTable) begin : gen_table
      assign in_route[i] = route_dir_e'(RouteTable[3*in_data[i].hdr.dst_id +: 3]);
    end else begin : gen_xy
      assign in_route[i] = xy_route(in_data[i].hdr.dst_id, id_i);
    end
  end

  logic [NumPorts-1:0] arb_ready [NumPorts];  // [output][input]

  for (genvar o = 0; o < NumPorts; o++) begin : gen_out
    logic [NumPorts-1:0] req, last;
    logic                sw_valid, sw_ready;
    flit_t               sw_data;
    for (genvar i = 0; i < NumPorts; i++) begin : gen_req
      assign req[i]  = conn(i, o) && in_valid[i] && (int'(in_route[i]) == o);
      assign last[i] = in_data[i].hdr.last;
    end
    floo_rr_arb #(.N(NumPorts), .T(flit_t), .Lock(1'b1)) i_arb (
      .clk_i, .rst_ni,
      .valid_i     (req),
      .ready_o     (arb_ready[o]),
      .data_i      (in_data),
      .last_i      (last),
      .out_valid_o (sw_valid),
      .out_ready_i (sw_ready),
      .out_data_o  (sw_data),
      .idx_o       ()
    );
    if (EnOutputBuffer) begin : gen_obuf
      floo_fifo #(.T(flit_t), .Depth(OutFifoDepth)) i_out_fifo (
        .clk_i, .rst_ni,
        .in_valid_i  (sw_valid),
        .in_ready_o  (sw_ready),
        .in_data_i   (sw_data),
        .out_valid_o (valid_o[o]),
        .out_ready_i (ready_i[o]),
        .out_data_o  (data_o[o])
      );
    end else begin : gen_nobuf
      assign valid_o[o] = sw_valid;
      assign sw_ready   = ready_i[o];
      assign data_o[o]  = sw_data;
    end
  end

  always_comb begin
    for (int unsigned i = 0; i < NumPorts; i++) begin
      in_ready[i] = 1'b0;
      for (int unsigned o = 0; o < NumPorts; o++) in_ready[i] |= arb_ready[o][i];
    end
  end

  // A flit must never be routed over a connection the pruned switch does not have.
  for (genvar i = 0; i < NumPorts; i++) begin : gen_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
        in_valid[i] |-> conn(i, int'(in_route[i])))
      else $error("router: flit at input %0d has no path to output %0d", i, in_route[i]);
    assert property (@(posedge clk_i) disable iff (!rst_ni)
        in_valid[i] |-> (int'(in_route[i]) < NumPorts))
      else $error("router: route table names port %0d, beyond the last port", in_route[i]);
  end
endmodule
