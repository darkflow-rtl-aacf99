// l2_row -- one row of L2 nodes read out as a systolic daisy chain.
//
// Stage i of the chain is a single-slot skid buffer that takes either the
// word arriving from stage i-1 or the oldest packet of L2 node i, tagged
// with the node's 4-bit ID ("+L2 ID"). Stage NODES-1 is the row end, where
// the 3-bit row ID and the 32-bit head are added to form the L3 event packet
// ({head, reserved, row ID, L2 ID, L2 packet}). Every link is point-to-point
// between neighbours, so there is no long row bus and no central arbiter.
//
// Backpressure: row_stall from the L3 packing engine holds the row-end stage.
// The stall spreads upstream one stage per cycle as skid slots fill, freezes
// the chain, and stops the L2 FIFOs from being read; the L2 FIFOs keep taking
// new packets until they are full.
//
// Arbitration at a stage when both the upstream word and the local node are
// ready to send is weighted round robin: stage i serves its own node once
// every i+1 contended transfers, so when the row link saturates every node
// gets the same share of it. The paper does not say how a stage merges the
// two sources; this is this design's choice.
// Latency with no contention is one cycle per stage.
module l2_row
  import darkflow_pkg::*;
#(
  parameter int unsigned NODES        = 16,
  parameter int unsigned N_L1         = 16,
  parameter int unsigned FRAME_CYCLES = 5,
  parameter int unsigned FIFO_DEPTH   = 16,
  parameter logic [ROWID_W-1:0] ROW_ID = '0
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 sync,
  input  logic [2:0]           therm [NODES][N_L1],
  output logic                 out_valid,
  input  logic                 row_stall,
  output logic [L3PKT_W-1:0]   out_data,
  output logic [NODES-1:0]     drop,
  output logic [NODES-1:0]     fifo_full
);
  localparam int unsigned TW = NODEID_W + L2PKT_W;   // tagged word

  logic          loc_valid [NODES];
  logic          loc_ready [NODES];
  logic [L2PKT_W-1:0] loc_data [NODES];
  logic          st_in_valid [NODES];
  logic          st_in_ready [NODES];
  logic [TW-1:0] st_in_data [NODES];
  logic          st_out_valid [NODES];
  logic          st_out_ready [NODES];
  logic [TW-1:0] st_out_data [NODES];

  for (genvar i = 0; i < NODES; i++) begin : g_stage
    l2_node #(.N_L1(N_L1), .FRAME_CYCLES(FRAME_CYCLES), .FIFO_DEPTH(FIFO_DEPTH)) u_node (
      .clk, .rst_n, .sync, .therm(therm[i]),
      .out_valid(loc_valid[i]), .out_ready(loc_ready[i]), .out_data(loc_data[i]),
      .drop(drop[i]), .fifo_full(fifo_full[i]), .fill_level()
    );

    logic up_valid, up_ready, grant_up;
    logic [NODEID_W-1:0] share;   // contended transfers since local was last served
    logic [TW-1:0] up_data;
    if (i == 0) begin : g_first
      assign up_valid = 1'b0;
      assign up_data  = '0;
    end else begin : g_next
      assign up_valid = st_out_valid[i-1];
      assign up_data  = st_out_data[i-1];
      assign st_out_ready[i-1] = up_ready;
    end

    // Weighted round robin: stage i carries the words of i upstream nodes,
    // so under contention the local node is served once every i+1 transfers.
    // Each node then gets an equal 1/NODES share of a saturated row link.
    assign grant_up        = up_valid && (!loc_valid[i] || (share != NODEID_W'(i)));
    assign st_in_valid[i]  = up_valid || loc_valid[i];
    assign st_in_data[i]   = grant_up ? up_data : {NODEID_W'(i), loc_data[i]};
    assign up_ready        = st_in_ready[i] && grant_up;
    assign loc_ready[i]    = st_in_ready[i] && !grant_up;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) share <= '0;
      else if (up_valid && loc_valid[i] && st_in_ready[i])
        share <= grant_up ? share + 1'b1 : '0;
    end

    skid_buffer #(.WIDTH(TW)) u_skid (
      .clk, .rst_n,
      .in_valid(st_in_valid[i]), .in_ready(st_in_ready[i]), .in_data(st_in_data[i]),
      .out_valid(st_out_valid[i]), .out_ready(st_out_ready[i]), .out_data(st_out_data[i])
    );
  end

  assign st_out_ready[NODES-1] = !row_stall;
  assign out_valid = st_out_valid[NODES-1];

  l3_evt_pkt_t pkt;
  always_comb begin
    pkt          = '0;
    pkt.head     = HEAD_EVENT;
    pkt.row_id   = ROW_ID;
    pkt.node_id  = st_out_data[NODES-1][TW-1 -: NODEID_W];
    pkt.l2       = st_out_data[NODES-1][L2PKT_W-1:0];
  end
  assign out_data = pkt;
endmodule
