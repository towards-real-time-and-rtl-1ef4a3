// conv_layer: one layer of the quantised network as a streaming stage.
//
// Chain: sliding-window generator (3x3, stride 1, no padding) -> MVAU with PE/SIMD
// folding and threshold activation -> optional 2x2 max pool -> width converter
// from PE lanes to the OUT_LANES the next layer takes per beat.
// Input : DIM x DIM x CIN map, raster order, CIN/SIMD beats of SIMD elements.
// Output: the layer's output map in the same raster, channel-folded order with
//         OUT_LANES elements per beat; OUT_W-bit elements (4-bit activations, or
//         the signed accumulator when USE_THRESH is off).
// Config: writes on the shared configuration bus whose layer field equals
//         LAYER_ID load this layer's weights and thresholds.
// Timing: the MVAU sets the rate, SF*NF cycles per output pixel, with
//         SF = 9*CIN/SIMD and NF = COUT/PE; the other stages keep up with it.
// Layer sizes, folding and pooling follow the network tables; the stage chain is
// the usual streaming-dataflow arrangement and is this design's choice.
module conv_layer
  import finn_pkg::*;
#(
  parameter int unsigned LAYER_ID   = 0,
  parameter int unsigned DIM        = 10,
  parameter int unsigned CIN        = 4,
  parameter int unsigned COUT       = 4,
  parameter int unsigned SIMD       = 2,
  parameter int unsigned PE         = 2,
  parameter int unsigned IN_W       = 4,
  parameter int unsigned WT_W       = 4,
  parameter int unsigned LACC_W     = 24,
  parameter bit          USE_THRESH = 1'b1,
  parameter bit          POOL       = 1'b1,
  parameter int unsigned OUT_LANES  = 2,
  parameter int unsigned OUT_W      = USE_THRESH ? ACT_W : LACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [SIMD*IN_W-1:0]        in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [OUT_LANES*OUT_W-1:0]  out_data,
  input  cfg_wr_t                     cfg
);
  localparam int unsigned MW    = KDIM * KDIM * CIN;
  localparam int unsigned CDIM  = DIM - KDIM + 1;
  localparam int unsigned WD    = (MW / SIMD) * (COUT / PE);
  localparam int unsigned PEW   = $clog2(PE > 1 ? PE : 2);
  localparam int unsigned WAW   = $clog2(WD > 1 ? WD : 2);
  localparam int unsigned CHW   = $clog2(COUT > 1 ? COUT : 2);

  // ---- configuration decode ----
  logic w_we, t_we;
  assign w_we = cfg.we && (32'(cfg.layer) == LAYER_ID) && (cfg.kind == CFG_WEIGHT);
  assign t_we = cfg.we && (32'(cfg.layer) == LAYER_ID) && (cfg.kind == CFG_THRESH);

  // ---- sliding window ----
  logic                 win_valid, win_ready;
  logic [SIMD*IN_W-1:0] win_data;

  swg #(.DIM(DIM), .CH(CIN), .SIMD(SIMD), .ELEM_W(IN_W), .K(KDIM)) u_swg (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(win_valid), .out_ready(win_ready), .out_data(win_data)
  );

  // ---- MVAU ----
  logic                  mv_valid, mv_ready;
  logic [PE*OUT_W-1:0]   mv_data;

  mvau #(.MW(MW), .MH(COUT), .SIMD(SIMD), .PE(PE), .IN_W(IN_W), .WT_W(WT_W),
         .ACC_W(LACC_W), .USE_THRESH(USE_THRESH), .NT(NUM_THR), .OUT_W(OUT_W)) u_mvau (
    .clk, .rst_n,
    .in_valid(win_valid), .in_ready(win_ready), .in_data(win_data),
    .out_valid(mv_valid), .out_ready(mv_ready), .out_data(mv_data),
    .w_we, .w_pe(cfg.pe[PEW-1:0]), .w_addr(cfg.addr[WAW-1:0]), .w_data(cfg.data[SIMD*WT_W-1:0]),
    .t_we, .t_addr(cfg.addr[CHW+3:0]), .t_data(cfg.data[LACC_W-1:0])
  );

  // ---- optional max pool ----
  logic                  pl_valid, pl_ready;
  logic [PE*OUT_W-1:0]   pl_data;

  if (POOL) begin : g_pool
    maxpool #(.DIM(CDIM), .LANES(PE), .CF(COUT / PE), .ELEM_W(OUT_W)) u_pool (
      .clk, .rst_n,
      .in_valid(mv_valid), .in_ready(mv_ready), .in_data(mv_data),
      .out_valid(pl_valid), .out_ready(pl_ready), .out_data(pl_data)
    );
  end else begin : g_nopool
    assign pl_valid = mv_valid;
    assign mv_ready = pl_ready;
    assign pl_data  = mv_data;
  end

  // ---- lane conversion to the next layer ----
  if (OUT_LANES != PE) begin : g_dwc
    dwc #(.IN_LANES(PE), .OUT_LANES(OUT_LANES), .ELEM_W(OUT_W)) u_dwc (
      .clk, .rst_n,
      .in_valid(pl_valid), .in_ready(pl_ready), .in_data(pl_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_nodwc
    assign out_valid = pl_valid;
    assign pl_ready  = out_ready;
    assign out_data  = pl_data;
  end
endmodule
