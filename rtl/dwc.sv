// dwc: stream width converter between layers whose lane counts differ.
//
// The MVAU of one layer emits PE channels per beat while the next layer's
// sliding-window generator takes SIMD channels per beat. When IN_LANES is a
// multiple of OUT_LANES, each input beat is split into IN_LANES/OUT_LANES output
// beats, lowest lanes first; when OUT_LANES is a multiple of IN_LANES, that many
// input beats are gathered into one output beat, the first in the lowest lanes.
// Channel order is therefore preserved in both directions. Equal widths go
// through one register. Handshake is valid/ready; there is one register stage.
// Reset is synchronous, active low.
// The need for this conversion follows from per-layer folding; its form is this
// design's own.
module dwc #(
  parameter int unsigned IN_LANES  = 4,
  parameter int unsigned OUT_LANES = 2,
  parameter int unsigned ELEM_W    = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  logic [IN_LANES*ELEM_W-1:0]  in_data,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [OUT_LANES*ELEM_W-1:0] out_data
);
  localparam int unsigned IW = IN_LANES * ELEM_W;
  localparam int unsigned OW = OUT_LANES * ELEM_W;

  initial assert ((IN_LANES % OUT_LANES == 0) || (OUT_LANES % IN_LANES == 0))
    else $fatal(1, "dwc: lane counts must divide each other");

  if (IN_LANES >= OUT_LANES) begin : g_split
    localparam int unsigned R  = IN_LANES / OUT_LANES;
    localparam int unsigned RW = R > 1 ? $clog2(R) : 1;
    logic [IW-1:0] buf_q;
    logic [RW-1:0] idx;
    logic          full;
    assign in_ready  = !full || (out_ready && (32'(idx) == R - 1));
    assign out_valid = full;
    assign out_data  = buf_q[32'(idx) * OW +: OW];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        full <= 1'b0; idx <= '0; buf_q <= '0;
      end else begin
        if (full && out_ready) begin
          if (32'(idx) == R - 1) begin idx <= '0; full <= 1'b0; end
          else idx <= idx + 1'b1;
        end
        if (in_valid && in_ready) begin
          buf_q <= in_data;
          full  <= 1'b1;
        end
      end
    end
  end else begin : g_gather
    localparam int unsigned R  = OUT_LANES / IN_LANES;
    localparam int unsigned RW = $clog2(R);
    logic [OW-1:0] buf_q;
    logic [RW-1:0] idx;
    logic          full;
    assign in_ready  = !full || out_ready;
    assign out_valid = full;
    assign out_data  = buf_q;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        full <= 1'b0; idx <= '0; buf_q <= '0;
      end else begin
        if (full && out_ready) full <= 1'b0;
        if (in_valid && in_ready) begin
          buf_q[32'(idx) * IW +: IW] <= in_data;
          if (32'(idx) == R - 1) begin idx <= '0; full <= 1'b1; end
          else idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
