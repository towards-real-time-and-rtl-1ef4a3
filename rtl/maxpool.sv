// maxpool: streaming 2x2 max pooling with stride 2.
//
// Input : a DIM x DIM feature map in raster order, each pixel as CF beats of
//         LANES unsigned ELEM_W-bit channels (the output order of the MVAU).
// Output: the (DIM/2) x (DIM/2) pooled map in the same format.
// How   : the first pixel of each horizontal pair is held per channel fold; the
//         horizontal maximum of an even row is parked in a half-row line buffer
//         and combined with the horizontal maximum of the odd row below it, which
//         produces the output beat. A trailing odd row or column is dropped.
// Timing: one input beat per cycle; an output beat leaves through a register one
//         cycle after the input beat that completes it. Input is held off only
//         while an output beat waits for a consumer. Reset is synchronous,
//         active low.
// The 2x2 window follows the network description; stride 2 and the streaming
// organisation are this design's reading of "2x2 max pooling".
module maxpool #(
  parameter int unsigned DIM    = 8,
  parameter int unsigned LANES  = 2,
  parameter int unsigned CF     = 2,   // beats per pixel
  parameter int unsigned ELEM_W = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [LANES*ELEM_W-1:0]  in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [LANES*ELEM_W-1:0]  out_data
);
  localparam int unsigned ODIM = DIM / 2;
  localparam int unsigned XW   = $clog2(DIM);
  localparam int unsigned CW   = CF > 1 ? $clog2(CF) : 1;
  localparam int unsigned LD   = ODIM * CF;
  localparam int unsigned LAW  = $clog2(LD > 1 ? LD : 2);

  logic [LANES*ELEM_W-1:0] hold [CF];
  logic [LANES*ELEM_W-1:0] line [LD];

  logic [XW-1:0] x, y;
  logic [CW-1:0] cf;
  logic          in_fire, in_pool;
  logic [LAW-1:0] laddr;
  logic [LANES*ELEM_W-1:0] hmax, vmax;

  function automatic logic [LANES*ELEM_W-1:0] vmax_f(logic [LANES*ELEM_W-1:0] a,
                                                     logic [LANES*ELEM_W-1:0] b);
    logic [LANES*ELEM_W-1:0] r;
    for (int l = 0; l < LANES; l++)
      r[l*ELEM_W +: ELEM_W] = (a[l*ELEM_W +: ELEM_W] > b[l*ELEM_W +: ELEM_W]) ?
                              a[l*ELEM_W +: ELEM_W] : b[l*ELEM_W +: ELEM_W];
    return r;
  endfunction

  assign in_ready = !out_valid || out_ready;
  assign in_fire  = in_valid && in_ready;
  // pixel lies inside a complete 2x2 window
  assign in_pool  = (32'(x) < 2 * ODIM) && (32'(y) < 2 * ODIM);
  assign laddr    = LAW'(32'(x >> 1) * CF + 32'(cf));
  assign hmax     = vmax_f(hold[cf], in_data);
  assign vmax     = vmax_f(line[laddr], hmax);

  always_ff @(posedge clk) begin
    if (in_fire && in_pool) begin
      if (!x[0]) hold[cf] <= in_data;
      else if (!y[0]) line[laddr] <= hmax;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x <= '0; y <= '0; cf <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_fire) begin
        if (in_pool && x[0] && y[0]) begin
          out_valid <= 1'b1;
          out_data  <= vmax;
        end
        if (32'(cf) != CF - 1) cf <= cf + 1'b1;
        else begin
          cf <= '0;
          if (32'(x) != DIM - 1) x <= x + 1'b1;
          else begin
            x <= '0;
            y <= (32'(y) == DIM - 1) ? '0 : y + 1'b1;
          end
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
