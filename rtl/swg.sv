// swg: sliding-window generator for a KxK convolution with stride 1 and no padding.
//
// Input : the feature map as a stream, pixel by pixel in raster order; each pixel
//         arrives as CH/SIMD beats ("channel folds") of SIMD channels, lane j of
//         fold f carrying channel f*SIMD+j in bits [j*ELEM_W +: ELEM_W].
// Output: for every output pixel (oy, ox) in raster order, the KxK window as
//         K*K*CH/SIMD beats in the order ky, kx, channel fold. The MVAU that
//         follows consumes exactly this order, and its weight memory is laid out
//         the same way.
// How   : K+1 rows of the input are kept in a circular row buffer. Output row oy
//         is emitted once rows oy..oy+K-1 are complete, while the next input row
//         is written into the spare slot, so input and output overlap. A new frame
//         starts to be written once the last window of the previous one was sent.
// Timing: one output beat per cycle when the consumer is ready; a registered
//         output stage gives one cycle of latency. Handshake is valid/ready: a beat
//         moves when both are high. Reset is synchronous and active low; the row
//         buffer itself is not reset.
// The 3x3 kernel, stride 1 and absence of padding follow the network description
// (the 238 -> 22 and 110 -> 6 feature sizes need valid convolutions); the row buffer
// organisation and the frame-to-frame behaviour are this design's own choice.
module swg #(
  parameter int unsigned DIM    = 8,   // input feature map is DIM x DIM
  parameter int unsigned CH     = 4,   // input channels
  parameter int unsigned SIMD   = 2,   // channels per beat
  parameter int unsigned ELEM_W = 4,   // bits per element
  parameter int unsigned K      = 3
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [SIMD*ELEM_W-1:0]   in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [SIMD*ELEM_W-1:0]   out_data
);
  localparam int unsigned CF    = CH / SIMD;
  localparam int unsigned ODIM  = DIM - K + 1;
  localparam int unsigned NROW  = K + 1;
  localparam int unsigned DEPTH = NROW * DIM * CF;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned RW    = $clog2(DIM + 1);
  localparam int unsigned XW    = $clog2(DIM);
  localparam int unsigned CW    = (CF > 1) ? $clog2(CF) : 1;
  localparam int unsigned KW    = $clog2(K);
  localparam int unsigned SW    = $clog2(NROW);

  initial begin
    assert (CH % SIMD == 0) else $fatal(1, "swg: CH must be a multiple of SIMD");
    assert (DIM >= K) else $fatal(1, "swg: DIM must be at least K");
  end

  logic [SIMD*ELEM_W-1:0] mem [DEPTH];

  // ---------------- write side ----------------
  logic [RW-1:0] wr_row;          // number of complete rows written this frame
  logic [XW-1:0] wr_x;
  logic [CW-1:0] wr_cf;
  logic [SW-1:0] wr_slot;

  // ---------------- read side -----------------
  logic [RW-1:0] rd_row;          // current output row oy
  logic [XW-1:0] rd_x;            // current output column ox
  logic [KW-1:0] ky, kx;
  logic [CW-1:0] rd_cf;
  logic [SW-1:0] rd_slot;         // slot holding input row oy

  logic in_fire, rd_fire, rd_can, frame_done;

  assign in_ready = (wr_row < RW'(DIM)) && ({1'b0, wr_row} <= {1'b0, rd_row} + (RW+1)'(K));
  assign in_fire  = in_valid && in_ready;
  assign rd_can   = ({1'b0, wr_row} >= {1'b0, rd_row} + (RW+1)'(K));
  assign rd_fire  = rd_can && (!out_valid || out_ready);

  function automatic logic [SW-1:0] slot_add(logic [SW-1:0] s, logic [KW-1:0] d);
    logic [SW:0] t;
    t = {1'b0, s} + (SW+1)'(d);
    if (t >= (SW+1)'(NROW)) t = t - (SW+1)'(NROW);
    return t[SW-1:0];
  endfunction

  logic [AW-1:0] wr_addr, rd_addr;
  logic [SW-1:0] rd_slot_k;
  assign wr_addr   = AW'((32'(wr_slot) * DIM + 32'(wr_x)) * CF + 32'(wr_cf));
  assign rd_slot_k = slot_add(rd_slot, ky);
  assign rd_addr   = AW'((32'(rd_slot_k) * DIM + 32'(rd_x) + 32'(kx)) * CF + 32'(rd_cf));

  // last beat of the last window of the frame
  assign frame_done = rd_fire && (32'(rd_cf) == CF - 1) && (32'(kx) == K - 1) && (32'(ky) == K - 1)
                      && (32'(rd_x) == ODIM - 1) && (32'(rd_row) == ODIM - 1);

  always_ff @(posedge clk) begin
    if (in_fire) mem[wr_addr] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_row <= '0; wr_x <= '0; wr_cf <= '0; wr_slot <= '0;
    end else if (frame_done) begin
      wr_row <= '0; wr_x <= '0; wr_cf <= '0; wr_slot <= '0;
    end else if (in_fire) begin
      if (32'(wr_cf) == CF - 1) begin
        wr_cf <= '0;
        if (32'(wr_x) == DIM - 1) begin
          wr_x    <= '0;
          wr_row  <= wr_row + 1'b1;
          wr_slot <= (32'(wr_slot) == NROW - 1) ? '0 : wr_slot + 1'b1;
        end else begin
          wr_x <= wr_x + 1'b1;
        end
      end else begin
        wr_cf <= wr_cf + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_row <= '0; rd_x <= '0; ky <= '0; kx <= '0; rd_cf <= '0; rd_slot <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_valid && out_ready && !rd_fire) out_valid <= 1'b0;
      if (rd_fire) begin
        out_valid <= 1'b1;
        out_data  <= mem[rd_addr];
        if (32'(rd_cf) != CF - 1) rd_cf <= rd_cf + 1'b1;
        else begin
          rd_cf <= '0;
          if (32'(kx) != K - 1) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (32'(ky) != K - 1) ky <= ky + 1'b1;
            else begin
              ky <= '0;
              if (32'(rd_x) != ODIM - 1) rd_x <= rd_x + 1'b1;
              else begin
                rd_x <= '0;
                if (32'(rd_row) != ODIM - 1) begin
                  rd_row  <= rd_row + 1'b1;
                  rd_slot <= (32'(rd_slot) == NROW - 1) ? '0 : rd_slot + 1'b1;
                end else begin
                  rd_row  <= '0;
                  rd_slot <= '0;
                end
              end
            end
          end
        end
      end
    end
  end

  // A presented output beat stays put until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
