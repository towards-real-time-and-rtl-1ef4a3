// mvau: matrix-vector-activation unit, the compute engine of one convolution layer.
//
// Each convolution window (MW = K*K*CIN elements) arriving from the sliding-window
// generator is multiplied by the MH x MW weight matrix. The work is folded: every
// cycle PE output channels each take a SIMD-wide dot product, so a window takes
// SF = MW/SIMD "synapse folds" per group of PE channels and NF = MH/PE "neuron
// folds" in all, SF*NF cycles per output pixel. The window is captured in an input
// buffer during the first neuron fold and replayed from it for the others.
// When USE_THRESH is set the accumulator of each channel is compared with that
// channel's 15 ascending thresholds and the number passed is the 4-bit unsigned
// activation: batch normalisation followed by 4-bit quantisation folded into one
// step. Without it (the last layer) the raw signed accumulator is sent out.
// Interface: valid/ready input of SIMD unsigned IN_W-bit elements; valid/ready
// output of PE lanes (lane p = channel nf*PE+p) of OUT_W bits; write ports to load
// the weight memories (one PE's SIMD weights per write, word address nf*SF+sf,
// lane j = synapse sf*SIMD+j) and the threshold memory (address {channel, t}).
// Timing: one synapse fold per cycle; the result leaves through a register one
// cycle after the last fold of a neuron fold. Reset (synchronous, active low)
// clears the fold counters, not the weight and threshold memories.
// PE/SIMD folding, 4-bit activations, weight precisions and the batch-norm layer
// come from the network description; reading SIMD as input channels and PE as
// output channels follows the folding table (layer 1 has SIMD = 3 = its input
// channels). Threshold activation, unsigned activations and the accumulator width
// are this design's choices.
module mvau #(
  parameter int unsigned MW         = 36,  // synapses per output channel (K*K*CIN)
  parameter int unsigned MH         = 8,   // output channels
  parameter int unsigned SIMD       = 2,
  parameter int unsigned PE         = 2,
  parameter int unsigned IN_W       = 4,   // unsigned input element width
  parameter int unsigned WT_W       = 4,   // signed weight width
  parameter int unsigned ACC_W      = 24,
  parameter bit          USE_THRESH = 1'b1,
  parameter int unsigned NT         = 15,  // thresholds per channel
  parameter int unsigned OUT_W      = USE_THRESH ? $clog2(NT + 1) : ACC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // activation stream
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [SIMD*IN_W-1:0]   in_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [PE*OUT_W-1:0]    out_data,
  // weight load
  input  logic                   w_we,
  input  logic [$clog2(PE > 1 ? PE : 2)-1:0] w_pe,
  input  logic [$clog2((MW/SIMD)*(MH/PE) > 1 ? (MW/SIMD)*(MH/PE) : 2)-1:0] w_addr,
  input  logic [SIMD*WT_W-1:0]   w_data,
  // threshold load
  input  logic                   t_we,
  input  logic [$clog2(MH > 1 ? MH : 2)+3:0] t_addr,  // {channel, t[3:0]}
  input  logic [ACC_W-1:0]       t_data
);
  localparam int unsigned SF    = MW / SIMD;
  localparam int unsigned NF    = MH / PE;
  localparam int unsigned WD    = SF * NF;
  localparam int unsigned SFW   = SF > 1 ? $clog2(SF) : 1;
  localparam int unsigned NFW   = NF > 1 ? $clog2(NF) : 1;
  localparam int unsigned CHW   = $clog2(MH > 1 ? MH : 2);
  localparam int unsigned WAW   = $clog2(WD > 1 ? WD : 2);

  initial begin
    assert (MW % SIMD == 0) else $fatal(1, "mvau: MW must be a multiple of SIMD");
    assert (MH % PE == 0)   else $fatal(1, "mvau: MH must be a multiple of PE");
    assert (NT <= 16)       else $fatal(1, "mvau: at most 16 thresholds per channel");
  end

  // ---------------- memories ----------------
  logic [SIMD*WT_W-1:0] wmem [PE][WD];
  logic [SIMD*IN_W-1:0] ibuf [SF];
  logic signed [ACC_W-1:0] thr [MH][NT];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_pe][w_addr] <= w_data;
  end

  always_ff @(posedge clk) begin
    if (t_we && (32'(t_addr[3:0]) < NT)) thr[t_addr[CHW+3:4]][t_addr[3:0]] <= t_data;
  end

  // ---------------- fold counters ----------------
  logic [SFW-1:0] sf;
  logic [NFW-1:0] nf;
  logic           out_free, fire, last_sf;
  logic [SIMD*IN_W-1:0] vec;
  logic [WAW-1:0] raddr;

  assign out_free = !out_valid || out_ready;
  assign in_ready = (nf == '0) && out_free;
  assign fire     = out_free && ((nf != '0) || in_valid);
  assign last_sf  = (32'(sf) == SF - 1);
  assign vec      = (nf == '0) ? in_data : ibuf[sf];
  assign raddr    = WAW'(32'(nf) * SF + 32'(sf));

  // ---------------- dot products ----------------
  logic signed [ACC_W-1:0] acc      [PE];
  logic signed [ACC_W-1:0] acc_next [PE];

  always_comb begin
    for (int p = 0; p < PE; p++) begin
      logic signed [ACC_W-1:0] sum;
      logic [SIMD*WT_W-1:0]    wword;
      wword = wmem[p][raddr];
      sum   = (sf == '0) ? '0 : acc[p];
      for (int j = 0; j < SIMD; j++) begin
        logic signed [IN_W:0]   a;
        logic signed [WT_W-1:0] w;
        a   = $signed({1'b0, vec[j*IN_W +: IN_W]});
        w   = $signed(wword[j*WT_W +: WT_W]);
        sum = sum + ACC_W'(a) * ACC_W'(w);
      end
      acc_next[p] = sum;
    end
  end

  // ---------------- activation ----------------
  logic [PE*OUT_W-1:0] act;
  always_comb begin
    act = '0;
    for (int p = 0; p < PE; p++) begin
      if (USE_THRESH) begin
        logic [OUT_W-1:0] cnt;
        logic [CHW-1:0]   ch;
        ch  = CHW'(32'(nf) * PE + p);
        cnt = '0;
        for (int t = 0; t < NT; t++)
          if (acc_next[p] >= thr[ch][t]) cnt = cnt + 1'b1;
        act[p*OUT_W +: OUT_W] = cnt;
      end else begin
        act[p*OUT_W +: OUT_W] = OUT_W'(acc_next[p]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fire && nf == '0) ibuf[sf] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sf <= '0; nf <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int p = 0; p < PE; p++) acc[p] <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (fire) begin
        for (int p = 0; p < PE; p++) acc[p] <= acc_next[p];
        if (last_sf) begin
          sf        <= '0;
          nf        <= (32'(nf) == NF - 1) ? '0 : nf + 1'b1;
          out_valid <= 1'b1;
          out_data  <= act;
        end else begin
          sf <= sf + 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
