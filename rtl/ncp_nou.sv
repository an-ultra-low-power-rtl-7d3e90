// ncp_nou: Neural Operation Unit (NOU) with its layer sequencer.
//
// The NOU executes one neural instruction, i.e. one whole layer, on its own:
// once started it generates every tensor-memory (TM) address, feeds the
// compute units and writes the results back, then pulses `done_o`. It holds
// the paper's three compute units and the layout conversion circuit:
//   NOU-conv  TOC x THW int8 MAC array (convolution as outer products)
//   NOU-dw    TOC lanes of 3x3 depthwise convolution (9 multipliers + tree)
//   NOU-post  TOC lanes of int2float, float32 BN, float2int, ReLU, add
//   LCC       ping-pong transposer from interleaved to pixel-major layout
//
// Tensor layouts (paper, Fig. 5). A TM word holds TTM bytes.
//   pixel-major  channel c, pixels THW*j .. THW*j+THW-1 of the row-major image
//                at word base + c*(H*W/THW) + j
//   interleaved  channels TTM*t .. TTM*t+TTM-1 of pixel p at word
//                base + t*H*W + p
// Parameter tables (this design's format): convolution weights are packed
// TOC bytes per (output tile ot, input channel k) pair: pair e = ot*Cin + k
// sits at word src1 + e/NH, bytes TOC*(e%NH) .. +TOC-1, with NH = TTM/TOC = 2
// pairs per word, so every weight byte is used; byte l of a pair is the
// weight of output channel ot*TOC + l. For a 3x3 convolution the "input
// channel" index is k = 9*ci + 3*ky + kx (im2col order) and Cin becomes
// 9*Cin. Depthwise kernels at src1 + 9*t + (3*ky+kx), byte = channel in
// tile t. BN at src2 + c/4, bytes 8*(c%4) = float32 scale, +4 = float32 bias.
//
// Operations and the layouts they use:
//   conv    1x1 (stride 1), or with k3 set 3x3, pad 1, stride 1 or 2
//           (im2col: each of the 9*Cin MAC steps gathers the THW input
//           pixels of one tap from the three words around the tile's input
//           span, read in three cycles; output width a multiple of THW);
//           input pixel-major; result pixel-major or interleaved (out_il),
//           optional residual (aux) in the result layout
//   dwconv  3x3, pad 1, stride 1 or 2, input interleaved; result interleaved
//           or, through the LCC, pixel-major; residual only when interleaved
//   bn, relu, add   element-wise on pixel-major tensors (bn needs the table)
//   maxp, dsam, usam   2x2 max pooling, 2x down- and 2x up-sampling on
//           interleaved tensors
//   gap     global average pooling of an interleaved tensor (H*W a power of
//           two) into one word per 32-channel tile
//   move    copy `aux` words from src0 to dst
//
// TM access: port 0 reads features, port 1 reads weights, parameter tables
// and second operands, port 2 writes. Programs must keep the three streams
// of one instruction in different banks (the tensor memory asserts this).
// Reads return one cycle after the request; an issue stage produces the
// requests and a consume stage, one cycle later, uses the data.
//
// Departures from the paper, all this design's own: the 3x3 convolution
// keeps the MAC array busy one cycle in three (three reads per MAC step on
// the single feature port); the MAC array drains between spatial tiles
// instead of overlapping with the next tile; the depthwise
// sequencer gathers the nine window words of an output pixel one per cycle
// (no line buffer), so NOU-dw is busy one cycle in nine; the unit waits a
// fixed WAITC cycles at the end of an instruction and between depthwise
// channel groups for its pipelines to empty.
module ncp_nou
  import ncp_pkg::*;
#(
  parameter int TOC = ncp_pkg::TOC,
  parameter int THW = ncp_pkg::THW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  instr_t           instr_i,
  output logic             busy_o,
  output logic             done_o,
  // tensor memory: port 0 feature read, 1 weight/operand read, 2 write
  output logic [2:0]       tm_en_o,
  output logic [2:0]       tm_we_o,
  output logic [TM_AW-1:0] tm_addr_o  [3],
  output logic [THW*8-1:0] tm_wdata_o [3],
  output logic [THW-1:0]   tm_be_o    [3],
  input  logic [THW*8-1:0] tm_rdata_i [3]
);

  localparam int NB    = THW;          // bytes per TM word (TTM == THW)
  localparam int NH    = THW / TOC;    // TOC-lane halves per word
  localparam int HB    = (NH > 1) ? $clog2(NH) : 1;
  localparam int WAITC = 2 * THW + 8;
  localparam int LAT_DW = 3;

  initial begin
    assert (THW == TTM) else $fatal(1, "ncp_nou: THW must equal TTM");
    assert (THW % TOC == 0) else $fatal(1, "ncp_nou: TOC must divide THW");
  end

  typedef enum logic [2:0] {S_IDLE, S_PARAM, S_KLOAD, S_RUN, S_CWAIT, S_CDRAIN, S_WAIT}
    state_e;
  typedef enum logic [3:0] {M_NONE, M_PARAM, M_KERN, M_MOVE, M_EW, M_MAC, M_CDR, M_DW,
                            M_POOL, M_GAP, M_WIN} meta_e;

  typedef struct packed {
    meta_e            kind;
    logic [4:0]       idx;      // param word / kernel tap / drain item
    logic             first;
    logic             last;
    logic             inr;      // window tap inside the image
    logic [TM_AW-1:0] waddr;
    logic [TM_AW-1:0] raddr;    // dwconv residual address
    logic [HB-1:0]    half;
    logic [7:0]       pidx;     // lane parameter index (element-wise)
  } meta_t;

  state_e  st;
  instr_t  ins;
  meta_t   mi, mq;

  // --------------------------------------------------------------------------
  // Decoded instruction
  // --------------------------------------------------------------------------
  opcode_e    op;
  logic [31:0] h, w, hw, hwt, ho, wo, hwo, hwot, cin, ntile, ngrp, notile, step, kn, nci;
  logic        is_ew, use_bn, use_relu, use_res;

  assign op = ins.opcode;
  always_comb begin
    h    = 32'(ins.h);
    w    = 32'(ins.w);
    hw   = h * w;
    hwt  = hw / THW;
    step = ins.stride2 ? 32'd2 : 32'd1;
    unique case (op)
      OP_DWCONV:        begin ho = h / step; wo = w / step; end
      OP_CONV:          begin
        ho = ins.k3 ? h / step : h;
        wo = ins.k3 ? w / step : w;
      end
      OP_MAXP, OP_DSAM: begin ho = h / 2;    wo = w / 2;    end
      OP_USAM:          begin ho = h * 2;    wo = w * 2;    end
      default:          begin ho = h;        wo = w;        end
    endcase
    hwo    = ho * wo;
    hwot   = hwo / THW;
    cin    = 32'(ins.cin);
    ntile  = (cin + NB - 1) / NB;
    ngrp   = (cin + TOC - 1) / TOC;
    notile = 32'(ins.cout) / TOC;
    kn     = ins.k3 ? cin * 9 : cin;    // MAC steps per output tile
    nci    = ins.k3 ? kn * 3 : kn;      // issue cycles per output tile
    is_ew   = op inside {OP_BN, OP_RELU, OP_ADD};
    use_bn   = ins.bn || op == OP_BN;
    use_relu = ins.relu || op == OP_RELU;
    use_res  = ins.res_add || op == OP_ADD;
  end

  // --------------------------------------------------------------------------
  // Counters
  // --------------------------------------------------------------------------
  logic [31:0] c_o, c_m, c_i, oy, ox, pcnt, wcnt;
  logic [31:0] ky, kx, iy, ix;
  logic        inr;

  // window tap position (dwconv) or pooling source pixel
  always_comb begin
    ky = c_i / 3;
    kx = c_i % 3;
    iy = '0; ix = '0;
    if (op == OP_DWCONV) begin
      iy = oy * step + ky - 32'd1;
      ix = ox * step + kx - 32'd1;
    end else if (op == OP_MAXP) begin
      iy = 2 * oy + 32'(c_i[1]);
      ix = 2 * ox + 32'(c_i[0]);
    end else if (op == OP_DSAM) begin
      iy = 2 * oy; ix = 2 * ox;
    end else if (op == OP_USAM) begin
      iy = oy / 2; ix = ox / 2;
    end
    // negative coordinates wrap to large unsigned values and fail the test
    inr = (iy < h) && (ix < w);
  end

  // 3x3 standard convolution: issue cycle c_i of an output tile reads word
  // kr (0..2) of the three words around the tile's input span for MAC step
  // kk = input channel kci, tap ktap; the third read also fetches the weights
  logic [31:0] kk, kr, kci, ktap, kiy, kjw;
  logic        k_inr;
  always_comb begin
    kk    = c_i / 3;
    kr    = c_i % 3;
    kci   = kk / 9;
    ktap  = kk % 9;
    kiy   = (c_m * THW / wo) * step + ktap / 3 - 32'd1;
    kjw   = (c_m * THW % wo) * step / THW + kr - 32'd1;
    k_inr = (kiy < h) && (kjw < w / THW);
  end

  // --------------------------------------------------------------------------
  // Issue stage: TM read requests and the metadata for the consume stage
  // --------------------------------------------------------------------------
  logic             rd0_en, rd1_en, rd1_dwres;
  logic [31:0]      rd0_a, rd1_a;
  logic [31:0]      grp, ntaps, o_ch, cdr_ch, cdr_tile, cdr_pix;
  logic [TM_AW-1:0] dres_addr [LAT_DW];
  logic [LAT_DW-1:0] dres_v;

  always_comb begin
    rd0_en = 1'b0; rd1_en = 1'b0; rd0_a = '0; rd1_a = '0;
    mi = '0;
    mi.kind = M_NONE;
    grp   = is_ew ? c_o / TOC : c_o;
    ntaps = (op == OP_MAXP) ? 32'd4 : (op == OP_DWCONV) ? 32'd9 : 32'd1;
    o_ch  = c_o * TOC + c_i / NH;     // conv drain, pixel-major: channel
    cdr_ch = '0; cdr_tile = '0; cdr_pix = '0;
    unique case (st)
      S_PARAM: begin
        rd1_en = 1'b1; rd1_a = 32'(ins.src2) + grp * (TOC / 4) + pcnt;
        mi.kind = M_PARAM; mi.idx = 5'(pcnt);
      end
      S_KLOAD: begin
        rd1_en = 1'b1; rd1_a = 32'(ins.src1) + (c_o / NH) * 9 + pcnt;
        mi.kind = M_KERN; mi.idx = 5'(pcnt);
      end
      S_RUN: begin
        unique case (op)
          OP_MOVE: begin
            rd0_en = 1'b1; rd0_a = 32'(ins.src0) + c_m;
            mi.kind = M_MOVE; mi.waddr = TM_AW'(32'(ins.dst) + c_m);
          end
          OP_BN, OP_RELU, OP_ADD: begin
            rd0_en = 1'b1; rd0_a = 32'(ins.src0) + c_o * hwt + c_m;
            rd1_en = use_res; rd1_a = 32'(ins.src1) + c_o * hwt + c_m;
            mi.kind = M_EW; mi.waddr = TM_AW'(32'(ins.dst) + c_o * hwt + c_m);
            mi.half = HB'(c_i); mi.pidx = 8'(c_o % TOC);
          end
          OP_CONV: if (!ins.k3) begin
            rd0_en = 1'b1; rd0_a = 32'(ins.src0) + c_i * hwt + c_m;
            rd1_en = 1'b1; rd1_a = 32'(ins.src1) + (c_o * cin + c_i) / NH;
            mi.half = HB'((c_o * cin + c_i) % NH); mi.inr = 1'b1;
            mi.kind = M_MAC; mi.first = (c_i == 0); mi.last = (c_i == cin - 1);
          end else begin
            rd0_en = k_inr; rd0_a = 32'(ins.src0) + kci * hwt + kiy * (w / THW) + kjw;
            mi.inr = k_inr; mi.idx = 5'(ktap % 3);
            if (kr != 2) begin
              mi.kind = M_WIN; mi.half = HB'(kr);
            end else begin
              rd1_en = 1'b1; rd1_a = 32'(ins.src1) + (c_o * kn + kk) / NH;
              mi.half = HB'((c_o * kn + kk) % NH);
              mi.kind = M_MAC; mi.first = (kk == 0); mi.last = (kk == kn - 1);
            end
          end
          OP_DWCONV: begin
            rd0_en = inr; rd0_a = 32'(ins.src0) + (c_o / NH) * hw + iy * w + ix;
            mi.kind = M_DW; mi.idx = 5'(c_i); mi.inr = inr; mi.last = (c_i == 8);
            mi.half  = HB'(c_o % NH);
            mi.waddr = TM_AW'(32'(ins.dst) + (c_o / NH) * hwo + c_m);
            mi.raddr = TM_AW'(32'(ins.aux) + (c_o / NH) * hwo + c_m);
          end
          OP_MAXP, OP_DSAM, OP_USAM: begin
            rd0_en = 1'b1; rd0_a = 32'(ins.src0) + c_o * hw + iy * w + ix;
            mi.kind = M_POOL; mi.first = (c_i == 0); mi.last = (c_i == ntaps - 1);
            mi.waddr = TM_AW'(32'(ins.dst) + c_o * hwo + c_m);
          end
          OP_GAP: begin
            rd0_en = 1'b1; rd0_a = 32'(ins.src0) + c_o * hw + c_m;
            mi.kind = M_GAP; mi.first = (c_m == 0); mi.last = (c_m == hw - 1);
            mi.waddr = TM_AW'(32'(ins.dst) + c_o);
          end
          default: ;
        endcase
      end
      S_CDRAIN: begin
        // item c_i: pixel-major -> channel c_i/NH, half c_i%NH of the row;
        // interleaved -> pixel c_i of the tile, all TOC channels
        if (!ins.out_il) begin
          cdr_ch = o_ch;
          rd0_a  = 32'(ins.aux) + cdr_ch * hwot + c_m;
          mi.waddr = TM_AW'(32'(ins.dst) + cdr_ch * hwot + c_m);
          mi.half  = HB'(c_i % NH);
        end else begin
          cdr_tile = (c_o * TOC) / NB;
          cdr_pix  = c_m * THW + c_i;
          rd0_a  = 32'(ins.aux) + cdr_tile * hwo + cdr_pix;
          mi.waddr = TM_AW'(32'(ins.dst) + cdr_tile * hwo + cdr_pix);
          mi.half  = HB'(((c_o * TOC) % NB) / TOC);
        end
        rd0_en = use_res;
        mi.kind = M_CDR; mi.idx = 5'(c_i);
      end
      default: ;
    endcase
    // residual of a depthwise result, fetched LAT_DW-1 cycles after launch
    rd1_dwres = dres_v[LAT_DW-2] && use_res;
    if (rd1_dwres) begin
      rd1_en = 1'b1; rd1_a = 32'(dres_addr[LAT_DW-2]);
    end
  end

  // --------------------------------------------------------------------------
  // Control FSM
  // --------------------------------------------------------------------------
  logic conv_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; done_o <= 1'b0; mq <= '0;
      c_o <= '0; c_m <= '0; c_i <= '0; oy <= '0; ox <= '0;
      pcnt <= '0; wcnt <= '0;
    end else begin
      done_o <= 1'b0;
      mq <= mi;
      unique case (st)
        S_IDLE: if (start_i) begin
          ins <= instr_i;
          c_o <= '0; c_m <= '0; c_i <= '0; oy <= '0; ox <= '0; pcnt <= '0;
          if (instr_i.opcode inside {OP_CONV, OP_DWCONV} ||
              (instr_i.opcode == OP_BN || instr_i.bn) &&
              instr_i.opcode inside {OP_BN, OP_RELU, OP_ADD})
            st <= S_PARAM;
          else st <= S_RUN;
        end
        S_PARAM: begin
          pcnt <= pcnt + 1;
          if (pcnt == TOC / 4 - 1) begin
            pcnt <= '0;
            st   <= (op == OP_DWCONV) ? S_KLOAD : S_RUN;
          end
        end
        S_KLOAD: begin
          pcnt <= pcnt + 1;
          if (pcnt == 8) begin
            pcnt <= '0;
            st   <= S_RUN;
          end
        end
        S_RUN: begin
          unique case (op)
            OP_MOVE: begin
              c_m <= c_m + 1;
              if (c_m + 1 >= 32'(ins.aux)) st <= S_WAIT;
            end
            OP_BN, OP_RELU, OP_ADD: begin
              c_i <= c_i + 1;
              if (c_i == NH - 1) begin
                c_i <= '0;
                c_m <= c_m + 1;
                if (c_m == hwt - 1) begin
                  c_m <= '0;
                  c_o <= c_o + 1;
                  if (c_o == cin - 1) st <= S_WAIT;
                  else if (use_bn && (c_o + 1) % TOC == 0) st <= S_PARAM;
                end
              end
            end
            OP_CONV: begin
              c_i <= c_i + 1;
              if (c_i == nci - 1) begin
                c_i <= '0;
                st  <= S_CWAIT;
              end
            end
            OP_DWCONV, OP_MAXP, OP_DSAM, OP_USAM: begin
              c_i <= c_i + 1;
              if (c_i == ntaps - 1) begin
                c_i <= '0;
                c_m <= c_m + 1;
                ox  <= ox + 1;
                if (ox == wo - 1) begin
                  ox <= '0;
                  oy <= oy + 1;
                end
                if (c_m == hwo - 1) begin
                  c_m <= '0; ox <= '0; oy <= '0;
                  if (op == OP_DWCONV) st <= S_WAIT;   // next group after the wait
                  else begin
                    c_o <= c_o + 1;
                    if (c_o == ntile - 1) st <= S_WAIT;
                  end
                end
              end
            end
            OP_GAP: begin
              c_m <= c_m + 1;
              if (c_m == hw - 1) begin
                c_m <= '0;
                c_o <= c_o + 1;
                if (c_o == ntile - 1) st <= S_WAIT;
              end
            end
            default: st <= S_WAIT;
          endcase
        end
        S_CWAIT: if (conv_done) st <= S_CDRAIN;
        S_CDRAIN: begin
          c_i <= c_i + 1;
          if (c_i == THW - 1) begin
            c_i <= '0;
            c_m <= c_m + 1;
            st  <= S_RUN;
            if (c_m == hwot - 1) begin
              c_m <= '0;
              c_o <= c_o + 1;
              st  <= S_PARAM;
              if (c_o == notile - 1) st <= S_WAIT;
            end
          end
        end
        S_WAIT: begin
          wcnt <= wcnt + 1;
          if (wcnt == WAITC - 1) begin
            wcnt <= '0;
            if (op == OP_DWCONV && c_o != ngrp - 1) begin
              c_o <= c_o + 1;
              st  <= S_PARAM;
            end else begin
              st     <= S_IDLE;
              done_o <= 1'b1;
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (st != S_IDLE);

  // --------------------------------------------------------------------------
  // Consume stage
  // --------------------------------------------------------------------------
  logic [THW*8-1:0]  rd0, rd1;
  logic signed [7:0] b0 [NB], b1 [NB];
  assign rd0 = tm_rdata_i[0];
  assign rd1 = tm_rdata_i[1];
  for (genvar b = 0; b < NB; b++) begin : g_bytes
    assign b0[b] = rd0[8*b +: 8];
    assign b1[b] = rd1[8*b +: 8];
  end

  // BN parameters of the current TOC-channel group, depthwise kernels
  logic [31:0]       scale [TOC], bias [TOC];
  logic signed [7:0] kern  [TOC][9];
  logic signed [7:0] winb  [TOC][8];

  always_ff @(posedge clk) begin
    if (mq.kind == M_PARAM)
      for (int j = 0; j < 4; j++) begin
        scale[4*mq.idx + j] <= rd1[64*j +: 32];
        bias [4*mq.idx + j] <= rd1[64*j + 32 +: 32];
      end
    if (mq.kind == M_KERN)
      for (int l = 0; l < TOC; l++) kern[l][mq.idx] <= b1[(c_o % NH) * TOC + l];
    if (mq.kind == M_DW && !mq.last)
      for (int l = 0; l < TOC; l++)
        winb[l][mq.idx] <= mq.inr ? b0[32'(mq.half) * TOC + l] : 8'sd0;
  end

  // NOU-conv
  logic signed [7:0]  cw [TOC], cx [THW];
  logic signed [31:0] acc [TOC][THW];
  for (genvar l = 0; l < TOC; l++) begin : g_cw
    assign cw[l] = b1[32'(mq.half) * TOC + l];
  end
  // 3x3 convolution: the first two of the three words around the input span,
  // zero where outside the image; the third is the live read word
  logic signed [7:0] kwin [2*NB];
  always_ff @(posedge clk)
    if (mq.kind == M_WIN)
      for (int b = 0; b < NB; b++) kwin[32'(mq.half) * NB + b] <= mq.inr ? b0[b] : 8'sd0;

  // MAC row: pixel p of a 1x1 convolution is byte p of the read word; for a
  // 3x3 tap (ky, kx) it is input column start + p*stride + kx - 1, i.e. byte
  // NB - 1 + p*stride + kx of the three-word window
  always_comb begin
    for (int p = 0; p < THW; p++) begin
      int kidx;
      kidx = NB - 1 + p * int'(step) + int'(mq.idx);
      if (!ins.k3)          cx[p] = b0[p];
      else if (kidx < 2*NB) cx[p] = kwin[kidx];
      else                  cx[p] = mq.inr ? b0[kidx - 2*NB] : 8'sd0;
    end
  end

  ncp_nou_conv #(.TOC(TOC), .THW(THW)) u_conv (
    .clk(clk), .rst_n(rst_n), .mac_i(mq.kind == M_MAC), .first_i(mq.first),
    .last_i(mq.last), .w_i(cw), .x_i(cx), .done_o(conv_done), .acc_o(acc)
  );

  // NOU-dw
  logic signed [7:0]  dwin [TOC][9];
  logic signed [31:0] dsum [TOC];
  logic               dw_v;
  logic [TM_AW-1:0]   dwa [LAT_DW];
  logic [HB-1:0]      dwh [LAT_DW];
  always_comb
    for (int l = 0; l < TOC; l++) begin
      for (int t = 0; t < 8; t++) dwin[l][t] = winb[l][t];
      dwin[l][8] = mq.inr ? b0[32'(mq.half) * TOC + l] : 8'sd0;
    end

  ncp_nou_dw #(.TOC(TOC)) u_dw (
    .clk(clk), .rst_n(rst_n), .valid_i(mq.kind == M_DW && mq.last),
    .win_i(dwin), .k_i(kern), .valid_o(dw_v), .sum_o(dsum)
  );

  // write address, half and residual address travel beside NOU-dw
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dres_v <= '0;
    else        dres_v <= {dres_v[LAT_DW-2:0], mq.kind == M_DW && mq.last};
  end
  always_ff @(posedge clk) begin
    dwa[0] <= mq.waddr; dwh[0] <= mq.half; dres_addr[0] <= mq.raddr;
    for (int s = 1; s < LAT_DW; s++) begin
      dwa[s] <= dwa[s-1]; dwh[s] <= dwh[s-1]; dres_addr[s] <= dres_addr[s-1];
    end
  end

  // NOU-post input selection
  localparam int TAGW = TM_AW + HB;
  logic               p_v;
  logic [1:0]         p_sel;
  logic signed [31:0] p_conv [TOC];
  logic signed [7:0]  p_tm [TOC], p_res [TOC];
  logic [31:0]        p_sc [TOC], p_bi [TOC];
  logic [TAGW-1:0]    p_tag;
  logic               po_v;
  logic signed [7:0]  po_d [TOC];
  logic [TAGW-1:0]    po_tag;

  always_comb begin
    p_v = 1'b0; p_sel = 2'd2; p_tag = {mq.waddr, mq.half};
    for (int l = 0; l < TOC; l++) begin
      p_conv[l] = '0; p_tm[l] = b0[32'(mq.half) * TOC + l];
      p_res[l]  = b1[32'(mq.half) * TOC + l];
      p_sc[l]   = scale[l]; p_bi[l] = bias[l];
    end
    if (dw_v) begin
      p_v = 1'b1; p_sel = 2'd1; p_tag = {dwa[LAT_DW-1], dwh[LAT_DW-1]};
      for (int l = 0; l < TOC; l++) p_res[l] = b1[32'(dwh[LAT_DW-1]) * TOC + l];
    end else if (mq.kind == M_EW) begin
      p_v = 1'b1;
      for (int l = 0; l < TOC; l++) begin
        p_sc[l] = scale[mq.pidx[$clog2(TOC)-1:0]];
        p_bi[l] = bias[mq.pidx[$clog2(TOC)-1:0]];
      end
    end else if (mq.kind == M_CDR) begin
      p_v = 1'b1; p_sel = 2'd0;
      for (int l = 0; l < TOC; l++) begin
        if (!ins.out_il) begin
          p_conv[l] = acc[mq.idx / NH][32'(mq.half) * TOC + l];
          p_sc[l]   = scale[mq.idx / NH];
          p_bi[l]   = bias[mq.idx / NH];
          p_res[l]  = b0[32'(mq.half) * TOC + l];
        end else begin
          p_conv[l] = acc[l][mq.idx];
          p_res[l]  = b0[32'(mq.half) * TOC + l];
        end
      end
    end
  end

  ncp_nou_post #(.LANES(TOC), .TAGW(TAGW)) u_post (
    .clk(clk), .rst_n(rst_n), .valid_i(p_v), .sel_i(p_sel),
    .conv_i(p_conv), .dw_i(dsum), .tm_i(p_tm), .res_en_i(use_res), .res_i(p_res),
    .bn_i(use_bn), .scale_i(p_sc), .bias_i(p_bi), .relu_i(use_relu), .tag_i(p_tag),
    .valid_o(po_v), .data_o(po_d), .tag_o(po_tag)
  );

  // Layout conversion for pixel-major depthwise results
  logic                   lcc_in_v, lcc_rdy, lcc_v, lcc_last, lcc_swap;
  logic [$clog2(TOC)-1:0] lcc_ch;
  logic signed [7:0]      lcc_row [THW];
  logic [31:0]            lcc_pt;
  assign lcc_in_v = po_v && op == OP_DWCONV && !ins.out_il;

  ncp_layout_conv #(.TOC(TOC), .THW(THW)) u_lcc (
    .clk(clk), .rst_n(rst_n), .in_valid_i(lcc_in_v), .in_ready_o(lcc_rdy), .in_i(po_d),
    .out_valid_o(lcc_v), .out_last_o(lcc_last), .out_ch_o(lcc_ch), .out_o(lcc_row),
    .swap_o(lcc_swap)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lcc_pt <= '0;
    else if (st == S_PARAM) lcc_pt <= '0;
    else if (lcc_v && lcc_last) lcc_pt <= lcc_pt + 1;
  end

  // Pooling and GAP reduction registers
  logic signed [7:0]  pmax [NB], pnew [NB];
  logic signed [31:0] gsum [NB], gnew [NB];
  logic [7:0]         glog;
  always_comb begin
    glog = '0;
    for (int i = 0; i < 18; i++) if (hw[i]) glog = 8'(i);
    for (int b = 0; b < NB; b++) begin
      pnew[b] = (mq.first || b0[b] > pmax[b]) ? b0[b] : pmax[b];
      gnew[b] = (mq.first ? 32'sd0 : gsum[b]) + 32'(b0[b]);
    end
  end
  always_ff @(posedge clk) begin
    if (mq.kind == M_POOL) pmax <= pnew;
    if (mq.kind == M_GAP)  gsum <= gnew;
  end

  // --------------------------------------------------------------------------
  // Write port: post results, LCC rows, or direct (move, pooling, GAP)
  // --------------------------------------------------------------------------
  logic [31:0]       lcc_addr;
  logic signed [31:0] gavg;
  assign lcc_addr = 32'(ins.dst) + (c_o * TOC + 32'(lcc_ch)) * hwot + lcc_pt;

  always_comb begin
    tm_en_o = '0; tm_we_o = '0;
    tm_addr_o[0] = TM_AW'(rd0_a); tm_addr_o[1] = TM_AW'(rd1_a); tm_addr_o[2] = '0;
    tm_wdata_o[0] = '0; tm_wdata_o[1] = '0; tm_wdata_o[2] = '0;
    tm_be_o[0] = '0; tm_be_o[1] = '0; tm_be_o[2] = '0;
    tm_en_o[0] = rd0_en;
    tm_en_o[1] = rd1_en;
    gavg = '0;
    if (po_v && !lcc_in_v) begin
      tm_en_o[2] = 1'b1; tm_we_o[2] = 1'b1;
      tm_addr_o[2] = po_tag[TAGW-1 -: TM_AW];
      for (int hh = 0; hh < NH; hh++)
        for (int l = 0; l < TOC; l++) tm_wdata_o[2][8*(hh*TOC + l) +: 8] = po_d[l];
      tm_be_o[2][32'(po_tag[HB-1:0]) * TOC +: TOC] = '1;
    end else if (lcc_v) begin
      tm_en_o[2] = 1'b1; tm_we_o[2] = 1'b1; tm_addr_o[2] = TM_AW'(lcc_addr);
      for (int p = 0; p < THW; p++) tm_wdata_o[2][8*p +: 8] = lcc_row[p];
      tm_be_o[2] = '1;
    end else if (mq.kind == M_MOVE || (mq.kind inside {M_POOL, M_GAP} && mq.last)) begin
      tm_en_o[2] = 1'b1; tm_we_o[2] = 1'b1; tm_addr_o[2] = mq.waddr; tm_be_o[2] = '1;
      for (int b = 0; b < NB; b++) begin
        if (mq.kind == M_MOVE) tm_wdata_o[2][8*b +: 8] = b0[b];
        else if (mq.kind == M_POOL) tm_wdata_o[2][8*b +: 8] = pnew[b];
        else begin
          // average with rounding half up, saturated to int8
          gavg = (gnew[b] + ((32'sd1 <<< glog) >>> 1)) >>> glog;
          tm_wdata_o[2][8*b +: 8] = (gavg > 127) ? 8'sd127 : (gavg < -128) ? -8'sd128 : gavg[7:0];
        end
      end
    end
  end

  // A depthwise result must never find the layout converter full.
  a_lcc_ready: assert property (@(posedge clk) disable iff (!rst_n) lcc_in_v |-> lcc_rdy);

endmodule
