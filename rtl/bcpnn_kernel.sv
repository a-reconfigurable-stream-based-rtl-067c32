// bcpnn_kernel -- stream-based BCPNN accelerator kernel (top level).
//
// One call of the kernel processes one image in one of three modes: inference,
// unsupervised training of the input-hidden projection, or supervised training
// of the hidden-output projection. The kernel is a set of concurrent stages
// joined by streams, all data-driven:
//
//   read_constants  one 512-bit beat: mode, mask enable, trace reset, rate, label
//   mask_buffer     receptive-field mask (structural plasticity builds)
//   input_activity  pixels -> input activities x (and presynaptic traces)
//   hid_support     64-word weight packets from 4 merged HBM channels -> s_j
//   stream_fifo     support stream
//   softmax_unit    per hidden hypercolumn -> activities a_j (and p_j, b_j)
//   trace_update    joint traces p_ij, 64 per packet, 4 merged channels
//   weight_update   w_ij = ln p_ij - ln p_i - ln p_j
//   hbm_split       p_ij and w_ij packets back to 4 + 4 HBM channels
//   out_support     hidden-output projection, 16-word beats, one channel
//   softmax_unit    output hypercolumn -> class activities, prediction
//   trace_update / weight_update / hbm_split on 16-word beats for supervised
//                   training of the hidden-output projection
//
// Sequencing: `start` (accepted when idle) -> read constants -> load mask and
// image -> run. In the run phase the weight streams, the joint-trace streams
// and the output projection all proceed at once. A row of joint traces (input-
// hidden) or a hidden-output row is admitted only when the activity of its
// hidden unit exists, i.e. when the softmax of its hypercolumn has finished;
// everything else is paced by valid/ready back-pressure. `done` pulses for one
// cycle when every stream of the call has been consumed and every write beat
// has left; `pred` and `out_act` then hold the class and the output activities.
//
// HBM channels appear as 512-bit valid/ready streams (the AXI masters and
// address generation belong to the platform). Array layouts in HBM, row by row:
//   w_ih, p_ih : row j = NI_PAD words, word i of each 64-word block on channel
//                (i mod 64) / 16, 16 words per beat
//   w_ho, p_ho : row j = one beat of 16 words, k = 0..15 (k >= NO unused)
// Small state (p_i, p_j, b_j, the hidden-output presynaptic trace and the
// output traces) stays on chip between calls; `init` in the constants resets it
// to the uniform priors. Structure and sizes follow the original (64-word
// packets from four channels, 16-word packets for the hidden-output projection,
// model 1: 28x28 inputs, 32x128 hidden units, 10 classes); number formats,
// encodings and the sequencing are this design's own.
//
// Build versions (the original reports three kernel builds: inference only,
// with training, with training and structural plasticity):
//   LEARN=1, STRUCT=1  full kernel with the receptive-field mask (default)
//   LEARN=1, STRUCT=0  training kernel without the mask (all inputs connected)
//   LEARN=0            inference-only kernel: the trace/weight update paths and
//                      their write channels are not built, training modes run
//                      as inference and write nothing; the write-channel
//                      outputs are tied low. Use STRUCT=0 with it, or keep the
//                      mask if the receptive fields should still apply.
// How the original's three builds differ inside is not described; this split
// is this design's own.
module bcpnn_kernel
  import bcpnn_pkg::*;
#(
  parameter int unsigned NI_HC  = 784,   // input hypercolumns (pixels)
  parameter int unsigned NI_PAD = 1600,  // 2*NI_HC rounded up to a multiple of 64
  parameter int unsigned NH_HC  = 32,    // hidden hypercolumns
  parameter int unsigned MH     = 128,   // minicolumns per hidden hypercolumn
  parameter int unsigned NO     = 10,    // output classes
  parameter int unsigned FIFO_DEPTH = 16,
  parameter bit          LEARN  = 1'b1,  // 0: inference-only build, no plasticity hardware
  parameter bit          STRUCT = 1'b1,  // 0: build without the receptive-field mask
  localparam int unsigned NH    = NH_HC * MH,
  localparam int unsigned JW    = $clog2(NH),
  localparam int unsigned RPK   = NI_PAD / PKT,
  localparam int unsigned PW    = (RPK > 1) ? $clog2(RPK) : 1,
  localparam int unsigned OW    = $clog2(WPB)
) (
  input  logic          clk,
  input  logic          rst_n,
  // call control
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [OW-1:0] pred,
  output fx_t           out_act   [NO],
  // constants, mask and image (one HBM channel each)
  input  logic          const_valid,
  output logic          const_ready,
  input  beat_t         const_data,
  input  logic          mask_valid,
  output logic          mask_ready,
  input  beat_t         mask_data,
  input  logic          pix_valid,
  output logic          pix_ready,
  input  beat_t         pix_data,
  // input-hidden projection: weights and joint traces, four channels each
  input  logic [NCH-1:0] wih_valid,
  output logic [NCH-1:0] wih_ready,
  input  beat_t          wih_data   [NCH],
  input  logic [NCH-1:0] pih_valid,
  output logic [NCH-1:0] pih_ready,
  input  beat_t          pih_data   [NCH],
  output logic [NCH-1:0] pih_wr_valid,
  input  logic [NCH-1:0] pih_wr_ready,
  output beat_t          pih_wr_data[NCH],
  output logic [NCH-1:0] wih_wr_valid,
  input  logic [NCH-1:0] wih_wr_ready,
  output beat_t          wih_wr_data[NCH],
  // hidden-output projection: one channel each
  input  logic          who_valid,
  output logic          who_ready,
  input  beat_t         who_data,
  input  logic          pho_valid,
  output logic          pho_ready,
  input  beat_t         pho_data,
  output logic          pho_wr_valid,
  input  logic          pho_wr_ready,
  output beat_t         pho_wr_data,
  output logic          who_wr_valid,
  input  logic          who_wr_ready,
  output beat_t         who_wr_data
);
  localparam fx_t PJ0 = fx_t'(FX_ONE / MH);
  localparam fx_t PK0 = fx_t'(FX_ONE / NO);
  localparam fx_t BJ0 = fx_ln(PJ0);
  localparam fx_t BK0 = fx_ln(PK0);
  localparam int unsigned TW = JW + PW;

  // ------------------------------------------------------------ sequencing
  typedef enum logic [2:0] {C_IDLE, C_CONST, C_LOAD, C_RUN, C_FIN} cstate_e;
  cstate_e st;
  logic    load_start, run_start;
  consts_t cst;
  logic    cst_valid;
  mode_e   mode;
  logic    unsup, sup, running;

  assign mode    = cst.mode;
  assign unsup   = LEARN && (mode == MODE_UNSUP);
  assign sup     = LEARN && (mode == MODE_SUP);
  assign running = (st == C_RUN) && !run_start;
  assign busy    = (st != C_IDLE);

  // ------------------------------------------------------------ state vectors
  fx_t act_h [NH];          // hidden activities of this call
  fx_t pj    [NH];          // hidden traces (input-hidden postsynaptic)
  fx_t bj    [NH];          // hidden bias = ln p_j
  fx_t pjo   [NH];          // hidden traces of the hidden-output projection
  fx_t lnpjo [NH];
  fx_t pk    [NO];          // output traces
  fx_t bk    [NO];          // output bias = ln p_k
  logic [$clog2(NH_HC+1)-1:0] hc_done;   // hidden hypercolumns finished
  logic [$clog2(NH+1)-1:0]    navail;    // hidden activities available
  assign navail = ($clog2(NH+1))'(hc_done) * ($clog2(NH+1))'(MH);

  // ------------------------------------------------------------ constants, mask, image
  logic mask_done, in_done;
  logic [NH_HC*NI_HC-1:0] mask;
  fx_t  x_vec [NI_PAD];
  fx_t  lnpi  [NI_PAD];

  read_constants u_const (
    .clk, .rst_n, .start(start && st == C_IDLE),
    .in_valid(const_valid), .in_ready(const_ready), .in_data(const_data),
    .consts(cst), .valid(cst_valid)
  );

  if (STRUCT) begin : g_mask
    mask_buffer #(.NH_HC(NH_HC), .NI_HC(NI_HC)) u_mask (
      .clk, .rst_n, .start(load_start), .use_mask(cst.struct_en),
      .in_valid(mask_valid), .in_ready(mask_ready), .in_data(mask_data),
      .mask(mask), .done(mask_done)
    );
  end else begin : g_nomask
    assign mask       = '1;
    assign mask_done  = 1'b1;
    assign mask_ready = 1'b0;
  end

  input_activity #(.NI_HC(NI_HC), .NI_PAD(NI_PAD)) u_in (
    .clk, .rst_n, .start(load_start), .init(cst.init), .learn(unsup),
    .alpha_sh(cst.alpha_sh),
    .in_valid(pix_valid), .in_ready(pix_ready), .in_data(pix_data),
    .x_vec(x_vec), .lnpi_vec(lnpi), .done(in_done)
  );

  // ------------------------------------------------------------ hidden support and softmax
  pkt_t w_pkt;
  logic w_pkt_valid, w_pkt_ready;
  logic hs_in_ready;

  hbm_merge u_wmerge (
    .clk, .rst_n, .ch_valid(wih_valid), .ch_ready(wih_ready), .ch_data(wih_data),
    .out_valid(w_pkt_valid), .out_ready(w_pkt_ready), .out_data(w_pkt)
  );
  assign w_pkt_ready = running && hs_in_ready;

  logic          hs_valid, hs_ready;
  sup_t          hs_sup;
  logic [JW-1:0] hs_idx;

  hid_support #(.NI_HC(NI_HC), .NI_PAD(NI_PAD), .NH_HC(NH_HC), .MH(MH)) u_hsup (
    .clk, .rst_n, .start(run_start),
    .in_valid(w_pkt_valid && running), .in_ready(hs_in_ready), .in_w(w_pkt),
    .x_vec(x_vec), .bias_vec(bj), .mask(mask),
    .out_valid(hs_valid), .out_ready(hs_ready), .out_sup(hs_sup), .out_idx(hs_idx)
  );

  logic              sf_valid, sf_ready;
  logic [DW+JW-1:0]  sf_data;

  stream_fifo #(.WIDTH(DW + JW), .DEPTH(FIFO_DEPTH)) u_sfifo (
    .clk, .rst_n,
    .in_valid(hs_valid), .in_ready(hs_ready), .in_data({hs_idx, hs_sup}),
    .out_valid(sf_valid), .out_ready(sf_ready), .out_data(sf_data), .level()
  );

  logic          ha_valid, ha_grp;
  fx_t           ha_act;
  logic [JW-1:0] ha_idx;

  softmax_unit #(.M(MH), .IW(JW)) u_hsoft (
    .clk, .rst_n,
    .in_valid(sf_valid), .in_ready(sf_ready),
    .in_sup(sup_t'(sf_data[DW-1:0])), .in_idx(sf_data[DW+JW-1:DW]),
    .out_valid(ha_valid), .out_ready(1'b1), .out_act(ha_act), .out_idx(ha_idx),
    .grp_done(ha_grp)
  );

  // ------------------------------------------------------------ input-hidden plasticity
  pkt_t p_pkt;
  logic p_pkt_valid, p_pkt_ready;
  logic [JW-1:0] prow;
  logic [PW-1:0] ppk;
  logic          tu_in_ready;
  logic          ih_go;

  fx_t tu_u [PKT];
  logic          tu_valid, tu_ready;
  pkt_t          tu_p;
  logic [TW-1:0] tu_tag;
  fx_t wu_lnu [PKT];
  logic          wu_valid, wu_ready;
  pkt_t          wu_p, wu_w;
  logic [2*NCH-1:0] ihw_valid, ihw_ready;
  beat_t            ihw_data [2*NCH];
  logic             ihw_idle;

  if (LEARN) begin : g_ih
    hbm_merge u_pmerge (
      .clk, .rst_n, .ch_valid(pih_valid), .ch_ready(pih_ready), .ch_data(pih_data),
      .out_valid(p_pkt_valid), .out_ready(p_pkt_ready), .out_data(p_pkt)
    );

    // a row of joint traces waits for the softmax of its hypercolumn
    assign ih_go       = running && unsup && (32'(prow) / MH < 32'(hc_done));
    assign p_pkt_ready = ih_go && tu_in_ready;

    always_comb
      for (int l = 0; l < PKT; l++) tu_u[l] = x_vec[int'(ppk) * PKT + l];


    trace_update #(.LANES(PKT), .TW(TW)) u_tu (
      .clk, .rst_n, .sh(cst.alpha_sh),
      .in_valid(p_pkt_valid && ih_go), .in_ready(tu_in_ready),
      .in_p(p_pkt), .in_u(tu_u), .in_v(act_h[prow]), .in_tag({prow, ppk}),
      .out_valid(tu_valid), .out_ready(tu_ready), .out_p(tu_p), .out_tag(tu_tag)
    );

    always_comb
      for (int l = 0; l < PKT; l++) wu_lnu[l] = lnpi[int'(tu_tag[PW-1:0]) * PKT + l];


    weight_update #(.LANES(PKT), .TW(TW)) u_wu (
      .clk, .rst_n,
      .in_valid(tu_valid), .in_ready(tu_ready), .in_p(tu_p), .in_lnu(wu_lnu),
      .in_lnv(bj[tu_tag[TW-1:PW]]), .in_tag(tu_tag),
      .out_valid(wu_valid), .out_ready(wu_ready), .out_p(wu_p), .out_w(wu_w), .out_tag()
    );


    hbm_split #(.NC(2*NCH)) u_ihsplit (
      .clk, .rst_n, .in_valid(wu_valid), .in_ready(wu_ready), .in_data({wu_w, wu_p}),
      .ch_valid(ihw_valid), .ch_ready(ihw_ready), .ch_data(ihw_data), .idle(ihw_idle)
    );
    assign pih_wr_valid = ihw_valid[NCH-1:0];
    assign wih_wr_valid = ihw_valid[2*NCH-1:NCH];
    assign ihw_ready    = {wih_wr_ready, pih_wr_ready};
    always_comb
      for (int c = 0; c < NCH; c++) begin
        pih_wr_data[c] = ihw_data[c];
        wih_wr_data[c] = ihw_data[NCH + c];
      end
  end else begin : g_ih_off
    assign pih_ready    = '0;
    assign p_pkt_valid  = 1'b0;
    assign p_pkt_ready  = 1'b0;
    assign ih_go        = 1'b0;
    assign wu_valid     = 1'b0;
    assign wu_ready     = 1'b0;
    assign ihw_idle     = 1'b1;
    assign pih_wr_valid = '0;
    assign wih_wr_valid = '0;
    always_comb
      for (int c = 0; c < NCH; c++) begin
        pih_wr_data[c] = '0;
        wih_wr_data[c] = '0;
      end
  end

  // ------------------------------------------------------------ output projection
  logic          os_in_ready, os_valid, os_ready;
  sup_t          os_sup;
  logic [OW-1:0] os_idx;

  out_support #(.NH(NH), .NO(NO)) u_osup (
    .clk, .rst_n, .start(run_start),
    .in_valid(who_valid && running), .in_ready(os_in_ready), .in_w(who_data),
    .act_vec(act_h), .navail(navail), .bias_vec(bk),
    .out_valid(os_valid), .out_ready(os_ready), .out_sup(os_sup), .out_idx(os_idx)
  );
  assign who_ready = running && os_in_ready;

  logic              of_valid, of_ready;
  logic [DW+OW-1:0]  of_data;

  stream_fifo #(.WIDTH(DW + OW), .DEPTH(FIFO_DEPTH)) u_ofifo (
    .clk, .rst_n,
    .in_valid(os_valid), .in_ready(os_ready), .in_data({os_idx, os_sup}),
    .out_valid(of_valid), .out_ready(of_ready), .out_data(of_data), .level()
  );

  logic          oa_valid, oa_grp, out_done;
  fx_t           oa_act;
  logic [OW-1:0] oa_idx;

  softmax_unit #(.M(NO), .IW(OW)) u_osoft (
    .clk, .rst_n,
    .in_valid(of_valid), .in_ready(of_ready),
    .in_sup(sup_t'(of_data[DW-1:0])), .in_idx(of_data[DW+OW-1:DW]),
    .out_valid(oa_valid), .out_ready(1'b1), .out_act(oa_act), .out_idx(oa_idx),
    .grp_done(oa_grp)
  );

  // ------------------------------------------------------------ hidden-output plasticity
  logic [$clog2(NH+1)-1:0] hrow;
  logic ho_go, tuo_in_ready;
  fx_t tuo_u [WPB];
  logic                    tuo_valid, tuo_ready;
  logic [WPB-1:0][DW-1:0]  tuo_p;
  logic [JW-1:0]           tuo_tag;
  fx_t wuo_lnu [WPB];
  logic                   wuo_valid, wuo_ready;
  logic [WPB-1:0][DW-1:0] wuo_p, wuo_w;
  logic [1:0] how_valid, how_ready;
  beat_t      how_data [2];
  logic       how_idle;

  if (LEARN) begin : g_ho
    assign ho_go     = running && sup && (hrow < navail);
    assign pho_ready = ho_go && tuo_in_ready;

    always_comb
      for (int k = 0; k < WPB; k++)
        tuo_u[k] = (k < NO && k == int'(cst.label)) ? FX_ONE : '0;


    trace_update #(.LANES(WPB), .TW(JW)) u_tuo (
      .clk, .rst_n, .sh(cst.alpha_sh),
      .in_valid(pho_valid && ho_go), .in_ready(tuo_in_ready),
      .in_p(pho_data), .in_u(tuo_u), .in_v(act_h[hrow[JW-1:0]]), .in_tag(hrow[JW-1:0]),
      .out_valid(tuo_valid), .out_ready(tuo_ready), .out_p(tuo_p), .out_tag(tuo_tag)
    );

    always_comb
      for (int k = 0; k < WPB; k++) wuo_lnu[k] = (k < NO) ? bk[k] : '0;


    weight_update #(.LANES(WPB), .TW(JW)) u_wuo (
      .clk, .rst_n,
      .in_valid(tuo_valid), .in_ready(tuo_ready), .in_p(tuo_p), .in_lnu(wuo_lnu),
      .in_lnv(lnpjo[tuo_tag]), .in_tag(tuo_tag),
      .out_valid(wuo_valid), .out_ready(wuo_ready), .out_p(wuo_p), .out_w(wuo_w), .out_tag()
    );


    hbm_split #(.NC(2)) u_hosplit (
      .clk, .rst_n, .in_valid(wuo_valid), .in_ready(wuo_ready), .in_data({wuo_w, wuo_p}),
      .ch_valid(how_valid), .ch_ready(how_ready), .ch_data(how_data), .idle(how_idle)
    );
    assign pho_wr_valid = how_valid[0];
    assign who_wr_valid = how_valid[1];
    assign how_ready    = {who_wr_ready, pho_wr_ready};
    assign pho_wr_data  = how_data[0];
    assign who_wr_data  = how_data[1];
  end else begin : g_ho_off
    assign ho_go        = 1'b0;
    assign pho_ready    = 1'b0;
    assign wuo_valid    = 1'b0;
    assign wuo_ready    = 1'b0;
    assign how_idle     = 1'b1;
    assign pho_wr_valid = 1'b0;
    assign who_wr_valid = 1'b0;
    assign pho_wr_data  = '0;
    assign who_wr_data  = '0;
  end

  // ------------------------------------------------------------ completion counters
  logic [$clog2(NH*RPK+1)-1:0] ih_wr_cnt;
  logic [$clog2(NH+1)-1:0]     ho_wr_cnt;
  logic ih_fin, ho_fin, hid_fin;

  assign hid_fin = (32'(hc_done) == NH_HC);
  assign ih_fin  = !unsup || (32'(ih_wr_cnt) == NH * RPK && ihw_idle);
  assign ho_fin  = !sup   || (32'(ho_wr_cnt) == NH && how_idle);

  logic [OW-1:0] amax;
  always_comb begin
    amax = '0;
    for (int k = 1; k < NO; k++) if (out_act[k] > out_act[amax]) amax = OW'(k);
  end

  // ------------------------------------------------------------ controller and state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; load_start <= 1'b0; run_start <= 1'b0; done <= 1'b0;
      hc_done <= '0; prow <= '0; ppk <= '0; hrow <= '0;
      ih_wr_cnt <= '0; ho_wr_cnt <= '0; out_done <= 1'b0; pred <= '0;
      for (int j = 0; j < NH; j++) begin
        act_h[j] <= '0; pj[j] <= PJ0; bj[j] <= BJ0; pjo[j] <= PJ0; lnpjo[j] <= BJ0;
      end
      for (int k = 0; k < NO; k++) begin
        pk[k] <= PK0; bk[k] <= BK0; out_act[k] <= '0;
      end
    end else begin
      load_start <= 1'b0;
      run_start  <= 1'b0;
      done       <= 1'b0;
      unique case (st)
        C_IDLE:  if (start) st <= C_CONST;
        C_CONST: if (cst_valid) begin
          st <= C_LOAD;
          load_start <= 1'b1;
          if (cst.init) begin
            for (int j = 0; j < NH; j++) begin
              pj[j] <= PJ0; bj[j] <= BJ0; pjo[j] <= PJ0; lnpjo[j] <= BJ0;
            end
          end
          if (cst.mode == MODE_SUP)
            for (int k = 0; k < NO; k++) begin
              automatic fx_t p0 = cst.init ? PK0 : pk[k];
              automatic fx_t np = fx_ema(p0, (k == int'(cst.label)) ? FX_ONE : '0, cst.alpha_sh);
              pk[k] <= np;
              bk[k] <= fx_ln(np);
            end
          else if (cst.init)
            for (int k = 0; k < NO; k++) begin pk[k] <= PK0; bk[k] <= BK0; end
        end
        C_LOAD: if (!load_start && mask_done && in_done) begin
          st <= C_RUN;
          run_start <= 1'b1;
          hc_done <= '0; prow <= '0; ppk <= '0; hrow <= '0;
          ih_wr_cnt <= '0; ho_wr_cnt <= '0; out_done <= 1'b0;
        end
        C_RUN: if (!run_start && hid_fin && out_done && ih_fin && ho_fin) begin
          st   <= C_FIN;
          pred <= amax;
        end
        C_FIN: begin
          st   <= C_IDLE;
          done <= 1'b1;
        end
        default: st <= C_IDLE;
      endcase

      // hidden activities, and in unsupervised training p_j and b_j
      if (ha_valid) begin
        act_h[ha_idx] <= ha_act;
        if (unsup) begin
          automatic fx_t np = fx_ema(pj[ha_idx], ha_act, cst.alpha_sh);
          pj[ha_idx] <= np;
          bj[ha_idx] <= fx_ln(np);
        end
      end
      if (ha_grp) hc_done <= hc_done + 1'b1;

      // input-hidden joint-trace rows entering the plasticity pipeline
      if (p_pkt_valid && p_pkt_ready) begin
        if (ppk == PW'(RPK - 1)) begin
          ppk  <= '0;
          prow <= prow + 1'b1;
        end else ppk <= ppk + 1'b1;
      end
      if (wu_valid && wu_ready) ih_wr_cnt <= ih_wr_cnt + 1'b1;

      // hidden-output rows: presynaptic trace of the hidden unit
      if (pho_valid && pho_ready) begin
        automatic fx_t np = fx_ema(pjo[hrow[JW-1:0]], act_h[hrow[JW-1:0]], cst.alpha_sh);
        pjo[hrow[JW-1:0]]   <= np;
        lnpjo[hrow[JW-1:0]] <= fx_ln(np);
        hrow <= hrow + 1'b1;
      end
      if (wuo_valid && wuo_ready) ho_wr_cnt <= ho_wr_cnt + 1'b1;

      // output activities
      if (oa_valid) out_act[oa_idx] <= oa_act;
      if (oa_grp)   out_done <= 1'b1;
    end
  end
endmodule
