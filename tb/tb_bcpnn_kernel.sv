// tb_bcpnn_kernel -- end-to-end test of the BCPNN kernel against a real-valued
// reference model.
//
// The testbench holds the HBM arrays (input-hidden weights and joint traces,
// hidden-output weights and traces, masks, images) and serves them over the
// kernel's channel ports with random gaps; the write channels accept with
// random stalls and their beats are stored back into the arrays, so each call
// works on what the previous one wrote. A reference model in real arithmetic
// keeps its own copy of the on-chip traces and, for every call, computes the
// input activities, hidden supports and softmax, output supports and softmax,
// and the trace and weight updates of the trained projection. Compared: hidden
// activities, output activities, the predicted class, every written joint trace
// and weight. The sequence covers the three modes, the mask on and off, and the
// trace reset, and counts how often each mechanism of the design was exercised
// (support-FIFO back-pressure, a trace row waiting for its hypercolumn's softmax,
// an output row waiting for hidden activities, write-channel stalls, gaps on the
// read channels): one that never happened counts as a failure.
//
// The sizes are parameters of this testbench; tb_bcpnn_kernel_full runs the
// kernel at its default (MNIST model) size.
module tb_bcpnn_kernel;
  import bcpnn_pkg::*;
  import tb_ref_pkg::*;

  localparam int NIH = 48, NIP = 128, NHH = 3, MHH = 4, NOU = 3;
  localparam int NHU = NHH * MHH, RP = NIP / PKT;
  localparam int NMB = (NHH * NIH + HBM_W - 1) / HBM_W;
  localparam int NPB = (NIH + WPB - 1) / WPB;
  localparam int NCALLS = 14;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [3:0] pred;
  fx_t out_act [NOU];
  logic const_valid, const_ready, mask_valid, mask_ready, pix_valid, pix_ready;
  beat_t const_data, mask_data, pix_data;
  logic [NCH-1:0] wih_valid, wih_ready, pih_valid, pih_ready;
  beat_t wih_data [NCH], pih_data [NCH];
  logic [NCH-1:0] pih_wr_valid, pih_wr_ready, wih_wr_valid, wih_wr_ready;
  beat_t pih_wr_data [NCH], wih_wr_data [NCH];
  logic who_valid, who_ready, pho_valid, pho_ready;
  beat_t who_data, pho_data;
  logic pho_wr_valid, pho_wr_ready, who_wr_valid, who_wr_ready;
  beat_t pho_wr_data, who_wr_data;

  bcpnn_kernel #(.NI_HC(NIH), .NI_PAD(NIP), .NH_HC(NHH), .MH(MHH), .NO(NOU), .FIFO_DEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- HBM contents
  fx_t   Wih [NHU][NIP], Pih [NHU][NIP], Who [NHU][WPB], Pho [NHU][WPB];
  fx_t   nWih [NHU][NIP], nPih [NHU][NIP], nWho [NHU][WPB], nPho [NHU][WPB];
  logic  maskbits [NHH * NIH];
  fx_t   pixw [NIH];
  consts_t cst;

  // ---------------------------------------------------------------- reference state
  real pi_r [NIP], pj_r [NHU], pjo_r [NHU], pk_r [NOU];
  real x_r [NIP], a_r [NHU], o_r [NOU];

  int checks = 0, failures = 0;
  int n_fifo_full = 0, n_ih_wait = 0, n_ho_wait = 0, n_wr_stall = 0, n_rd_gap = 0;
  int n_mode [3], n_mask_on = 0, n_mask_off = 0, n_init = 0, n_pred_ok = 0;

  // channel counters
  int c_const, c_mask, c_pix, c_who, c_pho, c_phow, c_whow;
  int c_wih [NCH], c_pih [NCH], c_pihw [NCH], c_wihw [NCH];
  bit run_bus = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------------- bus model
  function automatic beat_t wih_beat(int c, int n);
    beat_t b;
    for (int w = 0; w < WPB; w++) b[w*DW +: DW] = Wih[n / RP][(n % RP) * PKT + c * WPB + w];
    return b;
  endfunction
  function automatic beat_t pih_beat(int c, int n);
    beat_t b;
    for (int w = 0; w < WPB; w++) b[w*DW +: DW] = Pih[n / RP][(n % RP) * PKT + c * WPB + w];
    return b;
  endfunction

  always begin
    @(negedge clk);
    if (run_bus) begin
      automatic bit gap = ($urandom_range(0, 4) == 0);
      // read channels
      const_valid = (c_const < 1);
      const_data  = {480'h0, 32'(cst)};
      mask_valid  = (c_mask < NMB) && !gap;
      for (int b = 0; b < HBM_W; b++)
        mask_data[b] = (c_mask * HBM_W + b < NHH * NIH) ? maskbits[c_mask * HBM_W + b] : 1'b0;
      pix_valid = (c_pix < NPB) && ($urandom_range(0, 4) != 0);
      for (int w = 0; w < WPB; w++) pix_data[w*DW +: DW] = (c_pix*WPB + w < NIH) ? pixw[c_pix*WPB + w] : '0;
      for (int c = 0; c < NCH; c++) begin
        wih_valid[c] = (c_wih[c] < NHU * RP) && ($urandom_range(0, 7) != 0);
        wih_data[c]  = wih_beat(c, c_wih[c]);
        pih_valid[c] = (cst.mode == MODE_UNSUP) && (c_pih[c] < NHU * RP) && ($urandom_range(0, 7) != 0);
        pih_data[c]  = pih_beat(c, c_pih[c]);
        pih_wr_ready[c] = ($urandom_range(0, 5) != 0);
        wih_wr_ready[c] = ($urandom_range(0, 5) != 0);
      end
      who_valid = (c_who < NHU) && ($urandom_range(0, 5) != 0);
      for (int k = 0; k < WPB; k++) who_data[k*DW +: DW] = Who[c_who % NHU][k];
      pho_valid = (cst.mode == MODE_SUP) && (c_pho < NHU) && ($urandom_range(0, 5) != 0);
      for (int k = 0; k < WPB; k++) pho_data[k*DW +: DW] = Pho[c_pho % NHU][k];
      pho_wr_ready = ($urandom_range(0, 3) != 0);
      who_wr_ready = ($urandom_range(0, 3) != 0);
      #1;
      // handshakes that happen at the coming edge
      if (const_valid && const_ready) c_const++;
      if (mask_valid && mask_ready) c_mask++;
      if (pix_valid && pix_ready) c_pix++;
      if (wih_valid != '1 && dut.running) n_rd_gap++;
      for (int c = 0; c < NCH; c++) begin
        if (wih_valid[c] && wih_ready[c]) c_wih[c]++;
        if (pih_valid[c] && pih_ready[c]) c_pih[c]++;
        if (pih_wr_valid[c] && !pih_wr_ready[c]) n_wr_stall++;
        if (pih_wr_valid[c] && pih_wr_ready[c]) begin
          for (int w = 0; w < WPB; w++)
            nPih[c_pihw[c] / RP][(c_pihw[c] % RP) * PKT + c * WPB + w] = pih_wr_data[c][w*DW +: DW];
          c_pihw[c]++;
        end
        if (wih_wr_valid[c] && wih_wr_ready[c]) begin
          for (int w = 0; w < WPB; w++)
            nWih[c_wihw[c] / RP][(c_wihw[c] % RP) * PKT + c * WPB + w] = wih_wr_data[c][w*DW +: DW];
          c_wihw[c]++;
        end
      end
      if (who_valid && who_ready) c_who++;
      if (pho_valid && pho_ready) c_pho++;
      if (pho_wr_valid && pho_wr_ready) begin
        for (int k = 0; k < WPB; k++) nPho[c_phow][k] = pho_wr_data[k*DW +: DW];
        c_phow++;
      end
      if (who_wr_valid && who_wr_ready) begin
        for (int k = 0; k < WPB; k++) nWho[c_whow][k] = who_wr_data[k*DW +: DW];
        c_whow++;
      end
      if (pho_wr_valid && !pho_wr_ready) n_wr_stall++;
      // mechanisms inside the kernel
      if (dut.hs_valid && !dut.hs_ready) n_fifo_full++;
      if (dut.p_pkt_valid && dut.running && dut.unsup && !dut.ih_go) n_ih_wait++;
      if (pho_valid && dut.running && dut.sup && !dut.ho_go) n_ho_wait++;
    end
  end

  // ---------------------------------------------------------------- reference model
  task automatic ref_call();
    real sh = real'(1 << cst.alpha_sh);
    real s [NHU], so [NOU];
    if (cst.init) begin
      for (int i = 0; i < NIP; i++) pi_r[i] = 0.5;
      for (int j = 0; j < NHU; j++) begin pj_r[j] = 1.0 / MHH; pjo_r[j] = 1.0 / MHH; end
      for (int k = 0; k < NOU; k++) pk_r[k] = 1.0 / NOU;
    end
    if (cst.mode == MODE_SUP)
      for (int k = 0; k < NOU; k++) pk_r[k] += (((k == int'(cst.label)) ? 1.0 : 0.0) - pk_r[k]) / sh;
    for (int i = 0; i < NIP; i++) x_r[i] = 0.0;
    for (int h = 0; h < NIH; h++) begin
      real p = fx2r(pixw[h]);
      p = (p < 0.0) ? 0.0 : (p > 1.0) ? 1.0 : p;
      x_r[2*h] = p; x_r[2*h+1] = 1.0 - p;
    end
    if (cst.mode == MODE_UNSUP)
      for (int i = 0; i < 2*NIH; i++) pi_r[i] += (x_r[i] - pi_r[i]) / sh;
    // hidden layer
    for (int j = 0; j < NHU; j++) begin
      s[j] = $ln(pj_r[j]);
      for (int i = 0; i < NIP; i++)
        if (i < 2*NIH && (!cst.struct_en || maskbits[(j / MHH) * NIH + i / 2]))
          s[j] += x_r[i] * fx2r(Wih[j][i]);
    end
    for (int h = 0; h < NHH; h++) begin
      real mx = -1e30, den = 0.0;
      for (int m = 0; m < MHH; m++) if (s[h*MHH+m] > mx) mx = s[h*MHH+m];
      for (int m = 0; m < MHH; m++) den += $exp(s[h*MHH+m] - mx);
      for (int m = 0; m < MHH; m++) a_r[h*MHH+m] = $exp(s[h*MHH+m] - mx) / den;
    end
    // output layer
    begin
      real mx = -1e30, den = 0.0;
      for (int k = 0; k < NOU; k++) begin
        so[k] = $ln(pk_r[k]);
        for (int j = 0; j < NHU; j++) so[k] += a_r[j] * fx2r(Who[j][k]);
        if (so[k] > mx) mx = so[k];
      end
      for (int k = 0; k < NOU; k++) den += $exp(so[k] - mx);
      for (int k = 0; k < NOU; k++) o_r[k] = $exp(so[k] - mx) / den;
    end
  endtask

  // compare the kernel's results of one call with the reference
  task automatic check_call();
    real sh = real'(1 << cst.alpha_sh);
    int best = 0; real second = 0.0;
    for (int j = 0; j < NHU; j++) begin
      checks++;
      if (rabs(fx2r(dut.act_h[j]) - a_r[j]) > 0.02) begin
        failures++; $display("a_%0d: %f vs %f", j, fx2r(dut.act_h[j]), a_r[j]); end
    end
    for (int k = 0; k < NOU; k++) begin
      checks++;
      if (rabs(fx2r(out_act[k]) - o_r[k]) > 0.04) begin
        failures++; $display("o_%0d: %f vs %f", k, fx2r(out_act[k]), o_r[k]); end
      if (o_r[k] > o_r[best]) best = k;
    end
    for (int k = 0; k < NOU; k++) if (k != best && o_r[k] > second) second = o_r[k];
    if (o_r[best] - second > 0.05) begin
      checks++; if (int'(pred) != best) begin failures++; $display("pred %0d vs %0d", pred, best); end
      else n_pred_ok++;
    end
    if (cst.mode == MODE_UNSUP) begin
      for (int c = 0; c < NCH; c++) begin
        checks++; if (c_pihw[c] != NHU * RP || c_wihw[c] != NHU * RP) begin failures++; $display("ih write count"); end
      end
      for (int j = 0; j < NHU; j++) begin
        pj_r[j] += (a_r[j] - pj_r[j]) / sh;
        for (int i = 0; i < NIP; i++) begin
          real pn = fx2r(Pih[j][i]) + (x_r[i] * a_r[j] - fx2r(Pih[j][i])) / sh;
          if (pn < 1.0 / 16777216.0) pn = 1.0 / 16777216.0;
          checks++;
          if (rabs(fx2r(nPih[j][i]) - pn) > 0.006) begin
            failures++; if (failures < 20) $display("p_ij %0d %0d: %f vs %f", j, i, fx2r(nPih[j][i]), pn); end
          if (i < 2*NIH) begin
            real wr = $ln(fx2r(nPih[j][i])) - $ln(pi_r[i]) - $ln(pj_r[j]);
            checks++;
            if (rabs(fx2r(nWih[j][i]) - wr) > 0.1) begin
              failures++; if (failures < 20) $display("w_ij %0d %0d: %f vs %f", j, i, fx2r(nWih[j][i]), wr); end
          end
          Pih[j][i] = nPih[j][i];
          Wih[j][i] = nWih[j][i];
        end
      end
    end else begin
      checks++; if (c_pihw[0] != 0) begin failures++; $display("ih written outside training"); end
    end
    if (cst.mode == MODE_SUP) begin
      checks++; if (c_phow != NHU || c_whow != NHU) begin failures++; $display("ho write count"); end
      for (int j = 0; j < NHU; j++) begin
        pjo_r[j] += (a_r[j] - pjo_r[j]) / sh;
        for (int k = 0; k < WPB; k++) begin
          real y = (k == int'(cst.label)) ? 1.0 : 0.0;
          real pn = fx2r(Pho[j][k]) + (y * a_r[j] - fx2r(Pho[j][k])) / sh;
          if (pn < 1.0 / 16777216.0) pn = 1.0 / 16777216.0;
          checks++;
          if (rabs(fx2r(nPho[j][k]) - pn) > 0.006) begin
            failures++; $display("p_jk %0d %0d: %f vs %f", j, k, fx2r(nPho[j][k]), pn); end
          if (k < NOU) begin
            real wr = $ln(fx2r(nPho[j][k])) - $ln(pk_r[k]) - $ln(pjo_r[j]);
            checks++;
            if (rabs(fx2r(nWho[j][k]) - wr) > 0.1) begin
              failures++; $display("w_jk %0d %0d: %f vs %f", j, k, fx2r(nWho[j][k]), wr); end
          end
          Pho[j][k] = nPho[j][k];
          Who[j][k] = nWho[j][k];
        end
      end
    end
  endtask

  task automatic do_call(input mode_e md, input bit se, input bit ini, input int lbl);
    int t0;
    cst = '0; cst.mode = md; cst.struct_en = se; cst.init = ini; cst.alpha_sh = 5'd2;
    cst.label = 8'(lbl);
    for (int b = 0; b < NHH * NIH; b++) maskbits[b] = 1'($urandom_range(0, 3) != 0);
    // images: a class-dependent pattern plus noise
    for (int h = 0; h < NIH; h++)
      pixw[h] = r2fx(((h % NOU) == lbl ? 0.8 : 0.1) + urand(-0.15, 0.15));
    c_const = 0; c_mask = 0; c_pix = 0; c_who = 0; c_pho = 0; c_phow = 0; c_whow = 0;
    for (int c = 0; c < NCH; c++) begin c_wih[c] = 0; c_pih[c] = 0; c_pihw[c] = 0; c_wihw[c] = 0; end
    ref_call();
    run_bus = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    t0 = $time;
    while (!done) @(negedge clk);
    run_bus = 0;
    n_mode[int'(md)]++;
    if (se) n_mask_on++; else n_mask_off++;
    if (ini) n_init++;
    check_call();
    $display("call mode %0d mask %0d: %0d cycles, pred %0d label %0d", md, se, ($time - t0) / 10, pred, lbl);
  endtask

  initial begin
    start = 0;
    const_valid = 0; mask_valid = 0; pix_valid = 0; wih_valid = '0; pih_valid = '0;
    who_valid = 0; pho_valid = 0; pih_wr_ready = '0; wih_wr_ready = '0;
    pho_wr_ready = 0; who_wr_ready = 0;
    const_data = '0; mask_data = '0; pix_data = '0; who_data = '0; pho_data = '0;
    for (int c = 0; c < NCH; c++) begin wih_data[c] = '0; pih_data[c] = '0; end
    for (int i = 0; i < 3; i++) n_mode[i] = 0;
    // initial HBM contents: uniform priors, zero weights
    for (int j = 0; j < NHU; j++) begin
      for (int i = 0; i < NIP; i++) begin
        Pih[j][i] = r2fx(0.5 / MHH * urand(0.8, 1.2));
        Wih[j][i] = r2fx(urand(-0.5, 0.5));
      end
      for (int k = 0; k < WPB; k++) begin
        Pho[j][k] = r2fx(1.0 / (MHH * NOU)); Who[j][k] = '0;
      end
    end
    for (int i = 0; i < NIP; i++) pi_r[i] = 0.5;
    for (int j = 0; j < NHU; j++) begin pj_r[j] = 1.0 / MHH; pjo_r[j] = 1.0 / MHH; end
    for (int k = 0; k < NOU; k++) pk_r[k] = 1.0 / NOU;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < NCALLS; n++) begin
      automatic int lbl = $urandom_range(0, NOU - 1);
      if (n < 5)       do_call(MODE_UNSUP, (n != 2), (n == 0), lbl);
      else if (n < 10) do_call(MODE_SUP,   1'b1, 1'b0, lbl);
      else             do_call(MODE_INFER, (n % 2 == 0), 1'b0, lbl);
    end
    // every mechanism must have happened
    checks++; if (n_fifo_full == 0) begin failures++; $display("support FIFO never full"); end
    checks++; if (n_ih_wait == 0)   begin failures++; $display("trace rows never waited"); end
    checks++; if (n_ho_wait == 0)   begin failures++; $display("output rows never waited"); end
    checks++; if (n_wr_stall == 0)  begin failures++; $display("no write stall"); end
    checks++; if (n_rd_gap == 0)    begin failures++; $display("no read gap"); end
    for (int i = 0; i < 3; i++) begin checks++; if (n_mode[i] == 0) begin failures++; $display("mode %0d unused", i); end end
    checks++; if (n_mask_on == 0 || n_mask_off == 0 || n_init == 0) begin failures++; $display("mask/init unused"); end
    $display("mechanisms: fifo_full=%0d ih_wait=%0d ho_wait=%0d wr_stall=%0d rd_gap=%0d modes=%0d/%0d/%0d mask=%0d/%0d init=%0d pred_checked=%0d",
             n_fifo_full, n_ih_wait, n_ho_wait, n_wr_stall, n_rd_gap, n_mode[0], n_mode[1], n_mode[2], n_mask_on, n_mask_off, n_init, n_pred_ok);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
