// tb_cimpool_body.svh: end-to-end test of cimpool_top, shared by the
// reduced-size and the full-size testbench.  The including module defines
// the localparams R, C, GS, AB, ER, TD, AD, PD (sizes) and N_TILES_RUN, and
// instantiates cimpool_top as "dut" after including this file.
//
// A reference model computes, independently of the RTL, what the chip must
// produce: the bit-serial column sums of both arrays with 8-bit ADC
// saturation, MSB-first shift-and-add with shift and 8-bit saturation, the
// un-permutation of the weight-pool outputs by the tile's indices, the scaled
// sum  mav_w*wp + s_err*mav_e*err  accumulated over tiles, and finally ReLU,
// requantisation and max pooling.  The test runs a sequence of tiles that
// together exercise every mechanism of the design and counts how often each
// happened; a mechanism that never happened is a failure.

  localparam int K    = (GS / AB > 0) ? GS / AB : 1;
  localparam int ERS  = R / ER;
  localparam int IDXW = (GS > 1) ? $clog2(GS) : 1;
  localparam int TAW  = (TD > 1) ? $clog2(TD) : 1;
  localparam int EAW  = $clog2(TD * ER);
  localparam int AAW  = $clog2(AD);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                     cmd_valid = 1'b0, cmd_ready, done, overflow, sched_busy;
  cimpool_pkg::tile_cmd_t   cmd;
  cimpool_pkg::ctrl_state_e ctrl_state;
  logic                     wp_wr_en = 1'b0;
  logic [$clog2(R)-1:0]     wp_wr_row = '0;
  logic [C-1:0]             wp_wr_data = '0;
  logic                     idx_wr_en = 1'b0;
  logic [TAW-1:0]           idx_wr_addr = '0;
  logic [IDXW-1:0]          idx_wr_data [C];
  logic                     err_wr_en = 1'b0;
  logic [EAW-1:0]           err_wr_addr = '0;
  logic [C-1:0]             err_wr_data = '0;
  logic                     host_act_wr_en = 1'b0, host_act_rd_en = 1'b0;
  logic [AAW-1:0]           host_act_wr_addr = '0, host_act_rd_addr = '0;
  logic [7:0]               host_act_wr_data [R];
  logic [7:0]               host_act_rd_data [R];

  int checks = 0, failures = 0;

  // ---------------- reference state ----------------
  bit       m_wp   [R][C];
  bit       m_err  [N_TILES_RUN][ER][C];
  int       m_idx  [N_TILES_RUN][C];
  int       m_act  [AD][R];
  longint   m_psum [PD][C];

  int n_err_reload = 0, n_flush = 0, n_accum = 0, n_pool = 0, n_pad = 0,
      n_perm = 0, n_adc_sat = 0, n_sa_sat = 0;

  function automatic int sat(input longint v, input int lo, input int hi);
    return (v > hi) ? hi : (v < lo) ? lo : int'(v);
  endfunction

  // one pixel through one array (weight pool when is_err = 0)
  function automatic void column_outputs(input int tile, input int addr, input int n_chan,
                                          input int shift, input bit is_err, output int o [C]);
    for (int c = 0; c < C; c++) begin
      longint acc = 0;
      for (int b = AB - 1; b >= 0; b--) begin
        int s = 0;
        int nr = is_err ? ER : R;
        for (int r = 0; r < nr; r++) begin
          int ch = is_err ? r * ERS : r;
          int a  = (ch < n_chan) ? m_act[addr][ch] : 0;
          if ((a >> b) & 1) s += (is_err ? m_err[tile][r][c] : m_wp[r][c]) ? 1 : -1;
        end
        if (s > 127 || s < -128) n_adc_sat++;
        acc = acc * 2 + sat(s, -128, 127);
      end
      if ((acc >>> shift) > 127 || (acc >>> shift) < -128) n_sa_sat++;
      o[c] = sat(acc >>> shift, -128, 127);
    end
  endfunction

  cimpool_pkg::tile_cmd_t q_cmd [$];
  int q_exp_act_addr [$];
  int q_exp_act [$][R];

  task automatic model_tile(input cimpool_pkg::tile_cmd_t t);
    int pool_cnt = 0, n_out = 0;
    int pmax [C];
    for (int p = 0; p < int'(t.n_pix); p++) begin
      int addr = int'(t.in_base) + p * int'(t.in_stride);
      int wo [C], eo [C];
      column_outputs(int'(t.tile), addr, int'(t.n_chan), int'(t.sa_shift), 1'b0, wo);
      column_outputs(int'(t.tile), addr, int'(t.n_chan), int'(t.sa_shift), 1'b1, eo);
      for (int f = 0; f < C; f++) begin
        int g = f / GS;
        int wpv = wo[g * GS + m_idx[t.tile][f]];
        longint base = t.first ? 0 : m_psum[int'(t.psum_base) + p][f];
        m_psum[int'(t.psum_base) + p][f] = base + longint'(wpv) * t.mav_w
                                         + longint'(eo[f]) * t.mav_e * t.s_err;
      end
      if (t.last) begin
        for (int f = 0; f < C; f++) begin
          longint v = m_psum[int'(t.psum_base) + p][f];
          int q = (v < 0) ? 0 : sat(v >>> t.act_shift, 0, 255);
          if (pool_cnt == 0 || q > pmax[f]) pmax[f] = q;
        end
        if (pool_cnt == int'(t.pool_n) - 1 || t.pool_n <= 1) begin
          int row [R];
          for (int r = 0; r < R; r++) row[r] = (r < C) ? pmax[r] : 0;
          q_exp_act_addr.push_back(int'(t.out_base) + n_out);
          q_exp_act.push_back(row);
          n_out++;
          pool_cnt = 0;
        end else pool_cnt++;
      end
    end
  endtask


  // ---------------- host helpers ----------------
  task automatic load_weight_pool();
    for (int r = 0; r < R; r++) begin
      logic [C-1:0] row;
      for (int c = 0; c < C; c++) begin
        m_wp[r][c] = 1'($urandom);
        row[c] = m_wp[r][c];
      end
      @(negedge clk); wp_wr_en = 1; wp_wr_row = $bits(wp_wr_row)'(r); wp_wr_data = row;
    end
    @(negedge clk); wp_wr_en = 0;
  endtask

  task automatic load_tile(input int tile);
    // non-repeating assignment: a random permutation inside every group
    for (int g = 0; g < C / GS; g++) begin
      int perm [GS];
      for (int i = 0; i < GS; i++) perm[i] = i;
      for (int i = GS - 1; i > 0; i--) begin
        int j = $urandom_range(i, 0);
        int tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < GS; i++) m_idx[tile][g * GS + i] = perm[i];
    end
    for (int f = 0; f < C; f++) if (m_idx[tile][f] != f % GS) n_perm++;
    @(negedge clk); idx_wr_en = 1; idx_wr_addr = TAW'(tile);
    for (int f = 0; f < C; f++) idx_wr_data[f] = IDXW'(m_idx[tile][f]);
    @(negedge clk); idx_wr_en = 0;
    for (int r = 0; r < ER; r++) begin
      logic [C-1:0] row;
      for (int c = 0; c < C; c++) begin
        m_err[tile][r][c] = 1'($urandom);
        row[c] = m_err[tile][r][c];
      end
      @(negedge clk); err_wr_en = 1; err_wr_addr = EAW'(tile * ER + r); err_wr_data = row;
    end
    @(negedge clk); err_wr_en = 0;
  endtask

  task automatic load_acts(input int base, input int n, input int hi);
    for (int a = base; a < base + n; a++) begin
      for (int r = 0; r < R; r++) begin
        m_act[a][r] = $urandom_range(hi, 0);
        host_act_wr_data[r] = 8'(m_act[a][r]);
      end
      @(negedge clk); host_act_wr_en = 1; host_act_wr_addr = AAW'(a);
      @(negedge clk); host_act_wr_en = 0;
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism monitors
  cimpool_pkg::ctrl_state_e prev_state = cimpool_pkg::C_IDLE;
  always @(posedge clk) if (rst_n) begin
    prev_state <= ctrl_state;
    if (ctrl_state == cimpool_pkg::C_LOAD_ERR && prev_state != cimpool_pkg::C_LOAD_ERR) n_err_reload++;
    if (dut.sched_flush && dut.u_sched.wr_slot != '0) n_flush++;
    if (dut.u_ibuf.ld_valid && !dut.u_ibuf.ld_ready) failures++;
  end

  int t_first_in = -1, t_first_perm = -1;
  always @(posedge clk) if (rst_n) begin
    if (dut.wsa_valid && t_first_in < 0) t_first_in = cyc;
    if (dut.p_valid && t_first_perm < 0) t_first_perm = cyc;
  end

  task automatic run_tile(input cimpool_pkg::tile_cmd_t t);
    int t0, t1;
    model_tile(t);
    if (!t.first) n_accum++;
    if (t.last && t.pool_n > 1) n_pool++;
    if (int'(t.n_chan) < R) n_pad++;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = t; cmd_valid = 1;
    t0 = cyc;
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    // streaming rate: n_pix vectors take n_pix input cycles plus fixed overhead
    checks++;
    if (t1 - t0 > int'(t.n_pix) * AB + ER + 4 * GS + 40) begin
      failures++;
      $display("FAIL tile %0d took %0d cycles for %0d pixels", t.tile, t1 - t0, t.n_pix);
    end
  endtask

  task automatic check_outputs();
    for (int i = 0; i < q_exp_act_addr.size(); i++) begin
      int a;
      a = q_exp_act_addr[i];
      @(negedge clk); host_act_rd_en = 1; host_act_rd_addr = AAW'(a);
      @(negedge clk); host_act_rd_en = 0;
      #1;
      for (int r = 0; r < C; r++) begin
        checks++;
        if (int'(host_act_rd_data[r]) != q_exp_act[i][r]) begin
          failures++;
          if (failures < 10) $display("FAIL act[%0d][%0d] = %0d, expected %0d", a, r, host_act_rd_data[r], q_exp_act[i][r]);
        end
      end
    end
    q_exp_act_addr.delete();
    q_exp_act.delete();
  endtask

  task automatic check_psums(input int base, input int n);
    for (int p = base; p < base + n; p++)
      for (int f = 0; f < C; f++) begin
        logic signed [cimpool_pkg::PSUM_W-1:0] v;
        v = dut.u_asram.psum_mem[p][f * cimpool_pkg::PSUM_W +: cimpool_pkg::PSUM_W];
        checks++;
        if (longint'(v) != m_psum[p][f]) begin
          failures++;
          if (failures < 10) $display("FAIL psum[%0d][%0d] = %0d, expected %0d", p, f, v, m_psum[p][f]);
        end
      end
  endtask

  function automatic cimpool_pkg::tile_cmd_t mk(input int tile, input int n_pix, input int in_base,
      input int in_stride, input int psum_base, input int out_base, input int n_chan,
      input bit first, input bit last, input int sa_shift, input int mav_w, input int mav_e,
      input int s_err, input int act_shift, input int pool_n);
    cimpool_pkg::tile_cmd_t t;
    t.tile = 16'(tile); t.n_pix = 16'(n_pix); t.in_base = 16'(in_base); t.in_stride = 16'(in_stride);
    t.psum_base = 16'(psum_base); t.out_base = 16'(out_base); t.n_chan = 8'(n_chan);
    t.first = first; t.last = last; t.sa_shift = 4'(sa_shift); t.mav_w = 8'(mav_w);
    t.mav_e = 8'(mav_e); t.s_err = 3'(s_err); t.act_shift = 5'(act_shift); t.pool_n = 3'(pool_n);
    return t;
  endfunction

  task automatic check_mechanisms();
    checks++;
    if (t_first_perm - t_first_in != (K - 1) * AB + 2) begin
      failures++;
      $display("FAIL buffer filling: first permuted output %0d cycles after first vector, expected %0d",
               t_first_perm - t_first_in, (K - 1) * AB + 2);
    end
    checks++; if (overflow) begin failures++; $display("FAIL scheduler overflow"); end
    $display("mechanisms: error reloads=%0d partial-bank flushes=%0d accumulations=%0d poolings=%0d zero-padded tiles=%0d permuted filters=%0d adc saturations=%0d s&a saturations=%0d",
             n_err_reload, n_flush, n_accum, n_pool, n_pad, n_perm, n_adc_sat, n_sa_sat);
    checks++; if (n_err_reload == 0) begin failures++; $display("FAIL no error-array reload"); end
    checks++; if (n_flush == 0)      begin failures++; $display("FAIL no partial-bank flush"); end
    checks++; if (n_accum == 0)      begin failures++; $display("FAIL no partial-sum accumulation"); end
    checks++; if (n_pool == 0)       begin failures++; $display("FAIL no pooling"); end
    checks++; if (n_pad == 0)        begin failures++; $display("FAIL no zero padding"); end
    checks++; if (n_perm == 0)       begin failures++; $display("FAIL no permutation"); end
  endtask
