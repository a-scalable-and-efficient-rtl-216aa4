// End-to-end test body shared by tb_cnna_top (reduced sizes) and
// tb_cnna_full (default sizes). The including module defines the sizes
// T_DATA_W, T_FRAC, T_PE_BW, T_PE_N, T_ROWS (the output bandwidth
// multiplier DB_OUT_BW: 3 = whole window columns, 1 = one row at a time),
// T_KERNELS and instantiates
// cnna_top as `dut` on the signals declared here. Every layer is computed
// independently here from the layer definition (image, kernels, biases),
// streamed in the byte order the accelerator expects, and the Y stream is
// compared beat by beat. Streams get random gaps and Y random back-pressure.
// Origin: the behaviour checked here follows the original design description. The
// stimulus, the reference model and the sizes are this testbench's own choices.

  localparam int ELEMS = T_PE_BW / T_DATA_W;
  localparam int WROWS = cnna_pkg::MAX_WIN;   // window rows the CLB builds
  typedef logic [T_PE_BW-1:0] beat_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [31:0]        ctrl_tdata;  logic ctrl_tvalid = 0, ctrl_tready;
  beat_t w_tdata;     logic w_tvalid = 0, w_tready;
  beat_t x_tdata;     logic x_tvalid = 0, x_tready;
  beat_t xbuf_tdata;  logic xbuf_tvalid = 0, xbuf_tready;
  beat_t y_tdata;     logic y_tvalid, y_tlast, y_tready = 0;
  logic [5:0] s_araddr = 0; logic s_arvalid = 0, s_arready; logic [31:0] s_rdata;
  logic [1:0] s_rresp; logic s_rvalid; logic s_rready = 1;
  logic s_awready, s_wready, s_bvalid; logic [1:0] s_bresp;

  int checks = 0, failures = 0;
  logic [31:0] ctrl_q[$];
  beat_t w_q[$], x_q[$], xb_q[$], y_exp[$];
  int ci, wi, xi, bi, yi;
  bit gaps = 1;
  // mechanism counters
  int n_xstall, n_ystall, n_replay, n_pad, n_stride, n_stitch, n_pool_max, n_pool_avg,
      n_pool_min, n_fc, n_relu, n_sat, n_fc_partial;

  // ---------------- stream drivers ----------------
  always @(posedge clk) begin
    if (ctrl_tvalid && ctrl_tready) ci = ci + 1;
    if (!ctrl_tvalid || ctrl_tready) begin
      ctrl_tvalid <= ci < ctrl_q.size();
      ctrl_tdata  <= (ci < ctrl_q.size()) ? ctrl_q[ci] : '0;
    end
    if (w_tvalid && w_tready) wi = wi + 1;
    if (!w_tvalid || w_tready) begin
      w_tvalid <= wi < w_q.size() && (!gaps || $urandom_range(0, 5) != 0);
      w_tdata  <= (wi < w_q.size()) ? w_q[wi] : '0;
    end
    if (x_tvalid && x_tready) xi = xi + 1;
    if (x_tvalid && !x_tready) n_xstall++;
    if (!x_tvalid || x_tready) begin
      x_tvalid <= xi < x_q.size() && (!gaps || $urandom_range(0, 5) != 0);
      x_tdata  <= (xi < x_q.size()) ? x_q[xi] : '0;
    end
    if (xbuf_tvalid && xbuf_tready) bi = bi + 1;
    if (!xbuf_tvalid || xbuf_tready) begin
      xbuf_tvalid <= bi < xb_q.size() && (!gaps || $urandom_range(0, 5) != 0);
      xbuf_tdata  <= (bi < xb_q.size()) ? xb_q[bi] : '0;
    end
    if (y_tvalid && !y_tready) n_ystall++;
    y_tready <= !gaps || ($urandom_range(0, 3) != 0);
  end

  beat_t y_got[$];
  logic  y_last_seen;
  always @(posedge clk) if (y_tvalid && y_tready) begin
    y_got.push_back(y_tdata);
    y_last_seen = y_tlast;
  end

  // ---------------- reference arithmetic ----------------
  function automatic int sat_w(longint v);
    longint mx = (longint'(1) <<< (T_DATA_W - 1)) - 1;
    longint mn = -(longint'(1) <<< (T_DATA_W - 1));
    if (v > mx) begin n_sat++; return int'(mx); end
    if (v < mn) begin n_sat++; return int'(mn); end
    return int'(v);
  endfunction

  // f(scale * acc) with acc at 2*FRAC fractional bits
  function automatic int finish_acc(longint acc, int scale, bit relu);
    longint p = acc * longint'(scale);
    longint r = (p + (longint'(1) <<< (2*T_FRAC - 1))) >>> (2*T_FRAC);
    int s = sat_w(r);
    if (relu && s < 0) begin s = 0; n_relu++; end
    return s;
  endfunction

  function automatic beat_t pack_elems(int v[], int base);
    beat_t b = '0;
    for (int e = 0; e < ELEMS; e++)
      if (base + e < v.size()) b[e*T_DATA_W +: T_DATA_W] = T_DATA_W'(v[base + e]);
    return b;
  endfunction

  // random value in [-mag, mag], limited to the data word's range
  function automatic int rnd_val(int mag);
    int m = (mag > (1 << (T_DATA_W - 1)) - 1) ? (1 << (T_DATA_W - 1)) - 1 : mag;
    return $urandom_range(0, 2*m) - m;
  endfunction

  // ---------------- layer runners ----------------
  task automatic send_cfg(cnna_pkg::layer_cfg_t c);
    logic [cnna_pkg::CTRL_WORDS*32-1:0] w = cnna_pkg::pack_cfg(c);
    for (int i = 0; i < cnna_pkg::CTRL_WORDS; i++) ctrl_q.push_back(w[i*32 +: 32]);
  endtask

  task automatic run_layer(string name, int timeout_cycles);
    int n = 0;
    y_got.delete();
    while (y_got.size() < y_exp.size() && n < timeout_cycles) begin
      @(posedge clk); n++;
    end
    repeat (4) @(posedge clk);
    `CHECK(y_got.size() == y_exp.size(), $sformatf("%s: %0d of %0d Y beats", name, y_got.size(), y_exp.size()))
    for (int i = 0; i < y_exp.size() && i < y_got.size(); i++)
      `CHECK(y_got[i] === y_exp[i], $sformatf("%s: Y beat %0d got %h exp %h", name, i, y_got[i], y_exp[i]))
    `CHECK(y_last_seen === 1'b1, $sformatf("%s: TLAST on final beat", name))
    `CHECK(xi == x_q.size() && wi == w_q.size() && bi == xb_q.size(),
           $sformatf("%s: all input consumed x %0d/%0d w %0d/%0d xb %0d/%0d", name,
                     xi, x_q.size(), wi, w_q.size(), bi, xb_q.size()))
    $display("%s: %0d cycles, %0d Y beats", name, n, y_got.size());
  endtask

  // Convolution: img[y][x][c] (rs x rs x depth), nk kernels of win x win x depth.
  // pre: stitched channels from an earlier pass (per pixel, from XBUF).
  task automatic conv_layer(string name, int rs, int depth, int win, int stride, int pad,
                            int nk, int pre, bit relu, int scale, int mag);
    int img[][][]; int wt[][][][]; int bias[];
    int ps = rs + 2*pad;
    int os = (ps - win) / stride + 1;
    int dch = depth / ELEMS;
    cnna_pkg::layer_cfg_t c;
    img = new[rs]; foreach (img[y]) begin img[y] = new[rs]; foreach (img[y][x]) begin
      img[y][x] = new[depth]; foreach (img[y][x][ch]) img[y][x][ch] = rnd_val(mag); end end
    wt = new[nk]; bias = new[nk];
    foreach (wt[k]) begin
      bias[k] = rnd_val(mag);
      wt[k] = new[win]; foreach (wt[k][ky]) begin wt[k][ky] = new[win];
        foreach (wt[k][ky][kx]) begin wt[k][ky][kx] = new[depth];
          foreach (wt[k][ky][kx][ch]) wt[k][ky][kx][ch] = rnd_val(mag); end end
    end
    c = '0; c.op = cnna_pkg::OP_CONV; c.act = relu ? cnna_pkg::ACT_RELU : cnna_pkg::ACT_LINEAR;
    c.win = 8'(win); c.stride = 8'(stride); c.pad = 8'(pad); c.row_size = 16'(rs);
    c.depth = 16'(depth); c.replay = 16'(nk / T_PE_N); c.n_kernels = 16'(nk);
    c.out_size = 16'(os); c.pre_depth = 16'(pre); c.scale = 32'(scale);
    if (nk / T_PE_N > 1) n_replay++;
    if (pad > 0) n_pad++;
    if (stride > 1) n_stride++;
    if (pre > 0) n_stitch++;
    ctrl_q.delete(); w_q.delete(); x_q.delete(); xb_q.delete(); y_exp.delete();
    ci = 0; wi = 0; xi = 0; bi = 0;
    // X: raster order, channels first
    for (int y = 0; y < rs; y++) for (int x = 0; x < rs; x++)
      for (int d = 0; d < dch; d++) x_q.push_back(pack_elems(img[y][x], d*ELEMS));
    // W: bias packages, then kernels (columns, channel groups, window rows)
    for (int k = 0; k < nk; k++) for (int r = 0; r < T_ROWS; r++)
      w_q.push_back(r == 0 ? beat_t'(T_DATA_W'(bias[k])) : '0);
    // (whole columns: WROWS beats per package, rows above a small window zero;
    //  one row at a time: one beat per valid window row)
    for (int k = 0; k < nk; k++) for (int kx = 0; kx < win; kx++) for (int d = 0; d < dch; d++)
      for (int r = (T_ROWS == WROWS ? 0 : WROWS - win); r < WROWS; r++) begin
        int ky = r - (WROWS - win);
        if (ky < 0) w_q.push_back('0);
        else w_q.push_back(pack_elems(wt[k][ky][kx], d*ELEMS));
      end
    // expected Y and XBUF
    for (int oy = 0; oy < os; oy++) for (int ox = 0; ox < os; ox++) begin
      int outv[] = new[nk];
      int prev[] = new[pre];
      foreach (prev[i]) prev[i] = rnd_val(1000);
      for (int i = 0; i < pre; i += ELEMS) begin
        xb_q.push_back(pack_elems(prev, i)); y_exp.push_back(pack_elems(prev, i));
      end
      for (int k = 0; k < nk; k++) begin
        longint acc = longint'(bias[k]) <<< T_FRAC;
        for (int ky = 0; ky < win; ky++) for (int kx = 0; kx < win; kx++) begin
          int py = oy*stride + ky - pad, px = ox*stride + kx - pad;
          if (py >= 0 && py < rs && px >= 0 && px < rs)
            for (int ch = 0; ch < depth; ch++)
              acc += longint'(img[py][px][ch]) * longint'(wt[k][ky][kx][ch]);
        end
        outv[k] = finish_acc(acc, scale, relu);
      end
      for (int i = 0; i < nk; i += ELEMS) y_exp.push_back(pack_elems(outv, i));
    end
    send_cfg(c);
    run_layer(name, 200000 + 40 * (x_q.size() + w_q.size() + os*os*win*dch*(nk/T_PE_N)));
  endtask

  // Pooling: kind 0 max, 1 min, 2 average
  task automatic pool_layer(string name, int rs, int depth, int win, int stride, int kind);
    int img[][][];
    int os = (rs - win) / stride + 1;
    int dch = depth / ELEMS;
    cnna_pkg::layer_cfg_t c;
    img = new[rs]; foreach (img[y]) begin img[y] = new[rs]; foreach (img[y][x]) begin
      img[y][x] = new[depth]; foreach (img[y][x][ch]) img[y][x][ch] = rnd_val(20000); end end
    c = '0; c.op = cnna_pkg::OP_POOL; c.pool = cnna_pkg::pool_e'(kind);
    c.win = 8'(win); c.stride = 8'(stride); c.row_size = 16'(rs); c.depth = 16'(depth);
    c.replay = 16'd1; c.out_size = 16'(os);
    if (kind == 0) n_pool_max++; else if (kind == 1) n_pool_min++; else n_pool_avg++;
    ctrl_q.delete(); w_q.delete(); x_q.delete(); xb_q.delete(); y_exp.delete();
    ci = 0; wi = 0; xi = 0; bi = 0;
    for (int y = 0; y < rs; y++) for (int x = 0; x < rs; x++)
      for (int d = 0; d < dch; d++) x_q.push_back(pack_elems(img[y][x], d*ELEMS));
    for (int oy = 0; oy < os; oy++) for (int ox = 0; ox < os; ox++) begin
      int outv[] = new[depth];
      for (int ch = 0; ch < depth; ch++) begin
        int acc = img[oy*stride][ox*stride][ch];
        int sum = 0;
        for (int ky = 0; ky < win; ky++) for (int kx = 0; kx < win; kx++) begin
          int v = img[oy*stride+ky][ox*stride+kx][ch];
          sum += v;
          if (kind == 0 && v > acc) acc = v;
          if (kind == 1 && v < acc) acc = v;
        end
        outv[ch] = (kind == 2) ? sum / (win*win) : acc;
      end
      for (int i = 0; i < depth; i += ELEMS) y_exp.push_back(pack_elems(outv, i));
    end
    send_cfg(c);
    run_layer(name, 100000 + 20 * x_q.size());
  endtask

  // Fully connected: len inputs (len/ELEMS beats), T_PE_N neurons in this split.
  task automatic fc_layer(string name, int beats, bit relu, int scale, int mag);
    int len = beats * ELEMS;
    int pk = (beats + WROWS - 1) / WROWS;
    int v[] = new[pk * WROWS * ELEMS];
    int wt[][] = new[T_PE_N];
    int bias[] = new[T_PE_N];
    int outv[] = new[T_PE_N];
    cnna_pkg::layer_cfg_t c;
    foreach (v[i]) v[i] = (i < len) ? rnd_val(mag) : 0;
    foreach (wt[n]) begin wt[n] = new[pk * WROWS * ELEMS]; bias[n] = rnd_val(mag);
      foreach (wt[n][i]) wt[n][i] = (i < len) ? rnd_val(mag) : 0; end
    c = '0; c.op = cnna_pkg::OP_FC; c.act = relu ? cnna_pkg::ACT_RELU : cnna_pkg::ACT_LINEAR;
    c.win = 8'd1; c.stride = 8'd1; c.replay = 16'd1; c.n_kernels = 16'(T_PE_N);
    c.out_size = 16'd1; c.scale = 32'(scale); c.fc_beats = 32'(beats);
    n_fc++;
    if (beats % WROWS != 0) n_fc_partial++;
    ctrl_q.delete(); w_q.delete(); x_q.delete(); xb_q.delete(); y_exp.delete();
    ci = 0; wi = 0; xi = 0; bi = 0;
    for (int b = 0; b < beats; b++) x_q.push_back(pack_elems(v, b*ELEMS));
    for (int n = 0; n < T_PE_N; n++) for (int r = 0; r < T_ROWS; r++)
      w_q.push_back(r == 0 ? beat_t'(T_DATA_W'(bias[n])) : '0);
    for (int j = 0; j < pk * WROWS / T_ROWS; j++) for (int n = 0; n < T_PE_N; n++)
      for (int r = 0; r < T_ROWS; r++) w_q.push_back(pack_elems(wt[n], (j*T_ROWS + r)*ELEMS));
    for (int n = 0; n < T_PE_N; n++) begin
      longint acc = longint'(bias[n]) <<< T_FRAC;
      for (int i = 0; i < len; i++) acc += longint'(v[i]) * longint'(wt[n][i]);
      outv[n] = finish_acc(acc, scale, relu);
    end
    for (int i = 0; i < T_PE_N; i += ELEMS) y_exp.push_back(pack_elems(outv, i));
    send_cfg(c);
    run_layer(name, 100000 + 20 * w_q.size());
  endtask

  task automatic axil_read(logic [5:0] a, output logic [31:0] d);
    s_araddr <= a; s_arvalid <= 1'b1;
    do @(posedge clk); while (!(s_arvalid && s_arready));
    s_arvalid <= 1'b0;
    #1 d = s_rdata;
  endtask
