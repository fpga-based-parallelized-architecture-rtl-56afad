// egs_e2e_body.svh: shared body of the end-to-end testbenches of
// egs_hybrid_top. The including module defines IMG_W, IMG_H, NCOL, NROW,
// K, MIN_SIZE, SEED and WATCHDOG, declares the DUT signals below and
// instantiates the DUT.
//
// The testbench draws a synthetic image: a few large flat-coloured
// rectangles that cross the tile seams, mild noise, and isolated specks of
// a very different colour. It loads it, runs one segmentation and checks
// the streamed result against a reference model of the same algorithm
// written here independently of the RTL: its own edge list per tile, its
// own stable sort, a plain union-find with per-component size and
// threshold, the same seam edges and the same pass order. Pixels must be
// grouped identically (the labels may differ, so a one-to-one map between
// DUT labels and model roots is checked), each colour must follow from its
// label, and the merge counts of each kind must agree. Each mechanism -
// threshold merging in the tiles, merging across horizontal and vertical
// seams, min-size merging - must happen at least once.

  localparam int TW_   = IMG_W / NCOL;
  localparam int TH_   = IMG_H / NROW;
  localparam int NT_   = NCOL * NROW;
  localparam int NPIX_ = TW_ * TH_;
  localparam int LW_   = (NPIX_ > 1) ? $clog2(NPIX_) : 1;
  localparam int NV_   = NT_ << LW_;          // model vertex numbers 0..NV_-1
  localparam int TE_   = (TW_-1)*TH_ + TW_*(TH_-1) + 2*(TW_-1)*(TH_-1);

  logic clk = 1'b0;
  logic rst_n = 1'b1;   // driven low at time 1 so the asynchronous reset sees an edge
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  // --- image ---
  rgb_t img [IMG_H][IMG_W];

  // --- reference model: union-find over vertex numbers (label - 1) ---
  int parent [NV_];
  int csize  [NV_];
  int cthr   [NV_];
  int m_thr_merges = 0, m_stitch_merges = 0, m_minsize_merges = 0;
  int m_hseam_merges = 0, m_vseam_merges = 0;

  typedef struct { int va; int vb; int w; } medge_t;
  medge_t tedges [NT_][TE_];
  int     tcount [NT_];
  medge_t sedges [$];

  function automatic int mfind(int v);
    while (parent[v] != v) v = parent[v];
    return v;
  endfunction

  function automatic int isqrt(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  function automatic int mdist(rgb_t a, rgb_t b);
    int dr = int'(a.r) - int'(b.r);
    int dg = int'(a.g) - int'(b.g);
    int db = int'(a.b) - int'(b.b);
    return isqrt(dr*dr + dg*dg + db*db);
  endfunction

  // one edge; returns 1 if it merged
  function automatic bit mjoin(medge_t e, bit minsize);
    int a = mfind(e.va), b = mfind(e.vb), s, t;
    if (a == b) return 0;
    if (minsize) begin
      if (!(csize[a] < MIN_SIZE || csize[b] < MIN_SIZE)) return 0;
    end else begin
      if (!(e.w <= cthr[a] && e.w <= cthr[b])) return 0;
    end
    s = csize[a] + csize[b];
    t = e.w + K / s;
    if (t > 255) t = 255;
    parent[a] = b;
    csize[b]  = s;
    cthr[b]   = t;
    return 1;
  endfunction

  function automatic int vid(int tile, int lx, int ly);
    return (tile << LW_) + ly * TW_ + lx;
  endfunction

  task automatic run_model();
    for (int v = 0; v < NV_; v++) begin
      parent[v] = v; csize[v] = 1; cthr[v] = K;
    end
    // per tile: edges in raster order, Vb1..Vb4, then a stable sort by weight
    for (int t = 0; t < NT_; t++) begin
      int ox = (t % NCOL) * TW_, oy = (t / NCOL) * TH_;
      medge_t raw [$];
      int n = 0;
      for (int y = 0; y < TH_; y++)
        for (int x = 0; x < TW_; x++) begin
          int dx [4] = '{1, 1, 1, 0};
          int dy [4] = '{-1, 0, 1, 1};
          for (int q = 0; q < 4; q++) begin
            int nx = x + dx[q], ny = y + dy[q];
            if (nx >= 0 && nx < TW_ && ny >= 0 && ny < TH_) begin
              medge_t e;
              e.va = vid(t, x, y); e.vb = vid(t, nx, ny);
              e.w  = mdist(img[oy+y][ox+x], img[oy+ny][ox+nx]);
              raw.push_back(e);
            end
          end
        end
      for (int w = 0; w < 512; w++)
        foreach (raw[i]) if (raw[i].w == w) tedges[t][n++] = raw[i];
      tcount[t] = n;
      for (int i = 0; i < n; i++) m_thr_merges += mjoin(tedges[t][i], 0);
    end
    // seams: horizontal stitching, then vertical
    for (int r = 0; r < NROW; r++)
      for (int c = 0; c < NCOL - 1; c++)
        for (int y = 0; y < TH_; y++) begin
          medge_t e;
          e.va = vid(r*NCOL + c, TW_-1, y); e.vb = vid(r*NCOL + c + 1, 0, y);
          e.w  = mdist(img[r*TH_ + y][c*TW_ + TW_-1], img[r*TH_ + y][(c+1)*TW_]);
          sedges.push_back(e);
        end
    for (int r = 0; r < NROW - 1; r++)
      for (int c = 0; c < NCOL; c++)
        for (int x = 0; x < TW_; x++) begin
          medge_t e;
          e.va = vid(r*NCOL + c, x, TH_-1); e.vb = vid((r+1)*NCOL + c, x, 0);
          e.w  = mdist(img[r*TH_ + TH_-1][c*TW_ + x], img[(r+1)*TH_][c*TW_ + x]);
          sedges.push_back(e);
        end
    foreach (sedges[i]) begin
      bit m = mjoin(sedges[i], 0);
      m_stitch_merges += m;
      if (i < NROW * (NCOL - 1) * TH_) m_hseam_merges += m;
      else                             m_vseam_merges += m;
    end
    // min-size: every tile's sorted list, then the seams
    for (int t = 0; t < NT_; t++)
      for (int i = 0; i < tcount[t]; i++) m_minsize_merges += mjoin(tedges[t][i], 1);
    foreach (sedges[i]) m_minsize_merges += mjoin(sedges[i], 1);
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  // --- image drawing ---
  task automatic draw_image();
    rgb_t pal [5];
    pal[0] = '{r: 8'd40,  g: 8'd120, b: 8'd200};
    pal[1] = '{r: 8'd90,  g: 8'd160, b: 8'd60};
    pal[2] = '{r: 8'd200, g: 8'd190, b: 8'd170};
    pal[3] = '{r: 8'd120, g: 8'd60,  b: 8'd50};
    pal[4] = '{r: 8'd250, g: 8'd20,  b: 8'd240};
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        int p;
        rgb_t c;
        if (y < IMG_H / 3)                       p = 0;   // sky across the top seams
        else if (x < IMG_W / 3 + y / 2)          p = 1;   // slanted region
        else if ((x + 2*y) % (IMG_W/2) < IMG_W/6) p = 3;  // stripes
        else                                     p = 2;
        c = pal[p];
        c.r = c.r + 8'($urandom_range(0, 2));
        c.g = c.g + 8'($urandom_range(0, 2));
        if ($urandom_range(0, 40) == 0) c = pal[4];       // isolated speck
        img[y][x] = c;
      end
  endtask

  // --- DUT result capture ---
  int     got_label [IMG_H][IMG_W];
  bit     got_seen  [IMG_H][IMG_W];
  int     n_out = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    got_label[out_y][out_x] = int'(out_label);
    got_seen[out_y][out_x]  = 1'b1;
    n_out++;
    checks++;
    if (out_rgb != rgb_t'(out_label * 24'h9E3779)) begin
      failures++;
      if (failures <= 10) $display("FAIL: colour of (%0d,%0d) label %0h rgb %0h", out_x, out_y, out_label, out_rgb);
    end
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", WATCHDOG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0;
    int map_d2m [int];
    int map_m2d [int];
    bit all_seen;
    void'($urandom(SEED));
    cfg_k = thr_t'(K);
    cfg_min_size = size_t'(MIN_SIZE);
    pix_we = 0; pix_x = '0; pix_y = '0; pix_rgb = '0; start = 0;
    #1 rst_n = 1'b0;
    draw_image();
    run_model();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        pix_we <= 1'b1; pix_x <= $bits(pix_x)'(x); pix_y <= $bits(pix_y)'(y); pix_rgb <= img[y][x];
        @(posedge clk);
      end
    pix_we <= 1'b0;
    @(posedge clk);
    start <= 1'b1;
    t0 = cycles;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    while (!done) @(posedge clk);
    @(posedge clk);
    $display("segmentation took %0d cycles (stat_cycles=%0d)", cycles - t0, stat_cycles);
    $display("merges: threshold %0d/%0d  stitch %0d/%0d (h %0d, v %0d)  min-size %0d/%0d",
             stat_thr_merges, m_thr_merges, stat_stitch_merges, m_stitch_merges,
             m_hseam_merges, m_vseam_merges, stat_minsize_merges, m_minsize_merges);

    check(n_out == IMG_W * IMG_H, $sformatf("number of output pixels %0d", n_out));
    all_seen = 1;
    foreach (got_seen[y, x]) all_seen &= got_seen[y][x];
    check(all_seen, "every pixel was output");
    // same grouping: a one-to-one map between DUT labels and model roots
    for (int y = 0; y < IMG_H; y++)
      for (int x = 0; x < IMG_W; x++) begin
        int t, m, d;
        bit ok;
        t  = (y / TH_) * NCOL + x / TW_;
        m  = mfind(vid(t, x % TW_, y % TH_));
        d  = got_label[y][x];
        ok = 1;
        if (map_d2m.exists(d)) ok &= (map_d2m[d] == m); else map_d2m[d] = m;
        if (map_m2d.exists(m)) ok &= (map_m2d[m] == d); else map_m2d[m] = d;
        check(ok, $sformatf("grouping of pixel (%0d,%0d)", x, y));
      end
    $display("segments: %0d", map_m2d.num());
    check(int'(stat_thr_merges) == m_thr_merges, "threshold merge count");
    check(int'(stat_stitch_merges) == m_stitch_merges, "stitch merge count");
    check(int'(stat_minsize_merges) == m_minsize_merges, "min-size merge count");
    // every mechanism happened
    check(m_thr_merges > 0, "threshold merging in the tiles happened");
    check(m_hseam_merges > 0, "merging across a horizontal-stitching seam happened");
    check(m_vseam_merges > 0, "merging across a vertical-stitching seam happened");
    check(m_minsize_merges > 0, "min-size merging happened");
    check(stat_cycles > 0, "cycle counter runs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
