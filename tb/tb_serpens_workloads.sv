// tb_serpens_workloads -- the twelve evaluation graphs, at true vertex count.
//
// The real matrices are not available here, so each one is replaced by a
// random square matrix with the same number of rows and columns as the
// published graph and 1/250 of its edges (uniform columns; rows uniform
// except that half of the edges fall on a few hot rows for the dense
// matrices G2, G4 and G6). The accelerator runs at its default size (16
// channels, 128 PEs). Every output row is compared bit for bit with the
// reference, and the cycle count is printed next to the analytic model
// (M + K)/16 + NNZ/(8*16).
module tb_serpens_workloads;
  import serpens_pkg::*;
  import tb_fp_pkg::*;
  import tb_spmv_pkg::*;

  localparam int HA = 16, W = 8192, U = 3, D = 4096, ACC_LAT = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int stall_pct = 0;

  logic        start = 0;
  logic [31:0] m_rows, k_cols, alpha, beta;
  logic [31:0] a_beats [HA];
  logic        busy, done, conflict_seen;
  logic [31:0] cycles;

  rd_req_t x_rd_req, y_rd_req, a_rd_req [HA];
  logic    x_rd_req_ready, y_rd_req_ready, a_rd_req_ready [HA];
  logic    x_rd_resp_valid, y_rd_resp_valid, a_rd_resp_valid [HA];
  beat_t   x_rd_resp_data, y_rd_resp_data, a_rd_resp_data [HA];
  wr_req_t y_wr_req;
  logic    y_wr_ready;
  wr_req_t no_wr;
  rd_req_t no_rd;
  logic    unused_r, unused_w;
  beat_t   unused_d;

  assign no_wr = '0;
  assign no_rd = '0;

  serpens_top dut (.*);

  hbm_model u_x (.clk, .rst_n, .stall_pct, .rd_req(x_rd_req), .rd_req_ready(x_rd_req_ready),
                 .rd_resp_valid(x_rd_resp_valid), .rd_resp_data(x_rd_resp_data),
                 .wr_req(no_wr), .wr_ready());
  hbm_model u_y (.clk, .rst_n, .stall_pct, .rd_req(y_rd_req), .rd_req_ready(y_rd_req_ready),
                 .rd_resp_valid(y_rd_resp_valid), .rd_resp_data(y_rd_resp_data),
                 .wr_req(no_wr), .wr_ready());
  hbm_model u_o (.clk, .rst_n, .stall_pct, .rd_req(no_rd), .rd_req_ready(unused_r),
                 .rd_resp_valid(unused_w), .rd_resp_data(unused_d),
                 .wr_req(y_wr_req), .wr_ready(y_wr_ready));

  spmv_job job;
  event    load_a;

  for (genvar c = 0; c < HA; c++) begin : g_a
    hbm_model u_a (.clk, .rst_n, .stall_pct, .rd_req(a_rd_req[c]), .rd_req_ready(a_rd_req_ready[c]),
                   .rd_resp_valid(a_rd_resp_valid[c]), .rd_resp_data(a_rd_resp_data[c]),
                   .wr_req(no_wr), .wr_ready());
    always @(load_a) begin
      u_a.mem.delete();
      foreach (job.a_img[c][i]) u_a.mem[i] = job.a_img[c][i];
    end
  end

  // ---------------- mechanism counters ----------------
  int n_seg = 0, n_chain_last = 0, n_bubble = 0, n_wr_bp = 0, n_rd_stall = 0, n_conflict = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.seg_start) n_seg++;
    if (dut.g_ch[HA-1].u_grp.x_in_valid) n_chain_last++;
    if (y_wr_req.valid && !y_wr_ready) n_wr_bp++;
    if (x_rd_req.valid && !x_rd_req_ready) n_rd_stall++;
    if (dut.g_ch[0].u_grp.conflict || dut.g_ch[HA-1].u_grp.conflict) n_conflict++;
  end
  for (genvar c = 0; c < HA; c++) begin : g_cnt
    always @(posedge clk) if (rst_n && dut.g_ch[c].u_grp.bubble) n_bubble++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_job(input int m, input int k, input int nnz, input int hot, input int stall,
                         input bit check_cycles);
    int words;
    job = new(HA, W, U, D, ACC_LAT);
    job.gen(m, k, nnz, hot);
    stall_pct = stall;
    u_x.mem.delete(); u_y.mem.delete(); u_o.mem.delete();
    foreach (job.x_img[i]) u_x.mem[i] = job.x_img[i];
    foreach (job.y_img[i]) u_y.mem[i] = job.y_img[i];
    ->load_a;
    @(posedge clk);
    m_rows = m; k_cols = k; alpha = job.alpha; beta = job.beta;
    for (int c = 0; c < HA; c++) a_beats[c] = job.a_img[c].size();
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    wait (done);
    @(posedge clk);
    for (int r = 0; r < m; r++) begin
      beat_t bt = u_o.mem.exists(r / 16) ? u_o.mem[r / 16] : '0;
      logic [31:0] got = bt[32*(r % 16) +: 32];
      check(got === job.yexp[r], $sformatf("m=%0d k=%0d row %0d got %h exp %h", m, k, r, got, job.yexp[r]));
    end
    check(!conflict_seen, "word-distance conflict reported on a legal order");
    if (check_cycles) begin
      // streaming bound: every x, A and y beat once, one per cycle, plus a
      // fixed per-segment and per-job overhead
      words = (k + 15) / 16 + job.max_beats_sum + (m + 15) / 16;
      check(cycles >= words && cycles <= words + job.nseg * (HA + 12) + 40,
            $sformatf("cycles %0d, streaming beats %0d", cycles, words));
    end
    $display("job m=%0d k=%0d nnz=%0d segs=%0d: %0d cycles (paper model %0.1f), %0d empty slots, %0d shared words",
             m, k, job.nnz, job.nseg, cycles, job.model_cycles(), job.n_bubbles, job.n_pair_words);
  endtask

  typedef struct { string name; int v; int e; int hot; } wl_t;
  wl_t wl [12] = '{
    '{"G1 googleplus",        108000,  13700000, 0},
    '{"G2 crankseg_2",         63800,  14100000, 200},
    '{"G3 Si41Ge41H72",       186000,  15000000, 0},
    '{"G4 TSOPF_RS_b2383",     38100,  16200000, 200},
    '{"G5 ML_Laplace",        377000,  27600000, 0},
    '{"G6 mouse_gene",         45100,  29000000, 200},
    '{"G7 soc_pokec",        1630000,  30600000, 0},
    '{"G8 coPapersCiteseer",  434000,  21100000, 0},
    '{"G9 PFlow_742",         743000,  37100000, 0},
    '{"G10 ogbl_ppa",         576000,  42500000, 0},
    '{"G11 hollywood",       1070000, 113000000, 0},
    '{"G12 ogbn_products",   2450000, 124000000, 0}};

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    foreach (wl[i]) begin
      $display("%s: %0d x %0d, %0d of %0d edges", wl[i].name, wl[i].v, wl[i].v, wl[i].e / 250, wl[i].e);
      run_job(wl[i].v, wl[i].v, wl[i].e / 250, wl[i].hot, 0, 0);
    end
    check(n_conflict == 0, "conflict pulses seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
