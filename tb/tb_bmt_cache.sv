// tb_bmt_cache: random look-ups, updates and fills against a reference model of
// a set-associative write-back cache, for two configurations driven by the same
// stimulus: direct-mapped with 4 lines, and 2-way with 8 lines (4 sets).
// Each operation is a look-up, checked one cycle later (hit, data, and the
// victim a fill would evict), optionally followed in the next cycle by a write
// of the same node, as the owning stage does. The model picks victims like the
// cache is specified to: the lowest invalid way, else a per-set round-robin
// pointer advanced by each fill.
module tb_bmt_cache;
  import hmt_pkg::*;
  import hmt_tb_pkg::*;

  localparam int unsigned NCFG = 2;
  localparam int unsigned LINES_C [NCFG] = '{4, 8};
  localparam int unsigned WAYS_C  [NCFG] = '{1, 2};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic  rd_en = 0, wr_en = 0, wr_dirty = 0;
  idx_t  rd_idx = '0, wr_idx = '0;
  node_t wr_data = '0;
  logic  rd_hit [NCFG], vic_dirty [NCFG];
  idx_t  vic_idx [NCFG];
  node_t rd_data [NCFG], vic_data [NCFG];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NCFG; g++) begin : g_dut
    bmt_cache #(.LINES(LINES_C[g]), .WAYS(WAYS_C[g])) dut (
      .clk, .rst_n, .rd_en, .rd_idx, .rd_hit(rd_hit[g]), .rd_data(rd_data[g]),
      .vic_dirty(vic_dirty[g]), .vic_idx(vic_idx[g]), .vic_data(vic_data[g]),
      .wr_en, .wr_idx, .wr_data, .wr_dirty
    );
  end

  // reference model, [configuration][way][set]
  logic  m_valid [NCFG][4][8];
  logic  m_dirty [NCFG][4][8];
  idx_t  m_idx   [NCFG][4][8];
  node_t m_data  [NCFG][4][8];
  int    m_rr    [NCFG][8];
  int    n_hit [NCFG], n_evict [NCFG];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    for (int c = 0; c < NCFG; c++) begin
      n_hit[c] = 0; n_evict[c] = 0;
      for (int s = 0; s < 8; s++) begin
        m_rr[c][s] = 0;
        for (int w = 0; w < 4; w++) begin m_valid[c][w][s] = 0; m_dirty[c][w][s] = 0; end
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      idx_t x;
      int   set [NCFG], way [NCFG];
      bit   hit [NCFG], do_wr;
      x = idx_t'($urandom % 16);
      // model look-up
      for (int c = 0; c < NCFG; c++) begin
        int sets;
        bit inv;
        sets   = int'(LINES_C[c] / WAYS_C[c]);
        set[c] = int'(x) % sets;
        hit[c] = 0; inv = 0;
        way[c] = m_rr[c][set[c]];
        for (int w = int'(WAYS_C[c]) - 1; w >= 0; w--)
          if (!m_valid[c][w][set[c]]) begin inv = 1; way[c] = w; end
        for (int w = 0; w < int'(WAYS_C[c]); w++)
          if (m_valid[c][w][set[c]] && m_idx[c][w][set[c]] == x) begin hit[c] = 1; way[c] = w; end
      end
      @(negedge clk);
      rd_en = 1; rd_idx = x;
      @(negedge clk);
      rd_en = 0;
      for (int c = 0; c < NCFG; c++) begin
        int s, w;
        s = set[c]; w = way[c];
        check(rd_hit[c] == hit[c], $sformatf("cfg %0d hit for %0d", c, x));
        if (hit[c]) check(rd_data[c] == m_data[c][w][s], $sformatf("cfg %0d data on hit", c));
        check(vic_dirty[c] == (!hit[c] && m_valid[c][w][s] && m_dirty[c][w][s]), $sformatf("cfg %0d victim dirty", c));
        if (vic_dirty[c]) begin
          check(vic_idx[c] == m_idx[c][w][s], $sformatf("cfg %0d victim index", c));
          check(vic_data[c] == m_data[c][w][s], $sformatf("cfg %0d victim data", c));
        end
      end
      do_wr = ($urandom % 3) != 0;
      if (do_wr) begin
        wr_en = 1; wr_idx = x; wr_data = rand_node(); wr_dirty = 1'($urandom);
        for (int c = 0; c < NCFG; c++) begin
          int s, w;
          s = set[c]; w = way[c];
          if (hit[c]) n_hit[c]++;
          else begin
            if (m_valid[c][w][s] && m_dirty[c][w][s]) n_evict[c]++;
            if (WAYS_C[c] > 1) m_rr[c][s] = (w + 1) % int'(WAYS_C[c]);
          end
          m_valid[c][w][s] = 1; m_idx[c][w][s] = x; m_data[c][w][s] = wr_data; m_dirty[c][w][s] = wr_dirty;
        end
        @(negedge clk);
        wr_en = 0;
      end
    end
    for (int c = 0; c < NCFG; c++) begin
      $display("config %0d: write hits %0d, dirty evictions %0d", c, n_hit[c], n_evict[c]);
      check(n_hit[c] > 0 && n_evict[c] > 0, "hits and dirty evictions happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
