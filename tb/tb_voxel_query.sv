// tb_voxel_query: queries against eight model PEs that answer after a random
// delay with a log-odds derived from the key. Checks that each query goes to
// the PE of its first-level branch, that results come back in order with the
// right log-odds, and the occupied / free / unknown classification.
module tb_voxel_query;
  import omu_pkg::*;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic q_valid, q_ready, res_valid, res_ready, busy;
  key_t q_key, pe_qkey;
  logic [N_PE-1:0] pe_qvalid, pe_qready, pe_rvalid;
  qresp_t pe_resp [N_PE];
  status_e res_status;
  qresp_t res;
  key_t sent[$];
  int checks = 0, failures = 0, n_occ = 0, n_free = 0, n_unk = 0;
  localparam int N = 600;

  voxel_query #(.QDEPTH(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int pe_of(key_t k); return k.x[15] + 2 * k.y[15] + 4 * k.z[15]; endfunction
  function automatic qresp_t answer(key_t k);
    return '{found: k.x[3:0] != 0, prob: prob_t'(int'(k.y[7:0]) - 128)};
  endfunction

  // model PEs: accept when idle, answer 3..20 cycles later
  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    int wait_n = -1; key_t k;
    always @(posedge clk) begin
      pe_rvalid[p] <= 1'b0;
      if (wait_n > 0) wait_n <= wait_n - 1;
      else if (wait_n == 0) begin
        pe_rvalid[p] <= 1'b1; pe_resp[p] <= answer(k); wait_n <= -1;
      end else if (pe_qvalid[p] && pe_qready[p]) begin
        checks++;
        if (pe_of(pe_qkey) != p) begin failures++; $display("query sent to wrong PE"); end
        k <= pe_qkey; wait_n <= $urandom_range(3, 20);
      end
    end
    assign pe_qready[p] = (wait_n < 0);
  end

  initial begin
    cfg = '{hit: HIT_DEFAULT, miss: MISS_DEFAULT, clamp_min: CLAMP_MIN_DEFAULT,
            clamp_max: CLAMP_MAX_DEFAULT, occ_thr: 16'sd20, free_thr: -16'sd20};
    for (int p = 0; p < N_PE; p++) begin pe_rvalid[p] = 0; pe_resp[p] = '0; end
    q_valid = 0; res_ready = 0; q_key = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        q_key = key_t'({$urandom, $urandom}); q_valid = 1;
        do @(posedge clk); while (!q_ready);
        sent.push_back(q_key);
        @(negedge clk); q_valid = 0;
        repeat ($urandom_range(0, 6)) @(negedge clk);
      end
      for (int i = 0; i < N; i++) begin
        qresp_t e; status_e es;
        @(negedge clk);
        res_ready = $urandom_range(0, 1);
        while (!(res_valid && res_ready)) begin @(negedge clk); res_ready = $urandom_range(0, 1); end
        e  = answer(sent[0]);
        es = !e.found ? ST_UNKNOWN : (e.prob >= 20) ? ST_OCCUPIED : (e.prob <= -20) ? ST_FREE : ST_UNKNOWN;
        checks++;
        if (res != e || res_status != es) begin
          failures++; $display("result %0d: got %p/%0d exp %p/%0d", i, res, res_status, e, es);
        end
        if (es == ST_OCCUPIED) n_occ++; else if (es == ST_FREE) n_free++; else n_unk++;
        void'(sent.pop_front());
        @(posedge clk); #1 res_ready = 0;
      end
    join
    checks++;
    if (n_occ == 0 || n_free == 0 || n_unk == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
