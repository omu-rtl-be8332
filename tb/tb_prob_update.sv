// tb_prob_update: leaf add-and-clamp and parent max / prune decisions for
// random inputs, against integer arithmetic done in the testbench.
module tb_prob_update;
  import omu_pkg::*;
  cfg_t    cfg;
  prob_t   leaf_prob, leaf_new, parent_prob;
  status_e leaf_st, leaf_new_st, prune_st;
  logic    occupied, prune;
  prob_t   ch_prob [N_BANK];
  status_e ch_st   [N_BANK];
  int checks = 0, failures = 0;

  prob_update dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int s, e, mx, any, pr;
      cfg.hit = prob_t'($urandom_range(0, 2000));
      cfg.miss = -prob_t'($urandom_range(0, 2000));
      cfg.clamp_min = -prob_t'($urandom_range(0, 4000));
      cfg.clamp_max = prob_t'($urandom_range(0, 4000));
      cfg.occ_thr = 0; cfg.free_thr = -1;
      leaf_prob = prob_t'($urandom_range(0, 8000) - 4000);
      leaf_st   = status_e'($urandom_range(0, 2));
      occupied  = 1'($urandom);
      // parent inputs: sometimes all equal leaves
      pr = $urandom_range(0, 2);
      for (int i = 0; i < 8; i++) begin
        ch_prob[i] = (pr == 0) ? prob_t'(1234) : prob_t'($urandom_range(0, 100) - 50);
        ch_st[i]   = (pr == 0) ? ST_OCCUPIED : status_e'($urandom_range(0, 3));
      end
      if (pr == 0 && $urandom_range(0, 3) == 0) ch_st[$urandom_range(0, 7)] = ST_INNER;
      #1;
      s = (leaf_st == ST_UNKNOWN) ? 0 : int'(leaf_prob);
      s += occupied ? int'(cfg.hit) : int'(cfg.miss);
      e = (s < int'(cfg.clamp_min)) ? int'(cfg.clamp_min) : (s > int'(cfg.clamp_max)) ? int'(cfg.clamp_max) : s;
      checks++;
      if (int'(leaf_new) != e || leaf_new_st != ((e >= 0) ? ST_OCCUPIED : ST_FREE)) begin
        failures++;
        $display("leaf: got %0d/%0d exp %0d", leaf_new, leaf_new_st, e);
      end
      mx = 0; any = 0; pr = 1;
      for (int i = 0; i < 8; i++) begin
        if (ch_st[i] != ST_UNKNOWN) begin
          if (!any || int'(ch_prob[i]) > mx) mx = int'(ch_prob[i]);
          any = 1;
        end
        if (ch_st[i] inside {ST_UNKNOWN, ST_INNER} || ch_prob[i] != ch_prob[0]) pr = 0;
      end
      checks++;
      if (int'(parent_prob) != mx || prune != 1'(pr) || (pr && prune_st != ch_st[0])) begin
        failures++;
        $display("parent: got %0d prune %b exp %0d %0d", parent_prob, prune, mx, pr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
