// Testbench for row_drop_ctrl, driving a 16 x 8 locality group table.
// Rounds of random inserts are followed by one output call under random
// backpressure.  A reference model of the row integrity policy, working on
// the queue sizes seen when the call starts, predicts the sequence of
// (keep or drop, queue size) decisions and the new balance delta; the
// observed outputs must match, every queue must leave whole on one output,
// and with no backpressure a call must take one cycle per burst plus one
// per queue plus one.  Over all rounds the dropped share must approach
// alpha.
module tb_row_drop_ctrl;
  import lignn_pkg::*;
  localparam int E = 16, D = 8, DW = 20;
  localparam int IW = $clog2(E), CW = $clog2(D + 1), UW = $clog2(E + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid, ins_ready, pop;
  logic [19:0] ins_key;
  logic [DW-1:0] ins_data, head;
  logic [CW-1:0] ins_qsize;
  logic [E-1:0] valid;
  logic [E-1:0][CW-1:0] cnt;
  logic [UW-1:0] used;
  logic [IW-1:0] pop_idx;
  group_table #(.ENTRIES(E), .DEPTH(D), .KEY_W(20), .DATA_W(DW)) u_tab (
    .clk, .rst_n, .ins_valid, .ins_ready, .ins_key, .ins_data, .ins_qsize,
    .valid_o(valid), .cnt_o(cnt), .used_o(used), .pop, .pop_idx, .head_o(head));

  row_cfg_t cfg;
  logic fire, busy, keep_valid, keep_ready, drop_valid, drop_ready;
  logic [DW-1:0] out_data;
  assign out_data = head;
  logic signed [23:0] delta;
  logic pick_drop, pick_keep;
  row_drop_ctrl #(.ENTRIES(E), .DEPTH(D), .DW(DW)) dut (
    .clk, .rst_n, .cfg, .fire_i(fire), .busy_o(busy),
    .valid_i(valid), .cnt_i(cnt), .pop_o(pop), .pop_idx_o(pop_idx), .head_i(head),
    .keep_valid, .keep_ready, .drop_valid, .drop_ready,
    .delta_o(delta), .pick_drop_o(pick_drop), .pick_keep_o(pick_keep));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint m_delta = 0;
  int total_keep = 0, total_drop = 0;

  initial begin
    ins_valid = 0; fire = 0; keep_ready = 0; drop_ready = 0; ins_key = 0; ins_data = 0;
    cfg.alpha = 8'd128; cfg.n = 16'd24; cfg.crit_min = 8'd2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 300; round++) begin
      int sizes[$], exp_dec[$], exp_sz[$], obs_dec[$], obs_sz[$];
      int k, d, cycles, nq, nb;
      logic [19:0] last_row;
      int last_dec;
      bit bp;
      sizes.delete(); exp_dec.delete(); exp_sz.delete(); obs_dec.delete(); obs_sz.delete();
      if (round == 100) begin cfg.alpha = 8'd51; cfg.n = 16'd40; cfg.crit_min = 8'd3; end
      if (round == 200) begin cfg.alpha = 8'd204; cfg.n = 16'd8; cfg.crit_min = 8'd0; end
      // fill
      repeat (10 + $urandom % 40) begin
        @(negedge clk);
        ins_valid = 1;
        ins_key = 20'($urandom % 24);
        ins_data = DW'({ins_key[9:0], 10'($urandom)});
      end
      @(negedge clk); ins_valid = 0;
      // model from the table state
      for (int i = 0; i < E; i++) if (valid[i]) sizes.push_back(int'(cnt[i]));
      k = 0; d = 0;
      while (sizes.size() > 0 && k + d < int'(cfg.n)) begin
        longint bal;
        int pick;
        bal = m_delta + longint'(k + d) * cfg.alpha - longint'(d) * 256;
        pick = 0;
        if (bal > 0) begin
          foreach (sizes[i]) if (sizes[i] < sizes[pick]) pick = i;
          d += sizes[pick]; exp_dec.push_back(1);
        end else begin
          int best;
          best = -1;
          foreach (sizes[i]) if (sizes[i] >= int'(cfg.crit_min) && (best < 0 || sizes[i] > sizes[best])) best = i;
          if (best < 0) foreach (sizes[i]) if (sizes[i] > sizes[pick]) pick = i;
          if (best >= 0) pick = best;
          k += sizes[pick]; exp_dec.push_back(0);
        end
        exp_sz.push_back(sizes[pick]);
        sizes.delete(pick);
      end
      m_delta = m_delta + longint'(k + d) * cfg.alpha - longint'(d) * 256;
      total_keep += k; total_drop += d;
      // run the call
      bp = (round % 2 == 1);
      fire = 1;
      @(negedge clk); fire = 0;
      cycles = 1; last_dec = -1; last_row = '1;
      while (busy) begin
        keep_ready = bp ? 1'($urandom) : 1'b1;
        drop_ready = bp ? 1'($urandom) : 1'b1;
        #1;
        check(!(keep_valid && drop_valid), "one output at a time");
        if ((keep_valid && keep_ready) || (drop_valid && drop_ready)) begin
          int dec;
          dec = drop_valid ? 1 : 0;
          if (dec != last_dec || out_data[19:10] != last_row[9:0]) begin
            obs_dec.push_back(dec); obs_sz.push_back(1);
          end else obs_sz[obs_sz.size()-1]++;
          last_dec = dec; last_row = {10'd0, out_data[19:10]};
        end
        @(negedge clk);
        cycles++;
      end
      keep_ready = 0; drop_ready = 0;
      check(obs_dec == exp_dec, $sformatf("decisions %p vs %p", obs_dec, exp_dec));
      check(obs_sz == exp_sz, $sformatf("queue sizes %p vs %p", obs_sz, exp_sz));
      check(longint'(delta) == m_delta, $sformatf("delta %0d vs %0d", delta, m_delta));
      nq = exp_sz.size(); nb = 0;
      foreach (exp_sz[i]) nb += exp_sz[i];
      if (!bp) check(cycles == nb + nq + 1 || cycles == nb + nq + 2,
                     $sformatf("call took %0d cycles for %0d bursts in %0d queues", cycles, nb, nq));
    end
    begin
      int share;
      share = total_drop * 1000 / (total_keep + total_drop);
      $display("kept %0d dropped %0d", total_keep, total_drop);
      check(share > 300 && share < 700, $sformatf("dropped share %0d/1000", share));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
