// Testbench for group_table (locality group table): random inserts and
// pops, with random keys from a small set so queues and the table fill up,
// against a reference model of a keyed table of FIFOs.  Every cycle the
// entry flags, queue sizes, table size, insert acceptance, reported queue
// size and head of the drained queue are compared with the model.
module tb_group_table;
  localparam int E = 8, D = 4, KW = 20, DW = 16;
  localparam int IW = $clog2(E), CW = $clog2(D + 1), UW = $clog2(E + 1);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ins_valid, ins_ready, pop;
  logic [KW-1:0] ins_key;
  logic [DW-1:0] ins_data, head_o;
  logic [CW-1:0] ins_qsize;
  logic [E-1:0] valid_o;
  logic [E-1:0][CW-1:0] cnt_o;
  logic [UW-1:0] used_o;
  logic [IW-1:0] pop_idx;
  group_table #(.ENTRIES(E), .DEPTH(D), .KEY_W(KW), .DATA_W(DW)) dut (.*);

  // reference model
  bit            m_vld [E];
  logic [KW-1:0] m_key [E];
  logic [DW-1:0] m_q   [E][$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("FAIL %s at %0t vld=%b cnt=%p", what, $time, valid_o, cnt_o); end
  endtask

  int hits = 0, refusals = 0, allocs = 0;
  initial begin
    ins_valid = 0; pop = 0; pop_idx = 0; ins_key = 0; ins_data = 0;
    for (int i = 0; i < E; i++) m_vld[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      int hit_i, free_i, used, valid_list[$];
      bit exp_ready;
      int exp_qs;
      @(negedge clk);
      // pick stimulus; bias phases towards filling and towards draining
      ins_valid = ((cyc / 500) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      ins_key   = KW'($urandom % 12);
      ins_data  = DW'($urandom);
      valid_list.delete();
      for (int i = 0; i < E; i++) if (m_vld[i]) valid_list.push_back(i);
      pop = (valid_list.size() > 0) && (((cyc / 500) % 2 == 0) ? ($urandom % 3 == 0) : ($urandom % 4 != 0));
      pop_idx = pop ? IW'(valid_list[$urandom % valid_list.size()]) : IW'($urandom);
      #1;
      // model lookup
      hit_i = -1; free_i = -1; used = 0;
      for (int i = E - 1; i >= 0; i--) begin
        if (m_vld[i] && m_key[i] == ins_key) hit_i = i;
        if (!m_vld[i]) free_i = i;
      end
      for (int i = 0; i < E; i++) used += m_vld[i];
      if (hit_i >= 0) begin
        exp_ready = (m_q[hit_i].size() < D) || (pop && int'(pop_idx) == hit_i);
        exp_qs = m_q[hit_i].size() + 1 - ((pop && int'(pop_idx) == hit_i) ? 1 : 0);
      end else begin
        exp_ready = (free_i >= 0);
        exp_qs = 1;
      end
      for (int i = 0; i < E; i++) begin
        check(valid_o[i] == m_vld[i], "valid");
        check(int'(cnt_o[i]) == (m_vld[i] ? m_q[i].size() : 0), "count");
      end
      check(int'(used_o) == used, "table size");
      if (ins_valid) begin
        check(ins_ready == exp_ready, "insert acceptance");
        if (exp_ready) check(int'(ins_qsize) == exp_qs, "reported queue size");
      end
      if (pop) check(head_o == m_q[pop_idx][0], "head of drained queue");
      // model update at the clock edge
      @(posedge clk);
      if (pop) begin
        void'(m_q[pop_idx].pop_front());
      end
      if (ins_valid && exp_ready) begin
        int t;
        t = (hit_i >= 0) ? hit_i : free_i;
        if (hit_i >= 0) hits++; else allocs++;
        m_q[t].push_back(ins_data);
        m_key[t] = ins_key;
        m_vld[t] = 1;
      end else if (ins_valid) refusals++;
      for (int i = 0; i < E; i++) m_vld[i] = (m_q[i].size() != 0);
    end
    check(hits > 100 && allocs > 100 && refusals > 100, "hit, allocation and refusal all exercised");
    $display("hits=%0d allocs=%0d refusals=%0d", hits, allocs, refusals);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
