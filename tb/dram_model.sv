// dram_model: behavioural stand-in for the DRAM side, for testbenches only.
//
// Accepts burst read requests, returns each one LATENCY cycles later in
// request order with data computed from the burst address (data_of), and
// counts row activations: each of the 2^BANK_BITS banks (taken from
// address bits 8:6) keeps one open row (address >> 14), and a request to
// another row opens it.  It is not a timing model of any DRAM standard.
module dram_model
  import lignn_pkg::*;
#(
  parameter int LATENCY   = 8,
  parameter int BANK_BITS = 3
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  burst_t    req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output dram_rsp_t rsp,
  output int        activations,
  output int        accesses
);

  function automatic logic [DATA_W-1:0] data_of(input logic [BADDR_W-1:0] b);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[i*32 +: 32] = 32'(b) * 32'h9E37_79B9 + 32'(i);
    return d;
  endfunction

  burst_t      q [$];
  int          due [$];
  int          now;
  logic [ROWID_W-1:0] open_row [1 << BANK_BITS];
  bit          is_open  [1 << BANK_BITS];

  assign req_ready = (q.size() < 64);
  assign rsp_valid = (q.size() > 0) && (due[0] <= now);
  always_comb begin
    rsp = '0;
    if (q.size() > 0) begin
      rsp.b    = q[0];
      rsp.data = data_of(q[0].baddr);
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      now = 0; activations = 0; accesses = 0;
      q.delete(); due.delete();
      foreach (is_open[i]) is_open[i] = 0;
    end else begin
      now++;
      if (rsp_valid && rsp_ready) begin
        void'(q.pop_front());
        void'(due.pop_front());
      end
      if (req_valid && req_ready) begin
        int bank;
        logic [ROWID_W-1:0] row;
        bank = int'(req.baddr[BANK_BITS-1:0]);
        row  = req.baddr[BADDR_W-1:ROW_LSB-BURST_LSB];
        accesses++;
        if (!is_open[bank] || open_row[bank] != row) begin
          activations++;
          open_row[bank] = row;
          is_open[bank] = 1;
        end
        q.push_back(req);
        due.push_back(now + LATENCY);
      end
    end
  end

endmodule
