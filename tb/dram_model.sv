// dram_model: behavioural model of the DRAM V-row read port used by the testbenches.
//
// Accepts a request (key index) when req_ready, which drops at random when STALLS is set;
// after LATENCY clocks it returns the row as 8 beats of 8 BF16, in request order. Row
// contents are a fixed function of (key index, element): a BF16 value in (-2, 2) made by
// vdata(), so testbenches can compute the expected values on their own.
module dram_model #(
  parameter int LATENCY = 20,
  parameter bit STALLS  = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  input  logic [9:0]   req_addr,
  output logic         req_ready,
  output logic         rsp_valid,
  output logic [127:0] rsp_data
);
  typedef struct { int addr; int due; } pend_t;
  pend_t pend [$];
  int cyc = 0, beat = 0;

  // Element d of V row k: sign and exponent from a hash of (k, d).
  function automatic logic [15:0] vdata(int k, int d);
    int h;
    h = (k * 131 + d * 29 + 7) ^ (k >> 3);
    return {1'(h), 8'(121 + (h >> 1) % 6), 7'(h * 37)};
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      pend.delete(); beat <= 0; rsp_valid <= 0; req_ready <= 0;
    end else begin
      req_ready <= STALLS ? ($urandom_range(4) != 0) : 1'b1;
      if (req_valid && req_ready) pend.push_back('{addr: int'(req_addr), due: cyc + LATENCY});
      rsp_valid <= 0;
      if (pend.size() > 0 && pend[0].due <= cyc) begin
        rsp_valid <= 1;
        for (int l = 0; l < 8; l++) rsp_data[l*16 +: 16] <= vdata(pend[0].addr, beat * 8 + l);
        if (beat == 7) begin beat <= 0; void'(pend.pop_front()); end
        else beat <= beat + 1;
      end
    end
  end
endmodule
