// mc_rr_arbiter: round-robin arbiter for one router output port.
//
// Among the requesting inputs it grants the first one at or after the
// position following the last input served, so every requester is served
// within N grants. The grant is one-hot and combinational from `req`.
// When `hold` is high the previous grant is kept (the output was offered
// but not accepted, and a valid/ready link must not change what it offers);
// `advance` (a transfer took place) moves the priority past the granted
// input. The arbitration policy is this design's choice; the paper does not
// describe the router's switch. Reset is active low and synchronous.
module mc_rr_arbiter #(
  parameter int unsigned N = 4   // at least 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         hold,
  input  logic         advance,
  output logic [N-1:0] grant
);

  logic [N-1:0] last_grant;  // grant of the previous cycle
  logic [N-1:0] pick;
  logic [N-1:0] ptr;         // one-hot: first input to consider

  // Requests at or after the pointer take precedence; if there are none,
  // the lowest-numbered request wins (the scan wraps around).
  logic [N-1:0] mask, req_hi, pick_src;

  always_comb begin
    mask     = ~(ptr - N'(1));                  // bits at and above the one-hot pointer
    req_hi   = req & mask;
    pick_src = (req_hi != '0) ? req_hi : req;
    pick     = pick_src & (~pick_src + N'(1));  // lowest set bit
    grant    = hold ? last_grant : pick;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr        <= N'(1);
      last_grant <= '0;
    end else begin
      last_grant <= grant;
      if (advance) begin
        ptr <= {grant[N-2:0], grant[N-1]};
      end
    end
  end

endmodule
