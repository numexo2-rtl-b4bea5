// rr_arbiter: round-robin arbiter.
//
// Among the requesting inputs it grants the first one after the input granted
// last, so every requester is served within N grants whatever the rates of the
// others. 'grant' is one-hot and combinational; 'advance' (the grant was
// used) moves the priority pointer past the granted input.
//
// Round-robin service of the channel FIFOs is the published method; the
// pointer scheme is this design's choice.
module rr_arbiter #(
  parameter int N = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [N-1:0]         req,
  input  logic                 advance,
  output logic [N-1:0]         grant,
  output logic [$clog2(N)-1:0] grant_idx,
  output logic                 any
);
  localparam int IW = $clog2(N);
  logic [IW-1:0] last;

  always_comb begin
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int i = 1; i <= N; i++) begin
      logic [IW-1:0] c;
      c = IW'((int'(last) + i) % N);
      if (!any && req[c]) begin
        any       = 1'b1;
        grant[c]  = 1'b1;
        grant_idx = IW'(c);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst)              last <= IW'(N - 1);
    else if (advance && any) last <= grant_idx;
  end
endmodule
