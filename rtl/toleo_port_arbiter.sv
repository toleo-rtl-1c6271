// toleo_port_arbiter: shares the device's single request handler among its
// host links.
//
// The device splits its x32 CXL link into four x8 links, one per compute
// node, all served by one controller. Each cycle the arbiter grants the
// first requesting port after the one granted last (round robin), forwards
// that port's request with its port number as the source tag, and sends each
// response back to the port named by its destination tag.
// The four-link arrangement follows the paper; the round-robin policy and the
// valid/ready handshake are this design's choices (the paper gives no policy).
// Grant is combinational; the pointer advances on an accepted request.
module toleo_port_arbiter
  import toleo_pkg::*;
#(
  parameter int N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host ports
  input  logic [N-1:0]         p_req_valid_i,
  output logic [N-1:0]         p_req_ready_o,
  input  toleo_req_t [N-1:0]   p_req_i,
  output logic [N-1:0]         p_rsp_valid_o,
  input  logic [N-1:0]         p_rsp_ready_i,
  output toleo_rsp_t [N-1:0]   p_rsp_o,
  // controller side
  output logic                 req_valid_o,
  input  logic                 req_ready_i,
  output toleo_req_t           req_o,
  output logic [$clog2(N)-1:0] req_src_o,
  input  logic                 rsp_valid_i,
  output logic                 rsp_ready_o,
  input  toleo_rsp_t           rsp_i,
  input  logic [$clog2(N)-1:0] rsp_dst_i
);

  localparam int SW = $clog2(N);

  logic [SW-1:0] last;
  logic [SW-1:0] gsel;
  logic          gany;

  always_comb begin
    gany = 1'b0;
    gsel = '0;
    for (int i = 1; i <= N; i++) begin
      logic [SW-1:0] c;
      c = SW'((int'(last) + i) % N);
      if (!gany && p_req_valid_i[c]) begin
        gany = 1'b1;
        gsel = c;
      end
    end
  end

  assign req_valid_o = gany;
  assign req_o       = p_req_i[gsel];
  assign req_src_o   = gsel;

  always_comb begin
    p_req_ready_o = '0;
    if (gany) p_req_ready_o[gsel] = req_ready_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last <= SW'(N - 1);
    else if (gany && req_ready_i)  last <= gsel;
  end

  always_comb begin
    p_rsp_valid_o = '0;
    for (int i = 0; i < N; i++) p_rsp_o[i] = rsp_i;
    p_rsp_valid_o[rsp_dst_i] = rsp_valid_i;
  end
  assign rsp_ready_o = p_rsp_ready_i[rsp_dst_i];

  a_onehot_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(p_req_ready_o));

endmodule
