// mem_arbiter: shares the one physical memory port among the requesters of
// the VBI hardware (CVT fetches, CVT edits by attach/detach, the MTL).
//
// Fixed priority, lowest index first. A granted requester keeps the port
// until its response returns, so each requester sees its own request/
// response sequence unchanged; one request is outstanding at a time. The
// paper does not describe this interconnect; it is this design's.
// Handshake on both sides: a request is taken in a cycle where valid and
// ready are both high, and must be held until then; the response is a
// one-cycle `rsp_valid` pulse.
module mem_arbiter
  import vbi_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              m_req_valid [N],
  output logic              m_req_ready [N],
  input  mem_req_t          m_req       [N],
  output logic              m_rsp_valid [N],
  output logic [LINE_W-1:0] m_rsp_rdata,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  logic [LINE_W-1:0] mem_rsp_rdata
);
  localparam int unsigned G_W = (N > 1) ? $clog2(N) : 1;

  logic           busy;
  logic [G_W-1:0] owner, pick;
  logic           any;

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (m_req_valid[i]) begin
        any  = 1'b1;
        pick = G_W'(i);
      end
    end
  end

  assign mem_req_valid = any && !busy;
  assign mem_req       = m_req[pick];
  assign m_rsp_rdata   = mem_rsp_rdata;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      m_req_ready[i] = !busy && (pick == G_W'(i)) && mem_req_ready;
      m_rsp_valid[i] = busy && (owner == G_W'(i)) && mem_rsp_valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      owner <= '0;
    end else if (!busy) begin
      if (any && mem_req_ready) begin
        busy  <= 1'b1;
        owner <= pick;
      end
    end else if (mem_rsp_valid) begin
      busy <= 1'b0;
    end
  end

  // the memory answers only a request that is outstanding
  a_rsp_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         mem_rsp_valid |-> busy);
endmodule
