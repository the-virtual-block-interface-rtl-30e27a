// mem_model: behavioural physical memory for simulation. Not synthesizable
// design content; it stands in for the DRAM behind the memory controller.
//
// Holds LINES lines of 64 bytes. A request is accepted when valid and
// ready are high (ready is always high while no request is outstanding);
// the response (read data, or an acknowledgement for a write) follows
// LATENCY cycles later as a one-cycle pulse. Writes honour the byte strobes.
// Addresses beyond the array read as zero and ignore writes. Memory starts
// all zero. `mem_write_word`/`mem_read_word` let a testbench set up and
// inspect tables directly.
module mem_model
  import vbi_pkg::*;
#(
  parameter int unsigned LINES   = 4096 * 64,
  parameter int unsigned LATENCY = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_rdata,
  output logic [31:0]       n_reads,
  output logic [31:0]       n_writes
);
  logic [LINE_W-1:0] mem [LINES];
  logic              busy;
  int unsigned       cnt;
  mem_req_t          r;

  initial begin
    for (int unsigned i = 0; i < LINES; i++) mem[i] = '0;
  end

  function automatic void mem_write_word(input logic [PA_W-1:0] a, input logic [63:0] w);
    if ((a >> 6) < LINES) mem[a >> 6][64*int'(a[5:3]) +: 64] = w;
  endfunction

  function automatic logic [63:0] mem_read_word(input logic [PA_W-1:0] a);
    if ((a >> 6) < LINES) return mem[a >> 6][64*int'(a[5:3]) +: 64];
    return '0;
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= 0; rsp_valid <= 1'b0; rsp_rdata <= '0;
      n_reads <= '0; n_writes <= '0; r <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1;
        cnt  <= LATENCY;
        r    <= req;
      end else if (busy) begin
        if (cnt > 1) cnt <= cnt - 1;
        else begin
          busy      <= 1'b0;
          rsp_valid <= 1'b1;
          if ((r.addr >> 6) < LINES) begin
            if (r.we) begin
              for (int b = 0; b < LINE_BYTES; b++)
                if (r.wstrb[b]) mem[r.addr >> 6][8*b +: 8] <= r.wdata[8*b +: 8];
              rsp_rdata <= '0;
              n_writes  <= n_writes + 1;
            end else begin
              rsp_rdata <= mem[r.addr >> 6];
              n_reads   <= n_reads + 1;
            end
          end else begin
            rsp_rdata <= '0;
          end
        end
      end
    end
  end
endmodule
