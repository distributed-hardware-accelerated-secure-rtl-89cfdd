// host_mem_model: behavioural model of a party's host memory as seen over PCIe.
// Not synthesizable; used only by testbenches.
//
// Accepts one beat request per cycle when req_ready (which drops at random, STALL_PCT
// percent of cycles, to exercise back-pressure).  Writes are posted.  Reads return in
// order RD_LAT cycles after acceptance on rsp_valid/rsp_data.  Memory is sparse
// (associative); unwritten beats read as zero.  put() writes one 128-bit lane and is
// how the network model delivers remote PUTs.
module host_mem_model
  import mpc_pkg::*;
#(
  parameter int unsigned RD_LAT    = 4,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  output triple_t  rsp_data
);

  triple_t mem [logic [ADDR_W-1:0]];
  triple_t rdq [$];
  int      dueq [$];
  int      cyc;
  int unsigned reads, writes;

  function automatic triple_t peek(logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  function automatic void poke(logic [ADDR_W-1:0] a, triple_t d);
    mem[a] = d;
  endfunction

  function automatic void put(logic [ADDR_W-1:0] a, logic [1:0] lane, share_t d);
    triple_t t;
    t = peek(a);
    t[lane] = d;
    mem[a] = t;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
      cyc       <= 0;
      reads     <= 0;
      writes    <= 0;
    end else begin
      cyc       <= cyc + 1;
      req_ready <= ($urandom_range(99) >= STALL_PCT);
      if (req_valid && req_ready) begin
        if (req.we) begin
          mem[req.addr] = req.data;
          writes <= writes + 1;
        end else begin
          rdq.push_back(peek(req.addr));
          dueq.push_back(cyc + int'(RD_LAT));
          reads <= reads + 1;
        end
      end
      if (dueq.size() > 0 && dueq[0] <= cyc) begin
        rsp_valid <= 1'b1;
        rsp_data  <= rdq.pop_front();
        void'(dueq.pop_front());
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end

endmodule
