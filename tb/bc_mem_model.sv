// bc_mem_model: behavioural lower level (L2 and memory) for the testbenches.
//
// Not synthesizable. Serves one line request at a time: a read is answered
// with one `resp_valid` beat LATENCY cycles after it was accepted, a write is
// stored when accepted. A line never written reads as init_line(address), a
// function the testbenches also use to know the expected data. Counts reads
// and writes.
module bc_mem_model
  import bc_pkg::*;
#(
  parameter int unsigned LATENCY = 20
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  output logic   req_ready,
  input  logic   req_we,
  input  laddr_t req_addr,
  input  line_t  req_wdata,
  output logic   resp_valid,
  output line_t  resp_rdata,
  output int     n_reads,
  output int     n_writes
);
  line_t  mem [laddr_t];
  int     wait_q;
  logic   busy_q;
  laddr_t addr_q;

  function automatic line_t init_line(laddr_t a);
    line_t l;
    for (int w = 0; w < 16; w++) l[w*32 +: 32] = 32'(a) * 32'h2545_F491 ^ (32'(a >> 20) + 32'(w) * 32'h0101_0101);
    return l;
  endfunction

  function automatic line_t read_line(laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  assign req_ready = !busy_q;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      wait_q     <= 0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
      addr_q     <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req_we) begin
          mem[req_addr] = req_wdata;
          n_writes <= n_writes + 1;
        end else begin
          busy_q  <= 1'b1;
          wait_q  <= int'(LATENCY) - 1;
          addr_q  <= req_addr;
          n_reads <= n_reads + 1;
        end
      end else if (busy_q) begin
        if (wait_q <= 1) begin
          busy_q     <= 1'b0;
          resp_valid <= 1'b1;
          resp_rdata <= read_line(addr_q);
        end else begin
          wait_q <= wait_q - 1;
        end
      end
    end
  end
endmodule
