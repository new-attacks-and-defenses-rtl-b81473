// mem_model: behavioural model of the main memory behind the cache bank.
//
// Not synthesizable. Holds every line ever written in an associative array;
// a line never written reads as a pattern derived from its address
// (init_pattern). Read requests are answered LATENCY cycles after they are
// accepted with a one-cycle resp_valid; writes are absorbed when accepted.
// With STALL_PCT above 0, req_ready is dropped at random to exercise the
// bank's handshakes. Counts reads and writes for the testbench.
module mem_model
  import dedrp_pkg::*;
#(
  parameter int unsigned LATENCY   = 6,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     resp_valid,
  output line_t    resp_data,
  output int       n_reads,
  output int       n_writes
);

  line_t      store [line_addr_t];
  int         wait_cnt;
  logic       busy;
  line_addr_t rd_addr;

  function automatic line_t init_pattern(input line_addr_t a);
    line_t p;
    for (int k = 0; k < 8; k++) p[64*k +: 64] = {6'(k), a} ^ 64'hA5A5_0000_5A5A_0000;
    return p;
  endfunction

  function automatic line_t peek(input line_addr_t a);
    return store.exists(a) ? store[a] : init_pattern(a);
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready  <= 1'b1;
      resp_valid <= 1'b0;
      busy       <= 1'b0;
      wait_cnt   <= 0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.addr] = req.wdata;
          n_writes        <= n_writes + 1;
        end else begin
          busy     <= 1'b1;
          rd_addr  <= req.addr;
          wait_cnt <= LATENCY;
          n_reads  <= n_reads + 1;
        end
      end
      if (busy) begin
        if (wait_cnt <= 1) begin
          busy       <= 1'b0;
          resp_valid <= 1'b1;
          resp_data  <= peek(rd_addr);
        end else begin
          wait_cnt <= wait_cnt - 1;
        end
      end
      req_ready <= (int'($urandom_range(99)) >= int'(STALL_PCT));
    end
  end

endmodule
