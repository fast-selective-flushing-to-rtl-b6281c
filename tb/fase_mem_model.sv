// fase_mem_model: behavioural model of the next memory level for the FaSe
// testbenches (not synthesizable). Serves one 64-byte line transfer at a
// time: accepts a request on mem_req_valid (mem_req_ready is high when idle),
// answers it LAT clocks later with one mem_resp_valid pulse. A read returns
// the stored line; a line never written reads as the pattern
// {line address, word index} per 64-bit word. A write stores the line and
// is acknowledged the same way. shared_mode makes reads answer "shared".
// Counts reads and writes for the testbenches.
module fase_mem_model
  import fase_pkg::*;
#(
  parameter int unsigned LAT = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  shared_mode,
  input  logic                  mem_req_valid,
  output logic                  mem_req_ready,
  input  logic                  mem_req_write,
  input  logic [PADDR_BITS-1:0] mem_req_addr,
  input  logic [LINE_BITS-1:0]  mem_req_wdata,
  output logic                  mem_resp_valid,
  output logic [LINE_BITS-1:0]  mem_resp_rdata,
  output logic                  mem_resp_shared,
  output int                    n_reads,
  output int                    n_writes
);

  logic [LINE_BITS-1:0] store [logic [PADDR_BITS-1:0]];
  logic                 busy;
  int                   cnt;
  logic                 q_write;
  logic [PADDR_BITS-1:0] q_addr;

  function automatic logic [LINE_BITS-1:0] pattern(logic [PADDR_BITS-1:0] a);
    logic [LINE_BITS-1:0] l;
    for (int w = 0; w < LINE_WORDS; w++) l[w*XLEN +: XLEN] = {32'(a), 32'(w) ^ 32'h5A5A_0000};
    return l;
  endfunction

  assign mem_req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy            <= 1'b0;
      cnt             <= 0;
      mem_resp_valid  <= 1'b0;
      mem_resp_rdata  <= '0;
      mem_resp_shared <= 1'b0;
      n_reads         <= 0;
      n_writes        <= 0;
      q_write         <= 1'b0;
      q_addr          <= '0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (!busy && mem_req_valid) begin
        busy    <= 1'b1;
        cnt     <= 1;
        q_write <= mem_req_write;
        q_addr  <= mem_req_addr;
        if (mem_req_write) begin
          store[mem_req_addr] = mem_req_wdata;
          n_writes <= n_writes + 1;
        end else begin
          n_reads <= n_reads + 1;
        end
      end else if (busy) begin
        cnt <= cnt + 1;
        if (cnt >= int'(LAT) - 1) begin
          busy            <= 1'b0;
          mem_resp_valid  <= 1'b1;
          mem_resp_shared <= shared_mode && !q_write;
          mem_resp_rdata  <= store.exists(q_addr) ? store[q_addr] : pattern(q_addr);
        end
      end
    end
  end

endmodule
