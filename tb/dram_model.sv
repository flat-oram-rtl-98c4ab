// dram_model: behavioural model of the untrusted DRAM behind the controller.
//
// Sparse memory of DRAM lines indexed by block address; a location never
// written reads as zero.  One request at a time: a request is accepted when
// the model is idle, a write completes on acceptance, a read returns its line
// on a one-cycle resp_valid pulse LATENCY cycles later (flat latency, as in
// the evaluation's DRAM model; 100 cycles by default).  Counts reads and
// writes, and exposes peek/poke tasks so a test can inspect or tamper with
// memory contents the way an adversary could.
module dram_model
  import flat_oram_pkg::*;
#(
  parameter int unsigned LATENCY = 100
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic  req_we,
  input  pa_t   req_addr,
  input  line_t req_wdata,
  output logic  resp_valid,
  output line_t resp_rdata
);
  line_t mem [pa_t];
  int unsigned busy_cnt;
  pa_t         rd_addr;
  longint unsigned n_reads, n_writes;

  assign req_ready = (busy_cnt == 0);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt   <= 0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      rd_addr    <= '0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (busy_cnt == 0) begin
        if (req_valid) begin
          if (req_we) begin
            mem[req_addr] = req_wdata;
            n_writes      <= n_writes + 1;
          end else begin
            rd_addr  <= req_addr;
            busy_cnt <= LATENCY;
            n_reads  <= n_reads + 1;
          end
        end
      end else begin
        busy_cnt <= busy_cnt - 1;
        if (busy_cnt == 1) begin
          resp_valid <= 1'b1;
          resp_rdata <= mem.exists(rd_addr) ? mem[rd_addr] : '0;
        end
      end
    end
  end

  function automatic line_t peek(input pa_t a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  task automatic poke(input pa_t a, input line_t v);
    mem[a] = v;
  endtask
endmodule
