// dram_model: behavioural model of a DRAM device (the stacked DRAM cache's
// data banks or tag banks, or off-chip main memory), for testbenches only.
//
// Storage is sparse: a location never written reads as its initial value,
// which is all zeros (INIT_PATTERN = 0: an empty tag row, i.e. invalid tags)
// or a pattern computed from the address (INIT_PATTERN = 1: main memory
// contents). A request is accepted when req_valid and req_ready are both
// high; req_ready is always high unless STALL_EVERY > 0, in which case it
// drops for one cycle out of STALL_EVERY. A read returns rsp_valid with the
// data exactly LAT cycles after acceptance; reads are pipelined. Writes give
// no response. Counters report the reads and writes seen.
module dram_model
  import gemini_pkg::*;
#(
  parameter int unsigned LAT          = 10,
  parameter bit          INIT_PATTERN = 1'b0,
  parameter int unsigned STALL_EVERY  = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              rsp_valid,
  output logic [LINE_W-1:0] rsp_rdata,
  output int unsigned       n_reads,
  output int unsigned       n_writes
);
  logic [LINE_W-1:0] mem [logic [LOC_W-1:0]];
  logic [LINE_W-1:0] pipe_data  [LAT];
  logic [LAT-1:0]    pipe_valid;
  int unsigned       cyc;

  function automatic logic [LINE_W-1:0] init_value(logic [LOC_W-1:0] a);
    logic [LINE_W-1:0] v;
    v = '0;
    if (INIT_PATTERN)
      for (int i = 0; i < LINE_W / 32; i++) v[i*32 +: 32] = a * 32'h9E3779B1 + 32'(i);
    return v;
  endfunction

  assign req_ready = (STALL_EVERY == 0) || (cyc % STALL_EVERY != 0);
  assign rsp_valid = pipe_valid[LAT-1];
  assign rsp_rdata = pipe_data[LAT-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pipe_valid <= '0;
      cyc        <= 0;
      n_reads    <= 0;
      n_writes   <= 0;
    end else begin
      cyc <= cyc + 1;
      for (int i = LAT - 1; i > 0; i--) begin
        pipe_valid[i] <= pipe_valid[i-1];
        pipe_data[i]  <= pipe_data[i-1];
      end
      pipe_valid[0] <= 1'b0;
      if (req_valid && req_ready) begin
        if (req.we) begin
          n_writes      <= n_writes + 1;
        end else begin
          pipe_valid[0] <= 1'b1;
          pipe_data[0]  <= mem.exists(req.addr) ? mem[req.addr] : init_value(req.addr);
          n_reads       <= n_reads + 1;
        end
      end
    end
  end
  // sparse storage: written with a blocking assignment (dynamic array)
  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready && req.we) mem[req.addr] = req.wdata;
  end
endmodule
