// dram_model: behavioural stand-in for the DRAM and its conventional
// controller, for testbenches only (not synthesizable: associative array,
// $urandom). Byte-addressed; writes are accepted when mw_ready is high, read
// requests when mr_req_ready is high, and each read returns its byte in order
// LATENCY cycles later. STALL_PCT randomly drops the ready signals to create
// back-pressure. It counts the bytes written and read so testbenches can check
// the memory traffic of each command.
module dram_model #(
  parameter int LATENCY   = 8,
  parameter int STALL_PCT = 20
) (
  input  logic        clk,
  input  logic        mw_valid,
  output logic        mw_ready,
  input  logic [39:0] mw_addr,
  input  logic [7:0]  mw_data,
  input  logic        mr_req_valid,
  output logic        mr_req_ready,
  input  logic [39:0] mr_req_addr,
  output logic        mr_resp_valid,
  output logic [7:0]  mr_resp_data
);
  byte unsigned mem [longint unsigned];
  logic [8:0]   pipe [LATENCY];       // {valid, data}
  longint       bytes_written = 0, bytes_read = 0, write_stalls = 0, read_stalls = 0;

  initial begin
    mw_ready = 1'b1;
    mr_req_ready = 1'b1;
    for (int k = 0; k < LATENCY; k++) pipe[k] = '0;
  end

  assign mr_resp_valid = pipe[LATENCY-1][8];
  assign mr_resp_data  = pipe[LATENCY-1][7:0];

  always @(posedge clk) begin
    logic [8:0] nxt;
    if (mw_valid && mw_ready) begin
      mem[mw_addr] = mw_data;
      bytes_written++;
    end
    if (mw_valid && !mw_ready) write_stalls++;
    if (mr_req_valid && !mr_req_ready) read_stalls++;
    nxt = '0;
    if (mr_req_valid && mr_req_ready) begin
      nxt = {1'b1, mem.exists(mr_req_addr) ? mem[mr_req_addr] : 8'h00};
      bytes_read++;
    end
    for (int k = LATENCY - 1; k > 0; k--) pipe[k] <= pipe[k-1];
    pipe[0] <= nxt;
    mw_ready     <= ($urandom_range(0, 99) >= STALL_PCT);
    mr_req_ready <= ($urandom_range(0, 99) >= STALL_PCT);
  end

  function automatic byte unsigned peek(input longint unsigned a);
    return mem.exists(a) ? mem[a] : 8'h00;
  endfunction
endmodule
