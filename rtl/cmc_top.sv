// cmc_top: compression-aware memory controller extension with LANES parallel
// lanes (32 by default, as in the paper's hardware evaluation). Each lane
// (cmc_lane) stores blocks of model weights (BF16, FP8 or INT4) or BF16 KV
// cache in memory as compressed bit-planes and loads them back, fetching
// only as many of the most significant planes as the requested precision
// needs. At 256 bits per cycle and 2 GHz a lane's datapath moves 512 Gbit/s,
// 32 lanes 2 TB/s; the LZ4 engine inside a lane is slower than that (see
// cmc_lane / lz4_encoder).
//
// The lanes are independent: lane n has its own host command and data ports
// and its own byte-wide port to the conventional DRAM controller, which is
// outside this design (as is the compute fabric). All ports are arrays
// indexed by lane; their meaning is that of the cmc_lane ports.
// Lint note: rst_n is both the lanes' asynchronous reset and the disable
// condition of their command assertions (verification only), hence a
// sync/async reset note on it.
module cmc_top
  import cmc_pkg::*;
#(
  parameter int unsigned LANES = 32,
  parameter int unsigned NVALS = 32768,
  parameter int unsigned NTOK  = 32,
  parameter int unsigned NCH   = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid     [LANES],
  output logic              cmd_ready     [LANES],
  input  cmd_t              cmd           [LANES],
  input  logic              wdata_valid   [LANES],
  output logic              wdata_ready   [LANES],
  input  logic [BEAT_W-1:0] wdata         [LANES],
  output logic              rdata_valid   [LANES],
  input  logic              rdata_ready   [LANES],
  output logic [BEAT_W-1:0] rdata         [LANES],
  output logic              rdata_last    [LANES],
  output logic              resp_valid    [LANES],
  output logic [ADDR_W-1:0] resp_bytes    [LANES],
  output logic              mw_valid      [LANES],
  input  logic              mw_ready      [LANES],
  output logic [ADDR_W-1:0] mw_addr       [LANES],
  output logic [7:0]        mw_data       [LANES],
  output logic              mr_req_valid  [LANES],
  input  logic              mr_req_ready  [LANES],
  output logic [ADDR_W-1:0] mr_req_addr   [LANES],
  input  logic              mr_resp_valid [LANES],
  input  logic [7:0]        mr_resp_data  [LANES]
);
  for (genvar n = 0; n < LANES; n++) begin : g_lane
    cmc_lane #(.NVALS(NVALS), .NTOK(NTOK), .NCH(NCH)) u_lane (
      .clk, .rst_n,
      .cmd_valid    (cmd_valid[n]),    .cmd_ready   (cmd_ready[n]),    .cmd(cmd[n]),
      .wdata_valid  (wdata_valid[n]),  .wdata_ready (wdata_ready[n]),  .wdata(wdata[n]),
      .rdata_valid  (rdata_valid[n]),  .rdata_ready (rdata_ready[n]),  .rdata(rdata[n]),
      .rdata_last   (rdata_last[n]),
      .resp_valid   (resp_valid[n]),   .resp_bytes  (resp_bytes[n]),
      .mw_valid     (mw_valid[n]),     .mw_ready    (mw_ready[n]),
      .mw_addr      (mw_addr[n]),      .mw_data     (mw_data[n]),
      .mr_req_valid (mr_req_valid[n]), .mr_req_ready(mr_req_ready[n]),
      .mr_req_addr  (mr_req_addr[n]),
      .mr_resp_valid(mr_resp_valid[n]), .mr_resp_data(mr_resp_data[n])
    );
  end
endmodule
