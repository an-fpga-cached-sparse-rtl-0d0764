// ddr_model: behavioural model of the accelerator's external memory, for
// simulation only (not synthesizable; stands in for the DDR3 channels, their
// controllers and the interconnect, which this design does not contain).
//
// One flat array of 64-bit words shared by NRD read ports and NWR write
// ports, addressed by byte address (bits [2:0] ignored). Each read port
// accepts a request when ready is high, returns the word in order after a
// random latency of LAT_MIN..LAT_MAX cycles and holds a response while the
// reader's resp_ready is low. Ready signals of every port are pulled low at
// random in STALL_PCT percent of cycles, so requesters see back-pressure.
// Writes complete on the accepting edge. Counters report handshakes and
// stall cycles, so that testbenches can check that stalls did happen.
module ddr_model #(
  parameter int unsigned NRD       = 3,
  parameter int unsigned NWR       = 1,
  parameter int unsigned WORDS     = 1 << 16,
  parameter int unsigned LAT_MIN   = 2,
  parameter int unsigned LAT_MAX   = 6,
  parameter int unsigned STALL_PCT = 10
) (
  input  logic        clk,
  input  logic        rd_req_valid  [NRD],
  output logic        rd_req_ready  [NRD],
  input  logic [63:0] rd_req_addr   [NRD],
  output logic        rd_resp_valid [NRD],
  input  logic        rd_resp_ready [NRD],
  output logic [63:0] rd_resp_data  [NRD],
  input  logic        wr_valid      [NWR],
  output logic        wr_ready      [NWR],
  input  logic [63:0] wr_addr       [NWR],
  input  logic [63:0] wr_data       [NWR]
);

  logic [63:0] mem [WORDS];

  longint unsigned cycle = 0;
  int unsigned stall_pct = STALL_PCT;   // may be changed at run time
  int unsigned n_reads = 0, n_writes = 0, n_stalls = 0, n_bad_addr = 0;

  typedef struct {
    logic [63:0]     data;
    longint unsigned due;
  } pend_t;

  pend_t q [NRD][$];
  longint unsigned last_due [NRD];

  initial begin
    for (int p = 0; p < NRD; p++) begin
      rd_req_ready[p]  = 1'b0;
      rd_resp_valid[p] = 1'b0;
      rd_resp_data[p]  = '0;
      last_due[p]      = 0;
    end
    for (int p = 0; p < NWR; p++) wr_ready[p] = 1'b0;
  end

  function automatic logic [63:0] peek(input logic [63:0] byte_addr);
    return mem[(byte_addr >> 3) % WORDS];
  endfunction

  function automatic void poke(input logic [63:0] byte_addr, input logic [63:0] data);
    mem[(byte_addr >> 3) % WORDS] = data;
  endfunction

  function automatic bit in_range(input logic [63:0] byte_addr);
    return (byte_addr >> 3) < WORDS;
  endfunction

  always @(posedge clk) begin
    cycle <= cycle + 1;
    for (int p = 0; p < NRD; p++) begin
      // response channel: retire the word on display if taken
      if (rd_resp_valid[p] && rd_resp_ready[p]) void'(q[p].pop_front());
      // request channel
      if (rd_req_valid[p] && rd_req_ready[p]) begin
        pend_t e;
        longint unsigned due;
        if (!in_range(rd_req_addr[p])) n_bad_addr++;
        due = cycle + LAT_MIN + ($urandom % (LAT_MAX - LAT_MIN + 1));
        if (due < last_due[p]) due = last_due[p];
        last_due[p] = due;
        e.data = peek(rd_req_addr[p]);
        e.due  = due;
        q[p].push_back(e);
        n_reads++;
      end
      if (rd_req_valid[p] && !rd_req_ready[p]) n_stalls++;
      rd_req_ready[p] <= ($urandom % 100) >= stall_pct;
      if (q[p].size() > 0 && q[p][0].due <= cycle) begin
        rd_resp_valid[p] <= 1'b1;
        rd_resp_data[p]  <= q[p][0].data;
      end else begin
        rd_resp_valid[p] <= 1'b0;
      end
    end
    for (int p = 0; p < NWR; p++) begin
      if (wr_valid[p] && wr_ready[p]) begin
        if (!in_range(wr_addr[p])) n_bad_addr++;
        poke(wr_addr[p], wr_data[p]);
        n_writes++;
      end
      if (wr_valid[p] && !wr_ready[p]) n_stalls++;
      wr_ready[p] <= ($urandom % 100) >= stall_pct;
    end
  end

endmodule
