// dram_model: behavioural model of one DRAM channel as seen through a memory crossbar,
// for testbenches only (not synthesizable).
//
// Holds DEPTH lines of 512 bits.  NRD independent read ports: a port accepts a request
// {line address, beat count} when idle, waits a random latency of 2..LAT_MAX cycles, then
// returns the beats in order with valid/ready, inserting random idle cycles.  One write
// port writes 32-bit words (word address: line = addr/16, word = addr%16) and is
// randomly not ready, so writers see back-pressure.  Counts requests and beats per port.
module dram_model #(
  parameter int DEPTH   = 4096,
  parameter int NRD     = 4,
  parameter int LAT_MAX = 12
) (
  input  logic         clk,
  input  logic         rd_req_valid  [NRD],
  output logic         rd_req_ready  [NRD],
  input  logic [31:0]  rd_req_addr   [NRD],
  input  logic [7:0]   rd_req_len    [NRD],
  output logic         rd_resp_valid [NRD],
  input  logic         rd_resp_ready [NRD],
  output logic [511:0] rd_resp_data  [NRD],
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [31:0]  wr_addr,
  input  logic [31:0]  wr_data
);
  logic [511:0] mem [DEPTH];
  int unsigned  n_req   [NRD];
  int unsigned  n_beats [NRD];
  int unsigned  n_writes;

  logic [31:0] cur_addr [NRD];
  int          left     [NRD];
  int          wait_c   [NRD];
  logic        busy     [NRD];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int p = 0; p < NRD; p++) begin
      busy[p] = 0; n_req[p] = 0; n_beats[p] = 0; left[p] = 0; wait_c[p] = 0; cur_addr[p] = 0;
    end
    n_writes = 0;
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) begin
      rd_req_ready[p] = !busy[p];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NRD; p++) begin
      if (!busy[p]) begin
        rd_resp_valid[p] <= 1'b0;
        if (rd_req_valid[p]) begin
          busy[p]     <= 1'b1;
          cur_addr[p] <= rd_req_addr[p];
          left[p]     <= int'(rd_req_len[p]);
          wait_c[p]   <= 2 + int'($urandom_range(LAT_MAX - 2));
          n_req[p]    <= n_req[p] + 1;
        end
      end else if (rd_resp_valid[p]) begin
        if (rd_resp_ready[p]) begin
          n_beats[p] <= n_beats[p] + 1;
          if (left[p] == 1) begin
            busy[p] <= 1'b0;
            rd_resp_valid[p] <= 1'b0;
          end else begin
            left[p]     <= left[p] - 1;
            cur_addr[p] <= cur_addr[p] + 1;
            rd_resp_valid[p] <= ($urandom_range(7) != 0);
            rd_resp_data[p]  <= mem[(cur_addr[p] + 1) % DEPTH];
          end
        end
      end else if (wait_c[p] > 0) begin
        wait_c[p] <= wait_c[p] - 1;
      end else begin
        rd_resp_valid[p] <= 1'b1;
        rd_resp_data[p]  <= mem[cur_addr[p] % DEPTH];
      end
    end
    wr_ready <= ($urandom_range(7) != 0);
    if (wr_valid && wr_ready) begin
      mem[(wr_addr >> 4) % DEPTH][32*wr_addr[3:0] +: 32] <= wr_data;
      n_writes <= n_writes + 1;
    end
  end

endmodule
