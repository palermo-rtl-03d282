// dram_model: behavioural stand-in for the memory controller and untrusted
// DRAM behind the Palermo controller (testbench only, not part of the design).
// Accepts one request per cycle; writes take effect at acceptance, reads are
// answered in order LATENCY cycles later with the word as it was at acceptance.
// A word never written reads back as the encryption of zero under `key`,
// which is what a freshly initialised (all-empty) ORAM tree holds.
// Counts reads, writes and the highest number of reads waiting at once.
module dram_model
  import palermo_pkg::*;
#(
  parameter int LATENCY = 20,
  parameter int QDEPTH  = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [KEY_W-1:0] key,
  input  logic             req_valid,
  input  mem_req_t         req,
  output logic             req_ready,
  output logic             resp_valid,
  output mem_resp_t        resp,
  input  logic             resp_ready,
  output int               n_reads,
  output int               n_writes,
  output int               max_outstanding
);
  logic [MEM_W-1:0] store [logic [MADDR_W-1:0]];
  mem_resp_t q_data [$];
  longint    q_time [$];
  longint    now;
  logic [PAD_W-1:0] pad;

  assign req_ready  = (q_data.size() < QDEPTH);
  assign resp_valid = (q_data.size() > 0) && (q_time[0] <= now);
  assign resp       = (q_data.size() > 0) ? q_data[0] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now <= 0;
      n_reads <= 0;
      n_writes <= 0;
      max_outstanding <= 0;
      q_data.delete();
      q_time.delete();
    end else begin
      mem_resp_t r;
      now <= now + 1;
      if (resp_valid && resp_ready) begin
        void'(q_data.pop_front());
        void'(q_time.pop_front());
      end
      if (req_valid && req_ready) begin
        if (req.we) begin
          store[req.addr] = req.wdata;
          n_writes <= n_writes + 1;
        end else begin
          r.addr = req.addr;
          r.tag  = req.tag;
          if (store.exists(req.addr)) r.rdata = store[req.addr];
          else begin
            pad = xor_pad(key, req.addr);
            r.rdata = pad[MEM_W-1:0];
          end
          q_data.push_back(r);
          q_time.push_back(now + LATENCY);
          n_reads <= n_reads + 1;
        end
      end
      if (q_data.size() > max_outstanding) max_outstanding <= q_data.size();
    end
  end
endmodule
