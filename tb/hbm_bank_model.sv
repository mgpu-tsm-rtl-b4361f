// hbm_bank_model: behavioural model of one DRAM bank of an HBM stack, as
// seen through its link to the central switch. Not synthesizable: the
// storage is a sparse associative array keyed by line address.
//
// Takes one CMD_RD / CMD_WR packet at a time, waits LAT cycles, and answers
// with CMD_RD_RESP (the line) or CMD_WR_ACK, addressed back to the request's
// src. Lines never written read as tb_pkg::init_line(). Writes honour the
// byte mask. n_req counts accepted requests.
module hbm_bank_model
  import tsm_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  input  mem_pkt_t req,
  output logic     req_ready,
  output logic     resp_valid,
  output mem_pkt_t resp,
  input  logic     resp_ready,
  output int       n_req
);
  logic [LINE_BITS-1:0] mem [paddr_t];
  typedef enum logic [1:0] {IDLE, WAIT, RESP} st_e;
  st_e      st;
  int       cnt;
  mem_pkt_t cur;

  assign req_ready  = (st == IDLE);
  assign resp_valid = (st == RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= IDLE;
      cnt   <= 0;
      n_req <= 0;
      cur   <= '0;
      resp  <= '0;
    end else begin
      case (st)
        IDLE: if (req_valid) begin
          cur   <= req;
          cnt   <= LAT;
          n_req <= n_req + 1;
          st    <= WAIT;
        end
        WAIT: if (cnt <= 1) begin
          logic [LINE_BITS-1:0] line;
          line = mem.exists(cur.addr) ? mem[cur.addr] : tb_pkg::init_line(cur.addr);
          resp      <= '0;
          resp.dst  <= cur.src;
          resp.addr <= cur.addr;
          if (cur.cmd == CMD_WR) begin
            for (int b = 0; b < LINE_BYTES; b++)
              if (cur.mask[b]) line[b*8 +: 8] = cur.data[b*8 +: 8];
            mem[cur.addr] = line;
            resp.cmd <= CMD_WR_ACK;
          end else begin
            resp.cmd  <= CMD_RD_RESP;
            resp.data <= line;
          end
          st <= RESP;
        end else cnt <= cnt - 1;
        RESP: if (resp_ready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end
endmodule
