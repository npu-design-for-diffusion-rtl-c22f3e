// dart_prefetch: HBM <-> SRAM transfer engine (one is attached to the Vector
// SRAM and one to the Matrix SRAM). The paper's prefetch engines move data in
// the background so transfers overlap matrix and vector work; here the engine
// runs on its own once a command is accepted and the decoder only waits for
// it when a later instruction needs the same engine or SRAM.
//
// A load (H_PREFETCH_*) reads one SRAM row of ROW_W bits as NBEAT beats of
// BEAT_W bits from consecutive beat addresses, issuing requests back to back
// (rd_req valid/ready) and collecting in-order responses (rd_resp_valid, no
// back-pressure), then offers the assembled row on row_* (valid/ready).
// A store (H_STORE_V) sends a row as NBEAT beat writes (wr valid/ready).
// Beat 0 holds the row's least significant bits. busy stays high until the
// row has been written (load) or the last beat accepted (store).
// Beat width and addressing are this design's choices: the paper models the
// HBM with Ramulator and does not give the SRAM-side interface.
module dart_prefetch #(
  parameter int unsigned ROW_W  = 2048 * 16,
  parameter int unsigned BEAT_W = 512,
  parameter int unsigned HAW    = 32,
  parameter int unsigned SAW    = 8,
  localparam int unsigned NBEAT = (ROW_W + BEAT_W - 1) / BEAT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic              cmd_store,
  input  logic [HAW-1:0]    cmd_hbm_addr,
  input  logic [SAW-1:0]    cmd_row,
  input  logic [ROW_W-1:0]  cmd_data,
  // HBM read
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [HAW-1:0]    rd_req_addr,
  input  logic              rd_resp_valid,
  input  logic [BEAT_W-1:0] rd_resp_data,
  // HBM write
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [HAW-1:0]    wr_addr,
  output logic [BEAT_W-1:0] wr_data,
  // SRAM row write
  output logic              row_valid,
  input  logic              row_ready,
  output logic [SAW-1:0]    row_addr,
  output logic [ROW_W-1:0]  row_data,
  output logic              busy
);
  typedef enum logic [1:0] {P_IDLE, P_LOAD, P_ROW, P_STORE} pstate_e;
  pstate_e                  st;
  logic [NBEAT*BEAT_W-1:0]  buf_q;
  logic [$clog2(NBEAT+1):0] nreq, nresp;
  logic [HAW-1:0]           base;

  assign cmd_ready    = (st == P_IDLE);
  assign busy         = (st != P_IDLE);
  assign rd_req_valid = (st == P_LOAD) && (nreq < ($clog2(NBEAT+1)+1)'(NBEAT));
  assign rd_req_addr  = base + HAW'(nreq);
  assign wr_valid     = (st == P_STORE);
  assign wr_addr      = base + HAW'(nreq);
  assign wr_data      = buf_q[BEAT_W-1:0];
  assign row_valid    = (st == P_ROW);
  assign row_data     = buf_q[ROW_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= P_IDLE;
      buf_q    <= '0;
      nreq     <= '0;
      nresp    <= '0;
      base     <= '0;
      row_addr <= '0;
    end else begin
      case (st)
        P_IDLE: if (cmd_valid) begin
          base     <= cmd_hbm_addr;
          row_addr <= cmd_row;
          nreq     <= '0;
          nresp    <= '0;
          buf_q    <= (NBEAT*BEAT_W)'(cmd_data);
          st       <= cmd_store ? P_STORE : P_LOAD;
        end
        P_LOAD: begin
          if (rd_req_valid && rd_req_ready) nreq <= nreq + 1'b1;
          if (rd_resp_valid) begin
            buf_q <= {rd_resp_data, buf_q[NBEAT*BEAT_W-1:BEAT_W]};
            nresp <= nresp + 1'b1;
            if (nresp + 1'b1 == ($clog2(NBEAT+1)+1)'(NBEAT)) st <= P_ROW;
          end
        end
        P_ROW: if (row_ready) st <= P_IDLE;
        P_STORE: if (wr_ready) begin
          buf_q <= buf_q >> BEAT_W;
          nreq  <= nreq + 1'b1;
          if (nreq + 1'b1 == ($clog2(NBEAT+1)+1)'(NBEAT)) st <= P_IDLE;
        end
        default: st <= P_IDLE;
      endcase
    end
  end

  a_resp_only_when_loading: assert property (@(posedge clk) disable iff (!rst_n)
                                             rd_resp_valid |-> st == P_LOAD);
endmodule
