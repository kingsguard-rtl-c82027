// kg_hash_engine -- running path hash H_current for declassification.
//
// Every control-flow event (s, t) reported by the branch monitor updates the
// cumulative hash
//     H_current <- SHA-256(H_current || s || t)
// where the 384-bit message H_current||s||t is padded to one 512-bit block
// (a 1 bit, zeros, the 64-bit length 384) and compressed from the standard
// SHA-256 initial value. After a clear H_current holds INIT, so the first
// event gives H_0 = hash(INIT || s_0 || t_0).
//
// Events enter a FIFO_DEPTH-deep queue (ev_valid/ev_ready handshake) and are
// hashed one after another, 66 clocks each. `idle` is high when the queue is
// empty and no hash is in progress, i.e. H_current reflects every event
// accepted so far. enable gates the acceptance of new events (off during an
// interrupt exit; H_current is kept), clear resets H_current to INIT and
// drops queued events (enclave exit).
//
// The update rule is the paper's. The queue, the value of INIT and the use of
// standard SHA-256 padding are this design's choice.
module kg_hash_engine #(
  parameter int unsigned FIFO_DEPTH = 4,
  parameter logic [255:0] INIT      = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         enable,
  input  logic         clear,
  input  logic         ev_valid,
  output logic         ev_ready,
  input  logic [63:0]  ev_s,
  input  logic [63:0]  ev_t,
  output logic [255:0] h_current,
  output logic         idle,
  output logic [31:0]  n_hashed
);

  localparam logic [255:0] SHA256_IV = {
    32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
    32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  logic [127:0] q [FIFO_DEPTH];
  logic [PW-1:0] rd_p, wr_p;
  logic [PW:0]   count;
  logic          push, pop, active;
  logic          sha_start, sha_busy, sha_done;
  logic [255:0]  sha_digest;
  logic [511:0]  blk;

  assign ev_ready = enable && (count < (PW+1)'(FIFO_DEPTH));
  assign push     = ev_valid && ev_ready;
  assign sha_start = !active && !sha_busy && (count != '0) && !clear;
  assign pop      = sha_start;
  assign idle     = (count == '0) && !active;
  assign blk      = {h_current, q[rd_p], 1'b1, 63'b0, 64'd384};

  kg_sha256 u_sha (
    .clk, .rst_n, .start(sha_start), .block(blk), .h_in(SHA256_IV),
    .busy(sha_busy), .done(sha_done), .digest(sha_digest)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p <= '0; wr_p <= '0; count <= '0; active <= 1'b0;
      h_current <= INIT;
      n_hashed  <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) q[i] <= '0;
    end else if (clear) begin
      rd_p <= '0; wr_p <= '0; count <= '0; active <= 1'b0;
      h_current <= INIT;
    end else begin
      if (push) begin
        q[wr_p] <= {ev_s, ev_t};
        wr_p    <= (wr_p == PW'(FIFO_DEPTH-1)) ? '0 : wr_p + 1'b1;
      end
      if (pop) begin
        rd_p   <= (rd_p == PW'(FIFO_DEPTH-1)) ? '0 : rd_p + 1'b1;
        active <= 1'b1;
      end
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
      if (active && sha_done) begin
        h_current <= sha_digest;
        active    <= 1'b0;
        n_hashed  <= n_hashed + 1;
      end
    end
  end

  // A hash that completes while the core is cleared is dropped; the SHA core
  // is only started when it is free.
  a_start_free: assert property (@(posedge clk) disable iff (!rst_n) sha_start |-> !sha_busy);

endmodule
