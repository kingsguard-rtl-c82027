// kg_lsu -- load/store unit that adds shadow-memory (taint) requests.
//
// In enclave mode (track = 1) every data access is followed by a second
// access to the shadow memory, found with kg_shadow_addr:
//   load : read data word, then read the shadow word and pick the taint bit.
//   store: write data word, then read the shadow word and write back the
//          taint byte with the bit set or cleared (read-modify-write).
// With track = 0 only the data access is made and the loaded taint is 0.
//
// Memory port: one request at a time. mem_req is held with address, data and
// byte strobes until mem_gnt; a write is finished at the grant, a read returns
// its data with mem_rvalid one or more clocks later. The core side starts an
// access with a one-clock req_valid while idle (ready high) and gets a
// one-clock done with rdata and rtaint. A tracked load takes two memory
// round trips, a tracked store three, instead of one.
//
// From the paper: the extra taint request on every load and store in enclave
// mode only, and the taint address formula. This design's choice: the memory
// port protocol and the read-modify-write of the taint byte.
module kg_lsu #(
  parameter logic [63:0] DATA_BASE   = 64'h8000_0000,
  parameter logic [63:0] SHADOW_BASE = 64'h8800_0000
) (
  input  logic        clk,
  input  logic        rst_n,
  // core side
  input  logic        req_valid,
  input  logic        req_we,
  input  logic [63:0] req_addr,
  input  logic [63:0] req_wdata,
  input  logic        req_wtaint,
  input  logic        track,
  output logic        ready,
  output logic        done,
  output logic [63:0] rdata,
  output logic        rtaint,
  output logic        taint_access,   // one-clock pulse per shadow request granted
  // memory side
  output logic        mem_req,
  output logic        mem_we,
  output logic [63:0] mem_addr,
  output logic [63:0] mem_wdata,
  output logic [7:0]  mem_wstrb,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [63:0] mem_rdata
);

  typedef enum logic [2:0] {
    S_IDLE, S_DREQ, S_DWAIT, S_TREQ, S_TWAIT, S_TWR
  } state_e;

  state_e      state;
  logic        we_q, wt_q, track_q;
  logic [63:0] addr_q, wdata_q, tword_q;
  logic [63:0] t_byte_addr, t_word_addr;
  logic [5:0]  t_bit;

  kg_shadow_addr #(.DATA_BASE(DATA_BASE), .SHADOW_BASE(SHADOW_BASE)) u_sa (
    .addr(addr_q), .taint_byte_addr(t_byte_addr),
    .taint_word_addr(t_word_addr), .taint_bit(t_bit)
  );

  assign ready = (state == S_IDLE);

  always_comb begin
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_wdata = '0;
    mem_wstrb = '0;
    unique case (state)
      S_DREQ: begin
        mem_req   = 1'b1;
        mem_we    = we_q;
        mem_addr  = {addr_q[63:3], 3'b000};
        mem_wdata = wdata_q;
        mem_wstrb = we_q ? 8'hFF : 8'h00;
      end
      S_TREQ: begin
        mem_req  = 1'b1;
        mem_addr = t_word_addr;
      end
      S_TWR: begin
        mem_req   = 1'b1;
        mem_we    = 1'b1;
        mem_addr  = t_word_addr;
        mem_wdata = tword_q;
        mem_wdata[t_bit] = wt_q;
        mem_wstrb = 8'b1 << t_bit[5:3];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      we_q    <= 1'b0;
      wt_q    <= 1'b0;
      track_q <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      tword_q <= '0;
      done    <= 1'b0;
      rdata   <= '0;
      rtaint  <= 1'b0;
      taint_access <= 1'b0;
    end else begin
      done         <= 1'b0;
      taint_access <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          we_q    <= req_we;
          wt_q    <= req_wtaint;
          track_q <= track;
          addr_q  <= req_addr;
          wdata_q <= req_wdata;
          rtaint  <= 1'b0;
          state   <= S_DREQ;
        end
        S_DREQ: if (mem_gnt) begin
          if (!we_q) state <= S_DWAIT;
          else if (track_q) state <= S_TREQ;
          else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_DWAIT: if (mem_rvalid) begin
          rdata <= mem_rdata;
          if (track_q) state <= S_TREQ;
          else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_TREQ: if (mem_gnt) begin
          taint_access <= 1'b1;
          state <= S_TWAIT;
        end
        S_TWAIT: if (mem_rvalid) begin
          if (we_q) begin
            tword_q <= mem_rdata;
            state   <= S_TWR;
          end else begin
            rtaint <= mem_rdata[t_bit];
            state  <= S_IDLE;
            done   <= 1'b1;
          end
        end
        S_TWR: if (mem_gnt) begin
          taint_access <= 1'b1;
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Request fields must stay stable until granted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req && !mem_gnt) |=> (mem_req && $stable(mem_addr) && $stable(mem_we)));

endmodule
