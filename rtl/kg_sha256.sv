// kg_sha256 -- SHA-256 compression function, one round per clock.
//
// Computes the FIPS 180-4 SHA-256 compression of one 512-bit message block
// with chaining value h_in: digest = h_in + rounds(h_in, block). The eight
// working words are updated once per clock for 64 clocks, the message
// schedule is produced on the fly in a 16-word window, and one more clock adds
// the chaining value. Block and chaining value are big-endian as in the
// standard (block[511:480] is W0, h_in[255:224] is H0).
//
// Timing: start is taken while busy is low; done pulses for one clock 65
// clocks after start, with digest valid from then until the next start.
//
// The paper only names a SHA-2 engine producing a 256-bit hash; the datapath
// and the one-round-per-clock schedule are this design's choice.
module kg_sha256 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);

  function automatic logic [31:0] kconst(input logic [5:0] i);
    unique case (i)
      6'd0:  kconst = 32'h428a2f98; 6'd1:  kconst = 32'h71374491; 6'd2:  kconst = 32'hb5c0fbcf; 6'd3:  kconst = 32'he9b5dba5;
      6'd4:  kconst = 32'h3956c25b; 6'd5:  kconst = 32'h59f111f1; 6'd6:  kconst = 32'h923f82a4; 6'd7:  kconst = 32'hab1c5ed5;
      6'd8:  kconst = 32'hd807aa98; 6'd9:  kconst = 32'h12835b01; 6'd10: kconst = 32'h243185be; 6'd11: kconst = 32'h550c7dc3;
      6'd12: kconst = 32'h72be5d74; 6'd13: kconst = 32'h80deb1fe; 6'd14: kconst = 32'h9bdc06a7; 6'd15: kconst = 32'hc19bf174;
      6'd16: kconst = 32'he49b69c1; 6'd17: kconst = 32'hefbe4786; 6'd18: kconst = 32'h0fc19dc6; 6'd19: kconst = 32'h240ca1cc;
      6'd20: kconst = 32'h2de92c6f; 6'd21: kconst = 32'h4a7484aa; 6'd22: kconst = 32'h5cb0a9dc; 6'd23: kconst = 32'h76f988da;
      6'd24: kconst = 32'h983e5152; 6'd25: kconst = 32'ha831c66d; 6'd26: kconst = 32'hb00327c8; 6'd27: kconst = 32'hbf597fc7;
      6'd28: kconst = 32'hc6e00bf3; 6'd29: kconst = 32'hd5a79147; 6'd30: kconst = 32'h06ca6351; 6'd31: kconst = 32'h14292967;
      6'd32: kconst = 32'h27b70a85; 6'd33: kconst = 32'h2e1b2138; 6'd34: kconst = 32'h4d2c6dfc; 6'd35: kconst = 32'h53380d13;
      6'd36: kconst = 32'h650a7354; 6'd37: kconst = 32'h766a0abb; 6'd38: kconst = 32'h81c2c92e; 6'd39: kconst = 32'h92722c85;
      6'd40: kconst = 32'ha2bfe8a1; 6'd41: kconst = 32'ha81a664b; 6'd42: kconst = 32'hc24b8b70; 6'd43: kconst = 32'hc76c51a3;
      6'd44: kconst = 32'hd192e819; 6'd45: kconst = 32'hd6990624; 6'd46: kconst = 32'hf40e3585; 6'd47: kconst = 32'h106aa070;
      6'd48: kconst = 32'h19a4c116; 6'd49: kconst = 32'h1e376c08; 6'd50: kconst = 32'h2748774c; 6'd51: kconst = 32'h34b0bcb5;
      6'd52: kconst = 32'h391c0cb3; 6'd53: kconst = 32'h4ed8aa4a; 6'd54: kconst = 32'h5b9cca4f; 6'd55: kconst = 32'h682e6ff3;
      6'd56: kconst = 32'h748f82ee; 6'd57: kconst = 32'h78a5636f; 6'd58: kconst = 32'h84c87814; 6'd59: kconst = 32'h8cc70208;
      6'd60: kconst = 32'h90befffa; 6'd61: kconst = 32'ha4506ceb; 6'd62: kconst = 32'hbef9a3f7; default: kconst = 32'hc67178f2;
    endcase
  endfunction

  function automatic logic [31:0] rotr(input logic [31:0] x, input int unsigned n);
    rotr = (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [255:0] hin_q;
  logic [5:0]   rnd;
  logic         finishing;

  logic [31:0] s0, s1, ch, maj, t1, t2, ws0, ws1, w_next;

  always_comb begin
    s1  = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    ch  = (e & f) ^ (~e & g);
    t1  = h + s1 + ch + kconst(rnd) + w[0];
    s0  = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    maj = (a & b) ^ (a & c) ^ (b & c);
    t2  = s0 + maj;
    // W[t+16] from the window W[t..t+15]
    ws0    = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    ws1    = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    w_next = ws1 + w[9] + ws0 + w[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; finishing <= 1'b0; rnd <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      hin_q  <= '0;
      digest <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          rnd   <= '0;
          hin_q <= h_in;
          {a, b, c, d, e, f, g, h} <= h_in;
          for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
        end
      end else if (finishing) begin
        digest <= {hin_q[255:224] + a, hin_q[223:192] + b, hin_q[191:160] + c, hin_q[159:128] + d,
                   hin_q[127:96]  + e, hin_q[95:64]   + f, hin_q[63:32]   + g, hin_q[31:0]    + h};
        finishing <= 1'b0;
        busy      <= 1'b0;
        done      <= 1'b1;
      end else begin
        h <= g; g <= f; f <= e; e <= d + t1;
        d <= c; c <= b; b <= a; a <= t1 + t2;
        for (int i = 0; i < 15; i++) w[i] <= w[i+1];
        w[15] <= w_next;
        rnd <= rnd + 6'd1;
        if (rnd == 6'd63) finishing <= 1'b1;
      end
    end
  end

endmodule
