// SIMD vector core: the carry-propagate adds and shifts taken out of the PEs.
//
// After the array has finished the K reduction of one bit weight bw, every
// PE group holds its result as a carry-save pair (s, c). For each output the
// core computes a = s + c (the one full add per output, OPT1), shifts it by
// 2*bw (the one shift per output, OPT2) and adds it into the output tile:
//   C[m][n] = sum over bw of (s + c) << 2*bw.
// V outputs are handled per cycle, so a tile of MP*NP outputs takes
// MP*NP/V cycles; the paper sizes V as ceil(MP*NP/KT) so that this fits in
// the KT cycles the array needs for the next bit weight. The running tile is
// kept in registers; after the last bit weight (bw = 3) each finished output
// leaves on the c_* stream (V outputs per cycle, row-major in the tile).
//
// `tag` is latched with `go` and returned on `c_tag` with the outputs.
// `go` (one cycle, only when `ready`) starts a pass over the capture
// registers, which must stay unchanged until `ready` returns.
module simd_core #(
  parameter int unsigned MP    = 32,
  parameter int unsigned NP    = 32,
  parameter int unsigned V     = 32,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned C_W   = 32,
  parameter int unsigned TAG_W = 4,
  localparam int unsigned NOUT = MP * NP,
  localparam int unsigned EW   = $clog2(NOUT + 1)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  go,
  input  logic [1:0]                            bw,
  input  logic [TAG_W-1:0]                      tag,      // tile id, returned with the outputs
  input  logic [MP-1:0][NP-1:0][ACC_W-1:0]      cap_s,
  input  logic [MP-1:0][NP-1:0][ACC_W-1:0]      cap_c,
  output logic                                  ready,
  output logic [V-1:0]                          c_valid,
  output logic [V-1:0][EW-1:0]                  c_idx,    // mp*NP + np
  output logic [V-1:0][C_W-1:0]                 c_data,
  output logic [TAG_W-1:0]                      c_tag
);
  // The outputs are viewed as NROW rows of V lanes (the last row padded):
  // in cycle r of a pass, lane v works on output r*V + v. Every lane thus
  // only ever touches its own column of the tile, which keeps the
  // multiplexers at NROW inputs instead of MP*NP.
  localparam int unsigned NROW = (NOUT + V - 1) / V;
  localparam int unsigned RW   = (NROW > 1) ? $clog2(NROW) : 1;

  logic [NROW-1:0][V-1:0][ACC_W-1:0] ps, pc;   // capture registers, row view
  logic [NROW-1:0][V-1:0][C_W-1:0]   tile;
  logic                              busy;
  logic [RW-1:0]                     row;
  logic [1:0]                        bw_q;
  logic [TAG_W-1:0]                  tag_q;

  always_comb begin
    for (int r = 0; r < NROW; r++)
      for (int v = 0; v < V; v++) begin
        if (r * V + v < NOUT) begin
          ps[r][v] = cap_s[(r * V + v) / NP][(r * V + v) % NP];
          pc[r][v] = cap_c[(r * V + v) / NP][(r * V + v) % NP];
        end else begin
          ps[r][v] = '0;
          pc[r][v] = '0;
        end
      end
  end

  assign ready = !busy;

  // V lanes: lane v works on output row*V + v.
  logic [V-1:0]           lane_on;
  logic [V-1:0][C_W-1:0]  lane_nw;
  always_comb begin
    for (int v = 0; v < V; v++) begin
      logic [C_W-1:0] a, sh;
      lane_on[v] = busy && (32'(row) * V + v < NOUT);
      a  = C_W'(ps[row][v] + pc[row][v]);
      sh = a << (2 * bw_q);
      lane_nw[v] = (bw_q == 2'd0) ? sh : tile[row][v] + sh;
    end
  end

  // C tile register: no reset, every entry is written at bw = 0 before it
  // is read.
  always_ff @(posedge clk) begin
    for (int v = 0; v < V; v++)
      if (lane_on[v]) tile[row][v] <= lane_nw[v];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      row     <= '0;
      bw_q    <= '0;
      tag_q   <= '0;
      c_tag   <= '0;
      c_valid <= '0;
      c_idx   <= '0;
      c_data  <= '0;
    end else begin
      c_valid <= '0;
      if (go && !busy) begin
        busy  <= 1'b1;
        row   <= '0;
        bw_q  <= bw;
        tag_q <= tag;
      end else if (busy) begin
        for (int v = 0; v < V; v++) begin
          if (lane_on[v] && bw_q == 2'd3) begin
            c_valid[v] <= 1'b1;
            c_idx[v]   <= EW'(32'(row) * V + v);
            c_data[v]  <= lane_nw[v];
          end
        end
        c_tag <= tag_q;
        if (32'(row) == NROW - 1) begin
          busy <= 1'b0;
          row  <= '0;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end
endmodule
