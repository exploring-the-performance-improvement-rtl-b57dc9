// Loop sequencer with column synchronisation (the paper's sync()).
//
// Runs the outer loops of the OPT4E schedule: for each row tile mt, each
// column tile nt and each bit weight bw = 0..3 it starts all column front
// ends together and waits until every one of them reports done. Columns
// whose digits were sparser finish early and simply wait (they are blocked
// until the slowest column is done); this wait is the sync. Then, in one
// cycle, it clears the PE array (the finished sums move to the capture
// registers) and hands them to the SIMD core with the bit weight and tile.
// If the SIMD core is still busy with the previous bit weight the array
// waits as well. After the last pass it waits for the SIMD core to drain
// and pulses `done`.
//
// Status: `sync_wait` is high in cycles where some columns are done and
// others are not; `simd_stall` where all are done but the SIMD core is busy.
module sync_ctrl #(
  parameter int unsigned NCOL = 128,     // column front ends (MP*G)
  parameter int unsigned MTW  = 2,
  parameter int unsigned NTW  = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [MTW:0]     m_tiles,   // 1..2^MTW
  input  logic [NTW:0]     n_tiles,   // 1..2^NTW
  input  logic [NCOL-1:0]  col_done,
  input  logic             simd_ready,
  output logic             col_start,
  output logic [1:0]       bw,
  output logic [MTW-1:0]   mt,
  output logic [NTW-1:0]   nt,
  output logic             clear,
  output logic             simd_go,
  output logic             busy,
  output logic             done,
  output logic             sync_wait,
  output logic             simd_stall
);
  typedef enum logic [2:0] {S_IDLE, S_LAUNCH, S_WAIT, S_FLUSH, S_DONE} state_t;
  state_t state;

  logic all_done, any_done, last;
  assign all_done = &col_done;
  assign any_done = |col_done;
  assign last     = (bw == 2'd3) && (32'(nt) == 32'(n_tiles) - 1) && (32'(mt) == 32'(m_tiles) - 1);

  assign col_start  = (state == S_LAUNCH);
  assign clear      = (state == S_WAIT) && all_done && simd_ready;
  assign simd_go    = clear;
  assign busy       = (state != S_IDLE);
  assign done       = (state == S_DONE);
  assign sync_wait  = (state == S_WAIT) && any_done && !all_done;
  assign simd_stall = (state == S_WAIT) && all_done && !simd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; bw <= '0; mt <= '0; nt <= '0;
    end else begin
      unique case (state)
        S_IDLE:   if (start) begin
                    bw <= '0; mt <= '0; nt <= '0;
                    state <= S_LAUNCH;
                  end
        S_LAUNCH: state <= S_WAIT;
        S_WAIT:   if (clear) begin
                    if (last) state <= S_FLUSH;
                    else begin
                      state <= S_LAUNCH;
                      bw    <= bw + 1'b1;
                      if (bw == 2'd3) begin
                        if (32'(nt) == 32'(n_tiles) - 1) begin
                          nt <= '0;
                          mt <= mt + 1'b1;
                        end else nt <= nt + 1'b1;
                      end
                    end
                  end
        S_FLUSH:  if (simd_ready && !simd_go) state <= S_DONE;
        S_DONE:   state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end
endmodule
