// construct_seq -- stage 1 ("Load Build Path") of the LUT construction
// pipeline, shared by all PPEs.
//
// On start it walks a program counter through the build path buffer, one
// entry per cycle, and broadcasts every entry to the PPEs (path_valid/path).
// When it reads the Finish token it stops fetching, waits for the last entry
// to pass stages 2-4 inside the PPEs, and pulses done.
//
// Timing: with start in cycle 0 and E entries before Finish, entry i is
// broadcast in cycle i+1 and done is high in cycle E+3, after the last LUT
// write. A path without Finish ends after DEPTH entries. The PC-driven walk
// until Finish follows the paper's construction algorithm; the drain length
// and done pulse are this design's.
module construct_seq
  import platinum_pkg::*;
#(
  parameter int unsigned DEPTH = platinum_pkg::PATH_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  // build path buffer read port
  output logic          rd_en,
  output logic [AW-1:0] rd_addr,
  input  path_entry_t   rd_data,
  // broadcast to the PPEs
  output logic          path_valid,
  output path_entry_t   path,
  output logic          busy,
  output logic          done
);

  typedef enum logic [1:0] {S_IDLE, S_FETCH, S_DRAIN} state_e;

  state_e        state;
  logic [AW-1:0] pc;
  logic          fetch_valid;   // rd_data holds a freshly read entry
  logic          last_issued;   // the final buffer slot has been read
  logic          finish_seen;

  assign finish_seen = fetch_valid && rd_data.finish;
  assign path_valid  = (state == S_FETCH) && fetch_valid && !rd_data.finish;
  assign path        = rd_data;
  assign busy        = (state != S_IDLE);

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = pc;
    if (state == S_IDLE && start) begin
      rd_en   = 1'b1;
      rd_addr = '0;
    end else if (state == S_FETCH && !finish_seen && !last_issued) begin
      rd_en = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      pc          <= '0;
      fetch_valid <= 1'b0;
      last_issued <= 1'b0;
      done        <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          fetch_valid <= 1'b0;
          if (start) begin
            state       <= S_FETCH;
            pc          <= AW'(1);
            fetch_valid <= 1'b1;
            last_issued <= (DEPTH == 1);
          end
        end
        S_FETCH: begin
          fetch_valid <= rd_en;
          if (rd_en) begin
            pc          <= pc + AW'(1);
            last_issued <= (pc == AW'(DEPTH - 1));
          end
          if (finish_seen || (!fetch_valid && last_issued)) state <= S_DRAIN;
        end
        S_DRAIN: begin
          // the last entry is in stage 4 now; its write lands this cycle
          fetch_valid <= 1'b0;
          state       <= S_IDLE;
          done        <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
