// sram_scrub: hardware scrub engine of the preemption hook.
//
// A start pulse zero-fills the whole plaintext SRAM: the engine walks the
// rows 0..ROWS-1, one row per cycle, and the SRAM clears that row in every
// bank at once. done pulses in the cycle after the last row is written, so a
// scrub takes ROWS cycles (4096 for 2 MB in 8 banks of 64-byte lines).
// A start while busy is ignored. The start input comes only from the
// preemption controller, never from software, as the architecture requires;
// the row-sequential walk is this design's choice.
module sram_scrub #(
  parameter int unsigned ROWS  = 4096,
  localparam int unsigned ROW_W = $clog2(ROWS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             s_valid,
  output logic [ROW_W-1:0] s_row,
  output logic             done
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      s_row <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          s_row <= '0;
        end
      end else if (s_row == ROW_W'(ROWS - 1)) begin
        busy  <= 1'b0;
        done  <= 1'b1;
        s_row <= '0;
      end else begin
        s_row <= s_row + 1'b1;
      end
    end
  end

  assign s_valid = busy;

endmodule
