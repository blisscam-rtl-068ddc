// rle_encoder -- run-length encoder between the output buffer and the MIPI
// transmitter.
//
// Inside the ROI only about one pixel in five is quantized; the others arrive
// as 0.  The encoder replaces each run of equal words by one (value, run)
// pair: the words 1,1,1,0,0,0,0,0,0,0 leave as (1,3),(0,7).  A run that
// reaches the largest count RW bits can hold is closed and a new run starts.
// in_last closes the final run and marks its pair with out_last, so a frame's
// stream can be decoded on its own.
//
// Pairs carry the run count itself (1..2^RW-1).  The pair format, the run
// width and the valid/ready handshakes are choices of this implementation.
//
// Timing: one input word per cycle when out_ready allows; a pair is emitted
// one cycle after the word that ends its run.  When a frame's last word
// differs from the open run, the encoder needs one extra cycle to emit two
// pairs and holds in_ready low for it.
//
// Lint note: the simulation assertions use `disable iff (!rst_n)`, which the
// linter reports as rst_n being used both as an asynchronous reset and as a
// synchronous signal (SYNCASYNCNET).  The assertions are not hardware; the
// flops themselves use rst_n only as an asynchronous reset.
module rle_encoder #(
  parameter int unsigned W  = 10,   // symbol width
  parameter int unsigned RW = 10    // run-count width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [W-1:0]  in_data,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_value,
  output logic [RW-1:0] out_run,
  output logic          out_last
);
  logic          have_run, flush;
  logic [W-1:0]  cur_val;
  logic [RW-1:0] cur_run;
  logic          can_emit;

  assign can_emit = !out_valid || out_ready;
  assign in_ready = can_emit && !flush;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_run  <= 1'b0;
      flush     <= 1'b0;
      cur_val   <= '0;
      cur_run   <= '0;
      out_valid <= 1'b0;
      out_value <= '0;
      out_run   <= '0;
      out_last  <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (flush && can_emit) begin
        out_valid <= 1'b1; out_value <= cur_val; out_run <= cur_run; out_last <= 1'b1;
        have_run  <= 1'b0;
        flush     <= 1'b0;
      end else if (in_valid && in_ready) begin
        if (have_run && in_data == cur_val && ~cur_run != '0) begin
          if (in_last) begin
            out_valid <= 1'b1; out_value <= cur_val; out_run <= cur_run + 1'b1; out_last <= 1'b1;
            have_run  <= 1'b0;
          end else begin
            cur_run <= cur_run + 1'b1;
          end
        end else if (have_run) begin
          out_valid <= 1'b1; out_value <= cur_val; out_run <= cur_run; out_last <= 1'b0;
          cur_val   <= in_data;
          cur_run   <= RW'(1);
          flush     <= in_last;
        end else if (in_last) begin
          out_valid <= 1'b1; out_value <= in_data; out_run <= RW'(1); out_last <= 1'b1;
        end else begin
          have_run <= 1'b1;
          cur_val  <= in_data;
          cur_run  <= RW'(1);
        end
      end
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable({out_value, out_run, out_last}));
  a_run_nonzero: assert property (@(posedge clk) disable iff (!rst_n) out_valid |-> out_run != '0);
endmodule
