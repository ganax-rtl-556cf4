// strided_index_gen: reconfigurable strided u-index generator of the access u-engine.
//
// Five configuration registers, written one at a time through cfg_we/cfg_sel/
// cfg_data (the access.cfg u-op), set the pattern: Addr (primary start address),
// Offset, Step, End and Repeat. access.start copies Addr into the running address
// and Repeat into the round counter. While running, every cycle in which the
// address FIFO can take a word the generator emits addr = running + Offset and
// advances the running address through a modulo adder built, as in the paper, from
// an adder and a subtractor:
//     sum = running + Step;  next = (sum < End) ? sum : sum - End
// The wrap case ends one round and decrements the round counter; when it is zero
// (Stop, a NOR of its bits) no address is produced. access.stop halts generation
// early; a later access.start restarts from Addr. With Step equal to the
// zero-insertion stride and End the filter length this walks the consequential
// filter taps of a transposed convolution in rotation (0,2,4,1,3,0,... for
// stride 2, length 5).
//
// Timing: one address per cycle, registered in the running-address register and
// presented combinationally on addr when addr_valid is high. The register names,
// the adder/subtractor/mux structure and the Repeat/Stop logic follow the paper;
// reset to zero and unsigned comparison are this design's choices.
module strided_index_gen
  import ganax_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          cfg_we,
  input  cfg_reg_e      cfg_sel,
  input  logic [AW-1:0] cfg_data,
  input  logic          start,
  input  logic          stop,
  input  logic          addr_ready,
  output logic          addr_valid,
  output logic [AW-1:0] addr,
  output logic          running,
  output logic          round_done   // Decrement pulse: one round finished this cycle
);

  logic [AW-1:0] primary_q, offset_q, step_q, end_q, repeat_cfg_q;
  logic [AW-1:0] addr_q, rounds_q;
  logic          run_q;
  logic [AW:0]   sum;
  logic [AW:0]   wrapped;
  logic          wrap;
  logic          stop_sig;

  assign stop_sig   = ~|rounds_q;
  assign sum        = {1'b0, addr_q} + {1'b0, step_q};
  assign wrapped    = sum - {1'b0, end_q};
  assign wrap       = !(sum < {1'b0, end_q});
  assign addr_valid = run_q && !stop_sig;
  assign addr       = addr_q + offset_q;
  assign running    = addr_valid;
  assign round_done = addr_valid && addr_ready && wrap;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      primary_q    <= '0;
      offset_q     <= '0;
      step_q       <= '0;
      end_q        <= '0;
      repeat_cfg_q <= '0;
      addr_q       <= '0;
      rounds_q     <= '0;
      run_q        <= 1'b0;
    end else begin
      if (cfg_we) begin
        unique case (cfg_sel)
          CFG_ADDR:   primary_q    <= cfg_data;
          CFG_OFFSET: offset_q     <= cfg_data;
          CFG_STEP:   step_q       <= cfg_data;
          CFG_END:    end_q        <= cfg_data;
          CFG_REPEAT: repeat_cfg_q <= cfg_data;
          default: ;
        endcase
      end
      if (start) begin
        addr_q   <= primary_q;
        rounds_q <= repeat_cfg_q;
        run_q    <= 1'b1;
      end else if (stop) begin
        run_q <= 1'b0;
      end else if (addr_valid && addr_ready) begin
        addr_q <= wrap ? wrapped[AW-1:0] : sum[AW-1:0];
        if (wrap) rounds_q <= rounds_q - 1'b1;
      end
    end
  end

endmodule
