// receiver: input-interconnect node of one PE.
//
// The receiver keeps two state bits. RD means "this PE caches the input that
// travels with the current command"; LS marks column 0 of every logical row
// (of the Wo x Ho arrangement of the 1-D PE chain) whose PEs are receivers.
// On each bus beat the receiver looks up (command, RD, LS) in the paper's
// transition table, updates RD/LS, and forwards the rewritten command and the
// datum to the next PE on the next cycle. The datum is cached when the bus
// beat is valid and the updated RD is 1.
//
// Transitions (paper's table, initial state -> command change -> final state):
//   RD=1 3->8 RD=0     RD=0 8->3 RD=1          ShiftX
//   RD=1 1->9 RD=1     RD=0 9->1 RD=1          DilateX
//   RD=1 2->10 RD=0    RD=0 10->2 RD=0         ErodeX
//   -    4->4 RD=LS                            RotateY
//   LS=1 6->4 LS=0                             ErodeY
//   LS=1 7->11 LS=0                            ShiftY
//   RD=1 11->12 RD=0   RD=0 12->11 RD=1,LS=1   DilateY/ShiftY hop to next row
//   LS=1 5->11 RD=1                            DilateY
//   -    13->14 RD=1,LS=1   - 14->14 RD=0,LS=0 Start
// Pairs the table does not list keep the state and forward the command.
// Two choices are this design's own: for ErodeY the PE that clears LS also
// clears RD (the rest of the chain gets RotateY, RD=LS), and commands are
// applied on every beat, valid or not, while only valid data are cached.
//
// Timing: combinational cache_en in the cycle the beat arrives; out_bus is
// registered (one cycle per PE).
module receiver
  import cnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  ibus_t in_bus,
  output ibus_t out_bus,
  output logic  cache_en,
  output logic  rd,
  output logic  ls
);

  logic  rd_n, ls_n;
  icmd_e cmd_n;

  always_comb begin
    rd_n  = rd;
    ls_n  = ls;
    cmd_n = in_bus.cmd;
    unique case (in_bus.cmd)
      CMD_SHIFTX:   if (rd)  begin cmd_n = CMD_I_SHIFTX; rd_n = 1'b0; end
      CMD_I_SHIFTX: if (!rd) begin cmd_n = CMD_SHIFTX;   rd_n = 1'b1; end
      CMD_DILATEX:  if (rd)  begin cmd_n = CMD_I_DILX; end
      CMD_I_DILX:   if (!rd) begin cmd_n = CMD_DILATEX;  rd_n = 1'b1; end
      CMD_ERODEX:   if (rd)  begin cmd_n = CMD_I_ERX;    rd_n = 1'b0; end
      CMD_I_ERX:    if (!rd) begin cmd_n = CMD_ERODEX; end
      CMD_ROTATEY:  rd_n = ls;
      CMD_ERODEY:   if (ls)  begin cmd_n = CMD_ROTATEY;  ls_n = 1'b0; rd_n = 1'b0; end
      CMD_SHIFTY:   if (ls)  begin cmd_n = CMD_I_Y11;    ls_n = 1'b0; end
      CMD_I_Y11:    if (rd)  begin cmd_n = CMD_I_Y12;    rd_n = 1'b0; end
      CMD_I_Y12:    if (!rd) begin cmd_n = CMD_I_Y11;    rd_n = 1'b1; ls_n = 1'b1; end
      CMD_DILATEY:  if (ls)  begin cmd_n = CMD_I_Y11;    rd_n = 1'b1; end
      CMD_START:    begin cmd_n = CMD_STARTED; rd_n = 1'b1; ls_n = 1'b1; end
      CMD_STARTED:  begin rd_n = 1'b0; ls_n = 1'b0; end
      default: ;    // CMD_NOP and unused codes: unchanged
    endcase
  end

  assign cache_en = in_bus.valid && rd_n;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd      <= 1'b0;
      ls      <= 1'b0;
      out_bus <= '0;
    end else begin
      rd          <= rd_n;
      ls          <= ls_n;
      out_bus.valid <= in_bus.valid;
      out_bus.cmd   <= cmd_n;
      out_bus.data  <= in_bus.data;
    end
  end

endmodule
