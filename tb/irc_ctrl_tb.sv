// irc_ctrl_tb: self-checking test of the control unit at full size. A
// cycle-by-cycle reference predicts every strobe (decoder enable and mode,
// prog_en, sense, sa_en, rsp_valid) for random streams of program and
// compute requests with random valid gaps. It checks that request fields are
// captured at acceptance (they are scrambled right after), that the response
// carries the SA outputs, and the cycle counts: 2 cycles per program request,
// 3 cycles from acceptance to response for a compute request.
module irc_ctrl_tb;
  import irc_pkg::*;

  localparam int NBL = BLS;

  logic                 clk = 0, rst_n = 0;
  logic                 req_valid = 0, req_ready;
  mode_t                req_op = MODE_COMPUTE;
  logic [9:0]           req_row = '0;
  logic [NBL-1:0]       req_cells = '0;
  logic [2:0]           req_col = '0;
  logic [CONV_ROWS-1:0] req_feat = '0;
  logic                 rsp_valid;
  logic [GROUPS-1:0]    rsp_act, rsp_resolved, sa_out, sa_resolved;
  logic                 dec_en, prog_en, sense, sa_en;
  mode_t                dec_mode;
  logic [9:0]           dec_row;
  logic [NBL-1:0]       dec_cells;
  logic [2:0]           dec_col;
  logic [CONV_ROWS-1:0] dec_feat;
  int checks = 0, failures = 0, n_prog = 0, n_comp = 0;

  irc_ctrl dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_strobes(input bit e_dec, input bit e_prog, input bit e_sense,
                                input bit e_sa, input bit e_rsp, input string what);
    checks++;
    if (dec_en !== e_dec || prog_en !== e_prog || sense !== e_sense || sa_en !== e_sa ||
        rsp_valid !== e_rsp || req_ready !== !(e_dec || e_sa || e_rsp)) begin
      failures++;
      $display("FAIL %s: dec=%b prog=%b sense=%b sa=%b rsp=%b rdy=%b", what,
               dec_en, prog_en, sense, sa_en, rsp_valid, req_ready);
    end
  endtask

  initial begin
    mode_t                op;
    logic [9:0]           row;
    logic [NBL-1:0]       cells;
    logic [2:0]           col;
    logic [CONV_ROWS-1:0] feat;
    logic [GROUPS-1:0]    act, res;
    sa_out = '0; sa_resolved = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_strobes(0, 0, 0, 0, 0, "idle after reset");
    for (int t = 0; t < 400; t++) begin
      int gap;
      gap = $urandom_range(0, 2);
      repeat (gap) begin
        @(negedge clk);
        expect_strobes(0, 0, 0, 0, 0, "idle gap");
      end
      op    = ($urandom_range(0, 1) != 0) ? MODE_PROGRAM : MODE_COMPUTE;
      row   = 10'($urandom);
      col   = 3'($urandom);
      for (int i = 0; i < NBL; i += 32) cells[i +: 32] = $urandom;
      for (int i = 0; i < CONV_ROWS; i++) feat[i] = 1'($urandom);
      req_valid = 1; req_op = op; req_row = row; req_col = col; req_cells = cells; req_feat = feat;
      checks++;
      if (!req_ready) begin failures++; $display("FAIL not ready"); end
      @(negedge clk);   // accepted at the edge just passed
      req_valid = 0; req_row = ~row; req_col = ~col; req_cells = ~cells; req_feat = ~feat;
      req_op = (op == MODE_PROGRAM) ? MODE_COMPUTE : MODE_PROGRAM;
      if (op == MODE_PROGRAM) begin
        n_prog++;
        expect_strobes(1, 1, 0, 0, 0, "program form");
        checks++;
        if (dec_mode !== MODE_PROGRAM || dec_row !== row || dec_cells !== cells) begin
          failures++; $display("FAIL program fields");
        end
        @(negedge clk);
        expect_strobes(0, 0, 0, 0, 0, "after program");
      end else begin
        n_comp++;
        expect_strobes(1, 0, 1, 0, 0, "compute sense");
        checks++;
        if (dec_mode !== MODE_COMPUTE || dec_col !== col || dec_feat !== feat) begin
          failures++; $display("FAIL compute fields");
        end
        @(negedge clk);
        expect_strobes(0, 0, 0, 1, 0, "compute latch");
        act = GROUPS'({$urandom, $urandom}); res = GROUPS'({$urandom, $urandom});
        sa_out = act; sa_resolved = res;
        @(negedge clk);
        expect_strobes(0, 0, 0, 0, 1, "compute done");
        checks++;
        if (rsp_act !== act || rsp_resolved !== res) begin failures++; $display("FAIL response"); end
        @(negedge clk);
        expect_strobes(0, 0, 0, 0, 0, "after compute");
      end
    end
    @(negedge clk);
    expect_strobes(0, 0, 0, 0, 0, "final idle");
    $display("program=%0d compute=%0d", n_prog, n_comp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
