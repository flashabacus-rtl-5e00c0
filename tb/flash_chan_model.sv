// flash_chan_model: behavioural model of the packages on one flash channel (testbench only).
//
// Each package goes busy (rb_n low) one clock after it is selected by a command and stays busy
// for the array time of the operation: T_READ for a page read, T_PROG for a program, T_ERASE
// for a block erase, counted in fl_clk cycles. Data is not modelled. The model counts the
// operations per type and flags a command sent to a package that is still busy. While rst_n is
// low the packages are idle and the counters held at zero.
module flash_chan_model #(
  parameter int unsigned NPKG    = 4,
  parameter int unsigned PAGE_W  = 17,
  parameter int unsigned T_READ  = 40,
  parameter int unsigned T_PROG  = 200,
  parameter int unsigned T_ERASE = 300
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic [NPKG-1:0]   ce,
  input  logic [1:0]        op,
  input  logic [PAGE_W-1:0] page,
  output logic [NPKG-1:0]   rb_n,
  output logic [NPKG-1:0]   fail
);
  int unsigned remain [NPKG];
  int unsigned n_read, n_prog, n_erase, n_overrun;
  logic [PAGE_W-1:0] last_page [NPKG];
  logic [1:0]        last_op   [NPKG];

  initial begin
    for (int p = 0; p < NPKG; p++) begin
      remain[p] = 0;
      last_page[p] = '0;
      last_op[p] = '0;
    end
    n_read = 0; n_prog = 0; n_erase = 0; n_overrun = 0;
  end

  assign fail = '0;
  always_comb for (int p = 0; p < NPKG; p++) rb_n[p] = (remain[p] == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NPKG; p++) remain[p] <= 0;
      n_read <= 0; n_prog <= 0; n_erase <= 0; n_overrun <= 0;
    end else for (int p = 0; p < NPKG; p++) begin
      if (cmd_valid && ce[p]) begin
        if (remain[p] != 0) n_overrun <= n_overrun + 1;
        unique case (op)
          2'd0: begin remain[p] <= T_READ;  n_read  <= n_read + 1;  end
          2'd1: begin remain[p] <= T_PROG;  n_prog  <= n_prog + 1;  end
          default: begin remain[p] <= T_ERASE; n_erase <= n_erase + 1; end
        endcase
        last_page[p] <= page;
        last_op[p]   <= op;
      end else if (remain[p] != 0) begin
        remain[p] <= remain[p] - 1;
      end
    end
  end
endmodule
