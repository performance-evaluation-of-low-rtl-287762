// program_counter: the PC register of the fetch stage.
//
// On every rising clock edge the PC takes the redirect target when redirect is
// high (taken branch, JR, J/JAL/CRYPT), holds when hold is high (stall), and
// otherwise moves to the next word (PC + 4).  Reset (active low, asynchronous)
// starts fetching at address 0.  pc_plus4 is the sequential successor, also
// used as the return address of JAL.
module program_counter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  input  logic        redirect,
  input  logic [31:0] target,
  output logic [31:0] pc,
  output logic [31:0] pc_plus4
);
  assign pc_plus4 = pc + 32'd4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pc <= '0;
    else if (redirect) pc <= target;
    else if (!hold)    pc <= pc_plus4;
  end
endmodule
