// io_unit: the data input/output unit - the host port used in reset mode.
//
// While reset_n is low the processor is in reset (load) mode and an external
// master owns the memories and registers through a 10-bit address bus, a 32-bit
// write-data bus, a 32-bit read-data bus and write/read strobes.  A request is
// first captured in buffer registers; in the next cycle a write is sent to its
// target and a read selects its source, whose value is captured in the output
// buffer one cycle later (read latency 2 cycles, write latency 1 cycle).
// Address map: addr[9:8] = 0 instruction memory, 1 data memory, 2 general-purpose
// register addr[6:2], 3 key-register word addr[4:2]; addr[7:0] is the byte
// address inside a memory.  Requests are ignored while the processor runs; the
// host keeps reset_n low for one cycle after its last write so that it lands.
module io_unit (
  input  logic        clk,
  input  logic        reset_n,     // 0 = reset (load) mode
  input  logic [9:0]  host_addr,
  input  logic [31:0] host_wdata,
  input  logic        host_we,
  input  logic        host_re,
  output logic [31:0] host_rdata,
  // towards the memories and registers
  output logic [7:0]  addr,
  output logic [31:0] wdata,
  output logic        imem_we,
  output logic        dmem_we,
  output logic        reg_we,
  output logic        key_we,
  output logic        active,      // port owns the data-memory / register ports
  input  logic [31:0] dmem_rdata,
  input  logic [31:0] reg_rdata
);
  logic [9:0]  buf_addr;
  logic [31:0] buf_data;
  logic        buf_we, buf_re;

  always_ff @(posedge clk) begin
    if (!reset_n) begin
      buf_addr <= host_addr;
      buf_data <= host_wdata;
      buf_we   <= host_we;
      buf_re   <= host_re;
    end else begin
      buf_we <= 1'b0;
      buf_re <= 1'b0;
    end
    if (buf_re) host_rdata <= (buf_addr[9:8] == 2'd1) ? dmem_rdata : reg_rdata;
  end

  assign active  = !reset_n;
  assign addr    = buf_addr[7:0];
  assign wdata   = buf_data;
  assign imem_we = buf_we && !reset_n && buf_addr[9:8] == 2'd0;
  assign dmem_we = buf_we && !reset_n && buf_addr[9:8] == 2'd1;
  assign reg_we  = buf_we && !reset_n && buf_addr[9:8] == 2'd2;
  assign key_we  = buf_we && !reset_n && buf_addr[9:8] == 2'd3;
endmodule
