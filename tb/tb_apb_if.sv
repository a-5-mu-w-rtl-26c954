// tb_apb_if -- APB master bundle with blocking read / write tasks for the
// testbenches. One transfer = setup phase + access phase, no wait states
// expected (PREADY is checked by the caller through the returned error).
interface tb_apb_if (input logic clk);
  logic [31:0] paddr = '0;
  logic        psel = 1'b0;
  logic        penable = 1'b0;
  logic        pwrite = 1'b0;
  logic [31:0] pwdata = '0;
  logic [31:0] prdata;
  logic        pready;
  logic        pslverr;

  task automatic write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask
endinterface
