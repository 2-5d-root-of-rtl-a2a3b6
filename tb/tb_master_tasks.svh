// tb_master_tasks.svh -- behavioural AHB-Lite bus masters for the system
// testbenches.  The including module declares clk and the arrays m_req
// (ahb_m2s_t, driven here) and m_rsp (ahb_s2m_t) indexed by master number.
// mxfer runs one single transfer for master m and returns the response,
// read data and the number of cycles the master waited in its data phase.
task automatic mxfer(input int m, input logic [31:0] a, input logic [31:0] d, input bit wr,
                     output bit err, output logic [31:0] rd, output int cyc);
  @(negedge clk);
  while (!m_rsp[m].hready) @(negedge clk);
  m_req[m].haddr  = a;
  m_req[m].htrans = 2'b10;
  m_req[m].hwrite = wr;
  m_req[m].hsize  = 3'b010;
  @(posedge clk);
  @(negedge clk);
  m_req[m].htrans = 2'b00;
  m_req[m].hwdata = d;
  cyc = 1;
  while (!m_rsp[m].hready) begin
    @(negedge clk);
    cyc++;
  end
  err = m_rsp[m].hresp;
  rd  = m_rsp[m].hrdata;
  @(posedge clk);
endtask
