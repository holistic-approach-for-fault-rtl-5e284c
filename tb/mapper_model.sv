// mapper_model: behavioural stand-in for the mapping heuristic, used by
// testbenches only. MAP_LAT cycles after a request it answers with a
// mapping that places task i on the (i mod H)-th healthy PE, where H is the
// number of PEs not marked broken in the request. It counts requests.
module mapper_model #(
  parameter int NT = 4,
  parameter int NTASKS = 8,
  parameter int PE_W = 2,
  parameter int MAP_LAT = 20
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        map_req_valid,
  input  logic [NT-1:0]               map_req_pe_broken,
  output logic                        map_rsp_valid,
  output logic [NTASKS-1:0][PE_W-1:0] map_rsp_map,
  output int                          requests
);
  int wait_cnt;

  function automatic logic [NTASKS-1:0][PE_W-1:0] place(input logic [NT-1:0] broken);
    logic [NTASKS-1:0][PE_W-1:0] m;
    int healthy[$];
    for (int p = 0; p < NT; p++) if (!broken[p]) healthy.push_back(p);
    if (healthy.size() == 0) healthy.push_back(0);
    for (int t = 0; t < NTASKS; t++) m[t] = PE_W'(healthy[t % healthy.size()]);
    return m;
  endfunction

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      map_rsp_valid <= 1'b0;
      map_rsp_map   <= '0;
      wait_cnt      <= 0;
      requests      <= 0;
    end else begin
      map_rsp_valid <= 1'b0;
      if (map_req_valid && !map_rsp_valid) begin
        if (wait_cnt == 0) requests <= requests + 1;
        if (wait_cnt == MAP_LAT - 1) begin
          map_rsp_valid <= 1'b1;
          map_rsp_map   <= place(map_req_pe_broken);
          wait_cnt      <= 0;
        end else wait_cnt <= wait_cnt + 1;
      end
    end
  end
endmodule
