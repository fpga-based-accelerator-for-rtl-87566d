ffffff1e
000000f8
ffffff34
0000004a
