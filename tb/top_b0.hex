0000001f
ffffff6e
00000068
ffffff05
