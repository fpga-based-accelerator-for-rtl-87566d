00
00
01
00
