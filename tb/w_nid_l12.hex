3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
3939393939393939
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
8888888888888888
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
1b1b1b1b1b1b1b1b
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
aaaaaaaaaaaaaaaa
