30a3800f
30b58003
30525001
30418801
30a3800d
30b58005
30525001
30400801
30a3800b
30b58007
30525001
30400801
30a38009
30b58009
30525001
30400801
304000c7
306a01fe
